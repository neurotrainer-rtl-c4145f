// neurotrainer_top: the accelerator on the logic die of a 16-vault memory
// cube.
//
// N_PE processing elements each sit on their own ("independent") vault;
// the remaining vault, index N_PE, is the common data vault. Every vault
// controller carries a PMAG. The data paths are:
//   independent vault i -> PMAG i -> PE i -> PMAG i -> vault i
//   common vault -> common PMAG -> bus broadcast -> all PEs
//   PEs -> bus merge -> common PMAG -> common vault
// so data used by one PE come from its own vault, while data shared by all
// PEs (a large common operand, e.g. the input vector of a fully connected
// layer) are read once and broadcast. The iBuffer holds the layer programs
// written by the host and steps through them: each program sets the common
// PMAG, all independent PMAGs (one shared program; a PMAG's vault index can
// shift its range window) and all PEs, which then run until the fabric is
// idle.
//
// The vault controllers and DRAM are not part of this RTL: each vault is a
// port with a request/grant handshake (v_req, v_we, v_addr, v_wdata,
// v_gnt) and in-order read returns (v_rvalid, v_rdata). The host side of
// the external interface is a plain write port into the iBuffer (h_*) and
// into the look-up tables of all PMAGs (lut_*), plus start / busy / done.
// Status outputs expose the PE stalls and the bus modes.
//
// From the paper: 15 PEs and 16 vaults (one common), a PMAG on every vault
// controller, bus between the common vault and all PEs, the iBuffer and its
// autonomous layer-by-layer execution. Own choices: the port style of the
// vault and host interfaces, the vault index of the common vault, and that
// every PE takes part in every layer.
// Lint note: rst_n is an asynchronous reset of the flip-flops and is also
// sampled by the `disable iff (!rst_n)` of the assertions in pmag, pe and bus_if, so lint tools
// report it as used both synchronously and asynchronously. That use is
// in checking code only; the logic sees rst_n as an asynchronous reset.
module neurotrainer_top #(
  parameter int unsigned N_PE        = nt_pkg::N_PE,
  parameter int unsigned K           = nt_pkg::N_MAC,
  parameter int unsigned BUF1_WORDS  = 4096,
  parameter int unsigned BUF2_ROWS   = 128,
  parameter int unsigned OUT_ROWS    = 128,
  parameter int unsigned IBUF_WORDS  = 4096,
  parameter int unsigned LUT_ENTRIES = 256,
  localparam int unsigned N_VAULT    = N_PE + 1
) (
  input  logic                                clk,
  input  logic                                rst_n,
  // host: iBuffer
  input  logic                                h_we,
  input  logic [$clog2(IBUF_WORDS)-1:0]       h_addr,
  input  logic [31:0]                         h_wdata,
  input  logic                                h_start,
  input  logic [15:0]                         h_num_layers,
  output logic                                busy,
  output logic                                done,
  output logic [15:0]                         layer,
  // host: look-up tables (written into every PMAG)
  input  logic                                lut_we,
  input  logic                                lut_sel_df,
  input  logic [$clog2(LUT_ENTRIES)-1:0]      lut_waddr,
  input  logic [31:0]                         lut_wdata,
  // vault controllers
  output logic [N_VAULT-1:0]                  v_req,
  output logic [N_VAULT-1:0]                  v_we,
  output logic [N_VAULT-1:0][nt_pkg::ADDR_W-1:0] v_addr,
  output logic [N_VAULT-1:0][31:0]            v_wdata,
  input  logic [N_VAULT-1:0]                  v_gnt,
  input  logic [N_VAULT-1:0]                  v_rvalid,
  input  logic [N_VAULT-1:0][31:0]            v_rdata,
  // status
  output logic [N_PE-1:0]                     pe_stall,
  output logic                                bus_bcast,
  output logic                                bus_merge
);
  import nt_pkg::*;

  layer_prog_t prog;
  logic        go, fabric_idle;

  ibuffer #(.WORDS(IBUF_WORDS)) u_ibuf (
    .clk, .rst_n,
    .h_we, .h_addr, .h_wdata, .h_start, .h_num_layers,
    .busy, .done, .layer,
    .prog, .go, .fabric_idle
  );

  // ------------------------------------------------------------- streams
  logic [N_PE-1:0]        rd_valid, rd_ready, wr_valid, wr_ready;
  logic [N_PE-1:0][31:0]  rd_data, wr_data;
  logic [N_PE-1:0]        bi_ready, req, ack, send_valid, send_ready;
  logic [N_PE-1:0][31:0]  send_data;
  logic                   bc_valid, bc_ready, mg_valid, mg_ready, bus_idle;
  logic [31:0]            bc_data, mg_data;
  logic                   pe_bc_valid;
  logic [31:0]            pe_bc_data;
  logic [N_PE-1:0]        pe_done, pmag_idle;
  logic                   com_idle;

  for (genvar i = 0; i < N_PE; i++) begin : g_pe
    pmag #(.LUT_ENTRIES(LUT_ENTRIES)) u_pmag (
      .clk, .rst_n,
      .idx        (4'(i)),
      .cfg        (prog.ind),
      .start      (go),
      .idle       (pmag_idle[i]),
      .lut_we, .lut_sel_df, .lut_waddr, .lut_wdata,
      .v_req      (v_req[i]),
      .v_we       (v_we[i]),
      .v_addr     (v_addr[i]),
      .v_wdata    (v_wdata[i]),
      .v_gnt      (v_gnt[i]),
      .v_rvalid   (v_rvalid[i]),
      .v_rdata    (v_rdata[i]),
      .o_valid    (rd_valid[i]),
      .o_data     (rd_data[i]),
      .o_ready    (rd_ready[i]),
      .i_valid    (wr_valid[i]),
      .i_data     (wr_data[i]),
      .i_ready    (wr_ready[i])
    );

    pe #(
      .K(K), .BUF1_WORDS(BUF1_WORDS), .BUF2_ROWS(BUF2_ROWS), .OUT_ROWS(OUT_ROWS),
      .SEED_BASE(8'(1 + 16 * i))
    ) u_pe (
      .clk, .rst_n,
      .cfg        (prog.pe),
      .start      (go),
      .done       (pe_done[i]),
      .stall      (pe_stall[i]),
      .vi_valid   (rd_valid[i]),
      .vi_data    (rd_data[i]),
      .vi_ready   (rd_ready[i]),
      .vo_valid   (wr_valid[i]),
      .vo_data    (wr_data[i]),
      .vo_ready   (wr_ready[i]),
      .bi_valid   (pe_bc_valid),
      .bi_data    (pe_bc_data),
      .bi_ready   (bi_ready[i]),
      .req        (req[i]),
      .ack        (ack[i]),
      .send_valid (send_valid[i]),
      .send_data  (send_data[i]),
      .send_ready (send_ready[i])
    );
  end

  // ------------------------------------------------ common data vault
  pmag #(.LUT_ENTRIES(LUT_ENTRIES)) u_pmag_com (
    .clk, .rst_n,
    .idx        (4'(N_PE)),
    .cfg        (prog.com),
    .start      (go),
    .idle       (com_idle),
    .lut_we, .lut_sel_df, .lut_waddr, .lut_wdata,
    .v_req      (v_req[N_PE]),
    .v_we       (v_we[N_PE]),
    .v_addr     (v_addr[N_PE]),
    .v_wdata    (v_wdata[N_PE]),
    .v_gnt      (v_gnt[N_PE]),
    .v_rvalid   (v_rvalid[N_PE]),
    .v_rdata    (v_rdata[N_PE]),
    .o_valid    (bc_valid),
    .o_data     (bc_data),
    .o_ready    (bc_ready),
    .i_valid    (mg_valid),
    .i_data     (mg_data),
    .i_ready    (mg_ready)
  );

  bus_if #(.N_PE(N_PE), .STAGES(4)) u_bus (
    .clk, .rst_n,
    .bc_valid, .bc_data, .bc_ready,
    .pe_bc_valid, .pe_bc_data,
    .pe_bc_ready   (bi_ready),
    .pe_req        (req),
    .pe_ack        (ack),
    .pe_send_valid (send_valid),
    .pe_send_data  (send_data),
    .pe_send_ready (send_ready),
    .mg_valid, .mg_data, .mg_ready,
    .bcast_active  (bus_bcast),
    .merge_active  (bus_merge),
    .idle          (bus_idle)
  );

  assign fabric_idle = (&pe_done) && (&pmag_idle) && com_idle && bus_idle;

endmodule
