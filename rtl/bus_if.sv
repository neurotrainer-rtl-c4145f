// bus_if: 32-bit pipelined bus between the common data vault and all PEs.
//
// Two operations share the bus, chosen word by word:
//   broadcast: words from the common vault's PMAG (bc_*) go to every PE at
//              once (pe_bc_valid / pe_bc_data). A word leaves the last stage
//              only in a cycle where every PE is ready (&pe_bc_ready), so all
//              PEs take it in the same cycle.
//   merge:     PEs send words to the common vault's PMAG (mg_*) using a
//              three-way REQ-ACK-SEND handshake. A PE raises pe_req; the bus
//              grants one requester at a time by fixed priority (lowest index
//              first) with pe_ack, held until that PE drops its REQ; while
//              acknowledged, the PE sends words with pe_send_valid, each taken
//              when pe_send_ready is high.
// At most one word enters the bus per cycle. Broadcasting has priority: a
// broadcast word enters whenever one is offered and can move, and no new
// merge grant is given in such a cycle (REQs are ignored while
// broadcasting). A broadcast that cannot move because some PE is not ready
// does not hold the bus: requests are then granted, which lets a PE that
// must drain its results before it can take more data do so.
// Each direction has its own STAGES-deep register pipeline that moves as a
// whole: it advances when its last stage is empty or the destination takes
// the word there. A word accepted at a clock edge is offered at the far
// end STAGES cycles later when nothing stalls.
//
// From the paper: the two modes controlled from the common data vault,
// broadcast only when all PEs can take data, REQs ignored during a
// broadcast, REQ-ACK-SEND, predetermined priority among PEs, a 4-stage
// pipeline with 4 cycles from the vault to any PE, 32-bit width. Own
// choices: one pipeline per direction behind a shared entry slot, lowest
// index as highest priority, the grant held for as long as REQ is, and
// granting requests while a broadcast is blocked (without this a shared
// pipeline can deadlock when a PE's buffers are full).
// Lint note: rst_n is an asynchronous reset of the flip-flops and is also
// sampled by the `disable iff (!rst_n)` of the assertions, so lint tools
// report it as used both synchronously and asynchronously. That use is
// in checking code only; the logic sees rst_n as an asynchronous reset.
module bus_if #(
  parameter int unsigned N_PE   = nt_pkg::N_PE,
  parameter int unsigned STAGES = 4
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // broadcast source (common vault PMAG read stream)
  input  logic                  bc_valid,
  input  logic [31:0]           bc_data,
  output logic                  bc_ready,
  // broadcast to the PEs
  output logic                  pe_bc_valid,
  output logic [31:0]           pe_bc_data,
  input  logic [N_PE-1:0]       pe_bc_ready,
  // merge from the PEs
  input  logic [N_PE-1:0]       pe_req,
  output logic [N_PE-1:0]       pe_ack,
  input  logic [N_PE-1:0]       pe_send_valid,
  input  logic [N_PE-1:0][31:0] pe_send_data,
  output logic [N_PE-1:0]       pe_send_ready,
  // merge sink (common vault PMAG write stream)
  output logic                  mg_valid,
  output logic [31:0]           mg_data,
  input  logic                  mg_ready,
  // status
  output logic                  bcast_active,
  output logic                  merge_active,
  output logic                  idle          // nothing offered, granted or in flight
);

  typedef struct packed {
    logic        valid;
    logic [31:0] data;
  } stage_t;

  stage_t                     bpipe [STAGES];   // towards the PEs
  stage_t                     mpipe [STAGES];   // towards the common vault
  logic                       badv, madv;
  logic [N_PE-1:0]            grant;
  logic                       granted;
  logic [$clog2(N_PE+1)-1:0]  gidx;
  logic                       take_bc, take_mg;

  // --------------------------------------------------------- far ends
  always_comb begin
    pe_bc_valid = bpipe[STAGES-1].valid && (&pe_bc_ready);
    pe_bc_data  = bpipe[STAGES-1].data;
    badv        = !bpipe[STAGES-1].valid || (&pe_bc_ready);
    mg_valid    = mpipe[STAGES-1].valid;
    mg_data     = mpipe[STAGES-1].data;
    madv        = !mpipe[STAGES-1].valid || mg_ready;
  end

  // --------------------------------------------------------- entry slot
  always_comb begin
    granted = |grant;
    gidx    = '0;
    for (int i = N_PE - 1; i >= 0; i--) if (grant[i]) gidx = ($clog2(N_PE+1))'(i);

    bc_ready = badv;
    take_bc  = badv && bc_valid;
    take_mg  = madv && !take_bc && granted && pe_send_valid[gidx];

    pe_ack        = grant;
    pe_send_ready = '0;
    if (madv && !take_bc) pe_send_ready = grant;

    bcast_active = take_bc;
    merge_active = granted;
    idle         = !bc_valid && !granted;
    for (int s = 0; s < STAGES; s++) if (bpipe[s].valid || mpipe[s].valid) idle = 1'b0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < STAGES; s++) begin bpipe[s] <= '0; mpipe[s] <= '0; end
      grant <= '0;
    end else begin
      if (badv) begin
        bpipe[0].valid <= take_bc;
        bpipe[0].data  <= bc_data;
        for (int s = 1; s < STAGES; s++) bpipe[s] <= bpipe[s-1];
      end
      if (madv) begin
        mpipe[0].valid <= take_mg;
        mpipe[0].data  <= pe_send_data[gidx];
        for (int s = 1; s < STAGES; s++) mpipe[s] <= mpipe[s-1];
      end
      // arbitration: release when the owner drops REQ; no new grant in a
      // cycle that carries a broadcast word
      if (granted) begin
        if (!pe_req[gidx]) grant <= '0;
      end else if (!take_bc) begin
        for (int i = N_PE - 1; i >= 0; i--)
          if (pe_req[i]) grant <= N_PE'(1) << i;
      end
    end
  end

  // at most one PE is acknowledged
  property p_ack_onehot;
    @(posedge clk) disable iff (!rst_n) $onehot0(pe_ack);
  endproperty
  assert property (p_ack_onehot);

endmodule
