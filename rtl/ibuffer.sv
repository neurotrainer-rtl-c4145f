// ibuffer: on-chip instruction buffer with the layer sequencer.
//
// The host writes layer programs into a WORDS x 32-bit memory (16 KB by
// default) through h_we / h_addr / h_wdata, then pulses h_start with the
// number of programs to run. From then on the accelerator runs on its own:
// a layer counter selects program `layer`, stored at word address
// layer * PROG_WORDS (nt_pkg::layer_prog_t packed, least significant word
// first). The sequencer copies its PROG_WORDS words, one per cycle, into a
// program register that drives every PMAG and PE, pulses `go` for one
// cycle to start them, and waits until the fabric reports `fabric_idle`
// (all PEs done, all PMAGs idle, bus empty). Then the layer counter moves
// on; after the last program `done` rises and stays high until the next
// h_start. `busy` is high from h_start until done.
// Timing: PROG_WORDS+1 cycles of loading before each `go`; fabric_idle is
// ignored in the first two cycles after `go` so that the blocks have taken
// their start.
//
// From the paper: a 16 KB on-chip iBuffer holding the PMAG and PE
// programming tables, loaded by the host through the external interface,
// with layer-wise operation controlled by a layer counter. Own choices: the
// program layout (wider than the 22 bytes per program the paper counts,
// since every field is kept in full), the load / go / wait sequence, and
// the host port as a plain memory write port.
module ibuffer #(
  parameter int unsigned WORDS = 4096
) (
  input  logic                         clk,
  input  logic                         rst_n,
  // host side
  input  logic                         h_we,
  input  logic [$clog2(WORDS)-1:0]     h_addr,
  input  logic [31:0]                  h_wdata,
  input  logic                         h_start,
  input  logic [15:0]                  h_num_layers,
  output logic                         busy,
  output logic                         done,
  output logic [15:0]                  layer,
  // fabric side
  output nt_pkg::layer_prog_t          prog,
  output logic                         go,
  input  logic                         fabric_idle
);
  import nt_pkg::*;

  localparam int unsigned AW = $clog2(WORDS);
  localparam int unsigned WW = $clog2(PROG_WORDS + 1);

  typedef enum logic [1:0] {S_IDLE, S_LOAD, S_WAIT} state_e;

  logic [31:0]                 mem [WORDS];
  logic [PROG_WORDS*32-1:0]    shadow;
  state_e                      state;
  logic [WW-1:0]               widx;
  logic [15:0]                 nlayers;
  logic [1:0]                  settle;
  logic [AW-1:0]               raddr;

  assign prog  = layer_prog_t'(shadow[PROG_BITS-1:0]);
  assign busy  = (state != S_IDLE);
  assign raddr = AW'(32'(layer) * PROG_WORDS + 32'(widx));

  always_ff @(posedge clk) begin
    if (h_we) mem[h_addr] <= h_wdata;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      shadow  <= '0;
      widx    <= '0;
      layer   <= '0;
      nlayers <= '0;
      settle  <= '0;
      go      <= 1'b0;
      done    <= 1'b0;
    end else begin
      go <= 1'b0;
      case (state)
        S_IDLE: begin
          if (h_start) begin
            done    <= 1'b0;
            layer   <= '0;
            nlayers <= h_num_layers;
            widx    <= '0;
            state   <= (h_num_layers == '0) ? S_IDLE : S_LOAD;
            if (h_num_layers == '0) done <= 1'b1;
          end
        end
        S_LOAD: begin
          shadow[32*widx +: 32] <= mem[raddr];
          if (widx == WW'(PROG_WORDS - 1)) begin
            widx   <= '0;
            go     <= 1'b1;
            settle <= 2'd2;
            state  <= S_WAIT;
          end else begin
            widx <= widx + 1'b1;
          end
        end
        S_WAIT: begin
          if (settle != '0) begin
            settle <= settle - 1'b1;
          end else if (fabric_idle) begin
            if (layer + 16'd1 == nlayers) begin
              state <= S_IDLE;
              done  <= 1'b1;
            end else begin
              layer <= layer + 16'd1;
              state <= S_LOAD;
            end
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
