// lut_unit: look-up tables for a non-linear function f(x) and its
// derivative f'(x), placed on the PMAG's path from the vault to the PE.
//
// Two tables of ENTRIES words each, one for f and one for f', are written
// through a host port (we, sel_df, waddr, wdata). On the data path the
// selected table replaces the data word by its entry; mode LUT_NONE passes
// the word unchanged. The index is the top log2(ENTRIES) bits of the
// fixed-point value with the sign bit inverted, so entry 0 covers the most
// negative input and the table spans the whole Q4 range evenly (with 256
// entries: steps of 1/16 from -8 to +8). In 32-bit mode the entry replaces
// the word; with lane16 each 16-bit lane is looked up on its own and
// replaced by the upper half of its entry (the Q4.12 view of a Q4.28 entry).
// The lookup is combinational; writes take effect on the next clock.
//
// From the paper: LUTs for f(x) and f'(x) (activation functions, or
// exponential / logarithm for softmax and cross-entropy) inside the PMAG.
// Own choices: table size, indexing by the top bits, and lane handling.
module lut_unit #(
  parameter int unsigned ENTRIES = 256
) (
  input  logic                       clk,
  input  logic                       we,
  input  logic                       sel_df,
  input  logic [$clog2(ENTRIES)-1:0] waddr,
  input  logic [31:0]                wdata,
  input  nt_pkg::lut_mode_e          mode,
  input  logic                       lane16,
  input  logic [31:0]                din,
  output logic [31:0]                dout
);

  localparam int unsigned IW = $clog2(ENTRIES);

  logic [31:0] tab_f  [ENTRIES];
  logic [31:0] tab_df [ENTRIES];

  always_ff @(posedge clk) begin
    if (we) begin
      if (sel_df) tab_df[waddr] <= wdata;
      else        tab_f[waddr]  <= wdata;
    end
  end

  function automatic logic [IW-1:0] idx32(input logic [31:0] v);
    logic [IW-1:0] t;
    t = v[31 -: IW];
    t[IW-1] = ~t[IW-1];
    return t;
  endfunction

  function automatic logic [IW-1:0] idx16(input logic [15:0] v);
    logic [IW-1:0] t;
    t = v[15 -: IW];
    t[IW-1] = ~t[IW-1];
    return t;
  endfunction

  logic [31:0] e32, e16lo, e16hi;

  always_comb begin
    if (mode == nt_pkg::LUT_DF) begin
      e32   = tab_df[idx32(din)];
      e16lo = tab_df[idx16(din[15:0])];
      e16hi = tab_df[idx16(din[31:16])];
    end else begin
      e32   = tab_f[idx32(din)];
      e16lo = tab_f[idx16(din[15:0])];
      e16hi = tab_f[idx16(din[31:16])];
    end
    if (mode == nt_pkg::LUT_NONE) dout = din;
    else if (lane16)              dout = {e16hi[31:16], e16lo[31:16]};
    else                          dout = e32;
  end

endmodule
