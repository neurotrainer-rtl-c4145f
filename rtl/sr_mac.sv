// sr_mac: fixed-point 32/16-bit multiply-accumulate with low-overhead
// stochastic rounding (the "Fixed 32/16 + SR LO" MAC).
//
// out = a * x + y, computed combinationally from the operands and the
// current random word, in one of two modes:
//   prec32 = 1: one pair of Q4.28 operands. The exact 64-bit sum
//               a*x + (y << 28) goes through a 64-bit adder that adds
//               {32'b0, RAND & MASK}, with MASK covering the 28 bits the
//               cropper drops; the cropper then keeps bits [59:28]. With
//               sr_en the addition of a uniform random fraction before
//               truncation is stochastic rounding; without it the result
//               is truncated.
//   prec32 = 0: two pairs of Q4.12 operands, lane 0 in bits [15:0] and
//               lane 1 in bits [31:16], each lane y = a*x + y on its own,
//               truncated (16-bit mode is used for inference, without SR).
// The cropper saturates to the output range.
//
// Random source: one 8-deep LFSR (x^8 + x^6 + x^5 + x^4 + 1) produces one
// bit per clock that is shifted into the 32-bit left-shift register RAND,
// so after 32 cycles RAND holds a fresh 32-bit pattern every cycle. Both
// registers advance on every clock. SEED sets the LFSR reset value so that
// the MACs of a PE draw different sequences.
//
// From the paper: the 32/16 operand modes, the single LFSR of depth 8,
// the 32-bit left-shift RAND register, the 64-bit adder fed with
// {32'b0, RAND & MASK} and the masked cropper. Own choices: the LFSR
// polynomial, the Q4.28 / Q4.12 formats, saturation in the cropper, and the
// lane pairing of the 16-bit mode.
module sr_mac #(
  parameter logic [7:0] SEED = 8'h01
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        prec32,
  input  logic        sr_en,
  input  logic [31:0] a,
  input  logic [31:0] x,
  input  logic [31:0] y,
  output logic [31:0] out
);

  localparam int unsigned F32 = nt_pkg::FRAC32;
  localparam int unsigned F16 = nt_pkg::FRAC16;
  localparam logic [31:0] MASK = 32'((64'd1 << F32) - 64'd1);

  // ----------------------------------------------------------- random bits
  logic [7:0]  lfsr;
  logic [31:0] rand_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      lfsr   <= (SEED == 8'h00) ? 8'h01 : SEED;
      rand_q <= '0;
    end else begin
      lfsr   <= {lfsr[6:0], lfsr[7] ^ lfsr[5] ^ lfsr[4] ^ lfsr[3]};
      rand_q <= {rand_q[30:0], lfsr[7]};
    end
  end

  // ----------------------------------------------------------- arithmetic
  logic signed [63:0] prod32, sum32, crop32;
  logic signed [31:0] prod16 [2];
  logic signed [31:0] sum16  [2];
  logic        [15:0] lane   [2];
  logic        [31:0] rnd;

  always_comb begin
    rnd    = sr_en ? (rand_q & MASK) : 32'd0;
    prod32 = signed'(a) * signed'(x);
    sum32  = prod32 + (64'(signed'(y)) <<< F32) + signed'({32'd0, rnd});
    crop32 = sum32 >>> F32;

    for (int l = 0; l < 2; l++) begin
      prod16[l] = signed'(a[16*l +: 16]) * signed'(x[16*l +: 16]);
      sum16[l]  = (prod16[l] + (32'(signed'(y[16*l +: 16])) <<< F16)) >>> F16;
      if (sum16[l] > 32'sd32767)       lane[l] = 16'h7FFF;
      else if (sum16[l] < -32'sd32768) lane[l] = 16'h8000;
      else                             lane[l] = sum16[l][15:0];
    end

    if (prec32) begin
      if (crop32 > 64'sd2147483647)       out = 32'h7FFF_FFFF;
      else if (crop32 < -64'sd2147483648) out = 32'h8000_0000;
      else                                out = crop32[31:0];
    end else begin
      out = {lane[1], lane[0]};
    end
  end

endmodule
