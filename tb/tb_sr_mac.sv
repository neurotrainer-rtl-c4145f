// tb_sr_mac: checks the 32/16-bit MAC with low-overhead stochastic rounding.
// A software copy of the 8-deep LFSR (x^8+x^6+x^5+x^4+1) and the 32-bit
// RAND shift register runs alongside the MAC from reset, so every result is
// predicted exactly:
//   32-bit mode: floor((a*x + y*2^28 + (RAND & (2^28-1))) / 2^28), saturated,
//                and without SR the plain truncation;
//   16-bit mode: two independent lanes, floor((a*x + y*2^12) / 2^12),
//                saturated, no rounding noise.
// A statistical check follows: a product whose exact value lies 1/4 LSB
// above a representable value must round up in about 25% of the cycles
// with SR, and never without it.
module tb_sr_mac;
  localparam logic [7:0] SEED = 8'h5B;
  logic clk = 0, rst_n = 0, prec32, sr_en;
  logic [31:0] a, x, y, out;
  int checks = 0, failures = 0;

  sr_mac #(.SEED(SEED)) dut (.*);

  always #5 clk = ~clk;

  logic [7:0]  m_lfsr;
  logic [31:0] m_rand;
  always @(posedge clk) begin
    if (rst_n) begin
      m_rand <= {m_rand[30:0], m_lfsr[7]};
      m_lfsr <= {m_lfsr[6:0], m_lfsr[7] ^ m_lfsr[5] ^ m_lfsr[4] ^ m_lfsr[3]};
    end
  end

  function automatic logic [31:0] model(input logic p32, input logic sr, input logic [31:0] aa,
                                        input logic [31:0] xx, input logic [31:0] yy,
                                        input logic [31:0] rr);
    longint s;
    if (p32) begin
      s = longint'(signed'(aa)) * longint'(signed'(xx)) + (longint'(signed'(yy)) * 64'sd268435456)
          + (sr ? longint'({32'd0, rr & 32'h0FFF_FFFF}) : 64'sd0);
      s = s >>> 28;
      if (s > 64'sd2147483647) return 32'h7FFF_FFFF;
      if (s < -64'sd2147483648) return 32'h8000_0000;
      return s[31:0];
    end else begin
      logic [15:0] l [2];
      for (int k = 0; k < 2; k++) begin
        int t;
        t = int'(signed'(aa[16*k +: 16])) * int'(signed'(xx[16*k +: 16])) + int'(signed'(yy[16*k +: 16])) * 4096;
        t = t >>> 12;
        l[k] = (t > 32767) ? 16'h7FFF : (t < -32768) ? 16'h8000 : 16'(t);
      end
      return {l[1], l[0]};
    end
  endfunction

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int ups_sr, ups_tr;
    m_lfsr = SEED; m_rand = 0;
    prec32 = 1; sr_en = 1; a = 0; x = 0; y = 0;
    @(negedge clk); rst_n = 1;
    repeat (40) @(negedge clk);           // RAND fully random after 32 cycles
    for (int n = 0; n < 2000; n++) begin
      logic [31:0] exp;
      prec32 = (n % 4 != 3);
      sr_en  = (n % 2 == 0);
      a = $urandom; x = $urandom; y = $urandom;
      if (n % 5 == 0) begin a = a >>> 4; x = x >>> 4; y = y >>> 6; end  // no saturation
      #1;
      exp = model(prec32, sr_en, a, x, y, m_rand);
      checks++;
      if (out !== exp) begin
        failures++;
        if (failures < 10) $display("FAIL n=%0d p32=%0b sr=%0b a=%h x=%h y=%h rand=%h: got %h want %h",
                                    n, prec32, sr_en, a, x, y, m_rand, out, exp);
      end
      @(negedge clk);
    end
    // statistics: y = 100 LSB, a*x = 2^-28 * 2 * 2^25 = 2^26 = 1/4 LSB
    prec32 = 1; y = 32'd100; x = 32'h0200_0000; a = 32'h0000_0002;
    ups_sr = 0; ups_tr = 0;
    for (int n = 0; n < 4000; n++) begin
      sr_en = 1; #1; if (out == 32'd101) ups_sr++;
      sr_en = 0; #1; if (out == 32'd101) ups_tr++;
      @(negedge clk);
    end
    checks++;
    if (ups_sr < 800 || ups_sr > 1200) begin
      failures++; $display("FAIL SR round-up rate %0d / 4000, want about 1000", ups_sr);
    end
    checks++;
    if (ups_tr != 0) begin failures++; $display("FAIL truncation rounded up %0d times", ups_tr); end
    $display("SR round-up %0d / 4000", ups_sr);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
