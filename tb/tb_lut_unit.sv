// tb_lut_unit: fills the f and f' tables with known patterns
// (f[i] = i*0x01010101 ^ 0x5A5A0000, f'[i] = ~i * 0x00010001) and checks
// the lookup in every mode: pass-through, f and f' on 32-bit words (index
// = top 8 bits with the sign bit inverted) and on two 16-bit lanes (each
// lane replaced by the upper half of its own entry).
module tb_lut_unit;
  logic clk = 0, we = 0, sel_df = 0, lane16 = 0;
  logic [7:0] waddr;
  logic [31:0] wdata, din, dout;
  nt_pkg::lut_mode_e mode;
  int checks = 0, failures = 0;

  lut_unit #(.ENTRIES(256)) dut (.*);

  always #5 clk = ~clk;

  function automatic logic [31:0] fval(input int i);  return 32'(i) * 32'h0101_0101 ^ 32'h5A5A_0000; endfunction
  function automatic logic [31:0] dfval(input int i); return 32'(~i & 8'hFF) * 32'h0001_0001; endfunction

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 512; i++) begin
      @(negedge clk);
      we = 1; sel_df = (i >= 256); waddr = 8'(i); wdata = (i >= 256) ? dfval(i - 256) : fval(i);
    end
    @(negedge clk); we = 0;
    for (int n = 0; n < 600; n++) begin
      logic [31:0] exp;
      int i32, ilo, ihi;
      din = $urandom;
      mode = nt_pkg::lut_mode_e'(n % 3);
      lane16 = (n % 2 == 1);
      i32 = int'(din[31:24] ^ 8'h80);
      ilo = int'(din[15:8] ^ 8'h80);
      ihi = int'(din[31:24] ^ 8'h80);
      case (mode)
        nt_pkg::LUT_NONE: exp = din;
        nt_pkg::LUT_F:    exp = lane16 ? {fval(ihi)[31:16], fval(ilo)[31:16]} : fval(i32);
        default:          exp = lane16 ? {dfval(ihi)[31:16], dfval(ilo)[31:16]} : dfval(i32);
      endcase
      #1;
      checks++;
      if (dout !== exp) begin
        failures++;
        $display("FAIL mode %0d lane16 %0b din %h: got %h want %h", mode, lane16, din, dout, exp);
      end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
