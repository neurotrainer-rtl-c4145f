// tb_pmag: checks the programmable memory address generator against
// nested-loop models written directly in the testbench, with a vault model
// that stalls its grant in 20% of the cycles and a consumer that stalls its
// ready at random.
//  A. Convolution feedforward addressing as in the PMAG programming table
//     (a = r4, b = q, c = p, d = r5, p = g(r2, r6), q = g(r3, r7)) with
//     stride 2: the output stream must be the vault words at the modelled
//     addresses, in loop order, closed by END-MARK. Meanwhile words sent on
//     the input stream must land at wbase, wbase+1, ...
//  B. Zero padding: three nested loops with both range comparators on; an
//     out-of-range step yields 0, an in-range one the f(x) table entry of
//     the vault word (LUT on).
//  C. The same loops with out-of-range steps skipped and the h window
//     shifted by vault index 2.
//  D. Write mode: incoming words are written at the counter addresses, and
//     out-of-range words are dropped without a write.
module tb_pmag;
  import nt_pkg::*;
  logic clk = 0, rst_n = 0, start = 0, idle;
  logic [3:0] idx = 0;
  pmag_cfg_t cfg;
  logic lut_we = 0, lut_sel_df = 0;
  logic [7:0] lut_waddr = 0;
  logic [31:0] lut_wdata = 0;
  logic v_req, v_we, v_gnt, v_rvalid;
  logic [31:0] v_addr, v_wdata, v_rdata;
  logic o_valid, o_ready = 0, i_valid = 0, i_ready;
  logic [31:0] o_data, i_data = 0;
  int checks = 0, failures = 0;

  pmag dut (.*);
  vault_mem #(.WORDS(4096), .LAT(3), .STALL_PCT(20)) u_vm (
    .clk, .rst_n, .req(v_req), .we(v_we), .addr(v_addr), .wdata(v_wdata),
    .gnt(v_gnt), .rvalid(v_rvalid), .rdata(v_rdata));

  always #5 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  // ------------------------------------------------ stream consumer
  logic [31:0] got[$];
  bit          consume = 0;
  always @(negedge clk) begin
    o_ready = consume && ($urandom_range(0, 3) != 0);
    #3;
    if (o_valid && o_ready) got.push_back(o_data);
  end

  // ------------------------------------------------ stream producer
  logic [31:0] send[$];
  always @(negedge clk) begin
    i_valid = (send.size() != 0) && ($urandom_range(0, 2) != 0);
    i_data  = (send.size() != 0) ? send[0] : 32'd0;
    #3;
    if (i_valid && i_ready) void'(send.pop_front());
  end

  function automatic logic [31:0] lutf(input logic [31:0] w);
    return 32'h0100_0000 + 32'(w[31:24] ^ 8'h80);
  endfunction

  function automatic pmag_cfg_t blank();
    pmag_cfg_t c = '0;
    c.en = 1'b1;
    for (int l = 0; l < N_LEVELS; l++) c.rmax[l] = 16'd1;
    return c;
  endfunction

  task automatic run_and_collect(input int n_expected_plus_end);
    got.delete();
    consume = 1;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    repeat (4000) begin
      @(negedge clk);
      if (got.size() != 0 && got[$] == END_MARK) break;
    end
    repeat (3) @(negedge clk);
    consume = 0;
  endtask

  initial begin
    logic [31:0] exp[$];
    pmag_cfg_t c;
    for (int i = 0; i < 4096; i++) u_vm.mem[i] = 32'(i) * 32'h0101_0007 + 32'h1234_0000;
    cfg = blank();
    repeat (2) @(negedge clk); rst_n = 1;
    // LUT f(x) table
    for (int i = 0; i < 256; i++) begin
      @(negedge clk); lut_we = 1; lut_sel_df = 0; lut_waddr = 8'(i); lut_wdata = 32'h0100_0000 + 32'(i);
    end
    @(negedge clk); lut_we = 0;

    // ---------------- A: conv FF addressing, stride 2, with write-back
    c = blank();
    c.dir = PM_RD;
    c.rmax[0] = 2; c.rmax[1] = 3; c.rmax[2] = 2; c.rmax[3] = 2;
    c.rmax[4] = 2; c.rmax[5] = 3; c.rmax[6] = 2;
    c.stride = 2;
    c.sel_s = 3'd2; c.sel_t = 3'd6; c.sel_u = 3'd3; c.sel_v = 3'd7;
    c.sel_a = SRC_R4; c.sel_b = SRC_Q; c.sel_c = SRC_P; c.sel_d = SRC_R5;
    c.base = 32'd100; c.st_a = 32'd400; c.st_b = 32'd2; c.st_c = 32'd20; c.st_d = 32'd1;
    c.wbase = 32'd3000;
    cfg = c;
    exp.delete();
    for (int r1 = 0; r1 < 2; r1++) for (int r2 = 0; r2 < 3; r2++) for (int r3 = 0; r3 < 2; r3++)
    for (int r4 = 0; r4 < 2; r4++) for (int r5 = 0; r5 < 2; r5++) for (int r6 = 0; r6 < 3; r6++)
    for (int r7 = 0; r7 < 2; r7++) begin
      int p, q;
      p = r2 * 2 + r6; q = r3 * 2 + r7;
      exp.push_back(u_vm.mem[100 + r4 * 400 + q * 2 + p * 20 + r5]);
    end
    for (int w = 0; w < 20; w++) send.push_back(32'hBEEF_0000 + w);
    run_and_collect(exp.size() + 1);
    check(got.size() == exp.size() + 1, $sformatf("A: %0d words, want %0d", got.size(), exp.size() + 1));
    for (int n = 0; n < exp.size() && n < got.size(); n++)
      check(got[n] == exp[n], $sformatf("A: word %0d got %h want %h", n, got[n], exp[n]));
    check(got.size() > 0 && got[$] == END_MARK, "A: END-MARK");
    repeat (50) @(negedge clk);
    check(send.size() == 0, "A: write stream drained");
    for (int w = 0; w < 20; w++)
      check(u_vm.mem[3000 + w] == 32'hBEEF_0000 + w, $sformatf("A: write-back %0d", w));
    check(idle, "A: idle");

    // ---------------- B: zero padding with LUT
    c = blank();
    c.dir = PM_RD; c.oob_zero = 1; c.lut = LUT_F;
    c.rmax[0] = 2; c.rmax[1] = 5; c.rmax[2] = 6;
    c.sel_a = SRC_R1; c.sel_b = SRC_R2; c.sel_c = SRC_R3;
    c.base = 32'd7; c.st_a = 32'd30; c.st_b = 32'd6; c.st_c = 32'd1;
    c.rng_en = 1; c.sel_h = 1'b1; c.sel_k = 1'b0;   // h = r3, k = r2
    c.hmin = 0; c.hmax = 5; c.kmin = 0; c.kmax = 4;  // 1..4 and 1..3
    cfg = c;
    exp.delete();
    for (int r1 = 0; r1 < 2; r1++) for (int r2 = 0; r2 < 5; r2++) for (int r3 = 0; r3 < 6; r3++) begin
      if (r3 > 0 && r3 < 5 && r2 > 0 && r2 < 4) exp.push_back(lutf(u_vm.mem[7 + r1 * 30 + r2 * 6 + r3]));
      else                                      exp.push_back(32'd0);
    end
    run_and_collect(exp.size() + 1);
    check(got.size() == exp.size() + 1, $sformatf("B: %0d words, want %0d", got.size(), exp.size() + 1));
    for (int n = 0; n < exp.size() && n < got.size(); n++)
      check(got[n] == exp[n], $sformatf("B: word %0d got %h want %h", n, got[n], exp[n]));

    // ---------------- C: skipping, window shifted by idx*win_step
    c.oob_zero = 0; c.lut = LUT_NONE; c.win_step = 16'd1;
    cfg = c; idx = 4'd2;
    exp.delete();
    for (int r1 = 0; r1 < 2; r1++) for (int r2 = 0; r2 < 5; r2++) for (int r3 = 0; r3 < 6; r3++)
      if (r3 > 2 && r3 < 7 && r2 > 0 && r2 < 4) exp.push_back(u_vm.mem[7 + r1 * 30 + r2 * 6 + r3]);
    run_and_collect(exp.size() + 1);
    check(got.size() == exp.size() + 1, $sformatf("C: %0d words, want %0d", got.size(), exp.size() + 1));
    for (int n = 0; n < exp.size() && n < got.size(); n++)
      check(got[n] == exp[n], $sformatf("C: word %0d got %h want %h", n, got[n], exp[n]));
    idx = 4'd0;

    // ---------------- D: write mode with dropping
    c = blank();
    c.dir = PM_WR;
    c.rmax[0] = 4; c.rmax[1] = 4;
    c.sel_a = SRC_R1; c.sel_b = SRC_R2;
    c.base = 32'd2000; c.st_a = 32'd10; c.st_b = 32'd1;
    c.rng_en = 1; c.sel_h = 1'b0; c.sel_k = 1'b0;  // both on r2: 0 < r2 < 3
    c.hmin = 0; c.hmax = 3; c.kmin = -1; c.kmax = 16;
    cfg = c;
    for (int i = 2000; i < 2040; i++) u_vm.mem[i] = 32'hDEAD_0000;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    for (int w = 0; w < 16; w++) send.push_back(32'hCAFE_0000 + w);
    repeat (200) @(negedge clk);
    check(send.size() == 0, "D: all words taken");
    check(idle, "D: idle after the sweep");
    for (int r1 = 0; r1 < 4; r1++) for (int r2 = 0; r2 < 4; r2++) begin
      logic [31:0 ] want;
      want = (r2 > 0 && r2 < 3) ? 32'hCAFE_0000 + 32'(r1 * 4 + r2) : 32'hDEAD_0000;
      check(u_vm.mem[2000 + r1 * 10 + r2] == want,
            $sformatf("D: mem[%0d] = %h want %h", 2000 + r1 * 10 + r2, u_vm.mem[2000 + r1 * 10 + r2], want));
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
