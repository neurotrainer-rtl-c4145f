// tb_nested_counter: checks the nested loop counters against a software
// model of nested for-loops. Three levels with counts 2, 3 and 4 are swept
// twice (the sweep must wrap to zero), with random idle cycles between
// steps; then one level gets count 0, which must behave as count 1, and
// `clear` must return every level to zero. `last` is checked on every step.
module tb_nested_counter;
  localparam int L = 3;
  logic clk = 0, rst_n = 0, clear = 0, step = 0;
  logic [L-1:0][15:0] count, value;
  logic last;
  int checks = 0, failures = 0;

  nested_counter #(.LEVELS(L), .CNT_W(16)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_sweep(input int c0, input int c1, input int c2);
    int e0 = (c0 == 0) ? 1 : c0, e1 = (c1 == 0) ? 1 : c1, e2 = (c2 == 0) ? 1 : c2;
    for (int a = 0; a < e0; a++)
      for (int b = 0; b < e1; b++)
        for (int c = 0; c < e2; c++) begin
          while ($urandom_range(0, 3) == 0) @(negedge clk);  // idle cycles
          checks++;
          if (value[0] != 16'(a) || value[1] != 16'(b) || value[2] != 16'(c) ||
              last != (a == e0-1 && b == e1-1 && c == e2-1)) begin
            failures++;
            $display("FAIL at (%0d,%0d,%0d): got (%0d,%0d,%0d) last=%0b", a, b, c,
                     value[0], value[1], value[2], last);
          end
          step = 1; @(negedge clk); step = 0;
        end
  endtask

  initial begin
    count = {16'd4, 16'd3, 16'd2};      // level0 = 2, level1 = 3, level2 = 4
    @(negedge clk); rst_n = 1; @(negedge clk);
    check_sweep(2, 3, 4);
    check_sweep(2, 3, 4);               // wrapped back to zero
    count = {16'd2, 16'd0, 16'd3};      // level1 count 0 -> 1
    clear = 1; @(negedge clk); clear = 0;
    check_sweep(3, 0, 2);
    // clear in the middle of a sweep
    step = 1; @(negedge clk); @(negedge clk); step = 0;
    clear = 1; @(negedge clk); clear = 0;
    checks++;
    if (value != '0) begin failures++; $display("FAIL clear"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
