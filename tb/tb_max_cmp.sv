// tb_max_cmp: streams random pooling windows through one comparator (its
// result fed back as the running value, as the PE's output buffer does) and
// checks the maximum and the position of its first occurrence against a
// software model, signed comparison included.
module tb_max_cmp;
  logic first;
  logic [31:0] x, y, out;
  logic [15:0] x_id;
  int checks = 0, failures = 0;

  max_cmp dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int w = 0; w < 200; w++) begin
      int n;
      logic signed [15:0] best; int best_id;
      n = $urandom_range(1, 16);
      y = 32'd0;
      for (int e = 0; e < n; e++) begin
        logic signed [15:0] v;
        v = 16'($urandom);
        if (w % 3 == 0) v = 16'($urandom_range(0, 3)) - 16'sd2; // many ties
        first = (e == 0);
        x = {16'($urandom), v};
        x_id = 16'(e);
        #1;
        if (e == 0 || v > best) begin best = v; best_id = e; end
        y = out;
        #1;
      end
      checks++;
      if (y[15:0] != best || y[31:16] != 16'(best_id)) begin
        failures++;
        $display("FAIL window %0d: got %0d id %0d, want %0d id %0d", w,
                 signed'(y[15:0]), y[31:16], best, best_id);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
