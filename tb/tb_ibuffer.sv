// tb_ibuffer: checks the instruction buffer and layer sequencer.
//  * three random layer programs are written through the host port; after
//    h_start, every `go` must present the program of the current layer
//    (bit-exact) with the layer counter on that layer;
//  * the next program is loaded only after the fabric reports idle (the
//    fabric model stays busy for a random time after each go);
//  * done rises after the last program and busy covers the whole run;
//  * timing with an always-idle fabric: the first go comes PROG_WORDS+1
//    cycles after h_start, later ones PROG_WORDS+3 cycles apart (two settle
//    cycles plus the idle check);
//  * a start with zero layers gives done at once, without any go.
module tb_ibuffer;
  import nt_pkg::*;
  logic clk = 0, rst_n = 0;
  logic h_we = 0, h_start = 0;
  logic [11:0] h_addr = 0;
  logic [31:0] h_wdata = 0;
  logic [15:0] h_num_layers = 0;
  logic busy, done, go, fabric_idle = 1;
  logic [15:0] layer;
  layer_prog_t prog;
  int checks = 0, failures = 0;

  ibuffer #(.WORDS(4096)) dut (.*);

  always #5 clk = ~clk;
  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  logic [PROG_WORDS*32-1:0] progs [3];
  int gos = 0, busy_wait = 0, cyc = 0, go_cyc[$];
  bit random_fabric = 1;

  always @(posedge clk) cyc++;

  // fabric model: busy for a random time after each go
  always @(negedge clk) begin
    if (go) begin
      gos++;
      go_cyc.push_back(cyc);
      check(layer < 3 && prog == layer_prog_t'(progs[layer][PROG_BITS-1:0]),
            $sformatf("go %0d: program of layer %0d", gos, layer));
      check(busy, "busy at go");
      if (random_fabric) begin
        busy_wait = $urandom_range(3, 40);
        fabric_idle = 0;
      end
    end else if (busy_wait > 0) begin
      busy_wait--;
      if (busy_wait == 0) fabric_idle = 1;
    end
    if (!fabric_idle && layer >= 0) check(!(dut.state == dut.S_LOAD), "no load while the fabric works");
  end

  initial begin
    int t0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int l = 0; l < 3; l++) begin
      for (int w = 0; w < PROG_WORDS; w++) progs[l][32*w +: 32] = $urandom();
      for (int w = 0; w < PROG_WORDS; w++) begin
        @(negedge clk); h_we = 1; h_addr = 12'(l * PROG_WORDS + w); h_wdata = progs[l][32*w +: 32];
      end
    end
    @(negedge clk); h_we = 0;
    check(!busy && !done, "idle before start");
    // run with a random fabric
    h_num_layers = 3; h_start = 1; @(negedge clk); h_start = 0;
    fork
      wait (done);
      repeat (2000) @(negedge clk);
    join_any
    disable fork;
    check(done, "done after three layers");
    check(gos == 3, $sformatf("%0d go pulses", gos));
    check(!busy, "not busy after done");
    check(layer == 2, "layer counter on the last layer");
    // timing with an always idle fabric
    random_fabric = 0; gos = 0; go_cyc.delete();
    @(negedge clk); t0 = cyc; h_start = 1; @(negedge clk); h_start = 0;
    wait (done); @(negedge clk);
    check(gos == 3, "three go pulses again");
    check(go_cyc.size() == 3 && go_cyc[0] - t0 == PROG_WORDS + 1,
          $sformatf("first go after %0d cycles, want %0d", go_cyc[0] - t0, PROG_WORDS + 1));
    for (int g = 1; g < go_cyc.size(); g++)
      check(go_cyc[g] - go_cyc[g-1] == PROG_WORDS + 3,
            $sformatf("go spacing %0d, want %0d", go_cyc[g] - go_cyc[g-1], PROG_WORDS + 3));
    // zero layers
    gos = 0;
    h_num_layers = 0; h_start = 1; @(negedge clk); h_start = 0;
    check(!done || gos == 0, "zero layers: no go");
    @(negedge clk);
    check(done && gos == 0 && !busy, "zero layers: done at once");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
