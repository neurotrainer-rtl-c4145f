// tb_pe: checks the processing element at a reduced size (K = 4 lanes,
// 64-word BUF Input1, 16-row BUF Input2 and BUF Output) against a
// step-by-step software model of the tile schedule and the fixed-point
// arithmetic. Input streams are offered with random gaps, the output
// streams are taken with random stalls, and the bus merge partner grants
// ACK after a random delay. Programs covered:
//   * matrix product (32 bit), normal and transposed BUF1 sweep, partial
//     sums kept over two tiles, drained to the vault and to the bus;
//   * convolution: kernel kept in BUF1 (keep1), one output row, reversed
//     kernel, input rows from the vault and from the bus broadcast;
//   * 16-bit mode (two lanes per MAC);
//   * stochastic rounding: every result lies between the truncated value
//     and the truncated value plus one LSB per accumulation step;
//   * MAX with ID (pooling);
//   * MOVE between vault and bus in both directions;
//   * an unfinished tile at END-MARK is dropped.
// Cycle counts: every tile takes exactly n2o*n2i computing cycles, and the
// number of tiles computed is checked. The drain stalling computing is
// observed and counted.
module tb_pe;
  import nt_pkg::*;
  localparam int K = 4;
  logic clk = 0, rst_n = 0, start = 0, done, stall;
  pe_cfg_t cfg;
  logic vi_valid = 0, vi_ready, vo_valid, vo_ready = 0;
  logic [31:0] vi_data = 0, vo_data;
  logic bi_valid = 0, bi_ready;
  logic [31:0] bi_data = 0;
  logic req, ack = 0, send_valid, send_ready = 0;
  logic [31:0] send_data;
  int checks = 0, failures = 0;

  pe #(.K(K), .BUF1_WORDS(64), .BUF2_ROWS(16), .OUT_ROWS(16), .SEED_BASE(8'd5)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #5000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  // ------------------------------------------------------------ streams
  logic [31:0] vq[$], bq[$], vout[$], bout[$];
  int vo_pct = 75;
  bit streams_on = 0;                 // inputs are offered after `start`
  always @(negedge clk) begin
    vi_valid = streams_on && (vq.size() != 0) && ($urandom_range(0, 3) != 0);
    vi_data  = (vq.size() != 0) ? vq[0] : 32'd0;
    bi_valid = streams_on && (bq.size() != 0) && ($urandom_range(0, 3) != 0);
    bi_data  = (bq.size() != 0) ? bq[0] : 32'd0;
    vo_ready = ($urandom_range(0, 99) < vo_pct);
    if (!req)                                  ack = 0;
    else if (!ack && $urandom_range(0, 3) == 0) ack = 1;
    send_ready = ack && ($urandom_range(0, 2) != 0);
    #3;
    if (vi_valid && vi_ready) void'(vq.pop_front());
    if (bi_valid && bi_ready) void'(bq.pop_front());
    if (vo_valid && vo_ready) vout.push_back(vo_data);
    if (send_valid && send_ready) bout.push_back(send_data);
  end

  // ------------------------------------------------ cycle bookkeeping
  int comp_cycles = 0, tile_ends = 0, run_len = 0, bad_tiles = 0, stall_cycles = 0;
  int cur_len = 1;
  always @(posedge clk) begin
    if (dut.computing) begin
      run_len++; comp_cycles++;
      if (dut.tile_end) begin
        tile_ends++;
        if (run_len != cur_len) bad_tiles++;
        run_len = 0;
      end
    end
    if (stall) stall_cycles++;
  end

  // ------------------------------------------------------------ model
  function automatic logic [31:0] sat32(input longint v);
    if (v > 64'sd2147483647)  return 32'h7FFF_FFFF;
    if (v < -64'sd2147483648) return 32'h8000_0000;
    return v[31:0];
  endfunction
  function automatic logic [15:0] sat16(input longint v);
    if (v > 32767)  return 16'h7FFF;
    if (v < -32768) return 16'h8000;
    return v[15:0];
  endfunction
  function automatic logic [31:0] mac(input logic prec32, input logic [31:0] a,
                                      input logic [31:0] x, input logic [31:0] y);
    if (prec32) begin
      longint p;
      p = longint'(signed'(a)) * longint'(signed'(x));
      return sat32(longint'(signed'(y)) + (p >>> 28));
    end else begin
      logic [31:0] r;
      for (int l = 0; l < 2; l++) begin
        longint p;
        p = longint'(signed'(a[16*l +: 16])) * longint'(signed'(x[16*l +: 16]));
        r[16*l +: 16] = sat16(longint'(signed'(y[16*l +: 16])) + (p >>> 12));
      end
      return r;
    end
  endfunction

  function automatic logic [31:0] rnd_val(input logic prec32);
    if (prec32) return $urandom_range(0, 32'h3FFF_FFFF) - 32'h2000_0000;   // about +-2.0
    return {16'($urandom_range(0, 16'h3FFF) - 16'h2000), 16'($urandom_range(0, 16'h3FFF) - 16'h2000)};
  endfunction

  // Run one program: build the streams, the expected drain and compare.
  // `tol` > 0 accepts results from exp to exp + tol (stochastic rounding).
  task automatic run(input string name, input pe_cfg_t c, input int ntiles, input int extra,
                     input int tol);
    int len, rows_out;
    logic [31:0] W[][], X[][][];
    logic [31:0] Y[16][K];
    bit fresh_m[16];
    logic [31:0] exp[$];
    logic [31:0] got[$];
    int tiles_acc, t0c, t0t, stepn;
    int sr_hits = 0;
    len = int'(c.n2o) * int'(c.n2i);
    rows_out = c.one_row ? 1 : int'(c.n2o);
    W = new[ntiles];
    X = new[ntiles];
    for (int t = 0; t < ntiles; t++) begin
      W[t] = new[len];
      for (int w = 0; w < len; w++) W[t][w] = rnd_val(c.prec32);
      X[t] = new[c.n1];
      for (int r = 0; r < c.n1; r++) begin
        X[t][r] = new[K];
        for (int j = 0; j < K; j++)
          X[t][r][j] = (c.op == PE_MAX) ? {16'd0, 16'($urandom_range(0, 40) - 20)} : rnd_val(c.prec32);
      end
    end
    if (c.keep1) for (int t = 1; t < ntiles; t++) W[t] = W[0];
    // streams
    vq.delete(); bq.delete(); vout.delete(); bout.delete();
    for (int t = 0; t < ntiles; t++) begin
      if (c.op == PE_MAC && (!c.keep1 || t == 0)) foreach (W[t][w]) vq.push_back(W[t][w]);
      for (int r = 0; r < c.n1; r++) for (int j = 0; j < K; j++) begin
        if (c.src2_bus) bq.push_back(X[t][r][j]);
        else            vq.push_back(X[t][r][j]);
      end
    end
    for (int e = 0; e < extra; e++) begin
      if (c.src2_bus) bq.push_back(32'h0BAD_0000 + e);
      else            vq.push_back(32'h0BAD_0000 + e);
    end
    vq.push_back(END_MARK);
    if (c.src2_bus) bq.push_back(END_MARK);
    // model
    for (int r = 0; r < 16; r++) fresh_m[r] = 1;
    tiles_acc = 0;
    for (int t = 0; t < ntiles; t++) begin
      stepn = 0;
      for (int o = 0; o < c.n2o; o++) for (int i = 0; i < c.n2i; i++) begin
        int ai, c1, row;
        case (c.sweep)
          SW_TRANSPOSE: ai = i * int'(c.n2o) + o;
          SW_REVERSE:   ai = len - 1 - (o * int'(c.n2i) + i);
          default:      ai = o * int'(c.n2i) + i;
        endcase
        c1  = stepn % int'(c.n1);
        row = c.one_row ? 0 : o;
        for (int j = 0; j < K; j++) begin
          logic [31:0] y;
          y = fresh_m[row] ? 32'd0 : Y[row][j];
          if (c.op == PE_MAC) Y[row][j] = mac(c.prec32, W[t][ai], X[t][c1][j], y);
          else if (fresh_m[row] || signed'(X[t][c1][j][15:0]) > signed'(y[15:0]))
            Y[row][j] = {16'(c1), X[t][c1][j][15:0]};
        end
        fresh_m[row] = 0;
        stepn++;
      end
      tiles_acc++;
      if (tiles_acc == int'(c.acc_tiles) || t == ntiles - 1) begin
        for (int r = 0; r < rows_out; r++) for (int j = 0; j < K; j++) exp.push_back(Y[r][j]);
        for (int r = 0; r < 16; r++) fresh_m[r] = 1;
        tiles_acc = 0;
      end
    end
    // run
    cfg = c;
    cur_len = len;
    t0c = comp_cycles; t0t = tile_ends; bad_tiles = 0;
    streams_on = 0;
    @(negedge clk); start = 1; @(negedge clk); start = 0; streams_on = 1;
    fork
      begin wait (done === 1'b1); end
      begin repeat (20000) @(negedge clk); end
    join_any
    disable fork;
    check(done === 1'b1, {name, ": done"});
    repeat (2) @(negedge clk);
    got = c.dst_bus ? bout : vout;
    check(got.size() == exp.size(), $sformatf("%s: %0d words out, want %0d", name, got.size(), exp.size()));
    for (int n = 0; n < exp.size() && n < got.size(); n++) begin
      if (tol == 0)
        check(got[n] == exp[n], $sformatf("%s: word %0d got %h want %h", name, n, got[n], exp[n]));
      else begin
        longint dlt;
        dlt = longint'(signed'(got[n])) - longint'(signed'(exp[n]));
        if (dlt != 0) sr_hits++;
        check(dlt >= 0 && dlt <= tol, $sformatf("%s: word %0d got %h want %h (+%0d)", name, n, got[n], exp[n], tol));
      end
    end
    if (tol != 0) check(sr_hits > 0, {name, ": rounding up happened"});
    check(comp_cycles - t0c == ntiles * len, $sformatf("%s: %0d compute cycles, want %0d", name, comp_cycles - t0c, ntiles * len));
    check(tile_ends - t0t == ntiles, $sformatf("%s: %0d tiles", name, tile_ends - t0t));
    check(bad_tiles == 0, $sformatf("%s: %0d tiles with a wrong length", name, bad_tiles));
    check(vq.size() == 0 && bq.size() == 0, {name, ": input streams consumed"});
  endtask

  task automatic run_move(input string name, input logic from_bus, input logic to_bus, input int n);
    pe_cfg_t c;
    logic [31:0] exp[$], got[$];
    c = '0; c.op = PE_MOVE; c.src2_bus = from_bus; c.dst_bus = to_bus;
    vq.delete(); bq.delete(); vout.delete(); bout.delete();
    for (int w = 0; w < n; w++) begin
      exp.push_back($urandom());
      if (exp[w] == END_MARK) exp[w] = 0;
      if (from_bus) bq.push_back(exp[w]); else vq.push_back(exp[w]);
    end
    if (from_bus) bq.push_back(END_MARK); else vq.push_back(END_MARK);
    cfg = c;
    streams_on = 0;
    @(negedge clk); start = 1; @(negedge clk); start = 0; streams_on = 1;
    fork
      begin wait (done === 1'b1); end
      begin repeat (20000) @(negedge clk); end
    join_any
    disable fork;
    check(done === 1'b1, {name, ": done"});
    repeat (2) @(negedge clk);
    got = to_bus ? bout : vout;
    check(got.size() == n, $sformatf("%s: %0d words", name, got.size()));
    for (int w = 0; w < n && w < got.size(); w++) check(got[w] == exp[w], $sformatf("%s: word %0d", name, w));
    check(!req, {name, ": REQ released"});
  endtask

  initial begin
    pe_cfg_t c;
    cfg = '0;
    repeat (3) @(negedge clk); rst_n = 1;
    repeat (2) @(negedge clk);

    // matrix product: Y[2][K] = W[2][3] X[3][K], two tiles summed, 4 tiles
    c = '0; c.op = PE_MAC; c.prec32 = 1; c.n2o = 2; c.n2i = 3; c.n1 = 3; c.acc_tiles = 2;
    run("matmul", c, 4, 0, 0);
    c.sweep = SW_TRANSPOSE;
    run("matmul transposed", c, 4, 0, 0);
    c.sweep = SW_NORMAL; c.dst_bus = 1; c.acc_tiles = 1; c.n2o = 4; c.n2i = 2; c.n1 = 2;
    run("matmul to bus", c, 3, 0, 0);
    // fully connected style: weights from the vault, inputs broadcast
    c = '0; c.op = PE_MAC; c.prec32 = 1; c.src2_bus = 1; c.dst_bus = 1;
    c.n2o = 3; c.n2i = 4; c.n1 = 4; c.acc_tiles = 3;
    run("fc bus in, bus out", c, 3, 0, 0);
    // convolution: 5-tap kernel kept, one output row, 4 tiles of K pixels
    c = '0; c.op = PE_MAC; c.prec32 = 1; c.keep1 = 1; c.one_row = 1;
    c.n2o = 1; c.n2i = 5; c.n1 = 5; c.acc_tiles = 1;
    vo_pct = 15;                      // slow drain: computing stalls
    run("conv keep1", c, 4, 0, 0);
    vo_pct = 75;
    c.sweep = SW_REVERSE; c.src2_bus = 1;
    run("conv reversed kernel, bus rows", c, 3, 0, 0);
    // 16-bit mode
    c = '0; c.op = PE_MAC; c.prec32 = 0; c.n2o = 2; c.n2i = 4; c.n1 = 4; c.acc_tiles = 2;
    run("matmul 16 bit", c, 4, 0, 0);
    // stochastic rounding
    c = '0; c.op = PE_MAC; c.prec32 = 1; c.sr_en = 1; c.n2o = 2; c.n2i = 6; c.n1 = 6; c.acc_tiles = 1;
    run("matmul SR", c, 4, 0, 6);
    // max pooling with ID: windows of 4 rows, 2 tiles summed into one result
    c = '0; c.op = PE_MAX; c.prec32 = 0; c.n2o = 1; c.n2i = 4; c.n1 = 4; c.acc_tiles = 2;
    run("max with id", c, 4, 0, 0);
    // unfinished tile at END-MARK: dropped
    c = '0; c.op = PE_MAC; c.prec32 = 1; c.n2o = 2; c.n2i = 2; c.n1 = 2; c.acc_tiles = 1;
    run("incomplete tile dropped", c, 2, 3, 0);
    c.keep1 = 1;
    run("incomplete row dropped", c, 2, 5, 0);
    // data preparation moves
    run_move("move vault->vault", 0, 0, 23);
    run_move("move vault->bus",   0, 1, 17);
    run_move("move bus->vault",   1, 0, 19);
    run_move("move bus->bus",     1, 1, 11);

    check(stall_cycles > 0, $sformatf("stall observed (%0d cycles)", stall_cycles));
    $display("stall cycles %0d, tiles %0d", stall_cycles, tile_ends);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
