// tb_nt_core: end-to-end test of neurotrainer_top, shared by the reduced-
// size testbench (FULL = 0: 3 PEs, K = 4, small buffers) and the full-size
// one (FULL = 1: the top with its default parameters, 15 PEs, K = 32).
//
// Behavioural vault models stand in for the vault controllers: 3-cycle read
// latency, reads granted in 80% of the cycles and writes in 30% (slow
// writes make the PEs stall on their drains). The host writes six
// layer programs into the iBuffer, fills the look-up table and starts the
// run; the accelerator then runs every layer by itself:
//   L1 fully connected, 32 bit: weights from each PE's own vault, inputs
//      passed through the f(x) table of the common PMAG and broadcast,
//      partial sums kept over two tiles, results merged over the bus into
//      the common vault;
//   L2 convolution, 16 bit: kernel read once into BUF Input1 (different per
//      PE), shifted input rows produced by the g() block of the common PMAG
//      and broadcast, results written back to each PE's own vault;
//   L3 max pooling with ID, 16 bit: windows read by the PE's own PMAG, the
//      last window element zero padded by the range comparators;
//   L4 data partition: the common vault broadcasts a tensor, each PE moves
//      it to its own PMAG, which keeps only its share (window shifted by
//      the vault index) and drops the rest;
//   L5 matrix product with a transposed weight sweep, 32 bit, own vault;
//   L6 weight update W - eta*dW with stochastic rounding: the coefficients
//      [1, -eta] are kept in BUF Input1, each BUF Input2 tile holds a row of
//      W and the matching row of dW, so every lane computes
//      1*W + (-eta)*dW; each result must be the truncated value or one LSB
//      above it, and some results must have been rounded up.
// Every result is compared with a software model. Mechanisms are counted
// while the layers run, and each must happen at least once: broadcast
// words, merge words, several PEs requesting the bus at once, PE stalls
// during drains, 32/16-bit mode switches, table look-ups, zero padding,
// dropped writes, transposed sweeps, MAX and MOVE operations. The number
// of computing cycles of PE 0 must equal the sum of n2o*n2i over its tiles.
module tb_nt_core #(
  parameter bit FULL = 0
);
  import nt_pkg::*;
  localparam int NP  = FULL ? 15 : 3;
  localparam int K   = FULL ? 32 : 4;
  localparam int NV  = NP + 1;
  localparam int VW  = 4096;
  localparam int NL  = 6;

  logic clk = 0, rst_n = 0;
  logic h_we = 0, h_start = 0;
  logic [11:0] h_addr = 0;
  logic [31:0] h_wdata = 0;
  logic [15:0] h_num_layers = 0, layer;
  logic busy, done;
  logic lut_we = 0, lut_sel_df = 0;
  logic [7:0] lut_waddr = 0;
  logic [31:0] lut_wdata = 0;
  logic [NV-1:0] v_req, v_we, v_gnt, v_rvalid;
  logic [NV-1:0][31:0] v_addr, v_wdata, v_rdata;
  logic [NP-1:0] pe_stall;
  logic bus_bcast, bus_merge;
  int checks = 0, failures = 0;

  if (FULL) begin : g_full
    neurotrainer_top dut (.*);
  end else begin : g_small
    neurotrainer_top #(.N_PE(3), .K(4), .BUF1_WORDS(64), .BUF2_ROWS(16), .OUT_ROWS(16)) dut (.*);
  end

  always #5 clk = ~clk;

  initial begin
    #20000000;
    failures++;
    $display("watchdog: layer %0d", layer);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  // ------------------------------------------------------------ vaults
  logic [31:0] vmem [NV][VW];
  for (genvar i = 0; i < NV; i++) begin : g_v
    logic        pv [3];
    logic [31:0] pd [3];
    logic        gnt_r, gnt_w;
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        gnt_r <= 1'b0; gnt_w <= 1'b0;
        for (int l = 0; l < 3; l++) begin pv[l] <= 1'b0; pd[l] <= '0; end
      end else begin
        gnt_r <= ($urandom_range(0, 99) >= 20);
        gnt_w <= ($urandom_range(0, 99) >= 70);
        pv[0] <= v_req[i] && v_gnt[i] && !v_we[i];
        pd[0] <= vmem[i][v_addr[i] % VW];
        for (int l = 1; l < 3; l++) begin pv[l] <= pv[l-1]; pd[l] <= pd[l-1]; end
        if (v_req[i] && v_gnt[i] && v_we[i]) vmem[i][v_addr[i] % VW] <= v_wdata[i];
      end
    end
    assign v_gnt[i]    = v_we[i] ? gnt_w : gnt_r;
    assign v_rvalid[i] = pv[2];
    assign v_rdata[i]  = pd[2];
  end

  // ------------------------------------------------------- arithmetic model
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
  function automatic logic [31:0] r32();     // about +-2.0 in Q4.28
    return $urandom_range(0, 32'h3FFF_FFFF) - 32'h2000_0000;
  endfunction
  function automatic logic [31:0] r16x2();   // two lanes of about +-0.5 in Q4.12
    logic [31:0] w;
    w = {16'($urandom_range(0, 16'h0FFF) - 16'h0800), 16'($urandom_range(0, 16'h0FFF) - 16'h0800)};
    return (w == END_MARK) ? 32'd0 : w;
  endfunction

  logic [31:0] lut [256];

  // ---------------------------------------------------- layer programs
  localparam int L1_T = 4, L1_O = 2, L1_I = 3;        // FC: 4 tiles, drain every 2
  localparam int L2_T = 3, L2_TAPS = 3;               // conv: 3 tiles of K pixels
  localparam int L3_T = 2;                            // pool: windows of 3 + 1 pad
  localparam int L4_M = 6;                            // partition: 6 words per PE
  localparam int L5_T = 2, L5_O = 2, L5_I = 3;        // transposed matmul
  localparam int L6_T = 2;                            // weight update: 2 rows of K
  localparam logic [31:0] ONE = 32'h1000_0000, NEG_ETA = 32'hFF00_0000;  // 1, -1/16

  function automatic pmag_cfg_t pm_blank();
    pmag_cfg_t c = '0;
    c.en = 1'b1;
    for (int l = 0; l < N_LEVELS; l++) c.rmax[l] = 16'd1;
    return c;
  endfunction

  layer_prog_t progs [NL];

  task automatic make_programs();
    layer_prog_t p;
    // L1
    p = '0; p.ind = pm_blank(); p.com = pm_blank();
    p.ind.dir = PM_RD; p.ind.rmax[0] = 16'(L1_T * L1_O * L1_I);
    p.ind.sel_a = SRC_R1; p.ind.st_a = 1; p.ind.base = 32'h100;
    p.com.dir = PM_RD; p.com.lut = LUT_F; p.com.rmax[0] = 16'(L1_T * L1_I * K);
    p.com.sel_a = SRC_R1; p.com.st_a = 1; p.com.base = 32'h200; p.com.wbase = 32'h800;
    p.pe.op = PE_MAC; p.pe.prec32 = 1; p.pe.src2_bus = 1; p.pe.dst_bus = 1;
    p.pe.n2o = L1_O; p.pe.n2i = L1_I; p.pe.n1 = L1_I; p.pe.acc_tiles = 2;
    progs[0] = p;
    // L2: input row i of tile t = in[t*K + i + j], j < K
    p = '0; p.ind = pm_blank(); p.com = pm_blank();
    p.ind.dir = PM_RD; p.ind.rmax[0] = L2_TAPS; p.ind.sel_a = SRC_R1; p.ind.st_a = 1;
    p.ind.base = 32'h180; p.ind.wbase = 32'h900;
    p.com.dir = PM_RD; p.com.rmax[0] = L2_T; p.com.rmax[1] = L2_TAPS; p.com.rmax[2] = 16'(K);
    p.com.stride = 8'(K); p.com.sel_s = 3'd1; p.com.sel_t = 3'd2;        // p = r1*K + r2
    p.com.sel_a = SRC_P; p.com.st_a = 1; p.com.sel_b = SRC_R3; p.com.st_b = 1;
    p.com.base = 32'h400;
    p.pe.op = PE_MAC; p.pe.prec32 = 0; p.pe.keep1 = 1; p.pe.one_row = 1; p.pe.src2_bus = 1;
    p.pe.n2o = 1; p.pe.n2i = L2_TAPS; p.pe.n1 = L2_TAPS; p.pe.acc_tiles = 1;
    progs[1] = p;
    // L3: row i, lane j of tile t = x[t*3K + 3j + i], i = 3 padded
    p = '0; p.ind = pm_blank(); p.com = pm_blank(); p.com.en = 0;
    p.ind.dir = PM_RD; p.ind.oob_zero = 1;
    p.ind.rmax[0] = L3_T; p.ind.rmax[1] = 4; p.ind.rmax[2] = 16'(K);
    p.ind.sel_a = SRC_R1; p.ind.st_a = 32'(3 * K); p.ind.sel_b = SRC_R2; p.ind.st_b = 1;
    p.ind.sel_c = SRC_R3; p.ind.st_c = 3; p.ind.base = 32'h400; p.ind.wbase = 32'hA00;
    p.ind.rng_en = 1; p.ind.sel_h = 0; p.ind.sel_k = 0;
    p.ind.hmin = -1; p.ind.hmax = 3; p.ind.kmin = -1; p.ind.kmax = 100;
    p.pe.op = PE_MAX; p.pe.prec32 = 0; p.pe.n2o = 1; p.pe.n2i = 4; p.pe.n1 = 4; p.pe.acc_tiles = 1;
    progs[2] = p;
    // L4: word (b, m) of the broadcast kept by vault b at 0xB00 + m
    p = '0; p.ind = pm_blank(); p.com = pm_blank();
    p.com.dir = PM_RD; p.com.rmax[0] = 16'(NP * L4_M); p.com.sel_a = SRC_R1; p.com.st_a = 1;
    p.com.base = 32'h500;
    p.ind.dir = PM_WR; p.ind.rmax[1] = 16'(NP); p.ind.rmax[2] = L4_M;
    p.ind.sel_a = SRC_R3; p.ind.st_a = 1; p.ind.base = 32'hB00;
    p.ind.rng_en = 1; p.ind.sel_h = 0; p.ind.sel_k = 1; p.ind.win_step = 1;
    p.ind.hmin = -1; p.ind.hmax = 1; p.ind.kmin = -1; p.ind.kmax = 16'h7FFF;
    p.pe.op = PE_MOVE; p.pe.src2_bus = 1; p.pe.dst_bus = 0;
    progs[3] = p;
    // L5
    p = '0; p.ind = pm_blank(); p.com = pm_blank(); p.com.en = 0;
    p.ind.dir = PM_RD; p.ind.rmax[0] = 16'(L5_T * (L5_O * L5_I + L5_I * K));
    p.ind.sel_a = SRC_R1; p.ind.st_a = 1; p.ind.base = 32'h600; p.ind.wbase = 32'hC00;
    p.pe.op = PE_MAC; p.pe.prec32 = 1; p.pe.sweep = SW_TRANSPOSE;
    p.pe.n2o = L5_O; p.pe.n2i = L5_I; p.pe.n1 = L5_I; p.pe.acc_tiles = 1;
    progs[4] = p;
    // L6: stream = 1, -eta, then per tile a row of W and a row of dW
    p = '0; p.ind = pm_blank(); p.com = pm_blank(); p.com.en = 0;
    p.ind.dir = PM_RD; p.ind.rmax[0] = 16'(2 + L6_T * 2 * K);
    p.ind.sel_a = SRC_R1; p.ind.st_a = 1; p.ind.base = 32'hD00; p.ind.wbase = 32'hE00;
    p.pe.op = PE_MAC; p.pe.prec32 = 1; p.pe.sr_en = 1; p.pe.keep1 = 1;
    p.pe.n2o = 1; p.pe.n2i = 2; p.pe.n1 = 2; p.pe.acc_tiles = 1;
    progs[5] = p;
  endtask

  // ---------------------------------------------------- mechanism counters
  int n_bcast = 0, n_merge = 0, n_contend = 0, n_stall = 0, n_switch = 0, n_lut = 0;
  int n_fill = 0, n_drop = 0, n_transp = 0, n_max = 0, n_move = 0, n_go = 0, n_comp0 = 0;
  logic last_prec = 1'b1;
  layer_prog_t cur;

  if (FULL) begin : g_mon_full
    assign cur = g_full.dut.prog;
  end else begin : g_mon_small
    assign cur = g_small.dut.prog;
  end

  logic go_s, bcv_s, mgv_s, mgr_s, comrv_s, fill0_s, drop0_s, comp0_s, mv0_s;
  logic [NP-1:0] req_s;
  if (FULL) begin : g_p_full
    assign go_s = g_full.dut.go;            assign bcv_s = g_full.dut.pe_bc_valid;
    assign mgv_s = g_full.dut.mg_valid;     assign mgr_s = g_full.dut.mg_ready;
    assign comrv_s = g_full.dut.v_rvalid[NP];
    assign fill0_s = g_full.dut.g_pe[0].u_pmag.emit_fill;
    assign drop0_s = g_full.dut.g_pe[0].u_pmag.write_drop;
    assign comp0_s = g_full.dut.g_pe[0].u_pe.computing;
    assign mv0_s   = g_full.dut.wr_valid[0] && g_full.dut.wr_ready[0];
    assign req_s   = g_full.dut.req;
  end else begin : g_p_small
    assign go_s = g_small.dut.go;           assign bcv_s = g_small.dut.pe_bc_valid;
    assign mgv_s = g_small.dut.mg_valid;    assign mgr_s = g_small.dut.mg_ready;
    assign comrv_s = g_small.dut.v_rvalid[NP];
    assign fill0_s = g_small.dut.g_pe[0].u_pmag.emit_fill;
    assign drop0_s = g_small.dut.g_pe[0].u_pmag.write_drop;
    assign comp0_s = g_small.dut.g_pe[0].u_pe.computing;
    assign mv0_s   = g_small.dut.wr_valid[0] && g_small.dut.wr_ready[0];
    assign req_s   = g_small.dut.req;
  end

  always @(posedge clk) if (rst_n) begin
    if (go_s) begin
      n_go++;
      if (cur.pe.op != PE_MOVE) begin
        if (cur.pe.prec32 != last_prec) n_switch++;
        last_prec = cur.pe.prec32;
      end
    end
    if (bcv_s) n_bcast++;
    if (mgv_s && mgr_s) n_merge++;
    if ($countones(req_s) > 1) n_contend++;
    if (|pe_stall) n_stall++;
    if (comrv_s && cur.com.lut != LUT_NONE) n_lut++;
    if (fill0_s) n_fill++;
    if (drop0_s) n_drop++;
    if (comp0_s) begin
      n_comp0++;
      if (cur.pe.sweep == SW_TRANSPOSE) n_transp++;
      if (cur.pe.op == PE_MAX) n_max++;
    end
    if (mv0_s && cur.pe.op == PE_MOVE) n_move++;
  end

  // ------------------------------------------------------------ test
  initial begin
    logic [PROG_WORDS*32-1:0] bits;
    logic [31:0] W1 [NP][L1_T * L1_O * L1_I];
    logic [31:0] X1 [L1_T * L1_I * K];
    logic [31:0] Y1 [NP][L1_O * K * 2];              // two drains per PE
    logic [31:0] KER [NP][L2_TAPS];
    logic [31:0] IN2 [L2_T * K + L2_TAPS];
    logic [31:0] P3 [NP][L3_T * 3 * K];
    logic [31:0] S4 [NP * L4_M];
    logic [31:0] D5 [NP][L5_T * (L5_O * L5_I + L5_I * K)];
    logic [31:0] W6 [NP][L6_T * K], G6 [NP][L6_T * K];
    int n_srup;
    int blk_of [NP];
    int exp_comp0;

    for (int v = 0; v < NV; v++) for (int a = 0; a < VW; a++) vmem[v][a] = 32'hFEED_0000 + a;
    for (int e = 0; e < 256; e++) lut[e] = r32();
    // ---- data
    for (int p = 0; p < NP; p++) begin
      for (int w = 0; w < L1_T * L1_O * L1_I; w++) begin W1[p][w] = r32(); vmem[p][32'h100 + w] = W1[p][w]; end
      for (int w = 0; w < L2_TAPS; w++) begin KER[p][w] = r16x2(); vmem[p][32'h180 + w] = KER[p][w]; end
      for (int w = 0; w < L3_T * 3 * K; w++) begin
        P3[p][w] = {16'd0, 16'($urandom_range(0, 200) - 100)}; vmem[p][32'h400 + w] = P3[p][w];
      end
      for (int t = 0; t < L5_T; t++) begin
        int b;
        b = t * (L5_O * L5_I + L5_I * K);
        for (int w = 0; w < L5_O * L5_I + L5_I * K; w++) D5[p][b + w] = r32();
      end
      for (int w = 0; w < L5_T * (L5_O * L5_I + L5_I * K); w++) vmem[p][32'h600 + w] = D5[p][w];
      vmem[p][32'hD00] = ONE; vmem[p][32'hD01] = NEG_ETA;
      for (int t = 0; t < L6_T; t++) for (int j = 0; j < K; j++) begin
        W6[p][t * K + j] = r32(); G6[p][t * K + j] = r32();
        vmem[p][32'hD02 + t * 2 * K + j]     = W6[p][t * K + j];
        vmem[p][32'hD02 + t * 2 * K + K + j] = G6[p][t * K + j];
      end
    end
    for (int w = 0; w < L1_T * L1_I * K; w++) begin
      logic [31:0] raw;
      raw = $urandom(); if (raw == END_MARK) raw = 0;
      vmem[NP][32'h200 + w] = raw; X1[w] = lut[raw[31:24] ^ 8'h80];
    end
    for (int w = 0; w < L2_T * K + L2_TAPS; w++) begin IN2[w] = r16x2(); vmem[NP][32'h400 + w] = IN2[w]; end
    for (int w = 0; w < NP * L4_M; w++) begin
      S4[w] = $urandom(); if (S4[w] == END_MARK) S4[w] = 0; vmem[NP][32'h500 + w] = S4[w];
    end

    // ---- host: programs and table
    make_programs();
    repeat (3) @(negedge clk); rst_n = 1;
    for (int l = 0; l < NL; l++) begin
      bits = '0; bits[PROG_BITS-1:0] = progs[l];
      for (int w = 0; w < PROG_WORDS; w++) begin
        @(negedge clk); h_we = 1; h_addr = 12'(l * PROG_WORDS + w); h_wdata = bits[32*w +: 32];
      end
    end
    @(negedge clk); h_we = 0;
    for (int e = 0; e < 256; e++) begin
      @(negedge clk); lut_we = 1; lut_sel_df = 0; lut_waddr = 8'(e); lut_wdata = lut[e];
    end
    @(negedge clk); lut_we = 0;
    h_num_layers = 16'(NL); h_start = 1; @(negedge clk); h_start = 0;
    check(busy, "busy after start");
    fork
      wait (done);
      begin repeat (400000) @(negedge clk); $display("timeout in layer %0d", layer); end
    join_any
    disable fork;
    check(done, "all layers done");
    check(n_go == NL, $sformatf("%0d layers started", n_go));
    repeat (3) @(negedge clk);

    // ---- L1 expected: Y[o][j] over tiles, drained every two tiles
    for (int p = 0; p < NP; p++) begin
      logic [31:0] Y [L1_O][K];
      for (int d = 0; d < 2; d++) begin
        for (int o = 0; o < L1_O; o++) for (int j = 0; j < K; j++) Y[o][j] = 0;
        for (int t = 2 * d; t < 2 * d + 2; t++)
          for (int o = 0; o < L1_O; o++) for (int i = 0; i < L1_I; i++)
            for (int j = 0; j < K; j++)
              Y[o][j] = mac(1, W1[p][t * L1_O * L1_I + o * L1_I + i], X1[t * L1_I * K + i * K + j], Y[o][j]);
        for (int o = 0; o < L1_O; o++) for (int j = 0; j < K; j++) Y1[p][d * L1_O * K + o * K + j] = Y[o][j];
      end
    end
    // merged blocks: 2*NP blocks of L1_O*K words, each one drain of one PE
    begin
      int seen [NP];
      int bw = L1_O * K;
      for (int p = 0; p < NP; p++) seen[p] = 0;
      for (int b = 0; b < 2 * NP; b++) begin
        int hit;
        hit = -1;
        for (int p = 0; p < NP && hit < 0; p++) begin
          bit same;
          same = 1;
          for (int w = 0; w < bw; w++)
            if (vmem[NP][32'h800 + b * bw + w] != Y1[p][seen[p] * bw + w]) same = 0;
          if (same && seen[p] < 2) hit = p;
        end
        check(hit >= 0, $sformatf("L1: merged block %0d matches a PE drain", b));
        if (hit >= 0) seen[hit]++;
      end
    end
    // ---- L2
    for (int p = 0; p < NP; p++)
      for (int t = 0; t < L2_T; t++) for (int j = 0; j < K; j++) begin
        logic [31:0] y;
        y = 0;
        for (int i = 0; i < L2_TAPS; i++) y = mac(0, KER[p][i], IN2[t * K + i + j], y);
        check(vmem[p][32'h900 + t * K + j] == y,
              $sformatf("L2: PE %0d pixel %0d: %h want %h", p, t * K + j, vmem[p][32'h900 + t * K + j], y));
      end
    // ---- L3
    for (int p = 0; p < NP; p++)
      for (int t = 0; t < L3_T; t++) for (int j = 0; j < K; j++) begin
        logic [31:0] y;
        for (int i = 0; i < 4; i++) begin
          logic [15:0] x;
          x = (i < 3) ? P3[p][t * 3 * K + 3 * j + i][15:0] : 16'd0;
          if (i == 0 || signed'(x) > signed'(y[15:0])) y = {16'(i), x};
        end
        check(vmem[p][32'hA00 + t * K + j] == y,
              $sformatf("L3: PE %0d window %0d: %h want %h", p, t * K + j, vmem[p][32'hA00 + t * K + j], y));
      end
    // ---- L4
    for (int p = 0; p < NP; p++) begin
      for (int m = 0; m < L4_M; m++)
        check(vmem[p][32'hB00 + m] == S4[p * L4_M + m], $sformatf("L4: vault %0d word %0d", p, m));
      check(vmem[p][32'hB00 + L4_M] == 32'hFEED_0000 + 32'hB00 + L4_M, $sformatf("L4: vault %0d no extra write", p));
    end
    // ---- L5
    for (int p = 0; p < NP; p++)
      for (int t = 0; t < L5_T; t++) begin
        int b;
        b = t * (L5_O * L5_I + L5_I * K);
        for (int o = 0; o < L5_O; o++) for (int j = 0; j < K; j++) begin
          logic [31:0] y;
          y = 0;
          for (int i = 0; i < L5_I; i++)
            y = mac(1, D5[p][b + i * L5_O + o], D5[p][b + L5_O * L5_I + i * K + j], y);
          check(vmem[p][32'hC00 + t * L5_O * K + o * K + j] == y,
                $sformatf("L5: PE %0d tile %0d y[%0d][%0d]", p, t, o, j));
        end
      end

    // ---- L6: truncated result, or one LSB above it when rounded up
    n_srup = 0;
    for (int p = 0; p < NP; p++)
      for (int e = 0; e < L6_T * K; e++) begin
        logic [31:0] y, got;
        y   = mac(1, NEG_ETA, G6[p][e], mac(1, ONE, W6[p][e], 0));
        got = vmem[p][32'hE00 + e];
        if (got == y + 1) n_srup++;
        check(got == y || got == y + 1,
              $sformatf("L6: PE %0d weight %0d: %h want %h or +1", p, e, got, y));
      end
    $display("L6: %0d of %0d updated weights rounded up", n_srup, NP * L6_T * K);

    // ---- cycle count and mechanisms
    exp_comp0 = L1_T * L1_O * L1_I + L2_T * L2_TAPS + L3_T * 4 + L5_T * L5_O * L5_I + L6_T * 2;
    check(n_comp0 == exp_comp0, $sformatf("PE 0 computing cycles %0d, want %0d", n_comp0, exp_comp0));
    $display("mechanisms: bcast %0d merge %0d contention %0d stall %0d switch %0d lut %0d fill %0d drop %0d transpose %0d max %0d move %0d",
             n_bcast, n_merge, n_contend, n_stall, n_switch, n_lut, n_fill, n_drop, n_transp, n_max, n_move);
    check(n_bcast   > 0, "broadcast happened");
    check(n_merge   > 0, "merge happened");
    check(n_merge == 2 * NP * L1_O * K, "merge word count");
    check(n_contend > 0, "bus contention happened");
    check(n_stall   > 0, "PE stall happened");
    check(n_switch  > 0, "32/16-bit mode switch happened");
    check(n_lut     > 0, "table look-up happened");
    check(n_fill    > 0, "zero padding happened");
    check(n_drop    > 0, "dropped write happened");
    check(n_transp  > 0, "transposed sweep happened");
    check(n_max     > 0, "max operation happened");
    check(n_move    > 0, "move happened");
    check(n_srup    > 0, "stochastic round-up happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
