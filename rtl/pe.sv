// pe: processing element, paired with one independent vault.
//
// A PE holds three local buffers and a row of K arithmetic units:
//   * BUF Input1, BUF1_WORDS 32-bit words, fed from the PE's own vault. It
//     supplies one word `a` per cycle (one 32-bit operand or two 16-bit
//     ones): kernels in convolution, a P x L block of the weight matrix in
//     matrix products, the pA' vector in the outer product.
//   * BUF Input2, BUF2_ROWS rows of K words, fed from the vault or from the
//     bus broadcast. It supplies one row x of K words per cycle.
//   * BUF Output, OUT_ROWS rows of K words of partial sums y.
//   * K sr_mac units computing y = a*x + y (K lanes of 32 bit or 2K lanes
//     of 16 bit) and K max_cmp comparators computing y = max(x, y) with ID.
// Both input buffers are double buffered: each is split into two halves,
// one being filled while the other is consumed. A half is "full" after one
// tile of data: n2o*n2i words in BUF1, n1 rows (n1*K words) in BUF2.
// Computing starts when a full half is present in both buffers (only BUF2
// for MAX), and a tile takes exactly n2o*n2i cycles:
//   CNT2 (outer o < n2o, inner i < n2i) addresses BUF1 (o*n2i+i, or
//   transposed i*n2o+o, or reversed for a flipped kernel); CNT1 (< n1,
//   wrapping) addresses the BUF2 row; the output row is o, or 0 when
//   one_row is set (convolution: all kernel taps add into one row of K
//   output pixels).
// After acc_tiles tiles the output buffer is drained, row by row, K words
// per row, to the vault (through the PMAG) or to the bus (merge: REQ is
// raised, words are sent once ACK comes, REQ falls after the last word).
// Computing stalls while the outputs drain (`stall`). With keep1 BUF1 is
// loaded once and reused for every tile (small common data, e.g. kernels).
//
// When BUF2 is fed from the vault, the vault stream alternates: one BUF1
// tile, then one BUF2 tile (with keep1: one BUF1 tile, then BUF2 only).
// Every input stream ends with END-MARK; when all used streams have ended
// and the last full tile is computed, the remaining partial sums are drained
// and `done` rises. Words of an unfinished tile at END-MARK are dropped.
// The MOVE operation streams words unchanged from the vault or bus to the
// vault or bus (data preparation: merge and partition). Broadcast words
// reaching a PE that does not use the bus are accepted and dropped, so the
// bus never waits on it.
//
// Interfaces: streams are valid/ready (a word moves when both are high);
// bi_ready does not depend on bi_valid. cfg must be stable from `start`
// (one cycle) until `done`.
//
// From the paper: buffers, their roles, double buffering, counter address
// generators CNT2 / CNT1, start on both inputs ready, K MACs and K
// comparators, output to vault or bus, END-MARK, the programming fields of
// operation, precision and loop ranges. Own choices: buffer sizes (16 KB
// each), the tile / acc_tiles bookkeeping, draining that stalls computing,
// the MOVE operation, and dropping of incomplete tiles.
// Lint note: rst_n is an asynchronous reset of the flip-flops and is also
// sampled by the `disable iff (!rst_n)` of the assertions, so lint tools
// report it as used both synchronously and asynchronously. That use is
// in checking code only; the logic sees rst_n as an asynchronous reset.
module pe #(
  parameter int unsigned K          = nt_pkg::N_MAC,
  parameter int unsigned BUF1_WORDS = 4096,   // 16 KB
  parameter int unsigned BUF2_ROWS  = 128,    // 16 KB with K = 32
  parameter int unsigned OUT_ROWS   = 128,    // 16 KB with K = 32
  parameter logic [7:0]  SEED_BASE  = 8'd1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  nt_pkg::pe_cfg_t   cfg,
  input  logic              start,
  output logic              done,
  output logic              stall,
  // from the vault (PMAG read stream)
  input  logic              vi_valid,
  input  logic [31:0]       vi_data,
  output logic              vi_ready,
  // to the vault (PMAG write stream)
  output logic              vo_valid,
  output logic [31:0]       vo_data,
  input  logic              vo_ready,
  // bus broadcast in
  input  logic              bi_valid,
  input  logic [31:0]       bi_data,
  output logic              bi_ready,
  // bus merge out: REQ - ACK - SEND
  output logic              req,
  input  logic              ack,
  output logic              send_valid,
  output logic [31:0]       send_data,
  input  logic              send_ready
);
  import nt_pkg::*;

  localparam int unsigned H1  = BUF1_WORDS / 2;
  localparam int unsigned H2  = BUF2_ROWS / 2;
  localparam int unsigned A1W = $clog2(BUF1_WORDS);
  localparam int unsigned A2W = $clog2(BUF2_ROWS);
  localparam int unsigned AOW = $clog2(OUT_ROWS);
  localparam int unsigned KW  = (K > 1) ? $clog2(K) : 1;

  // ------------------------------------------------------------ storage
  logic [31:0] buf1 [BUF1_WORDS];
  logic [31:0] buf2 [BUF2_ROWS][K];
  logic [31:0] bufo [OUT_ROWS][K];
  logic [OUT_ROWS-1:0] fresh;          // row holds no partial sum yet

  // ---------------------------------------------------------- bookkeeping
  logic        active;                 // program running
  logic [31:0] len1;                   // words per tile in BUF1
  logic [1:0]  full1, full2;
  logic        f1, f2;                 // half being filled
  logic        k1, k2;                 // half being consumed
  logic [31:0] c1w;                    // words written in BUF1 fill half
  logic [31:0] c2row;                  // row  written in BUF2 fill half
  logic [KW-1:0] c2col;                // word written in that row
  logic        vphase;                 // vault stream target: 0 BUF1, 1 BUF2
  logic        loaded1;                // keep1: BUF1 holds its data
  logic        v_end, b_end;           // END-MARK seen
  logic [CNT_W-1:0] tiles;             // tiles accumulated since last drain

  logic        uses_bus_in, mac_op, move_op;
  assign uses_bus_in = cfg.src2_bus;
  assign mac_op      = (cfg.op == PE_MAC);
  assign move_op     = (cfg.op == PE_MOVE);

  always_comb begin
    len1 = 32'(cfg.n2o) * 32'(cfg.n2i);
  end

  // ------------------------------------------------------ compute control
  logic [1:0][CNT_W-1:0] cnt2_val, cnt2_cnt;
  logic        cnt2_last;
  logic [CNT_W-1:0] c1;                // CNT1
  logic        computing, tile_ready, tile_end;
  logic        draining;
  logic [31:0] drain_words, dcount;
  logic [AOW-1:0] drow;
  logic [KW-1:0]  dcol;
  logic        finishing;              // final drain requested

  assign tile_ready = active && !move_op && full2[k2] && (!mac_op || full1[k1]);
  assign computing  = tile_ready && !draining;
  assign stall      = tile_ready && draining;
  assign tile_end   = computing && cnt2_last;

  assign cnt2_cnt[0] = cfg.n2o;        // level 0: outer loop
  assign cnt2_cnt[1] = cfg.n2i;

  nested_counter #(.LEVELS(2), .CNT_W(CNT_W)) u_cnt2 (
    .clk, .rst_n,
    .clear (start),
    .step  (computing),
    .count (cnt2_cnt),
    .value (cnt2_val),
    .last  (cnt2_last)
  );

  logic [CNT_W-1:0] o_idx, i_idx;
  assign o_idx = cnt2_val[0];
  assign i_idx = cnt2_val[1];

  logic [A1W-1:0] a1;
  logic [A2W-1:0] a2;
  logic [AOW-1:0] ao;
  logic [31:0]    step_lin;

  always_comb begin
    step_lin = 32'(o_idx) * 32'(cfg.n2i) + 32'(i_idx);
    case (cfg.sweep)
      SW_TRANSPOSE: a1 = A1W'(32'(k1) * H1 + 32'(i_idx) * 32'(cfg.n2o) + 32'(o_idx));
      SW_REVERSE:   a1 = A1W'(32'(k1) * H1 + len1 - 32'd1 - step_lin);
      default:      a1 = A1W'(32'(k1) * H1 + step_lin);
    endcase
    a2 = A2W'(32'(k2) * H2 + 32'(c1));
    ao = cfg.one_row ? '0 : AOW'(o_idx);
  end

  // ---------------------------------------------------------- datapath
  logic [31:0] a_op;
  logic [31:0] x_row [K];
  logic [31:0] y_row [K];
  logic [31:0] y_new [K];
  logic [31:0] mac_out [K];
  logic [31:0] cmp_out [K];

  always_comb begin
    a_op = buf1[a1];
    for (int j = 0; j < K; j++) begin
      x_row[j] = buf2[a2][j];
      y_row[j] = fresh[ao] ? 32'd0 : bufo[ao][j];
      y_new[j] = mac_op ? mac_out[j] : cmp_out[j];
    end
  end

  for (genvar j = 0; j < K; j++) begin : g_lane
    sr_mac #(.SEED(8'((32'(SEED_BASE) + 32'(j) * 32'd37) % 255 + 1))) u_mac (
      .clk, .rst_n,
      .prec32 (cfg.prec32),
      .sr_en  (cfg.sr_en),
      .a      (a_op),
      .x      (x_row[j]),
      .y      (y_row[j]),
      .out    (mac_out[j])
    );
    max_cmp u_cmp (
      .first  (fresh[ao]),
      .x      (x_row[j]),
      .x_id   (c1),
      .y      (y_row[j]),
      .out    (cmp_out[j])
    );
  end

  // ------------------------------------------------------ input routing
  logic vi_is_end, bi_is_end;
  logic vi_to1, vi_to2;
  logic wr1, wr2;
  logic [31:0] wr2_data;
  logic mv_valid;                      // MOVE holding register
  logic [31:0] mv_data;
  logic mv_in_valid, mv_take, mv_pop;
  logic [31:0] mv_in_data;

  always_comb begin
    vi_is_end = (vi_data == END_MARK);
    bi_is_end = (bi_data == END_MARK);

    // target of a vault word
    vi_to1 = mac_op && !vphase && !(cfg.keep1 && loaded1);
    vi_to2 = !uses_bus_in && !vi_to1;

    mv_in_valid = move_op && (uses_bus_in ? bi_valid : vi_valid);
    mv_in_data  = uses_bus_in ? bi_data : vi_data;
    mv_pop      = mv_valid && (cfg.dst_bus ? (ack && send_ready) : vo_ready);
    mv_take     = uses_bus_in ? (!mv_valid || (!cfg.dst_bus && vo_ready)) : (!mv_valid || mv_pop);

    // ready
    if (!active || v_end)          vi_ready = !active ? 1'b0 : 1'b1;
    else if (move_op)              vi_ready = uses_bus_in ? 1'b1 : (mv_take || vi_is_end);
    else if (vi_is_end)            vi_ready = 1'b1;
    else if (vi_to1)               vi_ready = !full1[f1];
    else if (vi_to2)               vi_ready = !full2[f2];
    else                           vi_ready = 1'b0;

    if (!active || !uses_bus_in || b_end) bi_ready = 1'b1;
    else if (move_op)                     bi_ready = !mv_valid || (!cfg.dst_bus && vo_ready);
    else                                  bi_ready = !full2[f2];

    wr1      = active && !move_op && !v_end && vi_valid && vi_ready && !vi_is_end && vi_to1;
    wr2      = active && !move_op && (uses_bus_in ? (!b_end && bi_valid && bi_ready && !bi_is_end)
                                                  : (!v_end && vi_valid && vi_ready && !vi_is_end && vi_to2));
    wr2_data = uses_bus_in ? bi_data : vi_data;
  end

  // -------------------------------------------------------- output side
  always_comb begin
    drain_words = (cfg.one_row ? 32'd1 : 32'(cfg.n2o)) * 32'(K);
    vo_valid   = 1'b0;
    vo_data    = 32'd0;
    req        = 1'b0;
    send_valid = 1'b0;
    send_data  = 32'd0;
    if (move_op) begin
      if (cfg.dst_bus) begin
        req        = active && !(v_end && b_end && !mv_valid);
        send_valid = mv_valid && ack;
        send_data  = mv_data;
      end else begin
        vo_valid = mv_valid;
        vo_data  = mv_data;
      end
    end else if (draining) begin
      if (cfg.dst_bus) begin
        req        = 1'b1;
        send_valid = ack;
        send_data  = bufo[drow][dcol];
      end else begin
        vo_valid = 1'b1;
        vo_data  = bufo[drow][dcol];
      end
    end
  end

  logic drain_pop;
  assign drain_pop = draining && (cfg.dst_bus ? (ack && send_ready) : vo_ready);

  // ---------------------------------------------------------- sequencing
  logic streams_ended;
  assign streams_ended = v_end && (!uses_bus_in || b_end);

  always_ff @(posedge clk) begin
    if (wr1) buf1[A1W'(32'(f1) * H1 + c1w)] <= vi_data;
    if (wr2) buf2[A2W'(32'(f2) * H2 + c2row)][c2col] <= wr2_data;
    if (computing) bufo[ao] <= y_new;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active <= 1'b0; done <= 1'b0;
      full1 <= '0; full2 <= '0; f1 <= 1'b0; f2 <= 1'b0; k1 <= 1'b0; k2 <= 1'b0;
      c1w <= '0; c2row <= '0; c2col <= '0; vphase <= 1'b0; loaded1 <= 1'b0;
      v_end <= 1'b0; b_end <= 1'b0; tiles <= '0; c1 <= '0;
      draining <= 1'b0; dcount <= '0; drow <= '0; dcol <= '0; finishing <= 1'b0;
      fresh <= '1; mv_valid <= 1'b0; mv_data <= '0;
    end else if (start) begin
      active <= 1'b1; done <= 1'b0;
      full1 <= '0; full2 <= '0; f1 <= 1'b0; f2 <= 1'b0; k1 <= 1'b0; k2 <= 1'b0;
      c1w <= '0; c2row <= '0; c2col <= '0;
      vphase <= (cfg.op == PE_MAX);
      loaded1 <= 1'b0;
      // streams a program does not use count as ended
      v_end <= (cfg.op == PE_MOVE) && cfg.src2_bus;
      b_end <= !cfg.src2_bus;
      tiles <= '0; c1 <= '0;
      draining <= 1'b0; dcount <= '0; drow <= '0; dcol <= '0; finishing <= 1'b0;
      fresh <= '1; mv_valid <= 1'b0;
    end else if (active) begin
      // ---- END-MARKs
      if (vi_valid && vi_ready && vi_is_end && !v_end) begin
        v_end <= 1'b1;
        if (!move_op) c1w <= '0;
        if (!move_op && !uses_bus_in) begin c2row <= '0; c2col <= '0; end
      end
      if (uses_bus_in && bi_valid && bi_ready && bi_is_end && !b_end) begin
        b_end <= 1'b1;
        if (!move_op) begin c2row <= '0; c2col <= '0; end
      end

      // ---- MOVE holding register
      if (move_op) begin
        if (mv_in_valid && mv_take && !(uses_bus_in ? bi_is_end : vi_is_end) &&
            !(uses_bus_in ? b_end : v_end)) begin
          mv_valid <= 1'b1;
          mv_data  <= mv_in_data;
        end else if (mv_pop) begin
          mv_valid <= 1'b0;
        end
        if (v_end && b_end && !mv_valid) begin
          active <= 1'b0;
          done   <= 1'b1;
        end
      end

      // ---- BUF1 fill
      if (wr1) begin
        if (c1w + 32'd1 == len1) begin
          c1w       <= '0;
          full1[f1] <= 1'b1;
          f1        <= ~f1;
          if (cfg.keep1) loaded1 <= 1'b1;
          if (!uses_bus_in) vphase <= 1'b1;
        end else begin
          c1w <= c1w + 32'd1;
        end
      end

      // ---- BUF2 fill
      if (wr2) begin
        if (c2col == KW'(K - 1) || K == 1) begin
          c2col <= '0;
          if (c2row + 32'd1 == 32'(cfg.n1)) begin
            c2row     <= '0;
            full2[f2] <= 1'b1;
            f2        <= ~f2;
            if (!uses_bus_in && mac_op && !cfg.keep1) vphase <= 1'b0;
          end else begin
            c2row <= c2row + 32'd1;
          end
        end else begin
          c2col <= c2col + KW'(1);
        end
      end

      // ---- compute
      if (computing) begin
        fresh[ao] <= 1'b0;
        c1 <= (c1 + CNT_W'(1) >= cfg.n1) ? '0 : c1 + CNT_W'(1);
      end
      if (tile_end) begin
        c1 <= '0;
        full2[k2] <= 1'b0;
        k2        <= ~k2;
        if (mac_op && !cfg.keep1) begin
          full1[k1] <= 1'b0;
          k1        <= ~k1;
        end
        if (tiles + CNT_W'(1) >= cfg.acc_tiles) begin
          tiles    <= '0;
          draining <= 1'b1;
        end else begin
          tiles <= tiles + CNT_W'(1);
        end
      end

      // ---- end of the program: drain what is left, then done
      if (!move_op && streams_ended && !tile_ready && !draining && !tile_end && !finishing) begin
        finishing <= 1'b1;
        if (tiles != '0) draining <= 1'b1;
      end
      if (!move_op && finishing && !draining) begin
        active <= 1'b0;
        done   <= 1'b1;
      end

      // ---- drain the output buffer
      if (drain_pop) begin
        if (dcount + 32'd1 == drain_words) begin
          dcount   <= '0;
          drow     <= '0;
          dcol     <= '0;
          draining <= 1'b0;
          fresh    <= '1;
        end else begin
          dcount <= dcount + 32'd1;
          if (dcol == KW'(K - 1) || K == 1) begin
            dcol <= '0;
            drow <= drow + AOW'(1);
          end else begin
            dcol <= dcol + KW'(1);
          end
        end
      end
    end
  end

  // SEND only while the bus has acknowledged the request
  property p_send_needs_ack;
    @(posedge clk) disable iff (!rst_n) send_valid |-> (ack && req);
  endproperty
  assert property (p_send_needs_ack);

endmodule
