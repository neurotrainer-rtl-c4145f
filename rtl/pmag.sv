// pmag: programmable memory address generator, one per vault controller.
//
// The PMAG turns a layer program (nt_pkg::pmag_cfg_t) into the stream of
// vault accesses that feeds a PE (or, on the common data vault, the bus)
// and stores what comes back. Its parts follow the block diagram of the
// design:
//   * seven nested 16-bit counters r1..r7 (r1 outermost, ranges R1..R7,
//     minimum 0) and a 16-bit constant register r0;
//   * the "convolution in-out" block: four 8:1 decoders pick s, t, u, v
//     among r0..r7, and p = g(s,t) = s*stride + t, q = g(u,v) = u*stride + v
//     give input coordinates from output and kernel coordinates;
//   * four decoders pick a, b, c, d among r1..r7, p, q, r0, 0 and 1, and the
//     address is f(a,b,c,d) = base + a*st_a + b*st_b + c*st_c + d*st_d;
//   * two 2:1 decoders pick h and k among r2, r3; two range comparators
//     (hmin < h < hmax and kmin < k < kmax, strict, as drawn) are ANDed into
//     an in-range flag. The h window moves by idx*win_step so that one
//     program partitions a tensor among the vaults;
//   * the f(x) / f'(x) look-up table on the read path (lut_unit).
//
// Two directions:
//   PM_RD: each counter step is one element of the outgoing stream. An
//          in-range step reads the vault; an out-of-range step emits a zero
//          (oob_zero, zero padding) or is skipped. After the last step the
//          stream is closed with END-MARK. Words arriving on the input
//          stream (results of the PE) are written sequentially from wbase,
//          from `start` until the next `start`.
//   PM_WR: nothing is read; each word arriving on the input stream takes
//          one counter step and is written at f(a,b,c,d), or dropped when
//          out of range (merge, partition, pad removal). The sweep ends with
//          the last step.
//
// Interfaces. Vault: v_req/v_gnt request handshake (a request is taken in
// a cycle with both high), v_we/v_addr/v_wdata (v_wdata is the incoming
// stream word itself, unregistered: a write is issued in the cycle that
// word is taken), and in-order read returns
// on v_rvalid/v_rdata, any latency. Streams: valid/ready, a word moves when
// both are high. Writes have priority over reads. Reads are issued only
// while the 8-entry output FIFO has room for every read in flight, so the
// stream never loses a word when its consumer stalls; a zero or END-MARK
// waits until no read is in flight, which keeps the stream in order.
// `start` (one cycle) loads nothing itself: cfg must be stable from start
// until `idle` rises again. `idle` is high when the PMAG has nothing left to
// do for the current program.
//
// From the paper: counters, decoders, g(), f(), comparators, LUT and the
// END-MARK ending each stream. Own choices: the linear f(), the extra
// decoder sources, the window shift, the sequential write address, the
// FIFO and the vault handshake.
// Lint note: rst_n is an asynchronous reset of the flip-flops and is also
// sampled by the `disable iff (!rst_n)` of the assertions, so lint tools
// report it as used both synchronously and asynchronously. That use is
// in checking code only; the logic sees rst_n as an asynchronous reset.
module pmag #(
  parameter int unsigned FIFO_DEPTH  = 8,
  parameter int unsigned LUT_ENTRIES = 256
) (
  input  logic                           clk,
  input  logic                           rst_n,
  input  logic [3:0]                     idx,        // vault index
  input  nt_pkg::pmag_cfg_t              cfg,
  input  logic                           start,
  output logic                           idle,
  // LUT programming
  input  logic                           lut_we,
  input  logic                           lut_sel_df,
  input  logic [$clog2(LUT_ENTRIES)-1:0] lut_waddr,
  input  logic [31:0]                    lut_wdata,
  // vault controller
  output logic                           v_req,
  output logic                           v_we,
  output logic [nt_pkg::ADDR_W-1:0]      v_addr,
  output logic [31:0]                    v_wdata,
  input  logic                           v_gnt,
  input  logic                           v_rvalid,
  input  logic [31:0]                    v_rdata,
  // stream towards the PE / bus
  output logic                           o_valid,
  output logic [31:0]                    o_data,
  input  logic                           o_ready,
  // stream from the PE / bus
  input  logic                           i_valid,
  input  logic [31:0]                    i_data,
  output logic                           i_ready
);
  import nt_pkg::*;

  localparam int unsigned CW = $clog2(FIFO_DEPTH + 1);

  // ------------------------------------------------------------ counters
  logic                               cnt_clear, cnt_step, cnt_last;
  logic [N_LEVELS-1:0][CNT_W-1:0]     r;

  nested_counter #(.LEVELS(N_LEVELS), .CNT_W(CNT_W)) u_cnt (
    .clk, .rst_n,
    .clear (cnt_clear),
    .step  (cnt_step),
    .count (cfg.rmax),
    .value (r),
    .last  (cnt_last)
  );

  // --------------------------------------------------- address datapath
  logic [CNT_W-1:0]  rv [8];          // r0 .. r7
  logic [31:0]       s, t, u, v, p, q;
  logic [31:0]       a, b, c, d;
  logic [ADDR_W-1:0] addr;
  logic signed [CNT_W+1:0] h, k, hoff;
  logic              in_range;

  function automatic logic [31:0] pick(input src_e sel, input logic [CNT_W-1:0] rr [8],
                                       input logic [31:0] pp, input logic [31:0] qq);
    case (sel)
      SRC_R1, SRC_R2, SRC_R3, SRC_R4,
      SRC_R5, SRC_R6, SRC_R7: return 32'(rr[int'(sel)]);
      SRC_P:   return pp;
      SRC_Q:   return qq;
      SRC_R0:  return 32'(rr[0]);
      SRC_ONE: return 32'd1;
      default: return 32'd0;
    endcase
  endfunction

  always_comb begin
    rv[0] = cfg.r0;
    for (int l = 1; l < 8; l++) rv[l] = r[l-1];
    s = 32'(rv[cfg.sel_s]);
    t = 32'(rv[cfg.sel_t]);
    u = 32'(rv[cfg.sel_u]);
    v = 32'(rv[cfg.sel_v]);
    p = s * 32'(cfg.stride) + t;
    q = u * 32'(cfg.stride) + v;
    a = pick(cfg.sel_a, rv, p, q);
    b = pick(cfg.sel_b, rv, p, q);
    c = pick(cfg.sel_c, rv, p, q);
    d = pick(cfg.sel_d, rv, p, q);
    addr = cfg.base + a * cfg.st_a + b * cfg.st_b + c * cfg.st_c + d * cfg.st_d;

    h    = signed'({2'b00, cfg.sel_h ? rv[3] : rv[2]});
    k    = signed'({2'b00, cfg.sel_k ? rv[3] : rv[2]});
    hoff = signed'({2'b00, CNT_W'(idx) * cfg.win_step});
    in_range = !cfg.rng_en ||
               ((h > (CNT_W+2)'(cfg.hmin) + hoff) && (h < (CNT_W+2)'(cfg.hmax) + hoff) &&
                (k > (CNT_W+2)'(cfg.kmin))        && (k < (CNT_W+2)'(cfg.kmax)));
  end

  // ------------------------------------------------------------- LUT
  logic [31:0] lut_out;

  lut_unit #(.ENTRIES(LUT_ENTRIES)) u_lut (
    .clk,
    .we     (lut_we),
    .sel_df (lut_sel_df),
    .waddr  (lut_waddr),
    .wdata  (lut_wdata),
    .mode   (cfg.lut),
    .lane16 (cfg.lut16),
    .din    (v_rdata),
    .dout   (lut_out)
  );

  // -------------------------------------------------------- output FIFO
  logic [31:0]             fifo [FIFO_DEPTH];
  logic [$clog2(FIFO_DEPTH)-1:0] wp, rp;
  logic [CW-1:0]           fcnt;
  logic [CW-1:0]           outst;          // reads in flight
  logic                    push, pop;
  logic [31:0]             push_data;

  // ------------------------------------------------------------ control
  logic rd_active;    // sweeping the counters, reading
  logic rd_sweep_end; // all steps taken, END-MARK still to send
  logic wr_active;    // PM_WR sweep in progress
  logic rd_prog;      // a PM_RD program has started: write-back allowed
  logic [ADDR_W-1:0] wseq;

  logic want_write, write_drop, issue_read, emit_fill, emit_end, step_skip;

  always_comb begin
    // writes of the incoming stream
    want_write = 1'b0;
    write_drop = 1'b0;
    if (cfg.en && i_valid) begin
      if (cfg.dir == PM_RD)      want_write = rd_prog;
      else if (wr_active)        begin
        if (in_range) want_write = 1'b1;
        else          write_drop = 1'b1;
      end
    end

    issue_read = 1'b0;
    emit_fill  = 1'b0;
    emit_end   = 1'b0;
    step_skip  = 1'b0;
    if (rd_active && !rd_sweep_end) begin
      if (in_range)
        issue_read = !want_write && (fcnt + outst < CW'(FIFO_DEPTH));
      else if (cfg.oob_zero)
        emit_fill  = (outst == '0) && (fcnt < CW'(FIFO_DEPTH)) && !v_rvalid;
      else
        step_skip  = 1'b1;
    end
    if (rd_active && rd_sweep_end)
      emit_end = (outst == '0) && (fcnt < CW'(FIFO_DEPTH)) && !v_rvalid;

    v_req   = want_write || issue_read;
    v_we    = want_write;
    v_addr  = (want_write && cfg.dir == PM_RD) ? wseq : addr;
    v_wdata = i_data;

    i_ready = write_drop || (want_write && v_gnt);

    cnt_step  = (issue_read && v_gnt) || emit_fill || step_skip ||
                (cfg.dir == PM_WR && wr_active && i_valid && i_ready);
    cnt_clear = start;

    push      = v_rvalid || emit_fill || emit_end;
    push_data = v_rvalid ? lut_out : (emit_end ? END_MARK : 32'd0);
    pop       = o_valid && o_ready;
  end

  assign o_valid = (fcnt != '0);
  assign o_data  = fifo[rp];

  always_ff @(posedge clk) begin
    if (push) fifo[wp] <= push_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0; rp <= '0; fcnt <= '0; outst <= '0;
      rd_active <= 1'b0; rd_sweep_end <= 1'b0; wr_active <= 1'b0;
      wseq <= '0; rd_prog <= 1'b0;
    end else begin
      if (push) wp <= (wp == $clog2(FIFO_DEPTH)'(FIFO_DEPTH - 1)) ? '0 : wp + 1'b1;
      if (pop)  rp <= (rp == $clog2(FIFO_DEPTH)'(FIFO_DEPTH - 1)) ? '0 : rp + 1'b1;
      fcnt  <= fcnt + CW'(push) - CW'(pop);
      outst <= outst + CW'(issue_read && v_gnt) - CW'(v_rvalid);

      if (want_write && v_gnt && cfg.dir == PM_RD) wseq <= wseq + 1'b1;

      if (start) begin
        rd_active    <= cfg.en && cfg.dir == PM_RD;
        rd_sweep_end <= 1'b0;
        wr_active    <= cfg.en && cfg.dir == PM_WR;
        wseq         <= cfg.wbase;
        rd_prog      <= cfg.en && cfg.dir == PM_RD;
      end else begin
        if (cnt_step && cnt_last && rd_active) rd_sweep_end <= 1'b1;
        if (emit_end) begin
          rd_active    <= 1'b0;
          rd_sweep_end <= 1'b0;
        end
        if (cnt_step && cnt_last && wr_active) wr_active <= 1'b0;
      end
    end
  end

  assign idle = !rd_active && !wr_active && (fcnt == '0) && (outst == '0) && !i_valid;

  // a vault never returns more reads than were requested
  property p_no_spurious_return;
    @(posedge clk) disable iff (!rst_n) v_rvalid |-> (outst != '0);
  endproperty
  assert property (p_no_spurious_return);

endmodule
