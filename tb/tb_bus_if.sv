// tb_bus_if: checks the broadcast / merge bus with four PEs.
//  1. latency: with every PE ready, a broadcast word taken at one clock edge
//     is offered to the PEs exactly 4 cycles later;
//  2. broadcast stall: while one PE is not ready nothing is delivered, and
//     a stream of words arrives complete and in order once it is;
//  3. merge: PEs 2, 0 and 3 request together; they are acknowledged one at
//     a time, lowest index first, and the common vault receives each PE's
//     words as one block in that order, also while mg_ready stalls;
//  4. priority: a REQ raised while a broadcast is offered is not
//     acknowledged until the broadcast stops.
module tb_bus_if;
  localparam int N = 4;
  logic clk = 0, rst_n = 0;
  logic bc_valid = 0, bc_ready, pe_bc_valid, mg_valid, mg_ready = 1;
  logic [31:0] bc_data = 0, pe_bc_data, mg_data;
  logic [N-1:0] pe_bc_ready = '1, pe_req = '0, pe_ack, pe_send_valid = '0, pe_send_ready;
  logic [N-1:0][31:0] pe_send_data = '0;
  logic bcast_active, merge_active, idle;
  int checks = 0, failures = 0;
  int cyc = 0;

  bus_if #(.N_PE(N), .STAGES(4)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s (cycle %0d)", what, cyc); end
  endtask

  // broadcast receiver scoreboard
  logic [31:0] bq[$];
  // transfers are sampled just before the clock edge that makes them
  always @(negedge clk) begin #3; if (pe_bc_valid && rst_n) bq.push_back(pe_bc_data); end
  // merge receiver
  logic [31:0] mq[$];
  always @(negedge clk) begin #3; if (mg_valid && mg_ready) mq.push_back(mg_data); end

  // stream source for part 2: bc_total words 0x1000.., one per accepted cycle
  int bc_total = 0, bc_sent = 0;
  always @(negedge clk) begin
    if (bc_total != 0) begin
      bc_valid = (bc_sent < bc_total);
      bc_data  = 32'h1000 + bc_sent;
      #3;
      if (bc_valid && bc_ready) bc_sent++;
    end
  end

  // PE senders: each sends its queue while acknowledged, then drops REQ
  logic [31:0] sq [N][$];
  int ack_order[$];
  logic [N-1:0] ack_q;
  always @(posedge clk) begin
    ack_q <= pe_ack;
    for (int i = 0; i < N; i++) if (pe_ack[i] && !ack_q[i]) ack_order.push_back(i);
  end
  always @(negedge clk) begin
    for (int i = 0; i < N; i++) begin
      pe_req[i]        = (sq[i].size() != 0);
      pe_send_valid[i] = pe_ack[i] && (sq[i].size() != 0);
      pe_send_data[i]  = (sq[i].size() != 0) ? sq[i][0] : 32'd0;
    end
  end
  always @(negedge clk) begin
    #3;
    for (int i = 0; i < N; i++)
      if (pe_send_valid[i] && pe_send_ready[i]) void'(sq[i].pop_front());
  end

  initial begin
    int t0;
    repeat (2) @(negedge clk); rst_n = 1; @(negedge clk);

    // 1. latency
    bc_valid = 1; bc_data = 32'hA5A5_0001;
    @(posedge clk); t0 = cyc; #1; bc_valid = 0;
    wait (pe_bc_valid); #1;
    check(cyc - t0 == 4, $sformatf("broadcast latency %0d, want 4", cyc - t0));
    @(negedge clk);

    // 2. broadcast stream with a PE not ready
    @(negedge clk);
    bq.delete();
    pe_bc_ready = 4'b1011;
    bc_total = 10;
    repeat (12) @(negedge clk);
    check(bq.size() == 0, "nothing delivered while a PE is not ready");
    pe_bc_ready = '1;
    repeat (30) @(negedge clk);
    bc_total = 0;
    repeat (10) @(negedge clk);
    check(bq.size() == 10, $sformatf("all broadcast words delivered (%0d)", bq.size()));
    for (int w = 0; w < 10 && w < bq.size(); w++) check(bq[w] == 32'h1000 + w, $sformatf("broadcast order %0d: %h", w, bq[w]));

    // 3. merge, three PEs, with sink stalls
    for (int w = 0; w < 5; w++) begin
      sq[2].push_back(32'h2000 + w); sq[0].push_back(32'h0000 + w); sq[3].push_back(32'h3000 + w);
    end
    fork
      begin
        repeat (60) begin @(negedge clk); mg_ready = ($urandom_range(0, 3) != 0); end
        mg_ready = 1;
      end
    join_none
    repeat (120) @(negedge clk);
    check(mq.size() == 15, $sformatf("all merge words delivered (%0d)", mq.size()));
    check(ack_order.size() == 3 && ack_order[0] == 0 && ack_order[1] == 2 && ack_order[2] == 3,
          "ACK order by priority");
    for (int w = 0; w < 15 && w < mq.size(); w++) begin
      int pe;
      pe = (w < 5) ? 0 : (w < 10) ? 2 : 3;
      check(mq[w] == 32'h1000 * pe + (w % 5), $sformatf("merge word %0d: %h", w, mq[w]));
    end

    // 4. REQ ignored while broadcasting
    ack_order.delete();
    bc_valid = 1; bc_data = 32'h7777;
    sq[1].push_back(32'h1111);
    repeat (6) begin
      @(negedge clk);
      check(pe_ack == '0, "no ACK during broadcast");
    end
    bc_valid = 0;
    repeat (20) @(negedge clk);
    check(ack_order.size() == 1 && ack_order[0] == 1, "ACK after broadcast");

    // 5. a blocked broadcast does not hold the bus: merge passes it
    ack_order.delete(); mq.delete(); bq.delete();
    pe_bc_ready = 4'b0111;
    bc_valid = 1; bc_data = 32'h5555;
    repeat (8) @(negedge clk);
    sq[2].push_back(32'h2222); sq[2].push_back(32'h2223);
    repeat (20) @(negedge clk);
    check(ack_order.size() == 1 && ack_order[0] == 2, "ACK while the broadcast is blocked");
    check(mq.size() == 2 && mq[0] == 32'h2222, "merge words pass a blocked broadcast");
    check(bq.size() == 0, "blocked broadcast delivers nothing");
    bc_valid = 0; pe_bc_ready = '1;
    repeat (20) @(negedge clk);
    check(bq.size() >= 1 && bq[0] == 32'h5555, "blocked broadcast delivered after all PEs are ready");
    check(idle, "bus idle at the end");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
