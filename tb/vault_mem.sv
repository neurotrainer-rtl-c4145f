// vault_mem: behavioural model of one memory vault and its controller, for
// simulation only (not synthesizable: it draws random stalls).
// A request (req) is taken in a cycle where gnt is high; gnt is low in
// about STALL_PCT percent of the cycles. A read returns its word LAT cycles
// after it was taken, in order (rvalid / rdata). A write updates `mem`
// at the clock edge that takes it. Testbenches load and inspect `mem`
// directly.
module vault_mem #(
  parameter int unsigned WORDS     = 65536,
  parameter int unsigned LAT       = 3,
  parameter int unsigned STALL_PCT = 0
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        req,
  input  logic        we,
  input  logic [31:0] addr,
  input  logic [31:0] wdata,
  output logic        gnt,
  output logic        rvalid,
  output logic [31:0] rdata
);
  logic [31:0] mem [WORDS];
  logic        pv [LAT];
  logic [31:0] pd [LAT];
  int          reads = 0, writes = 0;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      gnt <= 1'b0;
      for (int i = 0; i < LAT; i++) begin pv[i] <= 1'b0; pd[i] <= '0; end
    end else begin
      gnt <= ($urandom_range(0, 99) >= STALL_PCT);
      pv[0] <= req && gnt && !we;
      pd[0] <= mem[addr % WORDS];
      for (int i = 1; i < LAT; i++) begin pv[i] <= pv[i-1]; pd[i] <= pd[i-1]; end
      if (req && gnt && we) mem[addr % WORDS] <= wdata;
      if (req && gnt) begin
        if (we) writes <= writes + 1;
        else    reads  <= reads + 1;
      end
    end
  end

  assign rvalid = pv[LAT-1];
  assign rdata  = pd[LAT-1];
endmodule
