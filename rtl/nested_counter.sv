// nested_counter: programmable nested loop counters.
//
// LEVELS counters of CNT_W bits each, level 0 the outermost loop (r1 of the
// PMAG) and level LEVELS-1 the innermost. Every cycle with `step` high the
// innermost counter advances; a counter that reaches its last value
// (count-1) returns to 0 and carries into the next outer level, as nested
// for-loops do. `last` is high while every level sits on its last value,
// i.e. on the final step of the whole sweep; the step taken then returns
// all counters to 0 and pulses nothing else. `clear` returns all to 0.
//
// The PMAG uses seven levels (r1..r7 of 16 bits, minimum value 0 as the
// programming tables state), the PE's buffer address generators use two
// (CNT2) and one (CNT1). A count of 0 is treated as 1, so unused levels
// can be left at 0 or 1. Timing: values are registered; `last` is
// combinational from them.
module nested_counter #(
  parameter int unsigned LEVELS = 7,
  parameter int unsigned CNT_W  = 16
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          clear,
  input  logic                          step,
  input  logic [LEVELS-1:0][CNT_W-1:0]  count,  // trip count of each level
  output logic [LEVELS-1:0][CNT_W-1:0]  value,
  output logic                          last
);

  logic [LEVELS-1:0] at_end;   // level sits on its last value
  logic [LEVELS-1:0] carry_in; // every inner level sits on its last value

  always_comb begin
    for (int l = 0; l < LEVELS; l++) begin
      if (count[l] <= CNT_W'(1)) at_end[l] = 1'b1;
      else                       at_end[l] = (value[l] == count[l] - CNT_W'(1));
    end
    last = &at_end;
    for (int l = 0; l < LEVELS; l++) begin
      carry_in[l] = 1'b1;
      for (int j = l + 1; j < LEVELS; j++) carry_in[l] &= at_end[j];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      value <= '0;
    end else if (clear) begin
      value <= '0;
    end else if (step) begin
      // level l advances when every inner level is at its end
      for (int l = 0; l < LEVELS; l++)
        if (carry_in[l]) value[l] <= at_end[l] ? '0 : value[l] + CNT_W'(1);
    end
  end

endmodule
