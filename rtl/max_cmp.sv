// max_cmp: one 16-bit fixed-point max-pooling comparator.
//
// Computes y = max(x, y) on signed 16-bit values and keeps, next to the
// maximum, the ID of the element that supplied it (its position within
// the pooling window), which backpropagation through the pooling layer
// needs. The running value and its ID travel together in one 32-bit word,
// {id[15:0], max[15:0]}, which is also the word stored in the PE's output
// buffer. The candidate is the low 16 bits of x. `first` starts a new
// window: the candidate is taken whatever the stored word holds.
// Purely combinational; the PE registers the result in its output buffer.
// Ties keep the earlier element.
//
// From the paper: 16-bit fixed-point comparators in the PE, y = max(x,y),
// the maximum returned with its ID. Own choice: packing of value and ID.
module max_cmp (
  input  logic        first,
  input  logic [31:0] x,       // candidate in x[15:0]
  input  logic [15:0] x_id,    // its position in the window
  input  logic [31:0] y,       // {id, max} so far
  output logic [31:0] out
);

  always_comb begin
    if (first || (signed'(x[15:0]) > signed'(y[15:0]))) out = {x_id, x[15:0]};
    else                                                out = y;
  end

endmodule
