// fail_bit_counter: in-die digital bit counter used as the distance unit.
//
// After the XOR step the data latch holds query ^ embedding, so the number
// of ones in a slot is the Hamming distance between the binary query and the
// binary database embedding.  NAND dies already carry such a counter to
// verify program/erase pulses; the design reuses it to produce DIST.
// Counting one embedding-wide slot in a cycle and registering the result
// (one cycle of latency, start -> done) is this implementation's choice;
// the underlying die counter's speed is not specified.
// `count` is DIST_W (16) bits wide, the width of a distance throughout the
// design; a 1024-bit slot needs only 11, so synthesis finds the top five
// bits constant zero.  That is expected and left as is.
module fail_bit_counter
  import reis_pkg::*;
#(
  parameter int W = EMB_BITS
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,     // count `bits` this cycle
  input  logic [W-1:0]  bits,
  output logic          done,      // one cycle after start
  output dist_t         count
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      done  <= 1'b0;
      count <= '0;
    end else begin
      done <= start;
      if (start) count <= dist_t'($countones(bits));
    end
  end
endmodule
