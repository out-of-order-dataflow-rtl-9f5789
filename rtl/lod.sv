// lod: leading-ones detector.
//
// Purely combinational. Finds the most significant set bit of `vec` and
// reports its distance from the MSB: `pos` = 0 when bit W-1 is set, W-1 when
// only bit 0 is set. `found` is low, and `pos` is 0, when `vec` is all zero.
// Counting from the MSB lets the scheduler map item k of a flag vector to bit
// W-1-k, so the leading one is always the lowest-numbered item.
// The scheduler uses one instance of 128 bits (the outer level) and one of
// 32 bits (the inner level), as the paper describes; the scan is written as a
// priority loop and left to synthesis to build as a tree.
module lod #(
  parameter int unsigned W = 32
) (
  input  logic [W-1:0]         vec,
  output logic                 found,
  output logic [$clog2(W)-1:0] pos
);

  always_comb begin
    found = 1'b0;
    pos   = '0;
    for (int i = 0; i < W; i++) begin
      if (!found && vec[W-1-i]) begin
        found = 1'b1;
        pos   = i[$clog2(W)-1:0];
      end
    end
  end

endmodule
