// hamming_distance: distance between two binary blocks.
//
// One XOR per pixel pair compares the reference block (slice t-d) with a
// candidate block (slice t-2d); the XOR outputs are summed by an adder tree
// into the number of differing pixels.  For bitmaps this equals the sum of
// absolute differences.  This is the published circuit: N = 81 XOR gates for a
// 9x9 block followed by one adder.  The core instantiates 9 of them, one per
// flow direction.
//
// Interface: a, b are the two blocks flattened row by row (bit r*dim+c);
// hd is their Hamming distance.  Purely combinational.
module hamming_distance #(
  parameter int N    = 81,
  parameter int HD_W = $clog2(N + 1)
) (
  input  logic [N-1:0]    a,
  input  logic [N-1:0]    b,
  output logic [HD_W-1:0] hd
);

  logic [N-1:0] diff;

  assign diff = a ^ b;

  always_comb begin
    hd = '0;
    for (int i = 0; i < N; i++) begin
      hd = hd + HD_W'(diff[i]);
    end
  end

endmodule
