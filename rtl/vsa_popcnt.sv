// vsa_popcnt: partial similarity of two binary folds.
//
// XORs the query fold with a candidate fold and counts the difference
// vector: sim = (#zeros) - (#ones) = W - 2*hamming. With the usual mapping
// of bit 0 to +1 and bit 1 to -1 this is the bipolar dot product of the two
// folds, so a larger value means more similar vectors. Purely combinational.
//
// The XOR-then-count structure follows the published design. The published
// text describes the count as "#1's minus #0's" of the difference vector,
// while its nearest-neighbour kernel takes the argmax of a dot product; the
// sign here follows the dot product, so that ARGMAX finds the nearest item.
module vsa_popcnt #(
  parameter int unsigned W  = vsa_pkg::W_DEF,
  localparam int unsigned SW = $clog2(W) + 2
) (
  input  logic [W-1:0]        a,
  input  logic [W-1:0]        b,
  output logic signed [SW-1:0] sim
);
  logic [W-1:0]    diff;
  logic [SW-1:0]   ones;

  always_comb begin
    diff = a ^ b;
    ones = '0;
    for (int i = 0; i < W; i++) ones += SW'(diff[i]);
    sim = $signed(SW'(W)) - $signed(ones << 1);
  end
endmodule
