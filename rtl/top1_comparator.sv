// top1_comparator: one node of the top-1 comparator tree. It takes two
// (rank, index) pairs and passes on the larger rank; on equal ranks the pair
// with the smaller index wins, so the tree always returns the lowest index
// among equal maxima. Combinational.
module top1_comparator (
  input  logic [3:0] val_a_i,
  input  logic [2:0] idx_a_i,
  input  logic [3:0] val_b_i,
  input  logic [2:0] idx_b_i,
  output logic [3:0] val_o,
  output logic [2:0] idx_o
);
  logic pick_a;
  always_comb begin
    pick_a = (val_a_i > val_b_i) || ((val_a_i == val_b_i) && (idx_a_i < idx_b_i));
    val_o  = pick_a ? val_a_i : val_b_i;
    idx_o  = pick_a ? idx_a_i : idx_b_i;
  end
endmodule
