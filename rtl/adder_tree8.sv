// adder_tree8: the "8-in adder tree" of the paper's adder-tree figure, a
// combinational three-level tree summing eight signed products into an
// accumulator-width result. Used by adder_tree.
module adder_tree8
  import accel_pkg::*;
(
  input  prod_t a [8],
  output acc_t  sum
);
  acc_t l1 [4];
  acc_t l2 [2];
  always_comb begin
    for (int i = 0; i < 4; i++) l1[i] = acc_t'(a[2*i]) + acc_t'(a[2*i+1]);
    for (int i = 0; i < 2; i++) l2[i] = l1[2*i] + l1[2*i+1];
    sum = l2[0] + l2[1];
  end
endmodule
