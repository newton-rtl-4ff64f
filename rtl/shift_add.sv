// shift_add: shift-and-add node of the IMA output HTree.
//
// Each node joins the readings of two neighbouring subtrees that hold
// adjacent groups of weight slices: out = lo + (hi << SHIFT). With 9-bit
// leaves and 2-bit cells the leaf nodes shift by 2, the next level by 4 and
// the root by 8, so the root delivers the full 16-bit-weight column dot
// product for one input bit. The overflow flags from the adaptive ADCs ride
// along the same tree and are ORed. The node arithmetic follows the paper;
// the node is combinational here (the tree's pipelining is not specified).
// OUT_W is exact: max(LO_W, HI_W + SHIFT) + 1.
module shift_add #(
  parameter int unsigned LO_W  = 9,
  parameter int unsigned HI_W  = 9,
  parameter int unsigned SHIFT = 2,
  parameter int unsigned OUT_W = ((LO_W > HI_W + SHIFT) ? LO_W : HI_W + SHIFT) + 1
) (
  input  logic [LO_W-1:0]  lo,
  input  logic [HI_W-1:0]  hi,
  input  logic             lo_ovf,
  input  logic             hi_ovf,
  output logic [OUT_W-1:0] sum,
  output logic             ovf
);
  always_comb begin
    sum = OUT_W'(lo) + (OUT_W'(hi) << SHIFT);
    ovf = lo_ovf | hi_ovf;
  end
endmodule
