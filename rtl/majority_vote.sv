// majority_vote: combines the fault decisions of the active base learners.
//
// Base learners 0..n_bl-1 are active; the ensemble reports a fault when more than half
// of them report one (2*count > n_bl). n_bl is kept odd by the controller, so there
// are no ties. Purely combinational. Majority voting over the base learners follows
// the paper; counting only the first n_bl learners is this design's choice of which
// learners are active.
module majority_vote #(
  parameter int unsigned NBL_MAX = adepos_pkg::NBL_MAX,
  parameter int unsigned NW      = adepos_pkg::NBL_W
) (
  input  logic [NBL_MAX-1:0] bl_fault,
  input  logic [NW-1:0]      n_bl,
  output logic [NW-1:0]      n_fault,
  output logic               vote_fault
);
  always_comb begin
    n_fault = '0;
    for (int unsigned k = 0; k < NBL_MAX; k++)
      if (k < 32'(n_bl) && bl_fault[k]) n_fault = n_fault + NW'(1);
    vote_fault = ({1'b0, n_fault} << 1) > {1'b0, n_bl};
  end
endmodule
