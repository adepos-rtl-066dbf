// data_mem: data memory holding the feature vector of the sample being classified.
//
// D words of X_W bits (five 6-bit time-domain features by default). The host writes one
// feature per write cycle; all features are read in parallel by the base learner, which
// picks the one it multiplies by its index. Writes take effect at the clock edge where
// `we` is high; the contents reset to zero. The feature count and width follow the paper;
// the register-file organisation is this design's choice.
module data_mem #(
  parameter int unsigned D   = adepos_pkg::D,
  parameter int unsigned X_W = adepos_pkg::X_W,
  parameter int unsigned IW  = (D > 1) ? $clog2(D) : 1
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  we,
  input  logic [IW-1:0]         waddr,
  input  logic [X_W-1:0]        wdata,
  output logic [D-1:0][X_W-1:0] x
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) x <= '0;
    else if (we && 32'(waddr) < D) x[waddr] <= wdata;
  end
endmodule
