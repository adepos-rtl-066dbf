// mac16: 16x16 multiply / multiply-accumulate unit with a 32-bit result register.
//
// Performs signed and unsigned 16x16 multiplication and accumulation, the operation set
// of the MSP430-style hardware multiplier the processor uses for the neural-network
// arithmetic. An operation is issued by raising `en` with `op`, `a` and `b`; the result
// is in `acc` on the next clock edge (one-cycle latency, one operation per cycle).
//   OP_MPY / OP_MPYS : acc = a*b          (unsigned / signed operands)
//   OP_MAC / OP_MACS : acc = acc + a*b    (unsigned / signed operands)
// `load` (priority over `en`) writes `load_val` into the accumulator, the way software
// presets the result registers before a run of MACs. The accumulator wraps modulo
// 2**ACC_W. The 16x16 size and the signed/unsigned support follow the paper; the
// one-cycle timing, the load port and the wrap-around are this design's choices.
module mac16 #(
  parameter int unsigned W     = adepos_pkg::WORD_W,
  parameter int unsigned ACC_W = adepos_pkg::ACC_W
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             en,
  input  adepos_pkg::mac_op_e op,
  input  logic [W-1:0]     a,
  input  logic [W-1:0]     b,
  input  logic             load,
  input  logic [ACC_W-1:0] load_val,
  output logic [ACC_W-1:0] acc
);

  logic signed [2*W:0] prod;      // one guard bit so that both signednesses fit
  logic [ACC_W-1:0]    prod_ext;
  logic                is_signed;

  always_comb begin
    is_signed = (op == adepos_pkg::OP_MPYS) || (op == adepos_pkg::OP_MACS);
    if (is_signed)
      prod = $signed({a[W-1], a}) * $signed({b[W-1], b});
    else
      prod = $signed({1'b0, a}) * $signed({1'b0, b});
    prod_ext = ACC_W'(prod);      // sign extension / truncation to the accumulator
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)
      acc <= '0;
    else if (load)
      acc <= load_val;
    else if (en) begin
      if (op == adepos_pkg::OP_MAC || op == adepos_pkg::OP_MACS) acc <= acc + prod_ext;
      else                               acc <= prod_ext;
    end
  end

endmodule
