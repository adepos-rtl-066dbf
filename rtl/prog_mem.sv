// prog_mem: program (parameter) memory holding the trained network of every base learner.
//
// A single-clock RAM of DEPTH words of W bits with one write port and one read port.
// It stores, for each base learner, the random first-layer weights and biases, the
// trained output weights, the output target and the fault threshold (layout in
// adepos_pkg). The default depth holds all NBL_MAX base learners. The memory is loaded
// word by word over the UART host link before inference.
// Timing: a write is performed at the clock edge where `we` is high; a read returns
// `rdata` one clock after `re` and `raddr` are presented (synchronous read). The size
// follows the ensemble the design is built for; the port structure is this design's
// choice (the memory of the real processor also holds its program code).
module prog_mem #(
  parameter int unsigned W     = adepos_pkg::WORD_W,
  parameter int unsigned DEPTH = adepos_pkg::NBL_MAX * adepos_pkg::bl_words(adepos_pkg::L, adepos_pkg::D),
  parameter int unsigned AW    = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [W-1:0]  wdata,
  input  logic          re,
  input  logic [AW-1:0] raddr,
  output logic [W-1:0]  rdata
);
  logic [W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we && waddr < AW'(DEPTH)) mem[waddr] <= wdata;
  end

  always_ff @(posedge clk) begin
    if (re) rdata <= (raddr < AW'(DEPTH)) ? mem[raddr] : '0;
  end
endmodule
