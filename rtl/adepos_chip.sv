// adepos_chip: digital part of the ADEPOS anomaly-detection chip.
//
// The chip classifies each new sensor sample (a vector of D features) with an ensemble
// of up to NBL_MAX boundary-mode ELM base learners and saves energy by running only as
// many learners as the sample needs: one while the machine is clearly healthy, two more
// each time the vote says "fault", up to NBL_MAX before a fault is declared.
//
// Blocks and wiring:
//   uart_host_if : external-controller link; loads prog_mem and data_mem, starts an
//                  inference, returns the one-byte result (declare, vote, N_BL).
//   prog_mem     : trained parameters of all base learners (see adepos_pkg for layout).
//   data_mem     : the current sample's features.
//   adepos_ctrl  : ADEPOS decision loop with majority vote; launches base learners.
//   elm_bl       : evaluates one base learner from prog_mem and data_mem (two mac16);
//                  elm_bl_ng takes its place when NG = 1.
//   spi_vref     : SPI register with the buck converter's output-voltage code.
// The buck converter itself (voltage reference, Vout comparator, adaptive on-time
// circuit, zero-current detector, gate driver, power switches) is analog; its digital
// control input is brought out as `vref_code` / `vref_mv`. On the fabricated chip the
// ensemble and the ADEPOS loop run as software on an MSP430-class processor with a
// 16x16 MAC; here the same computation is written as a dedicated datapath.
//
// Timing: one base learner takes bl_words(L,D) + 2 cycles (144 words + 2 = 146 cycles
// at the defaults) plus 3 cycles of controller handshake; each vote adds 2 cycles and
// each sample 1. `busy` is high for N_run*(bl_words+5) + 2*votes + 1 cycles per sample
// (150 cycles for a healthy sample with one learner), after which the result byte is
// sent on the UART.
//
// NG = 1 selects the neuron-generation engine elm_bl_ng instead of elm_bl (an option the
// original work describes for large networks; off by default). prog_mem then holds a
// shared block of L_PHY physical neurons at address 0 followed by the learners, each
// ng_bl_words(L) = 44 words long (516 words in all instead of 1296). The physical neurons
// are recomputed with the first learner of every sample (learner 0), which adds
// ng_phys_words + 1 = 121 cycles to that sample's busy time.
module adepos_chip #(
  parameter int unsigned L            = adepos_pkg::L,
  parameter int unsigned D            = adepos_pkg::D,
  parameter int unsigned NBL_MAX      = adepos_pkg::NBL_MAX,
  parameter int unsigned X_W          = adepos_pkg::X_W,
  parameter int unsigned H_SHIFT      = 6,
  parameter int unsigned CLKS_PER_BIT = 135,
  parameter bit          NG           = 1'b0
) (
  input  logic               clk,
  input  logic               rst_n,
  // UART to the external controller
  input  logic               uart_rxd,
  output logic               uart_txd,
  // SPI from the external controller to the buck converter's reference
  input  logic               spi_sclk,
  input  logic               spi_cs_n,
  input  logic               spi_mosi,
  output logic [3:0]         vref_code,
  output logic [10:0]        vref_mv,
  // status
  output logic               busy,
  output logic [adepos_pkg::NBL_W-1:0] n_bl,
  output logic               declare_fault,
  output logic [NBL_MAX-1:0] bl_fault,
  output logic [adepos_pkg::NBL_W-1:0] bl_evals   // learners run for the last sample
);
  localparam int unsigned LPHY  = adepos_pkg::ng_phys(NBL_MAX, L);
  localparam int unsigned PHW   = NG ? adepos_pkg::ng_phys_words(LPHY, D) : 0;
  localparam int unsigned BLW   = NG ? adepos_pkg::ng_bl_words(L) : adepos_pkg::bl_words(L, D);
  localparam int unsigned DEPTH = PHW + NBL_MAX * BLW;
  localparam int unsigned PAW   = $clog2(DEPTH);
  localparam int unsigned IW    = (D > 1) ? $clog2(D) : 1;
  localparam int unsigned WW    = adepos_pkg::WORD_W;

  // host link
  logic                   pm_we, dm_we, host_start, result_valid;
  logic [PAW-1:0]         pm_waddr;
  logic [WW-1:0]          pm_wdata;
  logic [IW-1:0]          dm_waddr;
  logic [X_W-1:0]         dm_wdata;
  adepos_pkg::result_t    result;

  // memories
  logic                   pm_re;
  logic [PAW-1:0]         pm_raddr;
  logic [WW-1:0]          pm_rdata;
  logic [D-1:0][X_W-1:0]  x;

  // controller <-> base learner
  logic                   bl_start, bl_done, bl_fault_in, bl_busy;
  logic [PAW-1:0]         bl_base;
  logic [adepos_pkg::ACC_W-1:0] bl_err;
  logic signed [adepos_pkg::ACC_W-1:0] bl_r;
  logic                   vote_fault;
  logic                   ev_grow, ev_shrink, ev_declare;

  uart_host_if #(.CLKS_PER_BIT(CLKS_PER_BIT), .PAW(PAW), .D(D), .X_W(X_W), .IW(IW)) u_host (
    .clk, .rst_n, .rxd(uart_rxd), .txd(uart_txd),
    .pm_we, .pm_waddr, .pm_wdata, .dm_we, .dm_waddr, .dm_wdata,
    .start(host_start), .result_valid, .result
  );

  prog_mem #(.W(WW), .DEPTH(DEPTH), .AW(PAW)) u_prog_mem (
    .clk, .we(pm_we), .waddr(pm_waddr), .wdata(pm_wdata),
    .re(pm_re), .raddr(pm_raddr), .rdata(pm_rdata)
  );

  data_mem #(.D(D), .X_W(X_W), .IW(IW)) u_data_mem (
    .clk, .rst_n, .we(dm_we), .waddr(dm_waddr), .wdata(dm_wdata), .x
  );

  adepos_ctrl #(.NBL_MAX(NBL_MAX), .NBL_INIT(1), .BL_WORDS(BLW), .AW(PAW)) u_ctrl (
    .clk, .rst_n, .start(host_start), .busy, .done(result_valid),
    .bl_start, .bl_base, .bl_done, .bl_fault_in,
    .n_bl, .vote_fault, .declare_fault, .bl_fault, .bl_evals,
    .ev_grow, .ev_shrink, .ev_declare
  );

  if (NG) begin : g_ng
    elm_bl_ng #(.L(L), .D(D), .X_W(X_W), .L_PHY(LPHY), .H_SHIFT(H_SHIFT), .AW(PAW)) u_bl (
      .clk, .rst_n, .start(bl_start), .refresh(bl_base == '0),
      .phys_base('0), .base_addr(bl_base + PAW'(PHW)), .x,
      .mem_addr(pm_raddr), .mem_rd(pm_re), .mem_rdata(pm_rdata),
      .busy(bl_busy), .done(bl_done), .fault(bl_fault_in), .err(bl_err), .r_out(bl_r)
    );
  end else begin : g_direct
    elm_bl #(.L(L), .D(D), .X_W(X_W), .H_SHIFT(H_SHIFT), .AW(PAW)) u_bl (
      .clk, .rst_n, .start(bl_start), .base_addr(bl_base), .x,
      .mem_addr(pm_raddr), .mem_rd(pm_re), .mem_rdata(pm_rdata),
      .busy(bl_busy), .done(bl_done), .fault(bl_fault_in), .err(bl_err), .r_out(bl_r)
    );
  end

  always_comb begin
    result               = '0;
    result.declare_fault = declare_fault;
    result.vote_fault    = vote_fault;
    result.n_bl          = n_bl;
  end

  spi_vref u_spi_vref (
    .rst_n, .sclk(spi_sclk), .cs_n(spi_cs_n), .mosi(spi_mosi), .vref_code, .vref_mv
  );

endmodule
