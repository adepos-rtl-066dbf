// elm_bl: one boundary-mode extreme-learning-machine base learner (ELM-B), evaluated
// serially from parameter memory.
//
// Function (boundary one-class classifier):
//   h_j = | sum_i W_ji * x_i + b_j |          j = 0..L-1   (absolute-value activation)
//   R   = sum_j beta_j * h_j
//   err = | R_target - R |,   fault = (err > lambda)
// The absolute-value activation, the single output R trained towards a target value and
// the fault rule "error above threshold lambda" follow the paper. Fixed-point scaling is
// this design's choice: x is a D-element vector of X_W-bit unsigned integers, parameters
// are signed 16-bit words, the hidden pre-activation is accumulated in 32 bits and
// h_j = min(|acc| >> H_SHIFT, 2**15-1) is fed to the 16x16 output multiplier.
//
// How it works: after `start`, the learner streams the BL_WORDS words of its block of
// parameter memory (layout in adepos_pkg, starting at `base_addr`) one address per clock.
// Memory data arrives one cycle after the address. A tag pipeline that follows the
// address tells each arriving word what it is: header (target, lambda), bias (preloads
// the hidden-layer MAC), weight (MACS with feature x_i), or output weight (MACS of
// beta_j * h_j into the output-layer MAC). Two mac16 units are used so that neuron j's
// output product and neuron j+1's bias load happen without a stall.
//
// Timing: `start` is sampled on a clock edge; `done` pulses for one cycle
// BL_WORDS + 2 cycles later, with `fault`, `err` and `r_out` valid from then until the
// next start. `busy` is high in between. Starting while busy is ignored.
module elm_bl #(
  parameter int unsigned L       = adepos_pkg::L,
  parameter int unsigned D       = adepos_pkg::D,
  parameter int unsigned X_W     = adepos_pkg::X_W,
  parameter int unsigned H_SHIFT = 6,
  parameter int unsigned AW      = 11
) (
  input  logic                               clk,
  input  logic                               rst_n,
  input  logic                               start,
  input  logic [AW-1:0]                      base_addr,
  input  logic [D-1:0][X_W-1:0]              x,
  output logic [AW-1:0]                      mem_addr,
  output logic                               mem_rd,
  input  logic [adepos_pkg::WORD_W-1:0]      mem_rdata,
  output logic                               busy,
  output logic                               done,
  output logic                               fault,
  output logic [adepos_pkg::ACC_W-1:0]       err,
  output logic signed [adepos_pkg::ACC_W-1:0] r_out
);
  localparam int unsigned WW       = adepos_pkg::WORD_W;
  localparam int unsigned AccW     = adepos_pkg::ACC_W;
  localparam int unsigned BL_WORDS = adepos_pkg::bl_words(L, D);
  localparam int unsigned PW       = $clog2(D + 2);

  typedef enum logic [1:0] {S_IDLE, S_RUN, S_DRAIN, S_FIN} state_e;
  typedef enum logic [1:0] {T_HDR, T_BIAS, T_W, T_BETA} tag_kind_e;
  typedef struct packed {
    logic          valid;
    tag_kind_e     kind;
    logic [1:0]    hdr;   // header word index
    logic [PW-1:0] feat;  // feature index for T_W
  } tag_t;

  state_e        state;
  logic [AW-1:0] offs;          // word offset of the word being addressed
  logic [1:0]    hdr_cnt;
  logic [PW-1:0] p_cnt;         // position inside a neuron's D+2 words
  logic          iss_last;      // the address presented is the block's last word
  tag_t          tag_iss, tag_d;

  logic [AccW-1:0] target_q, lambda_q;
  logic [AccW-1:0] acc_h, acc_o;
  logic [AccW:0]   abs_h;
  logic [AccW:0]   h_shifted;
  logic [WW-1:0]   h16;

  // issue-side tag for the address presented this cycle
  always_comb begin
    tag_iss       = '0;
    tag_iss.valid = (state == S_RUN);
    tag_iss.hdr   = hdr_cnt;
    tag_iss.feat  = '0;
    if (offs < AW'(adepos_pkg::BL_HDR)) tag_iss.kind = T_HDR;
    else if (p_cnt == '0)               tag_iss.kind = T_BIAS;
    else if (p_cnt == PW'(D + 1))       tag_iss.kind = T_BETA;
    else begin
      tag_iss.kind = T_W;
      tag_iss.feat = p_cnt - PW'(1);
    end
    iss_last      = (offs == AW'(BL_WORDS - 1));
  end

  assign mem_addr = base_addr + offs;
  assign mem_rd   = (state == S_RUN);
  assign busy     = (state != S_IDLE);

  // hidden activation |acc| scaled and saturated to a positive 16-bit value
  always_comb begin
    abs_h     = acc_h[AccW-1] ? ((AccW+1)'(0) - {acc_h[AccW-1], acc_h}) : {1'b0, acc_h};
    h_shifted = abs_h >> H_SHIFT;
    h16       = (h_shifted > (AccW+1)'(2**(WW-1) - 1)) ? WW'(2**(WW-1) - 1) : h_shifted[WW-1:0];
  end

  // hidden-layer MAC: bias preload, then W*x
  logic            h_en, h_load;
  logic [WW-1:0]   h_b;
  always_comb begin
    h_load = tag_d.valid && tag_d.kind == T_BIAS;
    h_en   = tag_d.valid && tag_d.kind == T_W;
    h_b    = WW'(x[tag_d.feat]);
  end

  mac16 #(.W(WW), .ACC_W(AccW)) u_mac_hidden (
    .clk, .rst_n,
    .en(h_en), .op(adepos_pkg::OP_MACS), .a(mem_rdata), .b(h_b),
    .load(h_load), .load_val(AccW'($signed(mem_rdata))),
    .acc(acc_h)
  );

  // output-layer MAC: cleared at start, accumulates beta*h
  logic o_en, o_load;
  assign o_load = (state == S_IDLE) && start;
  assign o_en   = tag_d.valid && tag_d.kind == T_BETA;

  mac16 #(.W(WW), .ACC_W(AccW)) u_mac_out (
    .clk, .rst_n,
    .en(o_en), .op(adepos_pkg::OP_MACS), .a(mem_rdata), .b(h16),
    .load(o_load), .load_val('0),
    .acc(acc_o)
  );

  // difference to the target, |.|, compared with lambda
  logic signed [AccW:0] diff;
  logic        [AccW:0] abs_diff;
  always_comb begin
    diff     = $signed({target_q[AccW-1], target_q}) - $signed({acc_o[AccW-1], acc_o});
    abs_diff = diff[AccW] ? (AccW+1)'(-diff) : (AccW+1)'(diff);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      offs     <= '0;
      hdr_cnt  <= '0;
      p_cnt    <= '0;
      tag_d    <= '0;
      target_q <= '0;
      lambda_q <= '0;
      done     <= 1'b0;
      fault    <= 1'b0;
      err      <= '0;
      r_out    <= '0;
    end else begin
      done  <= 1'b0;
      tag_d <= tag_iss;
      // header capture
      if (tag_d.valid && tag_d.kind == T_HDR) begin
        case (tag_d.hdr)
          2'd0: target_q[WW-1:0]    <= mem_rdata;
          2'd1: target_q[AccW-1:WW] <= (AccW-WW)'(mem_rdata);
          2'd2: lambda_q[WW-1:0]    <= mem_rdata;
          default: lambda_q[AccW-1:WW] <= (AccW-WW)'(mem_rdata);
        endcase
      end
      unique case (state)
        S_IDLE: if (start) begin
          state   <= S_RUN;
          offs    <= '0;
          hdr_cnt <= '0;
          p_cnt   <= '0;
        end
        S_RUN: begin
          offs <= offs + AW'(1);
          if (offs < AW'(adepos_pkg::BL_HDR)) hdr_cnt <= hdr_cnt + 2'd1;
          else if (p_cnt == PW'(D + 1)) begin
            p_cnt <= '0;
          end else p_cnt <= p_cnt + PW'(1);
          if (iss_last) state <= S_DRAIN;
        end
        S_DRAIN: state <= S_FIN;   // last beta*h lands in acc_o at this edge
        S_FIN: begin
          state <= S_IDLE;
          done  <= 1'b1;
          r_out <= acc_o;
          err   <= abs_diff[AccW-1:0] | {AccW{abs_diff[AccW]}};   // saturate
          fault <= (abs_diff > {1'b0, lambda_q});
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // the block must be a whole number of neurons after the header
  initial assert (BL_WORDS < 2**AW) else $error("elm_bl: AW too small for BL_WORDS");

endmodule
