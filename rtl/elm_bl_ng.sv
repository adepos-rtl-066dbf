// elm_bl_ng: base learner with neuron generation (NG), the optional variant of elm_bl.
//
// Instead of giving every learner its own random first layer, NG computes the
// pre-activations of a few "physical" neurons once per sample,
//   p_m = sum_i W_mi * x_i + b_m,           m = 0..L_PHY-1,
// and forms each hidden ("virtual") neuron of each learner as the difference of two of
// them: h = |p_a - p_b| (scaled like elm_bl: min(|.| >> H_SHIFT, 2**15-1)). The
// difference is again a random projection of x, so the classifier works the same. With
// L_PHY*(L_PHY-1)/2 >= NBL_MAX*L, all 180 virtual neurons of the default ensemble come
// from 20 physical neurons, so the first-layer multiplications are paid once per sample
// instead of once per learner, and the parameter memory shrinks from 1296 to 516 words.
// The output layer and the fault rule are the same as in elm_bl.
//
// Memory layout (this design's choice): the physical block at `phys_base`, L_PHY*(D+1)
// words {b_m, W_m0..W_m(D-1)}; each learner at `base_addr`: 4 header words (target,
// lambda as in elm_bl), then per virtual neuron a pair word {a[7:0], b[7:0]} and beta_j.
// Which pairs are used is up to whoever trains the learners.
//
// Timing: `start` with `refresh` high first streams the physical block (PH_WORDS words,
// one per clock) and stores the L_PHY pre-activations, then the learner's block. `done`
// comes refresh*(PH_WORDS + 1) + NG_WORDS + 2 cycles after start. The top level raises
// `refresh` for learner 0, which is the first learner run for every sample; the learners
// run after it for the same sample reuse the stored p_m.
module elm_bl_ng #(
  parameter int unsigned L       = adepos_pkg::L,
  parameter int unsigned D       = adepos_pkg::D,
  parameter int unsigned X_W     = adepos_pkg::X_W,
  parameter int unsigned L_PHY   = adepos_pkg::ng_phys(adepos_pkg::NBL_MAX, adepos_pkg::L),
  parameter int unsigned H_SHIFT = 6,
  parameter int unsigned AW      = 10
) (
  input  logic                               clk,
  input  logic                               rst_n,
  input  logic                               start,
  input  logic                               refresh,
  input  logic [AW-1:0]                      phys_base,
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
  localparam int unsigned PH_WORDS = adepos_pkg::ng_phys_words(L_PHY, D);
  localparam int unsigned NG_WORDS = adepos_pkg::ng_bl_words(L);
  localparam int unsigned PW       = $clog2(D + 1);
  localparam int unsigned MW       = (L_PHY > 1) ? $clog2(L_PHY) : 1;

  typedef enum logic [2:0] {S_IDLE, S_PHYS, S_PWAIT, S_RUN, S_DRAIN, S_FIN} state_e;
  typedef enum logic [2:0] {T_HDR, T_BIAS, T_W, T_PAIR, T_BETA} tag_kind_e;
  typedef struct packed {
    logic          valid;
    tag_kind_e     kind;
    logic [1:0]    hdr;
    logic [PW-1:0] feat;
    logic          nlast;  // last weight of a physical neuron
  } tag_t;

  state_e        state;
  logic [AW-1:0] offs;
  logic [1:0]    hdr_cnt;
  logic [PW-1:0] p_cnt;
  logic          beta_next;          // learner block: next neuron word is beta
  logic          iss_last;
  tag_t          tag_iss, tag_d;
  logic          store;              // acc_h holds a finished physical neuron
  logic [MW-1:0] m_cnt;              // physical neuron being stored

  logic [AccW-1:0] preg [L_PHY];     // stored pre-activations
  logic [AccW-1:0] target_q, lambda_q;
  logic [AccW-1:0] acc_h, acc_o;
  logic [WW-1:0]   hv;               // virtual-neuron activation for the next beta

  // issue side
  always_comb begin
    tag_iss       = '0;
    tag_iss.valid = (state == S_PHYS) || (state == S_RUN);
    tag_iss.hdr   = hdr_cnt;
    iss_last      = 1'b0;
    if (state == S_PHYS) begin
      if (p_cnt == '0) tag_iss.kind = T_BIAS;
      else begin
        tag_iss.kind  = T_W;
        tag_iss.feat  = p_cnt - PW'(1);
        tag_iss.nlast = (p_cnt == PW'(D));
      end
      iss_last = (offs == AW'(PH_WORDS - 1));
    end else begin
      if (offs < AW'(adepos_pkg::BL_HDR)) tag_iss.kind = T_HDR;
      else if (beta_next)                 tag_iss.kind = T_BETA;
      else                                tag_iss.kind = T_PAIR;
      iss_last = (offs == AW'(NG_WORDS - 1));
    end
  end

  assign mem_addr = ((state == S_PHYS) ? phys_base : base_addr) + offs;
  assign mem_rd   = tag_iss.valid;
  assign busy     = (state != S_IDLE);

  // hidden MAC for the physical neurons
  mac16 #(.W(WW), .ACC_W(AccW)) u_mac_hidden (
    .clk, .rst_n,
    .en(tag_d.valid && tag_d.kind == T_W), .op(adepos_pkg::OP_MACS),
    .a(mem_rdata), .b(WW'(x[tag_d.feat])),
    .load(tag_d.valid && tag_d.kind == T_BIAS), .load_val(AccW'($signed(mem_rdata))),
    .acc(acc_h)
  );

  // virtual neuron from a pair word
  logic [MW-1:0]        ia, ib;
  logic signed [AccW:0] vdiff;
  logic [AccW:0]        vabs, vsh;
  logic [WW-1:0]        h16;
  always_comb begin
    ia    = MW'(mem_rdata[15:8]);
    ib    = MW'(mem_rdata[7:0]);
    vdiff = $signed({preg[ia][AccW-1], preg[ia]}) - $signed({preg[ib][AccW-1], preg[ib]});
    vabs  = vdiff[AccW] ? (AccW+1)'(-vdiff) : (AccW+1)'(vdiff);
    vsh   = vabs >> H_SHIFT;
    h16   = (vsh > (AccW+1)'(2**(WW-1) - 1)) ? WW'(2**(WW-1) - 1) : vsh[WW-1:0];
  end

  mac16 #(.W(WW), .ACC_W(AccW)) u_mac_out (
    .clk, .rst_n,
    .en(tag_d.valid && tag_d.kind == T_BETA), .op(adepos_pkg::OP_MACS), .a(mem_rdata), .b(hv),
    .load((state == S_IDLE) && start), .load_val('0),
    .acc(acc_o)
  );

  logic signed [AccW:0] diff;
  logic        [AccW:0] abs_diff;
  always_comb begin
    diff     = $signed({target_q[AccW-1], target_q}) - $signed({acc_o[AccW-1], acc_o});
    abs_diff = diff[AccW] ? (AccW+1)'(-diff) : (AccW+1)'(diff);
  end

  always_ff @(posedge clk) begin
    if (store) preg[m_cnt] <= acc_h;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      offs      <= '0;
      hdr_cnt   <= '0;
      p_cnt     <= '0;
      beta_next <= 1'b0;
      tag_d     <= '0;
      store     <= 1'b0;
      m_cnt     <= '0;
      hv        <= '0;
      target_q  <= '0;
      lambda_q  <= '0;
      done      <= 1'b0;
      fault     <= 1'b0;
      err       <= '0;
      r_out     <= '0;
    end else begin
      done  <= 1'b0;
      tag_d <= tag_iss;
      store <= tag_d.valid && tag_d.kind == T_W && tag_d.nlast;
      if (store) m_cnt <= m_cnt + MW'(1);
      if (tag_d.valid && tag_d.kind == T_PAIR) hv <= h16;
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
          state     <= refresh ? S_PHYS : S_RUN;
          offs      <= '0;
          hdr_cnt   <= '0;
          p_cnt     <= '0;
          beta_next <= 1'b0;
          m_cnt     <= '0;
        end
        S_PHYS: begin
          offs  <= offs + AW'(1);
          p_cnt <= (p_cnt == PW'(D)) ? '0 : p_cnt + PW'(1);
          if (iss_last) state <= S_PWAIT;
        end
        S_PWAIT: begin             // last W lands in acc_h; stored on the next edge
          state <= S_RUN;
          offs  <= '0;
        end
        S_RUN: begin
          offs <= offs + AW'(1);
          if (offs < AW'(adepos_pkg::BL_HDR)) hdr_cnt <= hdr_cnt + 2'd1;
          else beta_next <= ~beta_next;
          if (iss_last) state <= S_DRAIN;
        end
        S_DRAIN: state <= S_FIN;
        S_FIN: begin
          state <= S_IDLE;
          done  <= 1'b1;
          r_out <= acc_o;
          err   <= abs_diff[AccW-1:0] | {AccW{abs_diff[AccW]}};
          fault <= (abs_diff > {1'b0, lambda_q});
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  initial assert (L_PHY * (L_PHY - 1) / 2 >= L) else $error("elm_bl_ng: too few physical neurons");
  initial assert (L_PHY <= 256) else $error("elm_bl_ng: pair word holds 8-bit indices");

endmodule
