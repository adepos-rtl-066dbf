// adepos_ctrl: the ADEPOS (anomaly-detector based power saving) controller.
//
// Decides, sample by sample, how many base learners (N_BL) of the ensemble are run.
// For each new sample (`start`) it runs base learners 0..N_BL-1 one after another on
// the elm_bl engine and takes the majority vote of their fault outputs. Then:
//   vote = fault,   N_BL <  NBL_MAX : N_BL += 2 and run the two added learners on the
//                                     same sample, then vote again;
//   vote = fault,   N_BL == NBL_MAX : declare the fault (maintenance is due);
//   vote = healthy, N_BL >  1       : N_BL -= 2, sample finished;
//   vote = healthy, N_BL == 1       : sample finished.
// N_BL is kept from sample to sample and starts at NBL_INIT after reset. This is the
// flowchart of the method. Learners already evaluated on the current sample are not
// re-run when N_BL grows: their fault bits are kept (this design's choice; the
// processor implementation may recompute them, which gives the same vote).
//
// Interface: `start` (ignored while busy) begins a sample; `done` pulses when the
// decision is made, with `n_bl` (value for the next sample), `vote_fault`,
// `declare_fault` and `bl_fault` (per-learner decisions) valid until the next start.
// `bl_evals` counts the learners evaluated for the sample. One-cycle pulses `ev_grow`,
// `ev_shrink` and `ev_declare` mark the three decisions. The engine handshake is
// bl_start (one cycle) ... bl_done (one cycle, with bl_fault_in).
module adepos_ctrl #(
  parameter int unsigned NBL_MAX  = adepos_pkg::NBL_MAX,
  parameter int unsigned NBL_INIT = 1,
  parameter int unsigned BL_WORDS = adepos_pkg::bl_words(adepos_pkg::L, adepos_pkg::D),
  parameter int unsigned AW       = 11,
  parameter int unsigned NW       = adepos_pkg::NBL_W
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  output logic               busy,
  output logic               done,
  // base-learner engine
  output logic               bl_start,
  output logic [AW-1:0]      bl_base,
  input  logic               bl_done,
  input  logic               bl_fault_in,
  // decision
  output logic [NW-1:0]      n_bl,
  output logic               vote_fault,
  output logic               declare_fault,
  output logic [NBL_MAX-1:0] bl_fault,
  output logic [NW-1:0]      bl_evals,
  output logic               ev_grow,
  output logic               ev_shrink,
  output logic               ev_declare
);
  typedef enum logic [2:0] {S_IDLE, S_LAUNCH, S_WAIT, S_VOTE, S_DONE} state_e;

  state_e        state;
  logic [NW-1:0] k;           // index of the next learner to evaluate
  logic [NW-1:0] n_fault;
  logic          vote_now;

  majority_vote #(.NBL_MAX(NBL_MAX), .NW(NW)) u_vote (
    .bl_fault(bl_fault), .n_bl(n_bl), .n_fault(n_fault), .vote_fault(vote_now)
  );

  assign busy = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state         <= S_IDLE;
      k             <= '0;
      n_bl          <= NW'(NBL_INIT);
      bl_start      <= 1'b0;
      bl_base       <= '0;
      bl_fault      <= '0;
      bl_evals      <= '0;
      vote_fault    <= 1'b0;
      declare_fault <= 1'b0;
      done          <= 1'b0;
      ev_grow       <= 1'b0;
      ev_shrink     <= 1'b0;
      ev_declare    <= 1'b0;
    end else begin
      bl_start   <= 1'b0;
      done       <= 1'b0;
      ev_grow    <= 1'b0;
      ev_shrink  <= 1'b0;
      ev_declare <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          k             <= '0;
          bl_base       <= '0;
          bl_fault      <= '0;
          bl_evals      <= '0;
          declare_fault <= 1'b0;
          state         <= S_LAUNCH;
        end
        S_LAUNCH: begin
          if (k < n_bl) begin
            bl_start <= 1'b1;
            state    <= S_WAIT;
          end else state <= S_VOTE;
        end
        S_WAIT: if (bl_done) begin
          bl_fault[k] <= bl_fault_in;
          bl_evals    <= bl_evals + NW'(1);
          k           <= k + NW'(1);
          bl_base     <= bl_base + AW'(BL_WORDS);
          state       <= S_LAUNCH;
        end
        S_VOTE: begin
          vote_fault <= vote_now;
          if (vote_now) begin
            if (n_bl >= NW'(NBL_MAX)) begin
              declare_fault <= 1'b1;
              ev_declare    <= 1'b1;
              state         <= S_DONE;
            end else begin
              n_bl    <= n_bl + NW'(2);
              ev_grow <= 1'b1;
              state   <= S_LAUNCH;
            end
          end else begin
            if (n_bl > NW'(1)) begin
              n_bl      <= n_bl - NW'(2);
              ev_shrink <= 1'b1;
            end
            state <= S_DONE;
          end
        end
        S_DONE: begin
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // N_BL stays odd and within 1..NBL_MAX
  a_nbl_odd:   assert property (@(posedge clk) disable iff (!rst_n) n_bl[0] == 1'b1);
  a_nbl_range: assert property (@(posedge clk) disable iff (!rst_n) n_bl >= NW'(1) && n_bl <= NW'(NBL_MAX));
  // the engine only answers when asked
  a_done_wait: assert property (@(posedge clk) disable iff (!rst_n) bl_done |-> state == S_WAIT);

endmodule
