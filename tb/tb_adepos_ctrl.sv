// tb_adepos_ctrl: self-checking test of the ADEPOS controller against the flowchart.
// A testbench model of the base-learner engine answers each bl_start after a random
// delay with a fault bit taken from a per-sample pattern (one bit per learner). The
// testbench runs its own model of the decision loop (vote, grow by 2, shrink by 2,
// declare at NBL_MAX) and compares N_BL, the vote, the declared fault, the per-learner
// decisions, the number of learners evaluated and the parameter base address of each
// learner. Patterns are drawn so that growth, shrinking and fault declaration all occur;
// each is counted and must happen at least once.
module tb_adepos_ctrl;
  localparam int NBL_MAX = adepos_pkg::NBL_MAX;
  localparam int BLW = adepos_pkg::bl_words(adepos_pkg::L, adepos_pkg::D);
  logic clk = 1'b0, rst_n, start, busy, done;
  logic bl_start, bl_done, bl_fault_in;
  logic [10:0] bl_base;
  logic [3:0] n_bl, bl_evals;
  logic vote_fault, declare_fault, ev_grow, ev_shrink, ev_declare;
  logic [NBL_MAX-1:0] bl_fault;
  logic [NBL_MAX-1:0] pattern;
  int checks = 0, failures = 0;
  int n_grow = 0, n_shrink = 0, n_declare = 0, launch_k = 0;

  adepos_ctrl dut (.clk, .rst_n, .start, .busy, .done, .bl_start, .bl_base, .bl_done,
    .bl_fault_in, .n_bl, .vote_fault, .declare_fault, .bl_fault, .bl_evals,
    .ev_grow, .ev_shrink, .ev_declare);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  // engine model
  initial begin
    bl_done = 0; bl_fault_in = 0;
    forever begin
      @(posedge clk);
      if (bl_start) begin
        int k;
        k = int'(bl_base) / BLW;
        check(int'(bl_base) == launch_k * BLW, $sformatf("base %0d for learner %0d", bl_base, launch_k));
        launch_k++;
        repeat ($urandom_range(0, 6)) @(posedge clk);
        #1 bl_done = 1; bl_fault_in = pattern[k];
        @(posedge clk); #1 bl_done = 0;
      end
    end
  end

  always @(posedge clk) begin
    if (ev_grow) n_grow++;
    if (ev_shrink) n_shrink++;
    if (ev_declare) n_declare++;
  end

  initial begin
    int m_nbl, m_evals, cnt;
    bit m_vote, m_decl;
    rst_n = 0; start = 0; pattern = '0;
    m_nbl = 1;
    #22 rst_n = 1;
    check(n_bl == 1, "N_BL after reset");
    for (int s = 0; s < 400; s++) begin
      // draw a pattern: healthy, faulty, or mixed
      case ($urandom_range(0, 3))
        0: pattern = '0;
        1: pattern = '1;
        default: pattern = NBL_MAX'($urandom);
      endcase
      // model
      m_evals = m_nbl; m_decl = 0;
      forever begin
        cnt = 0;
        for (int k = 0; k < m_nbl; k++) cnt += pattern[k];
        m_vote = cnt > m_nbl / 2;
        if (m_vote) begin
          if (m_nbl == NBL_MAX) begin m_decl = 1; break; end
          m_nbl += 2; m_evals = m_nbl;
        end else begin
          if (m_nbl > 1) m_nbl -= 2;
          break;
        end
      end
      // run
      launch_k = 0;
      @(negedge clk) start = 1;
      @(negedge clk) start = 0;
      while (!done) @(posedge clk);
      #1;
      check(n_bl == 4'(m_nbl), $sformatf("s=%0d n_bl %0d exp %0d", s, n_bl, m_nbl));
      check(vote_fault == m_vote, $sformatf("s=%0d vote", s));
      check(declare_fault == m_decl, $sformatf("s=%0d declare", s));
      check(bl_evals == 4'(m_evals), $sformatf("s=%0d evals %0d exp %0d", s, bl_evals, m_evals));
      for (int k = 0; k < NBL_MAX; k++)
        check(bl_fault[k] == (k < m_evals ? pattern[k] : 1'b0), $sformatf("s=%0d bl_fault[%0d]", s, k));
    end
    check(n_grow > 0, "grow happened");
    check(n_shrink > 0, "shrink happened");
    check(n_declare > 0, "declare happened");
    $display("grow=%0d shrink=%0d declare=%0d", n_grow, n_shrink, n_declare);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
