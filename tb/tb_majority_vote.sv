// tb_majority_vote: exhaustive test of the majority vote. Every fault pattern of the
// NBL_MAX = 9 learners is tried with every odd N_BL from 1 to 9; the expected count and
// vote come from a loop in the testbench.
module tb_majority_vote;
  localparam int N = adepos_pkg::NBL_MAX;
  logic [N-1:0] bl_fault;
  logic [3:0]   n_bl, n_fault;
  logic         vote_fault;
  int checks = 0, failures = 0;

  majority_vote dut (.bl_fault, .n_bl, .n_fault, .vote_fault);

  initial begin : watchdog
    #10ms;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int cnt;
    for (int nb = 1; nb <= N; nb += 2) begin
      for (int p = 0; p < (1 << N); p++) begin
        bl_fault = N'(p);
        n_bl = 4'(nb);
        #1;
        cnt = 0;
        for (int k = 0; k < nb; k++) cnt += p[k];
        checks++;
        if (n_fault != 4'(cnt) || vote_fault != (cnt > nb / 2)) begin
          failures++;
          if (failures < 10) $display("FAIL nb=%0d p=%b cnt=%0d got %0d/%0b", nb, p[N-1:0], cnt, n_fault, vote_fault);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
