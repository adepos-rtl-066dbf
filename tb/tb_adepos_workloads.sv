// tb_adepos_workloads: runs adepos_chip at the other sizes the original work evaluates,
// each through its own adepos_workload_run instance, all at once on one clock:
//   - ensemble sweep points of the bearing study: L = 30 with 7 learners, L = 40 with 5;
//   - one large network of L = 180 neurons (a single learner, no ensemble);
//   - EEG seizure detection: 16 features (one per electrode, this design's reading) and up
//     to 13 learners, with neuron generation as in that study; L = 20 per learner is this
//     design's choice, since the study picks L per recording.
// The UART runs at 8 clocks per bit to keep the run short; everything else is as in the
// chip. The test passes when every instance passes its own checks; a watchdog bounds it.
module tb_adepos_workloads;
  localparam int N = 5;
  logic clk = 1'b0, go = 1'b0;
  logic [N-1:0] done;
  int chk [N], fail [N];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  adepos_workload_run #(.L(30),  .D(5),  .NBL(7),  .NG(1'b0)) u_l30  (.clk, .go, .done(done[0]), .checks(chk[0]), .failures(fail[0]));
  adepos_workload_run #(.L(40),  .D(5),  .NBL(5),  .NG(1'b0)) u_l40  (.clk, .go, .done(done[1]), .checks(chk[1]), .failures(fail[1]));
  adepos_workload_run #(.L(180), .D(5),  .NBL(1),  .NG(1'b0)) u_l180 (.clk, .go, .done(done[2]), .checks(chk[2]), .failures(fail[2]));
  adepos_workload_run #(.L(20),  .D(16), .NBL(13), .NG(1'b1)) u_eeg  (.clk, .go, .done(done[3]), .checks(chk[3]), .failures(fail[3]));
  adepos_workload_run #(.L(20),  .D(16), .NBL(13), .NG(1'b0)) u_eeg_direct (.clk, .go, .done(done[4]), .checks(chk[4]), .failures(fail[4]));

  initial begin : watchdog
    repeat (20_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    go = 1'b1;
    wait (&done);
    for (int i = 0; i < N; i++) begin checks += chk[i]; failures += fail[i]; end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
