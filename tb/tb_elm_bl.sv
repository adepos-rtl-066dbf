// tb_elm_bl: self-checking test of one ELM-B base learner at the default size (L=20, D=5).
// A testbench RAM with one-cycle read latency holds two random base-learner blocks. For
// each trial the testbench draws new weights and features, computes h, R, the error and
// the fault bit with its own 64-bit integer model, picks lambda just above or just below
// the error so both outcomes occur, runs the learner and compares. It also checks the
// latency: done must come BL_WORDS + 2 cycles after start (one word per cycle, one cycle
// of memory latency, one cycle to register the result).
module tb_elm_bl;
  localparam int L = adepos_pkg::L, D = adepos_pkg::D, X_W = adepos_pkg::X_W;
  localparam int H_SHIFT = 6, AW = 11;
  localparam int BLW = adepos_pkg::BL_HDR + L * (D + 2);

  logic clk = 1'b0, rst_n;
  logic start;
  logic [AW-1:0] base_addr, mem_addr;
  logic [D-1:0][X_W-1:0] x;
  logic mem_rd, busy, done, fault;
  logic [15:0] mem_rdata;
  logic [31:0] err;
  logic signed [31:0] r_out;
  logic [15:0] ram [2*BLW];
  int checks = 0, failures = 0;
  int n_fault = 0, n_ok = 0;

  elm_bl #(.L(L), .D(D), .X_W(X_W), .H_SHIFT(H_SHIFT), .AW(AW)) dut (
    .clk, .rst_n, .start, .base_addr, .x, .mem_addr, .mem_rd, .mem_rdata,
    .busy, .done, .fault, .err, .r_out);

  always #5 clk = ~clk;
  always_ff @(posedge clk) if (mem_rd) mem_rdata <= ram[mem_addr];

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

  initial begin
    longint acc, habs, h, r, diff, adiff, exp_err;
    longint unsigned lam;
    int base, cyc, trial_beta_small, nb;
    bit exp_fault;
    rst_n = 1'b0; start = 1'b0; base_addr = '0; x = '0;
    for (int i = 0; i < 2*BLW; i++) ram[i] = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    for (int t = 0; t < 60; t++) begin
      base = (t % 2) * BLW;
      trial_beta_small = t % 3;
      for (int i = 0; i < D; i++) x[i] = X_W'($urandom);
      if (t == 0) x = '1;
      r = 0;
      for (int j = 0; j < L; j++) begin
        nb = base + adepos_pkg::BL_HDR + j * (D + 2);
        ram[nb] = 16'($urandom);
        acc = longint'($signed(ram[nb]));
        for (int i = 0; i < D; i++) begin
          ram[nb + 1 + i] = 16'($urandom);
          acc += longint'($signed(ram[nb + 1 + i])) * longint'(x[i]);
        end
        ram[nb + D + 1] = (trial_beta_small != 0) ? 16'($signed(12'($urandom))) : 16'($urandom);
        habs = (acc < 0) ? -acc : acc;
        h = habs >>> H_SHIFT;
        if (h > 32767) h = 32767;
        r += longint'($signed(ram[nb + D + 1])) * h;
      end
      r = longint'($signed(32'(r)));            // 32-bit accumulator wraps
      // target
      {ram[base + 1], ram[base]} = (t % 4 == 0) ? 32'(r + longint'($urandom_range(0, 5000)))
                                                : 32'($signed(24'($urandom)));
      diff  = longint'($signed({ram[base + 1], ram[base]})) - r;
      adiff = (diff < 0) ? -diff : diff;
      exp_err = (adiff > 64'hFFFF_FFFF) ? 64'hFFFF_FFFF : adiff;
      // lambda just above or just below the error
      if (t % 2 == 0) lam = (adiff > 3) ? adiff - longint'($urandom_range(1, 3)) : 0;
      else            lam = adiff + longint'($urandom_range(0, 3));
      if (lam > 64'hFFFF_FFFF) lam = 64'hFFFF_FFFF;
      {ram[base + 3], ram[base + 2]} = 32'(lam);
      exp_fault = adiff > lam;
      // run
      @(negedge clk);
      base_addr = AW'(base);
      start = 1'b1;
      @(posedge clk);
      #1 start = 1'b0;
      cyc = 0;
      while (!done) begin @(posedge clk); #1; cyc++; end
      check(cyc == BLW + 2, $sformatf("latency %0d, expected %0d", cyc, BLW + 2));
      check(r_out == 32'(r), $sformatf("t=%0d R %0d expected %0d", t, r_out, r));
      check(err == 32'(exp_err), $sformatf("t=%0d err %0d expected %0d", t, err, exp_err));
      check(fault == exp_fault, $sformatf("t=%0d fault %0b expected %0b", t, fault, exp_fault));
      if (exp_fault) n_fault++; else n_ok++;
    end
    check(n_fault > 0 && n_ok > 0, "both outcomes exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
