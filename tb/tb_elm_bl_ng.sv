// tb_elm_bl_ng: self-checking test of the neuron-generation base learner at the default
// size (L=20, D=5, 20 physical neurons). A testbench RAM with one-cycle read latency holds
// the physical-neuron block followed by two learner blocks. In each trial the testbench
// draws new physical weights, pair choices, output weights and features, then runs learner
// 0 with `refresh` high (physical pre-activations recomputed) and learner 1 with `refresh`
// low (stored pre-activations reused for the same sample). Its own 64-bit model computes
// p_m, h = min(|p_a - p_b| >> H_SHIFT, 32767), R, the error and the fault bit; lambda is
// placed just above or below the error so both outcomes occur. Latency is checked too:
// PH_WORDS + 1 + NG_WORDS + 2 cycles with refresh, NG_WORDS + 2 without.
module tb_elm_bl_ng;
  localparam int L = adepos_pkg::L, D = adepos_pkg::D, X_W = adepos_pkg::X_W;
  localparam int LP = adepos_pkg::ng_phys(adepos_pkg::NBL_MAX, adepos_pkg::L);
  localparam int PH = adepos_pkg::ng_phys_words(LP, D);
  localparam int NGW = adepos_pkg::ng_bl_words(L);
  localparam int H_SHIFT = 6, AW = 10;

  logic clk = 1'b0, rst_n;
  logic start, refresh;
  logic [AW-1:0] phys_base, base_addr, mem_addr;
  logic [D-1:0][X_W-1:0] x;
  logic mem_rd, busy, done, fault;
  logic [15:0] mem_rdata;
  logic [31:0] err;
  logic signed [31:0] r_out;
  logic [15:0] ram [PH + 2*NGW];
  longint p [LP];
  int checks = 0, failures = 0;
  int n_fault = 0, n_ok = 0;

  elm_bl_ng #(.L(L), .D(D), .X_W(X_W), .L_PHY(LP), .H_SHIFT(H_SHIFT), .AW(AW)) dut (
    .clk, .rst_n, .start, .refresh, .phys_base, .base_addr, .x, .mem_addr, .mem_rd,
    .mem_rdata, .busy, .done, .fault, .err, .r_out);

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
    longint d, habs, h, r, diff, adiff, exp_err;
    longint unsigned lam;
    int base, cyc, nb, ia, ib, exp_cyc;
    bit exp_fault;
    rst_n = 1'b0; start = 1'b0; refresh = 1'b0; base_addr = '0; phys_base = '0; x = '0;
    for (int i = 0; i < PH + 2*NGW; i++) ram[i] = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    for (int t = 0; t < 40; t++) begin
      for (int i = 0; i < D; i++) x[i] = X_W'($urandom);
      if (t == 0) x = '1;
      // physical neurons
      for (int m = 0; m < LP; m++) begin
        nb = m * (D + 1);
        ram[nb] = 16'($urandom);
        p[m] = longint'($signed(ram[nb]));
        for (int i = 0; i < D; i++) begin
          ram[nb + 1 + i] = 16'($urandom);
          p[m] += longint'($signed(ram[nb + 1 + i])) * longint'(x[i]);
        end
      end
      for (int k = 0; k < 2; k++) begin
        base = PH + k * NGW;
        r = 0;
        for (int j = 0; j < L; j++) begin
          nb = base + adepos_pkg::BL_HDR + 2 * j;
          ia = $urandom_range(0, LP - 1);
          ib = $urandom_range(0, LP - 1);
          ram[nb] = {8'(ia), 8'(ib)};
          ram[nb + 1] = (t % 3 != 0) ? 16'($signed(12'($urandom))) : 16'($urandom);
          d = p[ia] - p[ib];
          habs = (d < 0) ? -d : d;
          h = habs >>> H_SHIFT;
          if (h > 32767) h = 32767;
          r += longint'($signed(ram[nb + 1])) * h;
        end
        r = longint'($signed(32'(r)));
        {ram[base + 1], ram[base]} = (t % 4 == 0) ? 32'(r + longint'($urandom_range(0, 5000)))
                                                  : 32'($signed(24'($urandom)));
        diff  = longint'($signed({ram[base + 1], ram[base]})) - r;
        adiff = (diff < 0) ? -diff : diff;
        exp_err = (adiff > 64'hFFFF_FFFF) ? 64'hFFFF_FFFF : adiff;
        if ((t + k) % 2 == 0) lam = (adiff > 3) ? adiff - longint'($urandom_range(1, 3)) : 0;
        else                  lam = adiff + longint'($urandom_range(0, 3));
        if (lam > 64'hFFFF_FFFF) lam = 64'hFFFF_FFFF;
        {ram[base + 3], ram[base + 2]} = 32'(lam);
        exp_fault = adiff > lam;
        @(negedge clk);
        base_addr = AW'(base);
        refresh = (k == 0);
        start = 1'b1;
        @(posedge clk);
        #1 start = 1'b0;
        refresh = 1'b0;
        cyc = 0;
        while (!done) begin @(posedge clk); #1; cyc++; end
        exp_cyc = (k == 0) ? PH + 1 + NGW + 2 : NGW + 2;
        check(cyc == exp_cyc, $sformatf("latency %0d, expected %0d", cyc, exp_cyc));
        check(r_out == 32'(r), $sformatf("t=%0d k=%0d R %0d expected %0d", t, k, r_out, r));
        check(err == 32'(exp_err), $sformatf("t=%0d k=%0d err %0d expected %0d", t, k, err, exp_err));
        check(fault == exp_fault, $sformatf("t=%0d k=%0d fault %0b expected %0b", t, k, fault, exp_fault));
        if (exp_fault) n_fault++; else n_ok++;
      end
    end
    check(n_fault > 0 && n_ok > 0, "both outcomes exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
