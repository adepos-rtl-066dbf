// adepos_workload_run: testbench helper that runs one configuration of adepos_chip end to
// end and checks it, so that several of the sizes the original work evaluates can be run
// side by side from tb_adepos_workloads.
//
// Parameters give the configuration (L neurons per learner, D features, NBL learners at
// most, NG neuron generation on/off) and the test (CPB clocks per UART bit, NS samples).
// After `go` it acts as the external controller: draws a random ensemble (direct weights,
// or physical neurons plus a different pair for every virtual neuron when NG = 1), works
// out every learner's error on every sample with its own integer model, sets each
// learner's lambda to the median of its errors, loads the memory over the UART and then
// sends the samples one by one. For each it checks the result byte, the status outputs,
// the learners run, each learner's decision and the busy time, and counts growth,
// shrinking, fault declaration and one-learner samples. At the end it checks that every
// mechanism the configuration allows happened (with NBL = 1 there is no growth or
// shrinking) and raises `done` with its check and failure counts.
module adepos_workload_run #(
  parameter int L   = adepos_pkg::L,
  parameter int D   = adepos_pkg::D,
  parameter int NBL = adepos_pkg::NBL_MAX,
  parameter bit NG  = 1'b0,
  parameter int CPB = 8,
  parameter int NS  = 32
) (
  input  logic clk,
  input  logic go,
  output logic done,
  output int   checks,
  output int   failures
);
  localparam int X_W = adepos_pkg::X_W, H_SHIFT = 6;
  localparam int LP = adepos_pkg::ng_phys(NBL, L);
  localparam int PH = NG ? adepos_pkg::ng_phys_words(LP, D) : 0;
  localparam int BLW = NG ? adepos_pkg::ng_bl_words(L) : adepos_pkg::bl_words(L, D);
  localparam int DEPTH = PH + NBL * BLW;

  logic rst_n = 1'b1;
  logic uart_rxd, uart_txd, spi_sclk, spi_cs_n, spi_mosi;
  logic [3:0] vref_code, n_bl, bl_evals;
  logic [10:0] vref_mv;
  logic busy, declare_fault;
  logic [NBL-1:0] bl_fault;

  adepos_chip #(.L(L), .D(D), .NBL_MAX(NBL), .CLKS_PER_BIT(CPB), .NG(NG)) dut (
    .clk, .rst_n, .uart_rxd, .uart_txd, .spi_sclk, .spi_cs_n, .spi_mosi,
    .vref_code, .vref_mv, .busy, .n_bl, .declare_fault, .bl_fault, .bl_evals);

  int n_grow = 0, n_shrink = 0, n_declare = 0, n_stay1 = 0;
  int busy_cycles = 0;
  logic [15:0] mem [DEPTH];
  logic [X_W-1:0] xs [NS][D];
  longint errs [NBL][NS];
  logic [7:0] rx_bytes [$];
  logic [15:0] pairs [$];

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL L=%0d D=%0d NBL=%0d NG=%0b: %s", L, D, NBL, NG, what);
    end
  endtask

  always @(posedge clk) begin
    if (busy) busy_cycles++;
  end

  task automatic uart_send(input logic [7:0] b);
    uart_rxd = 0; repeat (CPB) @(posedge clk);
    for (int i = 0; i < 8; i++) begin uart_rxd = b[i]; repeat (CPB) @(posedge clk); end
    uart_rxd = 1; repeat (CPB) @(posedge clk);
  endtask

  initial begin : uart_receiver
    logic [7:0] b;
    forever begin
      @(negedge uart_txd);
      repeat (CPB / 2) @(posedge clk);
      for (int i = 0; i < 8; i++) begin repeat (CPB) @(posedge clk); b[i] = uart_txd; end
      repeat (CPB) @(posedge clk);
      rx_bytes.push_back(b);
    end
  end

  function automatic int lb(input int k);
    return PH + k * BLW;
  endfunction

  // independent model of one base learner, direct or with neuron generation
  function automatic longint bl_error(input int k, input int s);
    longint p [LP];
    longint acc, h, r, diff;
    int nb;
    if (NG)
      for (int m = 0; m < LP; m++) begin
        p[m] = longint'($signed(mem[m * (D + 1)]));
        for (int i = 0; i < D; i++) p[m] += longint'($signed(mem[m * (D + 1) + 1 + i])) * longint'(xs[s][i]);
      end
    r = 0;
    for (int j = 0; j < L; j++) begin
      if (NG) begin
        nb = lb(k) + adepos_pkg::BL_HDR + 2 * j;
        acc = p[int'(mem[nb][15:8])] - p[int'(mem[nb][7:0])];
        nb = nb + 1;
      end else begin
        nb = lb(k) + adepos_pkg::BL_HDR + j * (D + 2);
        acc = longint'($signed(mem[nb]));
        for (int i = 0; i < D; i++) acc += longint'($signed(mem[nb + 1 + i])) * longint'(xs[s][i]);
        nb = nb + D + 1;
      end
      h = ((acc < 0) ? -acc : acc) >>> H_SHIFT;
      if (h > 32767) h = 32767;
      r += longint'($signed(mem[nb])) * h;
    end
    r = longint'($signed(32'(r)));
    diff = longint'($signed({mem[lb(k) + 1], mem[lb(k)]})) - r;
    return (diff < 0) ? -diff : diff;
  endfunction

  initial begin
    longint q [$];
    int m_nbl, m_evals, cnt, votes, tb_cyc, prev_nbl, nb;
    bit m_vote, m_decl;
    logic [NBL-1:0] pat;
    done = 1'b0; checks = 0; failures = 0;
    uart_rxd = 1; spi_sclk = 0; spi_cs_n = 1; spi_mosi = 0;
    #3 rst_n = 0;
    #30 rst_n = 1;
    wait (go);
    check(n_bl == 1, "one learner after reset");

    // random ensemble and samples
    if (NG) begin
      for (int m = 0; m < LP; m++) begin
        mem[m * (D + 1)] = 16'($signed(14'($urandom)));
        for (int i = 0; i < D; i++) mem[m * (D + 1) + 1 + i] = 16'($urandom);
      end
      for (int a = 0; a < LP; a++) for (int b = a + 1; b < LP; b++) pairs.push_back({8'(a), 8'(b)});
      pairs.shuffle();
      for (int k = 0; k < NBL; k++)
        for (int j = 0; j < L; j++) begin
          nb = lb(k) + adepos_pkg::BL_HDR + 2 * j;
          mem[nb] = pairs[k * L + j];
          mem[nb + 1] = 16'($signed(10'($urandom)));
        end
    end else begin
      for (int k = 0; k < NBL; k++)
        for (int j = 0; j < L; j++) begin
          nb = lb(k) + adepos_pkg::BL_HDR + j * (D + 2);
          mem[nb] = 16'($signed(14'($urandom)));
          for (int i = 0; i < D; i++) mem[nb + 1 + i] = 16'($urandom);
          mem[nb + D + 1] = 16'($signed(10'($urandom)));
        end
    end
    for (int s = 0; s < NS; s++) for (int i = 0; i < D; i++) xs[s][i] = X_W'($urandom);
    for (int k = 0; k < NBL; k++) begin
      {mem[lb(k) + 3], mem[lb(k) + 2]} = '0;
      {mem[lb(k) + 1], mem[lb(k)]} = 32'($signed(20'($urandom)));
      q.delete();
      for (int s = 0; s < NS; s++) begin errs[k][s] = bl_error(k, s); q.push_back(errs[k][s]); end
      q.sort();
      {mem[lb(k) + 3], mem[lb(k) + 2]} = 32'(q[NS / 2]);   // median error as lambda
    end

    for (int a = 0; a < DEPTH; a++) begin
      uart_send(8'h57); uart_send(8'(a >> 8)); uart_send(8'(a));
      uart_send(mem[a][15:8]); uart_send(mem[a][7:0]);
    end

    m_nbl = 1; prev_nbl = 1;
    for (int s = 0; s < NS; s++) begin
      for (int k = 0; k < NBL; k++) pat[k] = errs[k][s] > longint'({mem[lb(k) + 3], mem[lb(k) + 2]});
      m_decl = 0; votes = 0;
      if (m_nbl == 1 && !pat[0]) n_stay1++;
      forever begin
        votes++;
        cnt = 0;
        for (int k = 0; k < m_nbl; k++) cnt += pat[k];
        m_vote = cnt > m_nbl / 2;
        m_evals = m_nbl;
        if (m_vote) begin
          if (m_nbl == NBL) begin m_decl = 1; break; end
          m_nbl += 2;
        end else begin
          if (m_nbl > 1) m_nbl -= 2;
          break;
        end
      end
      for (int i = 0; i < D; i++) begin uart_send(8'h58); uart_send(8'(i)); uart_send({2'b00, xs[s][i]}); end
      rx_bytes.delete();
      busy_cycles = 0;
      uart_send(8'h53);
      while (rx_bytes.size() == 0) @(posedge clk);
      check(rx_bytes[0] == {m_decl, m_vote, 2'b00, 4'(m_nbl)},
            $sformatf("s=%0d result %h exp decl=%0b vote=%0b nbl=%0d", s, rx_bytes[0], m_decl, m_vote, m_nbl));
      check(n_bl == 4'(m_nbl) && declare_fault == m_decl, $sformatf("s=%0d status outputs", s));
      check(bl_evals == 4'(m_evals), $sformatf("s=%0d learners run %0d exp %0d", s, bl_evals, m_evals));
      for (int k = 0; k < m_evals; k++) check(bl_fault[k] == pat[k], $sformatf("s=%0d learner %0d", s, k));
      if (int'(bl_evals) > prev_nbl) n_grow += (int'(bl_evals) - prev_nbl) / 2;
      if (int'(n_bl) < int'(bl_evals)) n_shrink++;
      if (declare_fault) n_declare++;
      prev_nbl = int'(n_bl);
      tb_cyc = m_evals * (BLW + 5) + (NG ? PH + 1 : 0) + 2 * votes + 1;
      check(busy_cycles == tb_cyc, $sformatf("s=%0d busy %0d cycles exp %0d", s, busy_cycles, tb_cyc));
    end
    $display("L=%0d D=%0d NBL=%0d NG=%0b: %0d words, grow=%0d shrink=%0d declare=%0d stay1=%0d",
             L, D, NBL, NG, DEPTH, n_grow, n_shrink, n_declare, n_stay1);
    if (NBL > 1) begin
      check(n_grow > 0, "ensemble growth occurred");
      check(n_shrink > 0, "ensemble shrink occurred");
    end
    check(n_declare > 0, "fault declaration occurred");
    check(n_stay1 > 0, "healthy sample with one learner occurred");
    done = 1'b1;
  end
endmodule
