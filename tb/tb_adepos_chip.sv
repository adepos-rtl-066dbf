// tb_adepos_chip: end-to-end test of the chip at its default parameters (9 base
// learners of 20 neurons, 5 six-bit features, 115200-baud-class UART at 135 clocks/bit).
//
// Acting as the external controller, the testbench
//   1. sets the converter reference to 750 mV over SPI,
//   2. draws a random ensemble (weights, biases, output weights, targets), computes with
//      its own integer model every learner's error on every test sample, sets each
//      learner's threshold lambda to the median of its errors (so each learner flags
//      about half of the samples), and loads the whole parameter memory over the UART,
//   3. for each sample: writes the features, starts an inference, reads the result byte
//      from the UART, and switches the reference to 600 mV while idle and back to 750 mV.
// A testbench model of the ADEPOS loop predicts N_BL, the vote and the declared fault per
// sample; the result byte, the status outputs, the number of learners run and the busy
// time (learners*(BL_WORDS+5) + 2 per vote + 1 cycles) are checked. The mechanisms
// -- ensemble growth, shrinking, fault declaration, staying at one learner, and the
// voltage switch -- are counted and each must occur at least once.
module tb_adepos_chip;
  localparam int L = adepos_pkg::L, D = adepos_pkg::D, NBL = adepos_pkg::NBL_MAX;
  localparam int X_W = adepos_pkg::X_W, H_SHIFT = 6, CPB = 135;
  localparam int BLW = adepos_pkg::bl_words(L, D);
  localparam int DEPTH = NBL * BLW;
  localparam int NS = 48;   // test samples

  logic clk = 1'b0, rst_n = 1'b1;
  logic uart_rxd, uart_txd, spi_sclk, spi_cs_n, spi_mosi;
  logic [3:0] vref_code, n_bl, bl_evals;
  logic [10:0] vref_mv;
  logic busy, declare_fault;
  logic [NBL-1:0] bl_fault;

  adepos_chip dut (.clk, .rst_n, .uart_rxd, .uart_txd, .spi_sclk, .spi_cs_n, .spi_mosi,
    .vref_code, .vref_mv, .busy, .n_bl, .declare_fault, .bl_fault, .bl_evals);

  always #5 clk = ~clk;   // 100 MHz simulation clock (the timing is counted in cycles)

  int checks = 0, failures = 0;
  int n_grow = 0, n_shrink = 0, n_declare = 0, n_stay1 = 0, n_vswitch = 0;
  int busy_cycles = 0;
  logic [15:0] mem [DEPTH];
  logic [X_W-1:0] xs [NS][D];
  longint errs [NBL][NS];
  logic [7:0] rx_bytes [$];

  initial begin : watchdog
    repeat (20_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  always @(posedge clk) begin
    if (busy) busy_cycles++;
  end

  // ---- external-controller side of the links ----
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

  task automatic spi_write(input logic [7:0] by);
    spi_cs_n = 0; #40;
    for (int i = 7; i >= 0; i--) begin spi_mosi = by[i]; #40 spi_sclk = 1; #40 spi_sclk = 0; end
    #40 spi_cs_n = 1; #40;
  endtask

  // ---- independent model of one base learner ----
  function automatic longint bl_error(input int k, input int s, output longint r_out);
    longint acc, h, r, diff;
    int nb;
    r = 0;
    for (int j = 0; j < L; j++) begin
      nb = k * BLW + adepos_pkg::BL_HDR + j * (D + 2);
      acc = longint'($signed(mem[nb]));
      for (int i = 0; i < D; i++) acc += longint'($signed(mem[nb + 1 + i])) * longint'(xs[s][i]);
      h = ((acc < 0) ? -acc : acc) >>> H_SHIFT;
      if (h > 32767) h = 32767;
      r += longint'($signed(mem[nb + D + 1])) * h;
    end
    r = longint'($signed(32'(r)));
    r_out = r;
    diff = longint'($signed({mem[k * BLW + 1], mem[k * BLW]})) - r;
    return (diff < 0) ? -diff : diff;
  endfunction

  initial begin
    longint r, e;
    longint q [$];
    int m_nbl, m_evals, cnt, votes, tb_cyc, prev_nbl;
    bit m_vote, m_decl;
    logic [NBL-1:0] pat;
    uart_rxd = 1; spi_sclk = 0; spi_cs_n = 1; spi_mosi = 0;
    #3 rst_n = 0;
    #30 rst_n = 1;
    check(n_bl == 1, "one learner after reset");
    spi_write(8'h05);                        // 750 mV while active
    check(vref_mv == 11'd750, "reference 750 mV");

    // random ensemble and samples
    for (int k = 0; k < NBL; k++)
      for (int j = 0; j < L; j++) begin
        int nb;
        nb = k * BLW + adepos_pkg::BL_HDR + j * (D + 2);
        mem[nb] = 16'($signed(14'($urandom)));
        for (int i = 0; i < D; i++) mem[nb + 1 + i] = 16'($urandom);
        mem[nb + D + 1] = 16'($signed(10'($urandom)));
      end
    for (int s = 0; s < NS; s++) for (int i = 0; i < D; i++) xs[s][i] = X_W'($urandom);
    for (int k = 0; k < NBL; k++) begin
      {mem[k * BLW + 3], mem[k * BLW + 2]} = '0;
      {mem[k * BLW + 1], mem[k * BLW]} = 32'($signed(20'($urandom)));
      q.delete();
      for (int s = 0; s < NS; s++) begin errs[k][s] = bl_error(k, s, r); q.push_back(errs[k][s]); end
      q.sort();
      {mem[k * BLW + 3], mem[k * BLW + 2]} = 32'(q[NS / 2]);   // median error as lambda
    end

    // load the parameter memory over the UART
    for (int a = 0; a < DEPTH; a++) begin
      uart_send(8'h57); uart_send(8'(a >> 8)); uart_send(8'(a));
      uart_send(mem[a][15:8]); uart_send(mem[a][7:0]);
    end

    m_nbl = 1; prev_nbl = 1;
    for (int s = 0; s < NS; s++) begin
      for (int k = 0; k < NBL; k++) pat[k] = errs[k][s] > longint'({mem[k * BLW + 3], mem[k * BLW + 2]});
      // model of the decision loop
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
      // run the sample
      if (s > 0) begin spi_write(8'h05); if (vref_mv == 11'd750) n_vswitch++; end
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
      // mechanisms, as seen on the chip's outputs
      if (int'(bl_evals) > prev_nbl) n_grow += (int'(bl_evals) - prev_nbl) / 2;
      if (int'(n_bl) < int'(bl_evals)) n_shrink++;
      if (declare_fault) n_declare++;
      prev_nbl = int'(n_bl);
      tb_cyc = m_evals * (BLW + 5) + 2 * votes + 1;
      check(busy_cycles == tb_cyc, $sformatf("s=%0d busy %0d cycles exp %0d", s, busy_cycles, tb_cyc));
      spi_write(8'h02);                      // 600 mV while idle
      if (vref_mv == 11'd600) n_vswitch++;
    end
    $display("grow=%0d shrink=%0d declare=%0d stay1=%0d vswitch=%0d", n_grow, n_shrink, n_declare, n_stay1, n_vswitch);
    check(n_grow > 0, "ensemble growth occurred");
    check(n_shrink > 0, "ensemble shrink occurred");
    check(n_declare > 0, "fault declaration occurred");
    check(n_stay1 > 0, "healthy sample with one learner occurred");
    check(n_vswitch > 0, "reference switched between 750 mV and 600 mV");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
