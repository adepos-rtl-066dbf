// tb_uart_host_if: self-checking test of the UART host link (with its receiver and
// transmitter). The testbench bit-bangs 8N1 frames at CLKS_PER_BIT = 8 clocks per bit:
// random program-memory writes, feature writes (some to an index of D or more, which must
// be ignored), garbage bytes and start commands. A
// monitor records every write strobe and start pulse; they are compared with what was
// sent. Results pulsed on result_valid are decoded from txd by a testbench receiver and
// compared, including one that arrives while the transmitter is still busy.
module tb_uart_host_if;
  localparam int CPB = 8;
  logic clk = 1'b0, rst_n, rxd, txd;
  logic pm_we, dm_we, start, result_valid;
  logic [10:0] pm_waddr;
  logic [15:0] pm_wdata;
  logic [2:0] dm_waddr;
  logic [5:0] dm_wdata;
  adepos_pkg::result_t result;
  int checks = 0, failures = 0;
  int n_pm = 0, n_dm = 0, n_dm_skip = 0, n_start = 0;
  logic [26:0] pm_log [$];
  logic [8:0]  dm_log [$];
  logic [7:0]  rx_bytes [$];

  uart_host_if #(.CLKS_PER_BIT(CPB)) dut (.clk, .rst_n, .rxd, .txd, .pm_we, .pm_waddr,
    .pm_wdata, .dm_we, .dm_waddr, .dm_wdata, .start, .result_valid, .result);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (400000) @(posedge clk);
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
    if (pm_we) pm_log.push_back({pm_waddr, pm_wdata});
    if (dm_we) dm_log.push_back({dm_waddr, dm_wdata});
    if (start) n_start++;
  end

  task automatic send_byte(input logic [7:0] b);
    rxd = 0; repeat (CPB) @(posedge clk);
    for (int i = 0; i < 8; i++) begin rxd = b[i]; repeat (CPB) @(posedge clk); end
    rxd = 1; repeat (CPB) @(posedge clk);
  endtask

  // testbench receiver on txd
  initial begin
    logic [7:0] b;
    forever begin
      @(negedge txd);
      repeat (CPB / 2) @(posedge clk);
      for (int i = 0; i < 8; i++) begin repeat (CPB) @(posedge clk); b[i] = txd; end
      repeat (CPB) @(posedge clk);
      check(txd == 1'b1, "stop bit");
      rx_bytes.push_back(b);
    end
  end

  initial begin
    logic [10:0] a; logic [15:0] d; logic [2:0] fi; logic [5:0] fd; logic [7:0] fidx;
    logic [26:0] got_pm; logic [8:0] got_dm; int starts_before;
    adepos_pkg::result_t r1, r2;
    rst_n = 0; rxd = 1; result_valid = 0; result = '0;
    #22 rst_n = 1;
    repeat (5) @(posedge clk);
    for (int t = 0; t < 120; t++) begin
      case ($urandom_range(0, 3))
        0, 1: begin
          a = 11'($urandom); d = 16'($urandom);
          send_byte(8'h57); send_byte({5'b0, a[10:8]}); send_byte(a[7:0]);
          send_byte(d[15:8]); send_byte(d[7:0]);
          repeat (4) @(posedge clk);
          check(pm_log.size() == 1, "one program write");
          if (pm_log.size() > 0) begin
            got_pm = pm_log.pop_front();
            check(got_pm == {a, d}, $sformatf("pm write %h exp %h", got_pm, {a, d}));
          end
          n_pm++;
        end
        2: begin
          fidx = ($urandom_range(0, 3) == 0) ? 8'($urandom) : 8'($urandom_range(0, 4));
          fi = 3'(fidx); fd = 6'($urandom);
          send_byte(8'h58); send_byte(fidx); send_byte({2'b0, fd});
          repeat (4) @(posedge clk);
          if (fidx < 8'd5) begin
            check(dm_log.size() == 1, "one data write");
            if (dm_log.size() > 0) begin
              got_dm = dm_log.pop_front();
              check(got_dm == {fi, fd}, $sformatf("dm write %h exp %h", got_dm, {fi, fd}));
            end
          end else begin
            check(dm_log.size() == 0, $sformatf("feature index %0d ignored", fidx));
            dm_log.delete();
            n_dm_skip++;
          end
          n_dm++;
        end
        default: begin
          starts_before = n_start;
          send_byte(8'h00);  // unknown command: ignored
          send_byte(8'h53);
          repeat (4) @(posedge clk);
          check(n_start == starts_before + 1, "start pulse");
          check(pm_log.size() == 0 && dm_log.size() == 0, "no stray writes");
        end
      endcase
    end
    // two results back to back: the second waits for the transmitter
    r1 = '{declare_fault: 1'b1, vote_fault: 1'b1, rsvd: 2'b00, n_bl: 4'd9};
    r2 = '{declare_fault: 1'b0, vote_fault: 1'b0, rsvd: 2'b00, n_bl: 4'd3};
    @(negedge clk) begin result_valid = 1; result = r1; end
    @(negedge clk) result_valid = 0;
    repeat (3 * CPB) @(posedge clk);
    @(negedge clk) begin result_valid = 1; result = r2; end
    @(negedge clk) result_valid = 0;
    repeat (25 * CPB) @(posedge clk);
    check(rx_bytes.size() == 2, $sformatf("two result bytes, got %0d", rx_bytes.size()));
    if (rx_bytes.size() == 2) begin
      check(rx_bytes[0] == r1, "first result");
      check(rx_bytes[1] == r2, "second result");
    end
    check(n_pm > 0 && n_dm > 0 && n_dm_skip > 0 && n_start > 0, "all commands exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
