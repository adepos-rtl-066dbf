// tb_prog_mem: test of the parameter memory at its default size. Writes a pseudo-random
// word to every address, then reads every address back in a shuffled order and checks
// the one-cycle read latency and that a read with `re` low keeps the previous output.
module tb_prog_mem;
  localparam int DEPTH = adepos_pkg::NBL_MAX * adepos_pkg::bl_words(adepos_pkg::L, adepos_pkg::D);
  localparam int AW = $clog2(DEPTH);
  logic clk = 1'b0;
  logic we, re;
  logic [AW-1:0] waddr, raddr;
  logic [15:0] wdata, rdata;
  logic [15:0] model [DEPTH];
  int checks = 0, failures = 0;

  prog_mem dut (.clk, .we, .waddr, .wdata, .re, .raddr, .rdata);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [15:0] held;
    int a;
    we = 0; re = 0; waddr = '0; raddr = '0; wdata = '0;
    for (int i = 0; i < DEPTH; i++) begin
      @(negedge clk);
      we = 1; waddr = AW'(i); wdata = 16'($urandom); model[i] = wdata;
    end
    @(negedge clk) we = 0;
    for (int i = 0; i < 3 * DEPTH; i++) begin
      @(negedge clk);
      a = (i * 7 + 3) % DEPTH;
      re = 1; raddr = AW'(a);
      @(posedge clk); #1;
      checks++;
      if (rdata !== model[a]) begin
        failures++;
        if (failures < 10) $display("FAIL addr %0d got %h exp %h", a, rdata, model[a]);
      end
      if (i % 50 == 0) begin      // hold check
        held = rdata;
        @(negedge clk) begin re = 0; raddr = AW'((a + 1) % DEPTH); end
        @(posedge clk); #1;
        checks++;
        if (rdata !== held) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
