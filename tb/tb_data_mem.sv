// tb_data_mem: test of the feature register file, at the default D = 5 and at D = 16 (a
// power of two, where the index just fits its field and nothing is out of range). Random
// writes (for D = 5 some to an index beyond D, which must be ignored) are mirrored in a
// testbench model and each parallel output is compared after every write; reset must clear
// all features.
module tb_data_mem;
  localparam int D = adepos_pkg::D, X_W = adepos_pkg::X_W, D2 = 16;
  logic clk = 1'b0, rst_n, we;
  logic [2:0] waddr;
  logic [3:0] waddr2;
  logic [X_W-1:0] wdata;
  logic [D-1:0][X_W-1:0] x, model;
  logic [D2-1:0][X_W-1:0] x2, model2;
  int checks = 0, failures = 0;

  data_mem dut (.clk, .rst_n, .we, .waddr, .wdata, .x);
  data_mem #(.D(D2), .X_W(X_W)) dut16 (.clk, .rst_n, .we, .waddr(waddr2), .wdata, .x(x2));

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 0; we = 0; waddr = 0; waddr2 = 0; wdata = 0; model = '0; model2 = '0;
    #12 rst_n = 1;
    checks++; if (x !== '0 || x2 !== '0) failures++;
    for (int i = 0; i < 2000; i++) begin
      @(negedge clk);
      we = $urandom_range(0, 3) != 0;
      waddr = 3'($urandom_range(0, 7));
      waddr2 = 4'($urandom);
      wdata = X_W'($urandom);
      @(posedge clk); #1;
      if (we && waddr < D) model[waddr] = wdata;
      if (we) model2[waddr2] = wdata;
      checks += 2;
      if (x !== model) begin
        failures++;
        if (failures < 10) $display("FAIL i=%0d x=%h model=%h", i, x, model);
      end
      if (x2 !== model2) begin
        failures++;
        if (failures < 10) $display("FAIL D=16 i=%0d x=%h model=%h", i, x2, model2);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
