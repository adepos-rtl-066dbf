// tb_spi_vref: self-checking test of the SPI reference register. Sends random 8-bit
// frames (valid and other addresses), short frames that are aborted by raising cs_n,
// and long frames with extra bits, and checks the code and the millivolt value against
// a testbench model (500 mV + 50 mV per step, every code from 0 to 15 visited). Also
// checks the reset value, 750 mV.
module tb_spi_vref;
  logic rst_n, sclk, cs_n, mosi;
  logic [3:0] vref_code;
  logic [10:0] vref_mv;
  int checks = 0, failures = 0;
  bit [15:0] seen;

  spi_vref dut (.rst_n, .sclk, .cs_n, .mosi, .vref_code, .vref_mv);

  initial begin : watchdog
    #5ms;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  // sends the first n bits of `bits`, starting at bit 15
  task automatic frame(input logic [15:0] bits, input int n);
    cs_n = 0; #20;
    for (int i = 15; i > 15 - n; i--) begin
      mosi = bits[i]; #10 sclk = 1; #10 sclk = 0;
    end
    #10 cs_n = 1; #20;
  endtask

  initial begin
    int model, n;
    logic [7:0] by;
    rst_n = 1; sclk = 0; cs_n = 1; mosi = 0; seen = '0;
    #5 rst_n = 0;
    #10;
    check(vref_code == 4'd5 && vref_mv == 11'd750, "reset value 750 mV");
    rst_n = 1;
    model = 5;
    for (int t = 0; t < 400; t++) begin
      by = 8'($urandom);
      if ($urandom_range(0, 2) != 0) by[7:4] = 4'd0;
      case ($urandom_range(0, 5))
        0: begin n = $urandom_range(1, 7); frame({by, 8'h00}, n); end   // aborted
        1: begin frame({by, 8'($urandom)}, 8 + $urandom_range(1, 8)); if (by[7:4] == 0) model = by[3:0]; end
        default: begin frame({by, 8'h00}, 8); if (by[7:4] == 0) model = by[3:0]; end
      endcase
      seen[model] = 1'b1;
      check(vref_code == 4'(model), $sformatf("t=%0d code %0d exp %0d", t, vref_code, model));
      check(vref_mv == 11'(500 + 50 * model), $sformatf("t=%0d mv %0d", t, vref_mv));
    end
    check(seen == 16'hFFFF, "all codes visited");
    check(vref_mv == 11'(500 + 50 * model), "final");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
