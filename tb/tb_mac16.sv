// tb_mac16: self-checking test of the 16x16 multiply / multiply-accumulate unit.
// Drives random operands and random operation sequences (including loads) and compares
// the accumulator after every cycle with a 64-bit integer reference model. Also checks
// the one-cycle latency: the result of an operation issued at edge n is visible right
// after edge n.
module tb_mac16;
  import adepos_pkg::*;

  logic        clk = 1'b0;
  logic        rst_n;
  logic        en, load;
  mac_op_e     op;
  logic [15:0] a, b;
  logic [31:0] load_val, acc;
  int checks = 0, failures = 0;
  longint ref_acc;

  mac16 dut (.clk, .rst_n, .en, .op, .a, .b, .load, .load_val, .acc);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic longint product(mac_op_e o, logic [15:0] x, logic [15:0] y);
    if (o == OP_MPYS || o == OP_MACS) return longint'($signed(x)) * longint'($signed(y));
    else                              return longint'(x) * longint'(y);
  endfunction

  initial begin
    rst_n = 1'b0; en = 1'b0; load = 1'b0; op = OP_MPY; a = '0; b = '0; load_val = '0;
    ref_acc = 0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    // directed corner cases first, then random
    for (int i = 0; i < 4000; i++) begin
      @(negedge clk);
      load = ($urandom_range(0, 15) == 0);
      en   = ($urandom_range(0, 7) != 0);
      op   = mac_op_e'($urandom_range(0, 3));
      case (i)
        0: begin a = 16'hFFFF; b = 16'hFFFF; op = OP_MPY;  load = 0; en = 1; end
        1: begin a = 16'hFFFF; b = 16'hFFFF; op = OP_MPYS; load = 0; en = 1; end
        2: begin a = 16'h8000; b = 16'h8000; op = OP_MPYS; load = 0; en = 1; end
        3: begin a = 16'h8000; b = 16'h7FFF; op = OP_MACS; load = 0; en = 1; end
        default: begin a = 16'($urandom); b = 16'($urandom); end
      endcase
      load_val = $urandom;
      @(posedge clk);
      if (load)    ref_acc = longint'(load_val);
      else if (en) begin
        if (op == OP_MAC || op == OP_MACS) ref_acc = ref_acc + product(op, a, b);
        else                               ref_acc = product(op, a, b);
      end
      ref_acc = ref_acc & 64'hFFFF_FFFF;
      #1;
      checks++;
      if (acc !== 32'(ref_acc)) begin
        failures++;
        if (failures < 10) $display("MISMATCH i=%0d op=%s a=%h b=%h acc=%h exp=%h", i, op.name(), a, b, acc, 32'(ref_acc));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
