// uart_tx: 8N1 UART transmitter (helper of uart_host_if).
//
// `send` with `data` (accepted only while `busy` is low) transmits a start bit, eight
// data bits LSB first and a stop bit, each CLKS_PER_BIT clocks long. The line idles high.
module uart_tx #(
  parameter int unsigned CLKS_PER_BIT = 135
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       send,
  input  logic [7:0] data,
  output logic       busy,
  output logic       txd
);
  localparam int unsigned CW = $clog2(CLKS_PER_BIT + 1);

  logic [9:0]    frame;    // stop, data[7:0], start; shifted out LSB first
  logic [3:0]    left;     // bits still to send
  logic [CW-1:0] cnt;

  assign busy = (left != '0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      frame <= '1;
      left  <= '0;
      cnt   <= '0;
      txd   <= 1'b1;
    end else if (left == '0) begin
      txd <= 1'b1;
      if (send) begin
        frame <= {1'b1, data, 1'b0};
        left  <= 4'd10;
        cnt   <= '0;
      end
    end else if (cnt == '0) begin
      txd   <= frame[0];
      frame <= {1'b1, frame[9:1]};
      cnt   <= CW'(CLKS_PER_BIT - 1);
    end else begin
      cnt <= cnt - CW'(1);
      if (cnt == CW'(1)) left <= left - 4'd1;
    end
  end
endmodule
