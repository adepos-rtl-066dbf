// uart_rx: 8N1 UART receiver (helper of uart_host_if).
//
// The line is synchronised with two flip-flops. A falling edge starts a frame; the
// start bit is confirmed at its middle, then the eight data bits (LSB first) are sampled
// in the middle of each bit period and the stop bit is checked. `valid` pulses for one
// cycle with `data` when a frame with a correct stop bit has been received; a frame with
// a bad stop bit is dropped. CLKS_PER_BIT is the clock-to-baud ratio.
module uart_rx #(
  parameter int unsigned CLKS_PER_BIT = 135
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       rxd,
  output logic       valid,
  output logic [7:0] data
);
  localparam int unsigned CW = $clog2(CLKS_PER_BIT + 1);
  typedef enum logic [1:0] {R_IDLE, R_START, R_DATA, R_STOP} rstate_e;

  rstate_e       state;
  logic [1:0]    sync;
  logic [CW-1:0] cnt;
  logic [2:0]    bitn;
  logic [7:0]    shreg;
  logic          rx;

  assign rx = sync[1];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sync  <= 2'b11;
      state <= R_IDLE;
      cnt   <= '0;
      bitn  <= '0;
      shreg <= '0;
      data  <= '0;
      valid <= 1'b0;
    end else begin
      sync  <= {sync[0], rxd};
      valid <= 1'b0;
      unique case (state)
        R_IDLE: if (!rx) begin
          state <= R_START;
          cnt   <= CW'(CLKS_PER_BIT / 2);
        end
        R_START: begin
          if (cnt != '0) cnt <= cnt - CW'(1);
          else if (rx)   state <= R_IDLE;          // glitch, not a start bit
          else begin
            state <= R_DATA;
            cnt   <= CW'(CLKS_PER_BIT - 1);
            bitn  <= '0;
          end
        end
        R_DATA: begin
          if (cnt != '0) cnt <= cnt - CW'(1);
          else begin
            shreg <= {rx, shreg[7:1]};
            cnt   <= CW'(CLKS_PER_BIT - 1);
            bitn  <= bitn + 3'd1;
            if (bitn == 3'd7) state <= R_STOP;
          end
        end
        R_STOP: begin
          if (cnt != '0) cnt <= cnt - CW'(1);
          else begin
            state <= R_IDLE;
            if (rx) begin
              valid <= 1'b1;
              data  <= shreg;
            end
          end
        end
        default: state <= R_IDLE;
      endcase
    end
  end
endmodule
