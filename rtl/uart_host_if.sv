// uart_host_if: UART link between the external controller and the processor side.
//
// The external controller loads the trained network into program memory, writes the
// feature vector of each new sample into data memory, starts one inference and gets the
// decision back, all over one 8N1 UART (rxd in, txd out). Commands (this design's own
// byte protocol, big-endian arguments):
//   'W' (0x57) addr_hi addr_lo data_hi data_lo : write one 16-bit word of program memory
//   'X' (0x58) index data                      : write feature `index` (low X_W bits);
//                                                an index of D or more is ignored
//   'S' (0x53)                                 : start one inference (pulse on `start`)
// Unknown command bytes are ignored. When `result_valid` pulses, the one-byte `result`
// (adepos_pkg::result_t: declare_fault, vote_fault, 2 reserved bits, N_BL) is sent back;
// a result that arrives while the transmitter is busy is held until it is free.
// Timing: a write strobe or the start pulse is raised for one clock a few clocks after
// the stop bit of the command's last byte. CLKS_PER_BIT sets the baud rate (135 gives
// about 115200 baud from a 15.5 MHz clock).
module uart_host_if #(
  parameter int unsigned CLKS_PER_BIT = 135,
  parameter int unsigned PAW          = 11,
  parameter int unsigned D            = adepos_pkg::D,
  parameter int unsigned X_W          = adepos_pkg::X_W,
  parameter int unsigned IW           = (D > 1) ? $clog2(D) : 1
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       rxd,
  output logic                       txd,
  // program memory write port
  output logic                       pm_we,
  output logic [PAW-1:0]             pm_waddr,
  output logic [adepos_pkg::WORD_W-1:0] pm_wdata,
  // data memory write port
  output logic                       dm_we,
  output logic [IW-1:0]              dm_waddr,
  output logic [X_W-1:0]             dm_wdata,
  // inference control
  output logic                       start,
  input  logic                       result_valid,
  input  adepos_pkg::result_t        result
);
  logic       rx_valid;
  logic [7:0] rx_data;
  logic       tx_send, tx_busy;
  logic [7:0] tx_data;

  uart_rx #(.CLKS_PER_BIT(CLKS_PER_BIT)) u_rx (.clk, .rst_n, .rxd, .valid(rx_valid), .data(rx_data));
  uart_tx #(.CLKS_PER_BIT(CLKS_PER_BIT)) u_tx (.clk, .rst_n, .send(tx_send), .data(tx_data), .busy(tx_busy), .txd);

  // command parser
  logic [7:0]  cmd;
  logic [2:0]  need;          // argument bytes still expected
  logic [23:0] args;          // arguments shifted in, last byte in [7:0]

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cmd      <= '0;
      need     <= '0;
      args     <= '0;
      pm_we    <= 1'b0;
      pm_waddr <= '0;
      pm_wdata <= '0;
      dm_we    <= 1'b0;
      dm_waddr <= '0;
      dm_wdata <= '0;
      start    <= 1'b0;
    end else begin
      pm_we <= 1'b0;
      dm_we <= 1'b0;
      start <= 1'b0;
      if (rx_valid) begin
        if (need == '0) begin
          cmd <= rx_data;
          unique case (rx_data)
            adepos_pkg::CMD_WPROG: need <= 3'd4;
            adepos_pkg::CMD_WDATA: need <= 3'd2;
            adepos_pkg::CMD_START: start <= 1'b1;
            default: ;
          endcase
        end else begin
          args <= {args[15:0], rx_data};
          need <= need - 3'd1;
          if (need == 3'd1) begin
            if (cmd == adepos_pkg::CMD_WPROG) begin
              pm_we    <= 1'b1;
              pm_waddr <= PAW'({args[23:16], args[15:8]});
              pm_wdata <= {args[7:0], rx_data};
            end else begin
              dm_we    <= (32'(args[7:0]) < D);   // out-of-range index: ignored
              dm_waddr <= IW'(args[7:0]);
              dm_wdata <= X_W'(rx_data);
            end
          end
        end
      end
    end
  end

  // result reply
  logic pending;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pending <= 1'b0;
      tx_data <= '0;
      tx_send <= 1'b0;
    end else begin
      tx_send <= 1'b0;
      if (result_valid) begin
        pending <= 1'b1;
        tx_data <= result;
      end else if (pending && !tx_busy && !tx_send) begin
        tx_send <= 1'b1;
        pending <= 1'b0;
      end
    end
  end
endmodule
