// spi_vref: SPI-programmed reference code of the buck (DC-DC) converter.
//
// The converter output is set by a 4-bit code: Vout = 500 mV + 50 mV * code, i.e.
// 500 mV .. 1250 mV in 50 mV steps, the range and step of the paper's converter. The
// external controller writes the code over a write-only SPI port so it can, for
// instance, choose 750 mV while the processor runs and 600 mV while it sleeps.
// Frame (this design's choice): SPI mode 0 (data sampled on the rising edge of sclk),
// 8 bits MSB first while cs_n is low: {addr[3:0], code[3:0]}. Only address 0 (the
// reference register) is defined; frames to other addresses are ignored. The register
// changes on the eighth rising sclk edge of the frame; extra bits in the same frame are
// ignored. Raising cs_n restarts the bit counter (asynchronously). The logic runs in the
// sclk domain, so the reference can be reprogrammed while the processor clock is off.
// `vref_mv` gives the selected voltage in millivolts for the analog reference.
// Reset (rst_n low) selects RESET_CODE (750 mV, the operating point the system uses).
module spi_vref #(
  parameter logic [3:0] RESET_CODE = 4'd5
) (
  input  logic        rst_n,
  input  logic        sclk,
  input  logic        cs_n,
  input  logic        mosi,
  output logic [3:0]  vref_code,
  output logic [10:0] vref_mv
);
  logic [2:0] nbits;   // bits received in this frame (saturates after the 8th)
  logic [6:0] shreg;   // first seven bits of the frame
  logic       full;    // eight bits already received

  always_ff @(posedge sclk or posedge cs_n) begin
    if (cs_n) begin
      nbits <= '0;
      full  <= 1'b0;
      shreg <= '0;
    end else if (!full) begin
      shreg <= {shreg[5:0], mosi};
      nbits <= nbits + 3'd1;
      if (nbits == 3'd7) full <= 1'b1;
    end
  end

  always_ff @(posedge sclk or negedge rst_n) begin
    if (!rst_n)
      vref_code <= RESET_CODE;
    else if (!cs_n && !full && nbits == 3'd7 && shreg[6:3] == 4'd0)
      vref_code <= {shreg[2:0], mosi};
  end

  assign vref_mv = 11'd500 + 11'd50 * 11'(vref_code);
endmodule
