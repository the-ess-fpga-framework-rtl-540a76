// adc_interface: brings the samples of NUM_CH ADCs into the fabric.
//
// This is the board-specific source of the data path. Each cycle it
// registers the parallel sample word of every ADC twice (an input register,
// meant to sit in the I/O cell, and a pipeline register), converts it from
// the ADC's output format to two's complement, and sends it on as a data
// stream with a valid bit. The valid bit is high every cycle while enable_i
// is high: the ADCs are taken to be sampled with the fabric clock.
// A sample at either end of the range (full scale) sets the channel's sticky
// over-range flag, which clr_ovr_i clears.
//
// Timing: adc_i in cycle t appears on data_o with valid_o in cycle t+2.
//
// The paper draws four ADC inputs into this block and says the data path uses
// data plus a valid signal; the sample width, the format conversion, the
// register stages, the single clock and the over-range flags are this
// design's own choices.
module adc_interface
  import ess_pkg::*;
#(
  parameter int unsigned NUM_CH        = NUM_ADC,
  parameter bit          OFFSET_BINARY = 1'b1     // ADC delivers offset binary
) (
  input  logic                              clk,
  input  logic                              rst_n,
  input  logic                              enable_i,
  input  logic                              clr_ovr_i,
  input  logic [NUM_CH-1:0][SAMPLE_W-1:0]   adc_i,
  output sample_t [NUM_CH-1:0]              data_o,
  output logic                              valid_o,
  output logic [NUM_CH-1:0]                 ovr_o
);

  logic [NUM_CH-1:0][SAMPLE_W-1:0] in_q;
  logic                            en_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      in_q    <= '0;
      en_q    <= 1'b0;
      data_o  <= '0;
      valid_o <= 1'b0;
      ovr_o   <= '0;
    end else begin
      in_q    <= adc_i;
      en_q    <= enable_i;
      valid_o <= en_q;
      for (int c = 0; c < NUM_CH; c++) begin
        // offset binary to two's complement: invert the MSB
        data_o[c] <= OFFSET_BINARY ? sample_t'({~in_q[c][SAMPLE_W-1], in_q[c][SAMPLE_W-2:0]})
                                   : sample_t'(in_q[c]);
        if (clr_ovr_i)
          ovr_o[c] <= 1'b0;
        else if (en_q && (in_q[c] == '1 || in_q[c] == '0) && OFFSET_BINARY)
          ovr_o[c] <= 1'b1;
        else if (en_q && !OFFSET_BINARY &&
                 (in_q[c] == {1'b0, {(SAMPLE_W-1){1'b1}}} || in_q[c] == {1'b1, {(SAMPLE_W-1){1'b0}}}))
          ovr_o[c] <= 1'b1;
      end
    end
  end

endmodule
