// dac_interface: drives the DAC from the output stream of the custom logic.
//
// This is the board-specific sink of the data path. A sample that arrives
// with valid_i is registered and held on the DAC pins until the next valid
// sample, since the DAC needs a value every clock while the stream may have
// gaps. While enable_i is low the output is held at mid-scale (zero). The
// sample is converted from two's complement to the DAC's format (offset
// binary when OFFSET_BINARY is set). Each valid sample taken is counted in
// count_o (wrapping), so the CPU can see that the stream is alive.
//
// Timing: data_i with valid_i in cycle t is on dac_o from cycle t+1.
//
// The paper names the block and says the data path is data plus valid;
// holding, the format and the counter are this design's own choices.
module dac_interface
  import ess_pkg::*;
#(
  parameter bit OFFSET_BINARY = 1'b1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 enable_i,
  input  sample_t              data_i,
  input  logic                 valid_i,
  output logic [SAMPLE_W-1:0]  dac_o,
  output logic [31:0]          count_o
);

  localparam logic [SAMPLE_W-1:0] MSB = {1'b1, {(SAMPLE_W-1){1'b0}}};

  // Converts a two's complement sample to the DAC code.
  function automatic logic [SAMPLE_W-1:0] to_code(input sample_t s);
    return OFFSET_BINARY ? (SAMPLE_W'(s) ^ MSB) : SAMPLE_W'(s);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dac_o   <= to_code('0);
      count_o <= '0;
    end else if (!enable_i) begin
      dac_o   <= to_code('0);
    end else if (valid_i) begin
      dac_o   <= to_code(data_i);
      count_o <= count_o + 32'd1;
    end
  end

endmodule
