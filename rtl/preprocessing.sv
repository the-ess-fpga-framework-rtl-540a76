// preprocessing: the board-independent part of the data path.
//
// Between the ADC interface and the custom logic, each of the NUM_CH
// channels passes a near-IQ demodulator (neariq_demod) and a decimator
// (decimator), which turn the sampled IF signal into a stream of I/Q pairs
// at a lower rate. All channels share one phase reference and one decimation
// setting, so their output samples are valid in the same cycle
// (iq_valid_o).
//
// The block also holds the data path's memory interface (mem_writer): one
// channel, chosen by cap_ch_i, can be stored in the on-board memory, either
// raw (cap_src_i = SRC_RAW: two consecutive 16-bit ADC samples per 32-bit
// word, the earlier one in bits 15:0) or processed (SRC_PROCESSED: one I/Q
// pair per word, I in bits 31:16 and Q in bits 15:0). cap_start_i starts a
// capture of cap_len_i bytes at cap_base_i; the capture source should not
// change during a capture.
//
// Timing: an I/Q pair leaves the decimator one cycle after the demodulator
// delivers it, i.e. three cycles after the last ADC sample of its window
// when the decimation is 1.
//
// The paper says the pre-processing is modular, may hold filters, decimators
// and near-IQ sampling, and has a memory interface for raw or processed
// data. The chain order (demodulation, then decimation), one chain per
// channel and the word formats are this design's own choices.
module preprocessing
  import ess_pkg::*;
#(
  parameter int unsigned NUM_CH     = NUM_ADC,
  parameter int unsigned IQ_M       = 14,
  parameter int unsigned IQ_N       = 3,
  parameter int unsigned MAX_LOG2   = 8,
  parameter int unsigned BURST_LEN  = 16,
  parameter int unsigned FIFO_DEPTH = 32
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // ADC samples
  input  sample_t [NUM_CH-1:0]          adc_i,
  input  logic                          adc_valid_i,
  // settings
  input  logic                          clr_i,
  input  logic [$clog2(MAX_LOG2+1)-1:0] dec_log2_i,
  input  logic                          cap_start_i,
  input  capture_src_e                  cap_src_i,
  input  logic [$clog2(NUM_CH+1)-1:0]   cap_ch_i,
  input  axi_addr_t                     cap_base_i,
  input  logic [31:0]                   cap_len_i,
  // processed stream to the custom logic
  output iq_t [NUM_CH-1:0]              iq_o,
  output logic                          iq_valid_o,
  // memory interface
  output axi_m_req_t                    axi_req,
  input  axi_m_resp_t                   axi_resp,
  output logic                          cap_busy_o,
  output logic                          cap_done_o,
  output logic                          cap_overflow_o,
  output logic                          cap_err_o,
  output logic [31:0]                   cap_beats_o
);

  iq_t  [NUM_CH-1:0] dm_iq;
  logic [NUM_CH-1:0] dm_v, dc_v;

  for (genvar c = 0; c < NUM_CH; c++) begin : g_ch
    neariq_demod #(.M(IQ_M), .N(IQ_N)) u_iq (
      .clk, .rst_n, .clr_i,
      .x_i(adc_i[c]), .valid_i(adc_valid_i),
      .iq_o(dm_iq[c]), .valid_o(dm_v[c])
    );
    decimator #(.MAX_LOG2(MAX_LOG2)) u_dec (
      .clk, .rst_n, .clr_i, .dec_log2_i,
      .iq_i(dm_iq[c]), .valid_i(dm_v[c]),
      .iq_o(iq_o[c]), .valid_o(dc_v[c])
    );
  end

  // All channels run in lock step.
  assign iq_valid_o = dc_v[0];

  // Capture word formation
  logic [$clog2(NUM_CH)-1:0] ch;
  logic                      raw_half;   // 1: low half holds a sample
  sample_t                   raw_lo;
  logic [31:0]               cap_word;
  logic                      cap_valid;

  assign ch = (32'(cap_ch_i) < NUM_CH) ? cap_ch_i[$clog2(NUM_CH)-1:0] : '0;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      raw_half <= 1'b0; raw_lo <= '0;
    end else if (cap_start_i || clr_i) begin
      raw_half <= 1'b0;
    end else if (adc_valid_i && cap_busy_o) begin
      raw_half <= !raw_half;
      if (!raw_half) raw_lo <= adc_i[ch];
    end
  end

  always_comb begin
    if (cap_src_i == SRC_RAW) begin
      cap_word  = {adc_i[ch], raw_lo};
      cap_valid = adc_valid_i && raw_half;
    end else begin
      cap_word  = {iq_o[ch].i, iq_o[ch].q};
      cap_valid = iq_valid_o;
    end
  end

  mem_writer #(.BURST_LEN(BURST_LEN), .FIFO_DEPTH(FIFO_DEPTH)) u_mem (
    .clk, .rst_n,
    .start_i(cap_start_i), .base_i(cap_base_i), .len_i(cap_len_i),
    .data_i(cap_word), .valid_i(cap_valid),
    .axi_req, .axi_resp,
    .busy_o(cap_busy_o), .done_o(cap_done_o), .overflow_o(cap_overflow_o),
    .err_o(cap_err_o), .beats_o(cap_beats_o)
  );

endmodule
