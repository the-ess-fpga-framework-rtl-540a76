// decimator: boxcar filter and decimation of an I/Q stream.
//
// The block averages R = 2**dec_log2_i consecutive I/Q samples and outputs
// one sample per R inputs (an accumulate-and-dump, i.e. a moving-average
// low-pass filter read out once per window, which is also a first-order CIC
// decimator). dec_log2_i is set at run time, 0 to MAX_LOG2; 0 passes the
// stream through with one cycle of delay. The sum is divided by R with an
// arithmetic shift (rounding towards minus infinity). clr_i restarts the
// window. A change of dec_log2_i takes effect at the next window; for a
// clean restart pulse clr_i.
//
// Timing: the output of a window is valid one cycle after its last input.
//
// The paper lists decimators and filters among the pre-processing blocks
// without describing them; the boxcar form and the power-of-two factor are
// this design's own choices.
module decimator
  import ess_pkg::*;
#(
  parameter int unsigned MAX_LOG2 = 8
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          clr_i,
  input  logic [$clog2(MAX_LOG2+1)-1:0] dec_log2_i,
  input  iq_t                           iq_i,
  input  logic                          valid_i,
  output iq_t                           iq_o,
  output logic                          valid_o
);

  localparam int unsigned ACC_W = SAMPLE_W + MAX_LOG2;

  logic [MAX_LOG2-1:0]       cnt_q;
  logic [MAX_LOG2-1:0]       last_cnt;
  logic signed [ACC_W-1:0]   acc_i, acc_q, sum_i, sum_q;
  logic [$clog2(MAX_LOG2+1)-1:0] sh;

  assign sh       = (32'(dec_log2_i) > MAX_LOG2) ? ($clog2(MAX_LOG2+1))'(MAX_LOG2) : dec_log2_i;
  assign last_cnt = MAX_LOG2'((1 << sh) - 1);
  assign sum_i    = acc_i + ACC_W'(iq_i.i);
  assign sum_q    = acc_q + ACC_W'(iq_i.q);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt_q <= '0; acc_i <= '0; acc_q <= '0;
      iq_o <= '0; valid_o <= 1'b0;
    end else begin
      valid_o <= 1'b0;
      if (clr_i) begin
        cnt_q <= '0; acc_i <= '0; acc_q <= '0;
      end else if (valid_i) begin
        if (cnt_q >= last_cnt) begin
          cnt_q   <= '0;
          acc_i   <= '0;
          acc_q   <= '0;
          iq_o.i  <= SAMPLE_W'(sum_i >>> sh);
          iq_o.q  <= SAMPLE_W'(sum_q >>> sh);
          valid_o <= 1'b1;
        end else begin
          cnt_q <= cnt_q + 1'b1;
          acc_i <= sum_i;
          acc_q <= sum_q;
        end
      end
    end
  end

endmodule
