// neariq_demod: near-IQ demodulation of one sampled IF channel.
//
// With near-IQ sampling the ADC takes exactly M samples during N periods of
// the intermediate frequency (IF = fs * N / M). Sample k of a window then
// sits at phase 2*pi*k*N/M, and amplitude and phase of the IF signal follow
// from one window of M samples:
//     I =  (2/M) * sum_k x[k] * cos(2*pi*k*N/M)
//     Q = -(2/M) * sum_k x[k] * sin(2*pi*k*N/M)
// This block evaluates exactly that over consecutive, non-overlapping
// windows, so it gives one I/Q pair per M input samples.
//
// How it works: a phase counter k runs 0..M-1 on every valid input sample.
// Two multiply-accumulators sum x*C[k] and x*S[k], where C and S are the
// cosine and minus-sine tables scaled to COEF_W-bit signed integers and
// computed when the module is elaborated. After the M-th sample the sums are
// scaled by 2/M (a multiplication by a rounded reciprocal and a shift),
// saturated to SAMPLE_W bits and output. clr_i restarts the window at k = 0
// (a trigger, for instance, aligns the phase reference).
//
// Timing: the I/Q pair of a window is valid two cycles after the window's
// last sample. Full scale: an input sine of amplitude A gives |I+jQ| = A
// to within the rounding of the tables.
//
// The paper lists near-IQ sampling among the pre-processing blocks; the
// formula is the standard near-IQ estimator and M = 14, N = 3 is the ratio
// used by this design by default (IF = 3/14 of the sample rate), not a
// number from the paper.
module neariq_demod
  import ess_pkg::*;
#(
  parameter int unsigned M      = 14,
  parameter int unsigned N      = 3,
  parameter int unsigned COEF_W = 18
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     clr_i,
  input  sample_t  x_i,
  input  logic     valid_i,
  output iq_t      iq_o,
  output logic     valid_o
);

  localparam int unsigned K_W    = (M > 1) ? $clog2(M) : 1;
  localparam int unsigned PROD_W = SAMPLE_W + COEF_W;
  localparam int unsigned ACC_W  = PROD_W + $clog2(M) + 1;
  localparam int unsigned RS     = 16;                   // reciprocal precision
  localparam real         PI     = 3.14159265358979323846;
  localparam real         CMAX   = real'((1 << (COEF_W-1)) - 1);
  // 2/M scaled by 2**RS
  localparam logic signed [RS+2:0] RECIP = (RS+3)'($rtoi(2.0 * real'(1 << RS) / real'(M) + 0.5));

  typedef logic signed [COEF_W-1:0] coef_t;
  typedef coef_t tab_t [M];

  function automatic coef_t round_coef(input real v);
    return coef_t'($rtoi(v >= 0.0 ? v + 0.5 : v - 0.5));
  endfunction

  function automatic tab_t mk_cos();
    tab_t t;
    for (int k = 0; k < M; k++) t[k] = round_coef(CMAX * $cos(2.0 * PI * real'(k * N) / real'(M)));
    return t;
  endfunction

  function automatic tab_t mk_msin();
    tab_t t;
    for (int k = 0; k < M; k++) t[k] = round_coef(-CMAX * $sin(2.0 * PI * real'(k * N) / real'(M)));
    return t;
  endfunction

  localparam tab_t COS_T  = mk_cos();
  localparam tab_t MSIN_T = mk_msin();

  // Scales an accumulated sum by 2/M and saturates it to a sample.
  function automatic sample_t scale_sat(input logic signed [ACC_W-1:0] acc);
    logic signed [ACC_W+RS+2:0] p;
    logic signed [ACC_W+RS+2:0] s;
    p = (ACC_W+RS+3)'(acc) * (ACC_W+RS+3)'(RECIP);
    // round half up, then drop the table scale (COEF_W-1) and RS
    s = (p + ((ACC_W+RS+3)'(1) <<< (COEF_W - 2 + RS))) >>> (COEF_W - 1 + RS);
    if (s > (ACC_W+RS+3)'(sample_t'({1'b0, {(SAMPLE_W-1){1'b1}}})))      return {1'b0, {(SAMPLE_W-1){1'b1}}};
    else if (s < -(ACC_W+RS+3)'(sample_t'({1'b0, {(SAMPLE_W-1){1'b1}}}))) return {1'b1, {(SAMPLE_W-2){1'b0}}, 1'b1};
    else return sample_t'(s);
  endfunction

  logic [K_W-1:0]           k_q;
  logic signed [ACC_W-1:0]  acc_i, acc_q, sum_i, sum_q, win_i, win_q;
  logic                     win_v;

  assign sum_i = acc_i + ACC_W'(x_i * COS_T[k_q]);
  assign sum_q = acc_q + ACC_W'(x_i * MSIN_T[k_q]);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      k_q <= '0; acc_i <= '0; acc_q <= '0;
      win_i <= '0; win_q <= '0; win_v <= 1'b0;
      iq_o <= '0; valid_o <= 1'b0;
    end else begin
      win_v   <= 1'b0;
      valid_o <= win_v;
      if (win_v) begin
        iq_o.i <= scale_sat(win_i);
        iq_o.q <= scale_sat(win_q);
      end
      if (clr_i) begin
        k_q <= '0; acc_i <= '0; acc_q <= '0;
      end else if (valid_i) begin
        if (32'(k_q) == M - 1) begin
          k_q   <= '0;
          acc_i <= '0;
          acc_q <= '0;
          win_i <= sum_i;
          win_q <= sum_q;
          win_v <= 1'b1;
        end else begin
          k_q   <= k_q + 1'b1;
          acc_i <= sum_i;
          acc_q <= sum_q;
        end
      end
    end
  end

endmodule
