// tb_neariq_demod: self-checking test of the near-IQ demodulator.
// Feeds IF sine waves x[k] = A*cos(2*pi*k*N/M + phi) with random amplitude
// and phase (and random gaps in valid) to two instances, the default
// M = 14, N = 3 and plain IQ sampling M = 4, N = 1. Every output pair is
// compared with I = A*cos(phi), Q = A*sin(phi) computed here in floating
// point from the same integer samples, within 3 LSB; the output must come
// two cycles after the last sample of the window, once per M samples.
// A restart with clr_i mid-window and a full-scale input that saturates
// are checked too.
module tb_neariq_demod;
  import ess_pkg::*;

  localparam real PI = 3.14159265358979323846;
  logic clk = 0, rst_n = 0, clr = 0, valid = 0;
  sample_t x;
  iq_t  iq14, iq4;
  logic v14, v4;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  neariq_demod                   dut14 (.clk, .rst_n, .clr_i(clr), .x_i(x), .valid_i(valid), .iq_o(iq14), .valid_o(v14));
  neariq_demod #(.M(4), .N(1))   dut4  (.clk, .rst_n, .clr_i(clr), .x_i(x), .valid_i(valid), .iq_o(iq4),  .valid_o(v4));

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // reference: expected outputs queued per instance, with the cycle due
  real ei14[$], eq14[$], ei4[$], eq4[$];
  int  due14[$], due4[$];
  real si14, sq14, si4, sq4;
  int  k14, k4, cyc, n_sat = 0;


  always @(posedge clk) if (rst_n) begin
    if (v14) begin
      check(ei14.size() > 0, "unexpected output (M=14)");
      if (ei14.size() > 0) begin
        check(cyc == due14[0], $sformatf("M=14 latency: cycle %0d, due %0d", cyc, due14[0]));
        check(fabs(real'(iq14.i) - ei14[0]) <= 3.0 && fabs(real'(iq14.q) - eq14[0]) <= 3.0,
              $sformatf("M=14 I/Q %0d/%0d vs %f/%f", iq14.i, iq14.q, ei14[0], eq14[0]));
        if (iq14.i == 16'sd32767) n_sat++;
        void'(ei14.pop_front()); void'(eq14.pop_front()); void'(due14.pop_front());
      end
    end
    if (v4) begin
      check(ei4.size() > 0, "unexpected output (M=4)");
      if (ei4.size() > 0) begin
        check(cyc == due4[0], "M=4 latency");
        check(fabs(real'(iq4.i) - ei4[0]) <= 3.0 && fabs(real'(iq4.q) - eq4[0]) <= 3.0,
              $sformatf("M=4 I/Q %0d/%0d vs %f/%f", iq4.i, iq4.q, ei4[0], eq4[0]));
        void'(ei4.pop_front()); void'(eq4.pop_front()); void'(due4.pop_front());
      end
    end
    cyc++;   // counted after the checks: cyc is the number of earlier edges
  end

  function automatic real fabs(real v);
    return v < 0.0 ? -v : v;
  endfunction

  function automatic real sat(real v);
    return v > 32767.0 ? 32767.0 : (v < -32767.0 ? -32767.0 : v);
  endfunction

  // drive one sample and update the reference sums
  task automatic drive(sample_t s);
    real th14, th4;
    #1;
    x = s; valid = 1;
    th14 = 2.0 * PI * real'(k14 * 3) / 14.0;
    th4  = 2.0 * PI * real'(k4) / 4.0;
    si14 += real'(s) * $cos(th14); sq14 -= real'(s) * $sin(th14);
    si4  += real'(s) * $cos(th4);  sq4  -= real'(s) * $sin(th4);
    @(posedge clk);
    #1;      // cyc now counts the edge that took the sample
    if (k14 == 13) begin
      ei14.push_back(sat(si14 * 2.0 / 14.0)); eq14.push_back(sat(sq14 * 2.0 / 14.0)); due14.push_back(cyc + 1);
      k14 = 0; si14 = 0; sq14 = 0;
    end else k14++;
    if (k4 == 3) begin
      ei4.push_back(sat(si4 * 0.5)); eq4.push_back(sat(sq4 * 0.5)); due4.push_back(cyc + 1);
      k4 = 0; si4 = 0; sq4 = 0;
    end else k4++;
    valid = 0;
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int n = 0;
    x = '0; k14 = 0; k4 = 0; si14 = 0; sq14 = 0; si4 = 0; sq4 = 0; cyc = 0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    for (int seg = 0; seg < 20; seg++) begin
      automatic real a = real'($urandom_range(30000, 100));
      automatic real ph = real'($urandom_range(359)) * PI / 180.0;
      for (int j = 0; j < 56; j++) begin
        drive(sample_t'($rtoi(a * $cos(2.0 * PI * real'(n * 3) / 14.0 + ph))));
        n++;
        if ($urandom_range(3) == 0) @(posedge clk);   // gap in the stream
      end
    end
    // restart mid-window
    drive(16'sd1000); drive(-16'sd1000); drive(16'sd500);
    #1 clr = 1; @(posedge clk); #1 clr = 0;
    k14 = 0; k4 = 0; si14 = 0; sq14 = 0; si4 = 0; sq4 = 0; n = 0;
    // full-scale square wave in phase with the IF: I of the M=14 instance
    // exceeds full scale and must saturate
    for (int j = 0; j < 56; j++)
      drive(($cos(2.0 * PI * real'(j * 3) / 14.0) >= 0.0) ? 16'sd32767 : -16'sd32767);
    repeat (5) @(posedge clk);
    check(ei14.size() == 0 && ei4.size() == 0, "every expected output arrived");
    check(n_sat == 4, $sformatf("saturation seen in the four full-scale windows (%0d)", n_sat));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
