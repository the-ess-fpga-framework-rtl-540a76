// tb_preprocessing: self-checking test of the pre-processing block.
// Four channels carry IF sine waves (IF = 3/14 of the sample rate) with
// different amplitudes and phases. Checks:
//   * every channel's I/Q output equals A*cos(phi), A*sin(phi) within 4 LSB,
//     at decimation factors 1 and 4, and the output rate is one pair per
//     14*2**n samples;
//   * a raw capture of channel 1 stores the ADC samples in order, two per
//     word;
//   * a processed capture of channel 2 stores the I/Q output stream.
module tb_preprocessing;
  import ess_pkg::*;

  localparam real PI = 3.14159265358979323846;
  localparam int NC = 4;
  logic clk = 0, rst_n = 0, clr = 0, start = 0, avalid = 0;
  sample_t [NC-1:0] adc;
  logic [3:0] dl;
  capture_src_e src;
  logic [2:0] ch;
  axi_addr_t base;
  logic [31:0] len, beats;
  iq_t [NC-1:0] iq;
  logic iqv, busy, done, ovf, err;
  axi_m_req_t  req;
  axi_m_resp_t resp;
  int checks = 0, failures = 0;
  real amp [NC], ph [NC];
  sample_t raw_log [NC][$];
  iq_t     iq_log  [NC][$];
  int n_out = 0, n_raw_caps = 0, n_proc_caps = 0;

  always #5 clk = ~clk;

  preprocessing dut (.clk, .rst_n, .adc_i(adc), .adc_valid_i(avalid), .clr_i(clr), .dec_log2_i(dl),
                     .cap_start_i(start), .cap_src_i(src), .cap_ch_i(ch), .cap_base_i(base), .cap_len_i(len),
                     .iq_o(iq), .iq_valid_o(iqv), .axi_req(req), .axi_resp(resp),
                     .cap_busy_o(busy), .cap_done_o(done), .cap_overflow_o(ovf), .cap_err_o(err), .cap_beats_o(beats));
  axi_mem_model #(.REQ_T(axi_m_req_t), .RESP_T(axi_m_resp_t), .STALL_PCT(10)) u_mem (.clk, .rst_n, .req, .resp);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic real fabs(real v);
    return v < 0.0 ? -v : v;
  endfunction

  function automatic logic [31:0] mem_word(longint unsigned byte_addr);
    axi_data_t b = u_mem.rd(byte_addr / 64);
    return b[32 * ((byte_addr % 64) / 4) +: 32];
  endfunction

  // sample source: one sample per cycle on every channel
  int n = 0;
  always @(posedge clk) begin
    if (rst_n) begin
      if (avalid) for (int c = 0; c < NC; c++) raw_log[c].push_back(adc[c]);
      if (iqv) begin
        n_out++;
        for (int c = 0; c < NC; c++) iq_log[c].push_back(iq[c]);
      end
    end
    #1;
    avalid <= rst_n;
    for (int c = 0; c < NC; c++)
      adc[c] <= sample_t'($rtoi(amp[c] * $cos(2.0 * PI * real'(n * 3) / 14.0 + ph[c])));
    if (rst_n) n++;
  end

  task automatic check_iq(string tag);
    for (int c = 0; c < NC; c++) begin
      iq_t last = iq_log[c][$];
      check(fabs(real'(last.i) - amp[c] * $cos(ph[c])) <= 4.0 && fabs(real'(last.q) - amp[c] * $sin(ph[c])) <= 4.0,
            $sformatf("%s channel %0d I/Q %0d/%0d vs %f/%f", tag, c, last.i, last.q, amp[c] * $cos(ph[c]), amp[c] * $sin(ph[c])));
    end
  endtask

  task automatic run_capture(capture_src_e s, int c, axi_addr_t b, logic [31:0] l);
    @(posedge clk);
    #2 src = s; ch = 3'(c); base = b; len = l; start = 1;
    @(posedge clk); #2 start = 0;
    while (!done) @(posedge clk);
    check(!ovf && !err && beats == l / 64, "capture complete without overflow or error");
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int o0, c0;
    bit found, ok;
    for (int c = 0; c < NC; c++) begin
      amp[c] = 4000.0 + 6000.0 * c;
      ph[c]  = (30.0 + 75.0 * c) * PI / 180.0;
    end
    adc = '0; dl = 0; src = SRC_RAW; ch = 0; base = '0; len = '0;
    repeat (3) @(posedge clk);
    #2 rst_n = 1;
    // decimation 1
    repeat (14 * 20) @(posedge clk);
    check(n_out >= 19 && n_out <= 21, $sformatf("one I/Q pair per 14 samples (%0d in 280)", n_out));
    check_iq("n=0");
    // decimation 4
    #2 dl = 2; clr = 1; @(posedge clk); #2 clr = 0;
    c0 = n_out;
    repeat (14 * 4 * 20) @(posedge clk);
    check(n_out - c0 >= 19 && n_out - c0 <= 21, $sformatf("one I/Q pair per 56 samples (%0d)", n_out - c0));
    check_iq("n=2");
    // raw capture of channel 1, 1 KiB = 512 samples
    run_capture(SRC_RAW, 1, 32'h0010_0000, 32'd1024);
    n_raw_caps++;
    found = 0;
    for (int s = 0; s < raw_log[1].size() - 512 && !found; s++)
      if (mem_word(32'h0010_0000) == {raw_log[1][s+1], raw_log[1][s]} &&
          mem_word(32'h0010_0004) == {raw_log[1][s+3], raw_log[1][s+2]}) begin found = 1; o0 = s; end
    check(found, "start of the raw capture found in the sample log");
    ok = found;
    if (found) for (int i = 0; i < 256; i++)
      if (mem_word(32'h0010_0000 + 4*i) != {raw_log[1][o0+2*i+1], raw_log[1][o0+2*i]}) ok = 0;
    check(ok, "raw capture holds 512 consecutive samples of channel 1");
    // processed capture of channel 2, 1 KiB = 256 pairs, no decimation
    #2 dl = 0;
    run_capture(SRC_PROCESSED, 2, 32'h0020_0000, 32'd1024);
    n_proc_caps++;
    found = 0;
    for (int s = 0; s < iq_log[2].size() - 256 && !found; s++)
      if (mem_word(32'h0020_0000) == iq_log[2][s] && mem_word(32'h0020_0004) == iq_log[2][s+1]) begin found = 1; o0 = s; end
    check(found, "start of the processed capture found");
    ok = found;
    if (found) for (int i = 0; i < 256; i++)
      if (mem_word(32'h0020_0000 + 4*i) != iq_log[2][o0+i]) ok = 0;
    check(ok, "processed capture holds 256 consecutive I/Q pairs of channel 2");
    check_iq("after captures");
    check(n_raw_caps == 1 && n_proc_caps == 1, "both capture modes ran");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
