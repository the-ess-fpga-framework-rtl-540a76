// tb_ess_fpga_top: end-to-end test of the framework at its default sizes.
//
// Around the top sit stand-ins for what the framework connects to: a
// behavioural AXI4 memory for the DDR3 controller (with random stalls), a
// bus master for the configuration controller's microcontroller, and a
// small custom logic (its own register bank, an AXI4 master, and a stream
// loop that sends the I of channel 0, scaled by a gain register, to the DAC).
// The test plays the crate CPU over the PCIe AXI4-Lite and DMA ports:
//   1. register access to all three windows (including the mailbox to the
//      configuration microcontroller), and DECERR outside them;
//   2. ADC -> near-IQ -> decimation -> custom logic -> DAC with the I/Q
//      values and the DAC codes checked;
//   3. a processed and a raw capture into memory while DMA and custom logic
//      move data through the same interconnect; the CPU reads the captures
//      back by DMA and compares them with the streams;
//   4. ADC over-range flag, read and cleared over the bus.
// Each mechanism is counted and must have happened at least once.
module tb_ess_fpga_top;
  import ess_pkg::*;

  localparam real PI = 3.14159265358979323846;
  logic clk = 0, rst_n = 0;
  logic [NUM_ADC-1:0][SAMPLE_W-1:0] adc;
  logic [SAMPLE_W-1:0] dac;
  axil_req_t  pcie_req, mcu_req, cl_lreq;
  axil_resp_t pcie_resp, mcu_resp, cl_lresp;
  logic [7:0] cfg_cmd_wr, cfg_sts_wr;
  axi_m_req_t  dma_req, cl_req;
  axi_m_resp_t dma_resp, cl_resp;
  axi_s_req_t  mem_req;
  axi_s_resp_t mem_resp;
  iq_t [NUM_ADC-1:0] cl_iq;
  logic cl_iq_v, cl_dac_v;
  sample_t cl_dac;
  int checks = 0, failures = 0;

  // mechanism counters
  int m_reg = 0, m_decerr = 0, m_cap_raw = 0, m_cap_proc = 0, m_decim = 0, m_contention = 0,
      m_mem_stall = 0, m_dac = 0, m_ovr = 0, m_dma = 0, m_cl_mem = 0;

  always #5 clk = ~clk;

  ess_fpga_top dut (
    .clk, .rst_n, .adc_i(adc), .dac_o(dac),
    .pcie_axil_req(pcie_req), .pcie_axil_resp(pcie_resp),
    .dma_axi_req(dma_req), .dma_axi_resp(dma_resp),
    .mem_axi_req(mem_req), .mem_axi_resp(mem_resp),
    .mcu_axil_req(mcu_req), .mcu_axil_resp(mcu_resp), .cfg_cmd_wr_o(cfg_cmd_wr), .cfg_sts_wr_o(cfg_sts_wr),
    .cl_axil_req(cl_lreq), .cl_axil_resp(cl_lresp),
    .cl_axi_req(cl_req), .cl_axi_resp(cl_resp),
    .cl_iq_o(cl_iq), .cl_iq_valid_o(cl_iq_v),
    .cl_dac_i(cl_dac), .cl_dac_valid_i(cl_dac_v));

  axi_mem_model #(.STALL_PCT(15)) u_mem (.clk, .rst_n, .req(mem_req), .resp(mem_resp));

  // the configuration controller's microcontroller (stand-in: bus master only)
  axil_tb_master u_mcu (.clk, .req(mcu_req), .resp(mcu_resp));
  int m_cfg_cmd = 0;
  int m_cfg_sts = 0;
  always @(posedge clk) if (rst_n && cfg_cmd_wr[1]) m_cfg_cmd++;
  always @(posedge clk) if (rst_n && cfg_sts_wr[2]) m_cfg_sts++;

  // custom logic stand-in: register 0 is a gain (Q8.8), DAC = (I0 * gain) >>> 8
  logic [1:0][31:0] cl_ctrl;
  logic [1:0]       cl_pulse;
  axil_regbank #(.N_CTRL(2), .N_STAT(1)) u_cl_regs (.clk, .rst_n, .axil_req(cl_lreq), .axil_resp(cl_lresp),
    .ctrl_o(cl_ctrl), .wr_pulse_o(cl_pulse), .stat_i({32'hC0DE_0001}));
  always_ff @(posedge clk) begin
    cl_dac_v <= cl_iq_v && rst_n;
    cl_dac   <= sample_t'((32'(signed'(cl_iq[0].i)) * signed'(cl_ctrl[0])) >>> 8);
  end
  axi_tb_master #(.ID(4'd5)) u_cl_mst (.clk, .req(cl_req), .resp(cl_resp));
  axi_tb_master #(.ID(4'd1)) u_dma    (.clk, .req(dma_req), .resp(dma_resp));

  // ADC stimulus: offset-binary IF sine waves, IF = 3/14 of the sample rate
  real amp [NUM_ADC], ph [NUM_ADC];
  int  n = 0;
  bit  force_fs = 0;
  always @(posedge clk) begin
    #1;
    for (int c = 0; c < NUM_ADC; c++)
      adc[c] <= 16'($rtoi(amp[c] * $cos(2.0 * PI * real'(n * 3) / 14.0 + ph[c]))) ^ 16'h8000;
    if (force_fs) adc[3] <= 16'hFFFF;
    n++;
  end

  // logs of the streams, for comparing captures
  iq_t     iq_log [NUM_ADC][$];
  sample_t raw_log [NUM_ADC][$];
  logic [SAMPLE_W-1:0] dac_expect;
  bit dac_expect_v = 0;
  always @(posedge clk) if (rst_n) begin
    if (cl_iq_v) for (int c = 0; c < NUM_ADC; c++) iq_log[c].push_back(cl_iq[c]);
    if (dut.adc_v) for (int c = 0; c < NUM_ADC; c++) raw_log[c].push_back(dut.adc_s[c]);
    if ((mem_req.aw_valid && !mem_resp.aw_ready) || (mem_req.ar_valid && !mem_resp.ar_ready) ||
        (mem_req.w_valid && !mem_resp.w_ready)) m_mem_stall++;
    if (32'(dut.mreq[0].aw_valid || dut.mreq[0].ar_valid) + 32'(dut.mreq[1].aw_valid) +
        32'(dut.mreq[2].aw_valid || dut.mreq[2].ar_valid) > 1) m_contention++;
    // DAC: the value sent with cl_dac_v must be on the pins one cycle later
    if (dac_expect_v) begin
      check(dac == dac_expect, $sformatf("DAC code %h vs %h", dac, dac_expect));
      m_dac++;
    end
    dac_expect_v <= cl_dac_v && dut.ctrl[1][1];
    dac_expect   <= 16'(cl_dac) ^ 16'h8000;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic real fabs(real v);
    return v < 0.0 ? -v : v;
  endfunction

  // ---- PCIe AXI4-Lite master ----
  task automatic lw(logic [31:0] a, logic [31:0] d, output logic [1:0] r);
    bit aw_done = 0, w_done = 0;
    pcie_req.aw_valid = 1; pcie_req.aw_addr = a; pcie_req.w_valid = 1; pcie_req.w_data = d; pcie_req.w_strb = 4'hF;
    while (!(aw_done && w_done)) begin
      @(posedge clk);
      if (pcie_req.aw_valid && pcie_resp.aw_ready) aw_done = 1;
      if (pcie_req.w_valid && pcie_resp.w_ready) w_done = 1;
      #1;
      if (aw_done) pcie_req.aw_valid = 0;
      if (w_done) pcie_req.w_valid = 0;
    end
    pcie_req.b_ready = 1;
    do @(posedge clk); while (!pcie_resp.b_valid);
    r = pcie_resp.b_resp;
    #1 pcie_req.b_ready = 0;
    m_reg++;
  endtask

  task automatic lr(logic [31:0] a, output logic [31:0] d, output logic [1:0] r);
    pcie_req.ar_valid = 1; pcie_req.ar_addr = a;
    do @(posedge clk); while (!pcie_resp.ar_ready);
    #1 pcie_req.ar_valid = 0; pcie_req.r_ready = 1;
    do @(posedge clk); while (!pcie_resp.r_valid);
    d = pcie_resp.r_data; r = pcie_resp.r_resp;
    #1 pcie_req.r_ready = 0;
    m_reg++;
  endtask

  task automatic lw_ok(logic [31:0] a, logic [31:0] d);
    logic [1:0] r;
    lw(a, d, r);
    check(r == RESP_OKAY, $sformatf("write %h OKAY", a));
  endtask

  function automatic logic [31:0] word_of(axi_data_t b, int w);
    return b[32*w +: 32];
  endfunction

  // DMA read of a capture: returns the 32-bit words
  task automatic dma_words(axi_addr_t a, int bytes, output logic [31:0] w [$]);
    axi_data_t d [$];
    w.delete();
    for (int b = 0; b < bytes / 1024; b++) begin
      u_dma.read_beats(a + axi_addr_t'(b * 1024), 16, d);
      for (int j = 0; j < 16; j++) for (int k = 0; k < 16; k++) w.push_back(word_of(d[j], k));
    end
    m_dma++;
  endtask

  task automatic wait_capture();
    logic [31:0] d;
    logic [1:0]  r;
    do begin
      repeat (50) @(posedge clk);
      lr(32'h1C, d, r);
    end while (!d[1]);
    check(d[3:0] == 4'b0010, $sformatf("capture done, no error or overflow (%b)", d[3:0]));
  endtask

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] d, words [$];
    logic [1:0]  r;
    bit ok, found;
    int o0, dac0;
    for (int c = 0; c < NUM_ADC; c++) begin
      amp[c] = 5000.0 + 5000.0 * c;
      ph[c]  = (20.0 + 80.0 * c) * PI / 180.0;
    end
    pcie_req = '0;
    repeat (4) @(posedge clk);
    #1 rst_n = 1;
    repeat (2) @(posedge clk); #1;

    // 1. register access
    lr(32'h18, d, r);
    check(d == 32'hE55F_0001 && r == RESP_OKAY, $sformatf("firmware ID %h", d));
    lw_ok(32'h00, 32'h1234_5678);
    lr(32'h00, d, r);
    check(d == 32'h1234_5678, "scratch register");
    lw_ok(32'h0001_0004, 32'hCAFE_0001);      // command 1 to the microcontroller
    u_mcu.read(32'h24, d, r);                 // its view: commands after 8 status registers
    check(d == 32'hCAFE_0001 && r == RESP_OKAY, "microcontroller reads the CPU's command");
    check(m_cfg_cmd == 1, "command write notified the microcontroller");
    u_mcu.write(32'h08, 32'hC0F1_0000, r);    // status 2 from the microcontroller
    lr(32'h0001_0028, d, r);
    check(d == 32'hC0F1_0000, "CPU reads the microcontroller's status");
    check(m_cfg_sts == 1, "status write notified the CPU side");
    lw_ok(32'h0002_0000, 32'd512);            // custom logic gain 2.0
    lr(32'h0002_0008, d, r);
    check(d == 32'hC0DE_0001, "custom logic status read");
    lr(32'h0005_0000, d, r);
    check(r == RESP_DECERR, "read outside the windows: DECERR");
    lw(32'h0007_0000, 32'h1, r);
    check(r == RESP_DECERR, "write outside the windows: DECERR");
    m_decerr++;

    // 2. data path
    lw_ok(32'h04, 32'h3);                     // ADC and DAC on
    lw_ok(32'h08, 32'd1);                     // decimation 2
    lw_ok(32'h04, 32'h7);                     // restart windows
    m_decim++;
    repeat (14 * 2 * 12) @(posedge clk);
    // The window restart sets the phase reference, so compare amplitudes and
    // the phases relative to channel 0.
    for (int c = 0; c < NUM_ADC; c++) begin
      automatic iq_t last  = iq_log[c][iq_log[c].size() - 1];
      automatic iq_t last0 = iq_log[0][iq_log[0].size() - 1];
      automatic real mag   = $sqrt(real'(last.i) ** 2 + real'(last.q) ** 2);
      automatic real dph   = $atan2(real'(last.q), real'(last.i)) - $atan2(real'(last0.q), real'(last0.i)) - (ph[c] - ph[0]);
      while (dph > PI) dph -= 2.0 * PI;
      while (dph < -PI) dph += 2.0 * PI;
      check(fabs(mag - amp[c]) <= 4.0 && fabs(dph) < 0.002,
            $sformatf("channel %0d amplitude %f vs %f, phase error %f rad", c, mag, amp[c], dph));
    end
    check(dac == ((16'($rtoi(2.0 * real'(iq_log[0][$].i)))) ^ 16'h8000), "DAC carries 2*I of channel 0");
    lr(32'h24, d, r);
    check(d > 0, "DAC sample counter runs");
    dac0 = int'(d);

    // 3. captures with traffic from DMA and custom logic
    lw_ok(32'h10, 32'h0010_0000);
    lw_ok(32'h14, 32'd2048);
    fork
      begin
        lw_ok(32'h0C, 32'h0000_0013);         // start, processed, channel 1
        wait_capture();
        m_cap_proc++;
      end
      begin
        for (int t = 0; t < 6; t++) begin
          u_dma.write_burst(32'h0040_0000 + 32'(t * 1024), 16, t, r);
          check(r == RESP_OKAY, "DMA write");
        end
      end
      begin
        for (int t = 0; t < 6; t++) begin
          u_cl_mst.write_burst(32'h0050_0000 + 32'(t * 512), 8, 100 + t, r);
          check(r == RESP_OKAY, "custom logic write");
        end
        m_cl_mem++;
      end
    join
    for (int t = 0; t < 6; t++) begin
      u_dma.read_check(32'h0040_0000 + 32'(t * 1024), 16, t, ok);
      check(ok, "DMA data read back");
      u_cl_mst.read_check(32'h0050_0000 + 32'(t * 512), 8, 100 + t, ok);
      check(ok, "custom logic data read back");
    end
    dma_words(32'h0010_0000, 2048, words);
    found = 0;
    for (int s = 0; s + 512 <= iq_log[1].size() && !found; s++)
      if (words[0] == iq_log[1][s] && words[1] == iq_log[1][s+1]) begin found = 1; o0 = s; end
    ok = found;
    if (found) for (int i = 0; i < 512; i++) if (words[i] != iq_log[1][o0+i]) ok = 0;
    check(ok, "processed capture of channel 1 read back by DMA");

    // raw capture of channel 3
    lw_ok(32'h10, 32'h0020_0000);
    lw_ok(32'h14, 32'd1024);
    lw_ok(32'h0C, 32'h0000_0031);             // start, raw, channel 3
    wait_capture();
    m_cap_raw++;
    lr(32'h20, d, r);
    check(d == 16, "16 beats captured");
    dma_words(32'h0020_0000, 1024, words);
    found = 0;
    for (int s = 0; s + 512 <= raw_log[3].size() && !found; s++)
      if (words[0] == {raw_log[3][s+1], raw_log[3][s]} && words[1] == {raw_log[3][s+3], raw_log[3][s+2]}) begin found = 1; o0 = s; end
    ok = found;
    if (found) for (int i = 0; i < 256; i++) if (words[i] != {raw_log[3][o0+2*i+1], raw_log[3][o0+2*i]}) ok = 0;
    check(ok, "raw capture of channel 3 read back by DMA");

    // 4. over-range
    force_fs = 1;
    repeat (5) @(posedge clk);
    force_fs = 0;
    lr(32'h1C, d, r);
    check(d[11:8] == 4'b1000, $sformatf("over-range on channel 3 (%b)", d[11:8]));
    if (d[11]) m_ovr++;
    lw_ok(32'h04, 32'hB);                     // clear over-range, keep ADC and DAC on
    lr(32'h1C, d, r);
    check(d[11:8] == 4'b0000, "over-range cleared");
    lr(32'h24, d, r);
    check(int'(d) > dac0, "DAC counter kept running");

    $display("mechanisms: reg=%0d cfg_mailbox=%0d decerr=%0d decim=%0d dac=%0d cap_proc=%0d cap_raw=%0d dma=%0d cl_mem=%0d contention=%0d mem_stall=%0d ovr=%0d",
             m_reg, m_cfg_cmd, m_decerr, m_decim, m_dac, m_cap_proc, m_cap_raw, m_dma, m_cl_mem, m_contention, m_mem_stall, m_ovr);
    check(m_reg > 0, "register access happened");
    check(m_cfg_cmd > 0, "configuration mailbox used");
    check(m_decerr > 0, "decode error happened");
    check(m_decim > 0, "decimation change happened");
    check(m_dac > 0, "DAC output happened");
    check(m_cap_proc > 0, "processed capture happened");
    check(m_cap_raw > 0, "raw capture happened");
    check(m_dma > 0, "DMA read-back happened");
    check(m_cl_mem > 0, "custom logic memory access happened");
    check(m_contention > 0, "interconnect arbitration between masters happened");
    check(m_mem_stall > 0, "memory back-pressure happened");
    check(m_ovr > 0, "ADC over-range happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
