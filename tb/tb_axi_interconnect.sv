// tb_axi_interconnect: self-checking test of the AXI4 interconnect.
// Three masters run at the same time against one behavioural memory that
// stalls its ready/valid signals at random. Each master writes bursts of
// random length (1..8 beats) with a known data pattern into its own region,
// waits for each B response (checking its ID), then reads every burst back
// and checks data, ID and RLAST. Contention is counted: cycles in which more
// than one master requested an address channel, and the test fails if there
// was none. A fixed cycle budget checks that no master starves.
module tb_axi_interconnect;
  import ess_pkg::*;

  localparam int NM = 3, NB = 24;
  logic clk = 0, rst_n = 0;
  axi_m_req_t  [NM-1:0] mreq;
  axi_m_resp_t [NM-1:0] mresp;
  axi_s_req_t  sreq;
  axi_s_resp_t sresp;
  int checks = 0, failures = 0;
  int done_cnt = 0, contention = 0, cycles = 0;

  always #5 clk = ~clk;

  axi_interconnect #(.N_MST(NM)) dut (.clk, .rst_n, .s_req(mreq), .s_resp(mresp), .m_req(sreq), .m_resp(sresp));
  axi_mem_model #(.STALL_PCT(30)) u_mem (.clk, .rst_n, .req(sreq), .resp(sresp));

  function automatic axi_data_t pattern(int m, int t, int j);
    axi_data_t d;
    for (int w = 0; w < AXI_DATA_W / 32; w++) d[32*w +: 32] = {8'(m), 8'(t), 8'(j), 8'(w)};
    return d;
  endfunction

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  always @(posedge clk) if (rst_n) begin
    cycles++;
    if ((32'(mreq[0].aw_valid) + 32'(mreq[1].aw_valid) + 32'(mreq[2].aw_valid)) > 1 ||
        (32'(mreq[0].ar_valid) + 32'(mreq[1].ar_valid) + 32'(mreq[2].ar_valid)) > 1) contention++;
  end

  for (genvar m = 0; m < NM; m++) begin : g_m
    initial begin
      int lens [NB];
      mreq[m] = '0;
      wait (rst_n);
      @(posedge clk); #1;
      for (int t = 0; t < NB; t++) begin
        lens[t] = $urandom_range(7);
        mreq[m].aw_valid   = 1;
        mreq[m].aw.id      = 4'(t);
        mreq[m].aw.addr    = 32'(m * 32'h1_0000 + t * 32'h400);
        mreq[m].aw.len     = 8'(lens[t]);
        mreq[m].aw.size    = 3'd6;
        mreq[m].aw.burst   = BURST_INCR;
        do @(posedge clk); while (!mresp[m].aw_ready);
        #1 mreq[m].aw_valid = 0;
        for (int j = 0; j <= lens[t]; j++) begin
          mreq[m].w_valid = 1;
          mreq[m].w.data  = pattern(m, t, j);
          mreq[m].w.strb  = '1;
          mreq[m].w.last  = (j == lens[t]);
          do @(posedge clk); while (!mresp[m].w_ready);
          #1 mreq[m].w_valid = 0;
        end
        mreq[m].b_ready = 1;
        do @(posedge clk); while (!mresp[m].b_valid);
        check(mresp[m].b.id == 4'(t) && mresp[m].b.resp == RESP_OKAY,
              $sformatf("master %0d burst %0d: B id %0d resp %0d", m, t, mresp[m].b.id, mresp[m].b.resp));
        #1 mreq[m].b_ready = 0;
      end
      for (int t = 0; t < NB; t++) begin
        mreq[m].ar_valid = 1;
        mreq[m].ar.id    = 4'(t + 3);
        mreq[m].ar.addr  = 32'(m * 32'h1_0000 + t * 32'h400);
        mreq[m].ar.len   = 8'(lens[t]);
        mreq[m].ar.size  = 3'd6;
        mreq[m].ar.burst = BURST_INCR;
        do @(posedge clk); while (!mresp[m].ar_ready);
        #1 mreq[m].ar_valid = 0;
        mreq[m].r_ready = 1;
        for (int j = 0; j <= lens[t]; j++) begin
          do @(posedge clk); while (!mresp[m].r_valid);
          check(mresp[m].r.data == pattern(m, t, j), $sformatf("master %0d burst %0d beat %0d data", m, t, j));
          check(mresp[m].r.id == 4'(t + 3), "R id");
          check(mresp[m].r.last == (j == lens[t]), "RLAST");
        end
        #1 mreq[m].r_ready = 0;
      end
      done_cnt++;
    end
  end

  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog (a master starved or hung)");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    wait (done_cnt == NM);
    check(contention > 0, "masters contended for the memory");
    check(u_mem.writes_beats == u_mem.read_beats, "as many beats read as written");
    $display("contention cycles %0d, total cycles %0d", contention, cycles);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
