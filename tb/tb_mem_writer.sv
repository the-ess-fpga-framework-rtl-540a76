// tb_mem_writer: self-checking test of the capture memory interface.
//   1. A 4 KiB capture of a counting word stream (one word per cycle) into a
//      behavioural memory that stalls at random: memory contents, beat count,
//      done/busy, burst alignment of AW and the capture time are checked.
//   2. A capture with a stream that has gaps, at a new base address.
//   3. The memory is blocked for a while: the FIFO must overflow, the
//      overflow flag must be set and the capture must still end.
//   4. A burst at the model's error address: err_o must be set.
module tb_mem_writer;
  import ess_pkg::*;

  logic clk = 0, rst_n = 0, start = 0, valid = 0, hold = 0;
  axi_addr_t base;
  logic [31:0] len, data;
  axi_m_req_t  req;
  axi_m_resp_t resp, mresp;
  axi_m_req_t  mreq;
  logic busy, done, ovf, err;
  logic [31:0] beats;
  int checks = 0, failures = 0, aw_count = 0;

  always #5 clk = ~clk;

  mem_writer dut (.clk, .rst_n, .start_i(start), .base_i(base), .len_i(len), .data_i(data), .valid_i(valid),
                  .axi_req(req), .axi_resp(resp), .busy_o(busy), .done_o(done), .overflow_o(ovf),
                  .err_o(err), .beats_o(beats));
  axi_mem_model #(.REQ_T(axi_m_req_t), .RESP_T(axi_m_resp_t), .STALL_PCT(20), .ERR_ADDR(32'h0003_0400))
    u_mem (.clk, .rst_n, .req(mreq), .resp(mresp));

  // 'hold' blocks the memory's address and data channels
  always_comb begin
    resp = mresp;
    mreq = req;
    if (hold) begin
      resp.aw_ready = 1'b0; resp.w_ready = 1'b0;
      mreq.aw_valid = 1'b0; mreq.w_valid = 1'b0;
    end
  end

  always @(posedge clk) if (req.aw_valid && resp.aw_ready) begin
    aw_count++;
    check(req.aw.addr[9:0] == 0 && req.aw.len == 8'd15 && req.aw.size == 3'd6, "AW is a 1 KiB aligned INCR burst");
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic logic [31:0] mem_word(longint unsigned byte_addr);
    axi_data_t b = u_mem.rd(byte_addr / 64);
    return b[32 * ((byte_addr % 64) / 4) +: 32];
  endfunction

  task automatic capture(axi_addr_t b, logic [31:0] l, int gap_pct, logic [31:0] first, output int cyc);
    logic [31:0] w = first;
    #1 base = b; len = l; start = 1;
    @(posedge clk); #1 start = 0;
    cyc = 0;
    while (!done) begin
      valid = ($urandom_range(99) >= gap_pct);
      data  = w;
      @(posedge clk); #1;
      if (valid) w++;
      cyc++;
    end
    valid = 0;
  endtask

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog st=%0d busy=%0d beats_in=%0d out=%0d total=%0d fcnt=%0d", dut.st, busy, dut.beats_in, dut.beats_out, dut.beats_total, dut.f_cnt);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int cyc;
    bit ok;
    base = '0; len = '0; data = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    @(posedge clk);
    check(!busy && !done, "idle after reset");
    $display("step 1 at %0t", $time); // 1. 4 KiB, no gaps
    capture(32'h0001_0000, 32'd4096, 0, 32'h1000_0000, cyc);
    check(beats == 64 && !ovf && !err, $sformatf("64 beats, no overflow or error (%0d)", beats));
    check(aw_count == 4, "four bursts");
    // 1024 words at one per cycle, plus the last burst's write and response
    check(cyc >= 1024 && cyc < 1024 + 100, $sformatf("capture took %0d cycles", cyc));
    ok = 1;
    for (int i = 0; i < 1024; i++) if (mem_word(32'h0001_0000 + 4*i) != 32'h1000_0000 + i) ok = 0;
    check(ok, "memory holds the stream in order");
    check(mem_word(32'h0001_1000) == 0, "nothing written past the end");
    $display("step 2 at %0t", $time); // 2. gaps, unaligned base and length are rounded
    capture(32'h0002_0123, 32'd2500, 40, 32'hA000_0000, cyc);
    check(beats == 32 && aw_count == 6, "2500 bytes round down to two bursts");
    ok = 1;
    for (int i = 0; i < 512; i++) if (mem_word(32'h0002_0000 + 4*i) != 32'hA000_0000 + i) ok = 0;
    check(ok, "gapped stream stored in order");
    $display("step 3 at %0t", $time); // 3. overflow
    fork
      begin #1 hold = 1; repeat (900) @(posedge clk); #1 hold = 0; end
      capture(32'h0004_0000, 32'd8192, 0, 32'h0, cyc);
    join
    check(ovf, "overflow flag when the memory stalls");
    check(beats < 128, $sformatf("dropped beats were not written (%0d)", beats));
    check(done && !busy, "capture ended despite overflow");
    $display("step 4 at %0t", $time); // 4. error response
    capture(32'h0003_0000, 32'd2048, 0, 32'h0, cyc);
    check(err, "SLVERR seen");
    capture(32'h0005_0000, 32'd1024, 0, 32'h0, cyc);
    check(!err && !ovf, "flags cleared by the next capture");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
