// tb_decimator: self-checking test of the boxcar decimator.
// For every factor 2**n, n = 0..8, random I/Q samples (with random gaps in
// valid) are fed; each output must equal floor(sum/2**n) of its window,
// computed here, come one cycle after the window's last input, and there
// must be exactly one output per 2**n inputs.
module tb_decimator;
  import ess_pkg::*;

  logic clk = 0, rst_n = 0, clr = 0, valid = 0;
  logic [3:0] dl;
  iq_t in, out;
  logic vout;
  int checks = 0, failures = 0;
  longint ei[$], eq[$];
  int outs = 0, pending_due = -1, cyc = 0;

  always #5 clk = ~clk;

  decimator dut (.clk, .rst_n, .clr_i(clr), .dec_log2_i(dl), .iq_i(in), .valid_i(valid), .iq_o(out), .valid_o(vout));

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  always @(posedge clk) if (rst_n) begin
    if (vout) begin
      outs++;
      check(ei.size() > 0, "unexpected output");
      if (ei.size() > 0) begin
        check(longint'(out.i) == ei[0] && longint'(out.q) == eq[0],
              $sformatf("output %0d/%0d vs %0d/%0d (n=%0d)", out.i, out.q, ei[0], eq[0], dl));
        check(cyc == pending_due, "one cycle after the last input");
        void'(ei.pop_front()); void'(eq.pop_front());
      end
    end
    cyc++;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in = '0; dl = 0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    for (int n = 0; n <= 8; n++) begin
      automatic int start_outs;
      #1 dl = 4'(n); clr = 1; @(posedge clk); #1 clr = 0;
      start_outs = outs;
      for (int w = 0; w < 6; w++) begin
        automatic longint si = 0, sq = 0;
        for (int j = 0; j < (1 << n); j++) begin
          in.i = sample_t'($urandom); in.q = sample_t'($urandom); valid = 1;
          si += longint'(in.i); sq += longint'(in.q);
          @(posedge clk); #1;
          if (j == (1 << n) - 1) begin
            ei.push_back(si >>> n); eq.push_back(sq >>> n); pending_due = cyc;
          end
          valid = 0;
          if ($urandom_range(2) == 0) begin @(posedge clk); #1; end
        end
      end
      @(posedge clk); @(posedge clk); #1;
      check(outs - start_outs == 6, $sformatf("six outputs for six windows at n=%0d (%0d)", n, outs - start_outs));
    end
    check(ei.size() == 0, "all expected outputs arrived");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
