// tb_dac_interface: self-checking test of the DAC interface.
// A stream with random gaps: the DAC code must be the offset-binary form of
// the last valid sample, one cycle after it arrived, held through the gaps;
// with enable low it must sit at mid-scale; the sample counter must match.
module tb_dac_interface;
  import ess_pkg::*;

  logic clk = 0, rst_n = 0, en = 0, valid = 0;
  sample_t data;
  logic [SAMPLE_W-1:0] dac;
  logic [31:0] cnt;
  int checks = 0, failures = 0, n_valid = 0;

  always #5 clk = ~clk;

  dac_interface dut (.clk, .rst_n, .enable_i(en), .data_i(data), .valid_i(valid), .dac_o(dac), .count_o(cnt));

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [SAMPLE_W-1:0] expect_code;
    data = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    @(posedge clk);
    check(dac == 16'h8000, "mid-scale after reset");
    expect_code = 16'h8000;
    for (int t = 0; t < 500; t++) begin
      #1;
      en    = (t % 100) < 80;
      valid = ($urandom_range(3) == 0);
      data  = sample_t'($urandom);
      @(posedge clk);
      if (en && valid) begin expect_code = 16'(data) ^ 16'h8000; n_valid++; end
      else if (!en) expect_code = 16'h8000;
      #1;
      check(dac == expect_code, $sformatf("DAC code at t=%0d: %h vs %h", t, dac, expect_code));
    end
    check(cnt == 32'(n_valid), $sformatf("sample count %0d vs %0d", cnt, n_valid));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
