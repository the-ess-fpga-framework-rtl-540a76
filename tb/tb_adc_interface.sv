// tb_adc_interface: self-checking test of the ADC interface.
// Random offset-binary samples on four channels; each must come out as two's
// complement two cycles later with valid high, valid must follow enable with
// the same delay, and a full-scale code must set only that channel's
// over-range flag, which clr_ovr_i clears.
module tb_adc_interface;
  import ess_pkg::*;

  localparam int NC = 4;
  logic clk = 0, rst_n = 0, en = 0, clr = 0;
  logic [NC-1:0][SAMPLE_W-1:0] adc;
  sample_t [NC-1:0] data;
  logic valid;
  logic [NC-1:0] ovr;
  int checks = 0, failures = 0;
  logic [NC-1:0][SAMPLE_W-1:0] hist [3];
  logic en_hist [3];

  always #5 clk = ~clk;

  adc_interface #(.NUM_CH(NC)) dut (.clk, .rst_n, .enable_i(en), .clr_ovr_i(clr),
                                    .adc_i(adc), .data_o(data), .valid_o(valid), .ovr_o(ovr));

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
    adc = '0;
    for (int i = 0; i < 3; i++) begin hist[i] = '0; en_hist[i] = 0; end
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    for (int t = 0; t < 400; t++) begin
      @(posedge clk);
      #1;
      if (t > 4) begin
        check(valid == en_hist[1], $sformatf("valid follows enable after two cycles (t=%0d)", t));
        for (int c = 0; c < NC; c++)
          check(data[c] == sample_t'(hist[1][c] - 16'h8000), $sformatf("channel %0d sample (t=%0d)", c, t));
        check(ovr == '0, "no over-range for in-range codes");
      end
      hist[2] = hist[1]; hist[1] = hist[0];
      en_hist[2] = en_hist[1]; en_hist[1] = en_hist[0];
      en = (t % 50) < 40;
      for (int c = 0; c < NC; c++) adc[c] = 16'($urandom_range(16'hFFFE, 1));
      hist[0] = adc; en_hist[0] = en;
    end
    // full scale on channel 2
    #1 en = 1; adc[2] = 16'hFFFF;
    @(posedge clk); #1 adc[2] = 16'h1234;
    @(posedge clk);
    #1 check(data[2] == 16'sh7FFF, "full-scale positive code");
    @(posedge clk);
    check(ovr == 4'b0100, $sformatf("over-range flag on channel 2 only (%b)", ovr));
    #1 adc[0] = 16'h0000;
    @(posedge clk); #1 adc[0] = 16'h1234;
    repeat (3) @(posedge clk);
    check(ovr == 4'b0101, "negative full scale sets channel 0");
    #1 clr = 1; @(posedge clk); #1 clr = 0;
    @(posedge clk);
    check(ovr == 4'b0000, "flags cleared");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
