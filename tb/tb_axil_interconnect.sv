// tb_axil_interconnect: self-checking test of the AXI4-Lite interconnect.
// Three register banks sit behind it at 0x0000_0000, 0x0001_0000 and
// 0x0002_0000. Random writes go to random banks and registers, with W
// before, with or after AW; the banks' outputs are compared with a model,
// everything is read back, and addresses outside the windows must give
// DECERR without touching any bank.
module tb_axil_interconnect;
  import ess_pkg::*;

  localparam int NS = 3, NC = 4;
  logic clk = 0, rst_n = 0;
  axil_req_t  req;
  axil_resp_t resp;
  axil_req_t  [NS-1:0] sreq;
  axil_resp_t [NS-1:0] sresp;
  logic [NS-1:0][NC-1:0][31:0] ctrl;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  axil_interconnect #(.N_SLV(NS)) dut (.clk, .rst_n, .s_req(req), .s_resp(resp), .m_req(sreq), .m_resp(sresp));

  for (genvar s = 0; s < NS; s++) begin : g_bank
    logic [NC-1:0] pulse;
    axil_regbank #(.N_CTRL(NC), .N_STAT(1)) u_bank (
      .clk, .rst_n, .axil_req(sreq[s]), .axil_resp(sresp[s]),
      .ctrl_o(ctrl[s]), .wr_pulse_o(pulse), .stat_i({32'(s) ^ 32'hA5A5_0000}));
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic wr(input logic [31:0] a, input logic [31:0] d, input int skew, output logic [1:0] r);
    bit aw_done = 0, w_done = 0;
    int n = 0;
    req.aw_addr = a; req.w_data = d; req.w_strb = 4'hF; req.b_ready = 0;
    req.aw_valid = (skew >= 0); req.w_valid = (skew <= 0);
    while (!(aw_done && w_done)) begin
      @(posedge clk);
      if (req.aw_valid && resp.aw_ready) aw_done = 1;
      if (req.w_valid && resp.w_ready)   w_done = 1;
      n++;
      #1;
      if (aw_done) req.aw_valid = 0; else if (n >= -skew) req.aw_valid = 1;
      if (w_done) req.w_valid = 0; else if (n >= skew) req.w_valid = 1;
    end
    req.b_ready = 1;
    do @(posedge clk); while (!resp.b_valid);
    r = resp.b_resp;
    #1 req.b_ready = 0;
  endtask

  task automatic rd(input logic [31:0] a, output logic [31:0] d, output logic [1:0] r);
    req.ar_addr = a; req.ar_valid = 1; req.r_ready = 0;
    do @(posedge clk); while (!resp.ar_ready);
    #1 req.ar_valid = 0; req.r_ready = 1;
    do @(posedge clk); while (!resp.r_valid);
    d = resp.r_data; r = resp.r_resp;
    #1 req.r_ready = 0;
  endtask

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] model [NS][NC];
    logic [31:0] d;
    logic [1:0]  r;
    req = '0;
    for (int s = 0; s < NS; s++) for (int k = 0; k < NC; k++) model[s][k] = 0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    @(posedge clk); #1;
    for (int t = 0; t < 60; t++) begin
      automatic int s = $urandom_range(NS-1), k = $urandom_range(NC-1);
      automatic logic [31:0] v = $urandom;
      wr({16'(s), 16'(4*k)}, v, $urandom_range(4) - 2, r);
      model[s][k] = v;
      check(r == RESP_OKAY, "write OKAY");
      for (int s2 = 0; s2 < NS; s2++) for (int k2 = 0; k2 < NC; k2++)
        check(ctrl[s2][k2] == model[s2][k2], $sformatf("bank %0d reg %0d after write %0d", s2, k2, t));
    end
    for (int s = 0; s < NS; s++) begin
      for (int k = 0; k < NC; k++) begin
        rd({16'(s), 16'(4*k)}, d, r);
        check(d == model[s][k] && r == RESP_OKAY, $sformatf("read bank %0d reg %0d", s, k));
      end
      rd({16'(s), 16'(4*NC)}, d, r);
      check(d == (32'(s) ^ 32'hA5A5_0000), $sformatf("status of bank %0d", s));
      rd({16'(s), 16'(4*NC+4)}, d, r);
      check(r == RESP_SLVERR, "bank's own error passes through");
    end
    for (int t = 0; t < 4; t++) begin
      wr({16'(NS + t), 16'h0}, 32'hFFFF_FFFF, t - 2, r);
      check(r == RESP_DECERR, "write outside the windows gives DECERR");
      rd({16'(NS + t), 16'h0}, d, r);
      check(r == RESP_DECERR && d == 0, "read outside the windows gives DECERR");
    end
    for (int s = 0; s < NS; s++) for (int k = 0; k < NC; k++)
      check(ctrl[s][k] == model[s][k], "missed writes touched no bank");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
