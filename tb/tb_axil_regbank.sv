// tb_axil_regbank: self-checking test of the AXI4-Lite register bank.
// Writes every control register with random values (also with partial byte
// strobes and with AW and W arriving in different cycles), reads them back,
// reads the status registers, checks SLVERR on unmapped addresses and on
// writes to status registers, checks the one-cycle write pulse and the
// response latency of one cycle.
module tb_axil_regbank;
  import ess_pkg::*;

  localparam int NC = 5, NS = 3;
  logic clk = 0, rst_n = 0;
  axil_req_t  req;
  axil_resp_t resp;
  logic [NC-1:0][31:0] ctrl;
  logic [NC-1:0]       pulse;
  logic [NS-1:0][31:0] stat;
  int checks = 0, failures = 0;
  int pulses [NC];

  always #5 clk = ~clk;

  axil_regbank #(.N_CTRL(NC), .N_STAT(NS)) dut (
    .clk, .rst_n, .axil_req(req), .axil_resp(resp),
    .ctrl_o(ctrl), .wr_pulse_o(pulse), .stat_i(stat));

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  always @(posedge clk) if (rst_n) for (int k = 0; k < NC; k++) if (pulse[k]) pulses[k]++;

  // write with AW and W offset by 'skew' cycles; returns BRESP and cycles to BVALID
  task automatic wr(input logic [31:0] a, input logic [31:0] d, input logic [3:0] s,
                    input int skew, output logic [1:0] r, output int lat);
    bit aw_done = 0, w_done = 0;
    int n = 0;
    req.aw_addr = a; req.w_data = d; req.w_strb = s; req.b_ready = 1;
    req.aw_valid = 1; req.w_valid = (skew == 0);
    while (!(aw_done && w_done)) begin
      @(posedge clk);
      if (req.aw_valid && resp.aw_ready) aw_done = 1;
      if (req.w_valid && resp.w_ready)   w_done = 1;
      n++;
      #1;
      if (aw_done) req.aw_valid = 0;
      if (w_done) req.w_valid = 0; else if (n >= skew) req.w_valid = 1;
    end
    lat = 0;
    while (!resp.b_valid) begin @(posedge clk); #1; lat++; end
    r = resp.b_resp;
    @(posedge clk); #1;
    req.b_ready = 0;
  endtask

  task automatic rd(input logic [31:0] a, output logic [31:0] d, output logic [1:0] r);
    req.ar_addr = a; req.ar_valid = 1; req.r_ready = 1;
    do @(posedge clk); while (!resp.ar_ready);
    #1 req.ar_valid = 0;
    while (!resp.r_valid) begin @(posedge clk); #1; end
    d = resp.r_data; r = resp.r_resp;
    @(posedge clk); #1 req.r_ready = 0;
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] model [NC];
    logic [31:0] d;
    logic [1:0]  r;
    int lat;
    req = '0;
    for (int k = 0; k < NS; k++) stat[k] = $urandom;
    for (int k = 0; k < NC; k++) pulses[k] = 0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    @(posedge clk); #1;
    // reset values
    for (int k = 0; k < NC; k++) begin
      rd(32'(4*k), d, r);
      check(d == 0 && r == RESP_OKAY, $sformatf("ctrl %0d reset value %h", k, d));
    end
    // full writes with various skews
    for (int k = 0; k < NC; k++) begin
      model[k] = $urandom;
      wr(32'h0000_F000 | 32'(4*k), model[k], 4'hF, k % 3, r, lat);  // upper bits ignored
      check(r == RESP_OKAY, "write OKAY");
      check(lat == 0, $sformatf("BVALID in the cycle after the handshake (%0d extra)", lat));
    end
    for (int k = 0; k < NC; k++) begin
      check(ctrl[k] == model[k], $sformatf("ctrl_o[%0d]", k));
      check(pulses[k] == 1, $sformatf("one write pulse for reg %0d (%0d)", k, pulses[k]));
    end
    // partial strobes
    for (int k = 0; k < NC; k++) begin
      automatic logic [3:0] s = 4'($urandom);
      automatic logic [31:0] v = $urandom;
      wr(32'(4*k), v, s, 0, r, lat);
      for (int b = 0; b < 4; b++) if (s[b]) model[k][8*b +: 8] = v[8*b +: 8];
    end
    for (int k = 0; k < NC; k++) begin
      rd(32'(4*k), d, r);
      check(d == model[k] && r == RESP_OKAY, $sformatf("read back ctrl %0d: %h vs %h", k, d, model[k]));
    end
    // status registers
    for (int k = 0; k < NS; k++) begin
      rd(32'(4*(NC+k)), d, r);
      check(d == stat[k] && r == RESP_OKAY, $sformatf("status %0d", k));
    end
    // errors
    wr(32'(4*NC), 32'hDEAD_BEEF, 4'hF, 0, r, lat);
    check(r == RESP_SLVERR, "write to status register gives SLVERR");
    rd(32'(4*(NC+NS)), d, r);
    check(r == RESP_SLVERR, "read beyond the map gives SLVERR");
    wr(32'(4*(NC+NS+2)), 32'h1, 4'hF, 1, r, lat);
    check(r == RESP_SLVERR, "write beyond the map gives SLVERR");
    for (int k = 0; k < NC; k++) check(ctrl[k] == model[k], "bad writes left the registers alone");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
