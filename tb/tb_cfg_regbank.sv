// tb_cfg_regbank: self-checking test of the configuration register bank.
// The CPU side writes random command registers, which the microcontroller
// side must read back from its read-only region; the microcontroller side
// writes status registers, which the CPU must see. Writes into the other
// side's region must fail with SLVERR and change nothing; the write pulses
// must reach the right side.
module tb_cfg_regbank;
  import ess_pkg::*;

  localparam int NCMD = 4, NSTS = 3;
  logic clk = 0, rst_n = 0;
  axil_req_t  creq, mreq;
  axil_resp_t cresp, mresp;
  logic [NCMD-1:0] cmd_wr;
  logic [NSTS-1:0] sts_wr;
  int checks = 0, failures = 0, n_cmd_wr = 0, n_sts_wr = 0;

  always #5 clk = ~clk;

  cfg_regbank #(.N_CMD(NCMD), .N_STS(NSTS)) dut (.clk, .rst_n, .cpu_req(creq), .cpu_resp(cresp),
    .mcu_req(mreq), .mcu_resp(mresp), .cmd_wr_o(cmd_wr), .sts_wr_o(sts_wr));
  axil_tb_master u_cpu (.clk, .req(creq), .resp(cresp));
  axil_tb_master u_mcu (.clk, .req(mreq), .resp(mresp));

  always @(posedge clk) if (rst_n) begin
    if (cmd_wr != 0) n_cmd_wr++;
    if (sts_wr != 0) n_sts_wr++;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] cm [NCMD], st [NSTS], d;
    logic [1:0] r;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    for (int k = 0; k < NCMD; k++) begin
      cm[k] = $urandom;
      u_cpu.write(32'(4*k), cm[k], r);
      check(r == RESP_OKAY, "CPU writes a command");
    end
    for (int k = 0; k < NSTS; k++) begin
      st[k] = $urandom;
      u_mcu.write(32'(4*k), st[k], r);
      check(r == RESP_OKAY, "microcontroller writes a status");
    end
    for (int k = 0; k < NCMD; k++) begin
      u_mcu.read(32'(4*(NSTS+k)), d, r);
      check(d == cm[k] && r == RESP_OKAY, $sformatf("microcontroller sees command %0d", k));
      u_cpu.read(32'(4*k), d, r);
      check(d == cm[k], "CPU reads its command back");
    end
    for (int k = 0; k < NSTS; k++) begin
      u_cpu.read(32'(4*(NCMD+k)), d, r);
      check(d == st[k] && r == RESP_OKAY, $sformatf("CPU sees status %0d", k));
    end
    u_mcu.write(32'(4*NSTS), 32'hDEAD, r);
    check(r == RESP_SLVERR, "microcontroller cannot write a command");
    u_cpu.write(32'(4*NCMD), 32'hDEAD, r);
    check(r == RESP_SLVERR, "CPU cannot write a status");
    u_mcu.read(32'(4*NSTS), d, r);
    check(d == cm[0], "command unchanged");
    check(n_cmd_wr == NCMD && n_sts_wr == NSTS, $sformatf("write pulses %0d/%0d", n_cmd_wr, n_sts_wr));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
