// cfg_regbank: the configuration controller's register bank, a two-sided
// mailbox between the crate CPU and the on-chip microcontroller.
//
// The configuration controller is a small soft-CPU system that sets up the
// board's peripherals from its own software. The crate CPU still needs to
// steer important board functions and read the peripherals' status; it does
// so through this bank, which has one AXI4-Lite port towards the crate CPU
// (cpu_*, behind the framework's AXI4-Lite interconnect) and one towards the
// microcontroller (mcu_*).
//
//   CPU side:  4*k, k < N_CMD          command register k, read/write
//              4*(N_CMD+k), k < N_STS  status register k, read only
//   MCU side:  4*k, k < N_STS          status register k, read/write
//              4*(N_STS+k), k < N_CMD  command register k, read only
//
// So each side writes its own registers and reads the other side's. It is
// built from two axil_regbank instances whose control outputs feed each
// other's status inputs. A written register is visible to the other side one
// cycle after its write is taken. cmd_wr_o pulses for one cycle when the CPU
// writes a command register, and sts_wr_o when the microcontroller writes a
// status register; they can serve as interrupts.
//
// The block diagram of the configuration controller shows a register bank
// between the AXI4-Lite bus and the microcontroller, and the text says the
// CPU controls board functions and reads peripheral status through it. The
// two-sided layout and the pulses are this design's own choices.
module cfg_regbank
  import ess_pkg::*;
#(
  parameter int unsigned N_CMD = 8,
  parameter int unsigned N_STS = 8
) (
  input  logic              clk,
  input  logic              rst_n,
  input  axil_req_t         cpu_req,
  output axil_resp_t        cpu_resp,
  input  axil_req_t         mcu_req,
  output axil_resp_t        mcu_resp,
  output logic [N_CMD-1:0]  cmd_wr_o,
  output logic [N_STS-1:0]  sts_wr_o
);

  logic [N_CMD-1:0][31:0] cmd;
  logic [N_STS-1:0][31:0] sts;

  axil_regbank #(.N_CTRL(N_CMD), .N_STAT(N_STS)) u_cpu (
    .clk, .rst_n, .axil_req(cpu_req), .axil_resp(cpu_resp),
    .ctrl_o(cmd), .wr_pulse_o(cmd_wr_o), .stat_i(sts)
  );

  axil_regbank #(.N_CTRL(N_STS), .N_STAT(N_CMD)) u_mcu (
    .clk, .rst_n, .axil_req(mcu_req), .axil_resp(mcu_resp),
    .ctrl_o(sts), .wr_pulse_o(sts_wr_o), .stat_i(cmd)
  );

endmodule
