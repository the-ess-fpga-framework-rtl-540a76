// ess_fpga_top: the FPGA framework for a MicroTCA digitizer board.
//
// The framework is the part of an FPGA design that every application on the
// board needs: access from the crate CPU over PCIe, shared access to the
// on-board memory, configuration of the board's peripherals and a real-time
// data path from the ADCs to the DAC. The application itself (the custom
// logic, here the LLRF controller) plugs into fixed interfaces.
//
// What is inside:
//   * axil_interconnect: the PCIe block's AXI4-Lite master reaches three
//     windows of 64 KiB: 0x0000_0000 the framework's register bank (u_regs),
//     0x0001_0000 the configuration controller's register bank
//     (u_cfg_regs, a mailbox to its microcontroller: 8 command registers
//     the CPU writes, then 8 status registers the microcontroller writes),
//     0x0002_0000 the custom logic's register bank.
//   * axi_interconnect: the DMA engine (master 0), the pre-processing memory
//     interface (master 1) and the custom logic (master 2) share the memory
//     controller's 512-bit AXI4 port.
//   * adc_interface -> preprocessing -> custom logic -> dac_interface: the
//     data path, a data+valid stream without back-pressure.
// What is outside, as ports: the PCIe endpoint with its DMA engine
// (pcie_axil_*, dma_axi_*), the DDR3 memory controller (mem_axi_*), the
// configuration controller's soft CPU with its I2C/SPI/GPIO controllers
// (mcu_axil_*, cfg_*_wr_o) and the custom logic (cl_*). These are vendor
// IP or the application, not part of the framework's own logic.
//
// Framework register map (byte offsets in window 0):
//   0x00 SCRATCH    r/w, free for software
//   0x04 DP_CTRL    bit0 ADC enable, bit1 DAC enable; writing 1 to bit2
//                   restarts the demodulator and decimator windows, writing
//                   1 to bit3 clears the ADC over-range flags
//   0x08 DEC_LOG2   bits 3:0, decimation factor 2**n (0..8)
//   0x0C CAP_CTRL   writing with bit0 set starts a capture; bit1 source
//                   (0 raw, 1 processed), bits 5:4 channel
//   0x10 CAP_BASE   capture start address (1 KiB aligned)
//   0x14 CAP_LEN    capture length in bytes (whole KiB)
//   0x18 FW_ID      read only, 0xE55F_0001
//   0x1C CAP_STAT   read only: bit0 busy, bit1 done, bit2 memory error,
//                   bit3 overflow, bits 11:8 ADC over-range per channel
//   0x20 CAP_BEATS  read only, 64-byte beats written by the capture
//   0x24 DAC_COUNT  read only, samples sent to the DAC
// Everything runs on one clock (clk), reset low (rst_n, asynchronous).
//
// The structure follows the framework's block diagram, and the paper's
// statement that the configuration microcontroller shares a register bank
// with the crate CPU; the register maps, the address windows and the single
// clock are this design's own choices.
module ess_fpga_top
  import ess_pkg::*;
#(
  parameter int unsigned IQ_M      = 14,
  parameter int unsigned IQ_N      = 3,
  parameter int unsigned BURST_LEN = 16
) (
  input  logic                             clk,
  input  logic                             rst_n,
  // board: ADC and DAC pins
  input  logic [NUM_ADC-1:0][SAMPLE_W-1:0] adc_i,
  output logic [SAMPLE_W-1:0]              dac_o,
  // PCIe block: AXI4-Lite master and DMA AXI4 master
  input  axil_req_t                        pcie_axil_req,
  output axil_resp_t                       pcie_axil_resp,
  input  axi_m_req_t                       dma_axi_req,
  output axi_m_resp_t                      dma_axi_resp,
  // DDR3 memory controller: AXI4 slave
  output axi_s_req_t                       mem_axi_req,
  input  axi_s_resp_t                      mem_axi_resp,
  // configuration controller: its microcontroller's side of the
  // configuration register bank, and write notifications for both sides
  input  axil_req_t                        mcu_axil_req,
  output axil_resp_t                       mcu_axil_resp,
  output logic [7:0]                       cfg_cmd_wr_o,
  output logic [7:0]                       cfg_sts_wr_o,
  // custom logic: register bank, memory master, stream in and out
  output axil_req_t                        cl_axil_req,
  input  axil_resp_t                       cl_axil_resp,
  input  axi_m_req_t                       cl_axi_req,
  output axi_m_resp_t                      cl_axi_resp,
  output iq_t [NUM_ADC-1:0]                cl_iq_o,
  output logic                             cl_iq_valid_o,
  input  sample_t                          cl_dac_i,
  input  logic                             cl_dac_valid_i
);

  localparam int unsigned N_CTRL = 6;
  localparam int unsigned N_STAT = 4;
  localparam int unsigned MAX_LOG2 = 8;
  localparam logic [31:0] FW_ID  = 32'hE55F_0001;

  // ---------------- AXI4-Lite: register banks ----------------
  axil_req_t  [2:0] lreq;
  axil_resp_t [2:0] lresp;

  axil_interconnect #(.N_SLV(3)) u_axil (
    .clk, .rst_n,
    .s_req(pcie_axil_req), .s_resp(pcie_axil_resp),
    .m_req(lreq), .m_resp(lresp)
  );

  logic [N_CTRL-1:0][31:0] ctrl;
  logic [N_CTRL-1:0]       wr_pulse;
  logic [N_STAT-1:0][31:0] stat;

  axil_regbank #(.N_CTRL(N_CTRL), .N_STAT(N_STAT)) u_regs (
    .clk, .rst_n,
    .axil_req(lreq[0]), .axil_resp(lresp[0]),
    .ctrl_o(ctrl), .wr_pulse_o(wr_pulse), .stat_i(stat)
  );

  cfg_regbank #(.N_CMD(8), .N_STS(8)) u_cfg_regs (
    .clk, .rst_n,
    .cpu_req(lreq[1]), .cpu_resp(lresp[1]),
    .mcu_req(mcu_axil_req), .mcu_resp(mcu_axil_resp),
    .cmd_wr_o(cfg_cmd_wr_o), .sts_wr_o(cfg_sts_wr_o)
  );

  assign cl_axil_req  = lreq[2];
  assign lresp[2]     = cl_axil_resp;

  // ---------------- AXI4: memory ----------------
  axi_m_req_t  [AXI_NMST-1:0] mreq;
  axi_m_resp_t [AXI_NMST-1:0] mresp;

  axi_interconnect #(.N_MST(AXI_NMST)) u_axi (
    .clk, .rst_n,
    .s_req(mreq), .s_resp(mresp),
    .m_req(mem_axi_req), .m_resp(mem_axi_resp)
  );

  assign mreq[0]      = dma_axi_req;
  assign dma_axi_resp = mresp[0];
  assign mreq[2]      = cl_axi_req;
  assign cl_axi_resp  = mresp[2];

  // ---------------- data path ----------------
  sample_t [NUM_ADC-1:0] adc_s;
  logic                  adc_v;
  logic [NUM_ADC-1:0]    adc_ovr;

  adc_interface u_adc (
    .clk, .rst_n,
    .enable_i(ctrl[1][0]),
    .clr_ovr_i(wr_pulse[1] && ctrl[1][3]),
    .adc_i, .data_o(adc_s), .valid_o(adc_v), .ovr_o(adc_ovr)
  );

  logic        cap_busy, cap_done, cap_ovf, cap_err;
  logic [31:0] cap_beats, dac_count;

  preprocessing #(.IQ_M(IQ_M), .IQ_N(IQ_N), .MAX_LOG2(MAX_LOG2), .BURST_LEN(BURST_LEN)) u_pre (
    .clk, .rst_n,
    .adc_i(adc_s), .adc_valid_i(adc_v),
    .clr_i(wr_pulse[1] && ctrl[1][2]),
    .dec_log2_i(ctrl[2][3:0]),
    .cap_start_i(wr_pulse[3] && ctrl[3][0]),
    .cap_src_i(capture_src_e'(ctrl[3][1])),
    .cap_ch_i({1'b0, ctrl[3][5:4]}),
    .cap_base_i(ctrl[4]),
    .cap_len_i(ctrl[5]),
    .iq_o(cl_iq_o), .iq_valid_o(cl_iq_valid_o),
    .axi_req(mreq[1]), .axi_resp(mresp[1]),
    .cap_busy_o(cap_busy), .cap_done_o(cap_done), .cap_overflow_o(cap_ovf),
    .cap_err_o(cap_err), .cap_beats_o(cap_beats)
  );

  dac_interface u_dac (
    .clk, .rst_n,
    .enable_i(ctrl[1][1]),
    .data_i(cl_dac_i), .valid_i(cl_dac_valid_i),
    .dac_o, .count_o(dac_count)
  );

  // ---------------- status registers ----------------
  assign stat[0] = FW_ID;
  assign stat[1] = {20'd0, adc_ovr, 4'd0, cap_ovf, cap_err, cap_done, cap_busy};
  assign stat[2] = cap_beats;
  assign stat[3] = dac_count;

endmodule
