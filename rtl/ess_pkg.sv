// ess_pkg: types and constants shared by the framework's modules.
//
// The framework connects its parts with three kinds of links:
//   * AXI4 (full) between the memory masters (DMA, pre-processing memory
//     interface, custom logic) and the memory controller. The data width is
//     512 bit, the width the framework was built with on the Kintex
//     UltraScale board. Address (32 bit) and ID widths (4 bit per master,
//     6 bit after the interconnect has prefixed the master number) are this
//     design's choice.
//   * AXI4-Lite (32-bit address, 32-bit data) from the PCIe block to the
//     register banks.
//   * A plain data stream: data plus a one-bit valid, no back-pressure, as
//     the framework's data path uses for real-time samples.
// Each AXI link is a pair of packed structs, one for the signals the
// master drives (*_req_t) and one for those the slave drives (*_resp_t).
package ess_pkg;

  // ---------------- AXI4 ----------------
  localparam int unsigned AXI_ADDR_W = 32;
  localparam int unsigned AXI_DATA_W = 512;
  localparam int unsigned AXI_STRB_W = AXI_DATA_W / 8;
  localparam int unsigned AXI_MID_W  = 4;   // ID width at a master port
  localparam int unsigned AXI_NMST   = 3;   // DMA, pre-processing, custom logic
  localparam int unsigned AXI_SID_W  = AXI_MID_W + $clog2(AXI_NMST); // after the interconnect

  typedef logic [AXI_ADDR_W-1:0] axi_addr_t;
  typedef logic [AXI_DATA_W-1:0] axi_data_t;
  typedef logic [AXI_STRB_W-1:0] axi_strb_t;

  localparam logic [1:0] RESP_OKAY   = 2'b00;
  localparam logic [1:0] RESP_SLVERR = 2'b10;
  localparam logic [1:0] RESP_DECERR = 2'b11;
  localparam logic [1:0] BURST_INCR  = 2'b01;

  // Address channel (AW or AR), master-side ID width.
  typedef struct packed {
    logic [AXI_MID_W-1:0] id;
    axi_addr_t            addr;
    logic [7:0]           len;
    logic [2:0]           size;
    logic [1:0]           burst;
  } axi_m_ax_t;

  // Address channel, slave-side ID width.
  typedef struct packed {
    logic [AXI_SID_W-1:0] id;
    axi_addr_t            addr;
    logic [7:0]           len;
    logic [2:0]           size;
    logic [1:0]           burst;
  } axi_s_ax_t;

  typedef struct packed {
    axi_data_t data;
    axi_strb_t strb;
    logic      last;
  } axi_w_t;

  typedef struct packed {
    logic [AXI_MID_W-1:0] id;
    logic [1:0]           resp;
  } axi_m_b_t;

  typedef struct packed {
    logic [AXI_SID_W-1:0] id;
    logic [1:0]           resp;
  } axi_s_b_t;

  typedef struct packed {
    logic [AXI_MID_W-1:0] id;
    axi_data_t            data;
    logic [1:0]           resp;
    logic                 last;
  } axi_m_r_t;

  typedef struct packed {
    logic [AXI_SID_W-1:0] id;
    axi_data_t            data;
    logic [1:0]           resp;
    logic                 last;
  } axi_s_r_t;

  // Signals driven by an AXI4 master (master-side IDs).
  typedef struct packed {
    logic      aw_valid;
    axi_m_ax_t aw;
    logic      w_valid;
    axi_w_t    w;
    logic      b_ready;
    logic      ar_valid;
    axi_m_ax_t ar;
    logic      r_ready;
  } axi_m_req_t;

  // Signals driven by the slave of a master port.
  typedef struct packed {
    logic     aw_ready;
    logic     w_ready;
    logic     b_valid;
    axi_m_b_t b;
    logic     ar_ready;
    logic     r_valid;
    axi_m_r_t r;
  } axi_m_resp_t;

  // Same two bundles with the wider IDs of the interconnect's output.
  typedef struct packed {
    logic      aw_valid;
    axi_s_ax_t aw;
    logic      w_valid;
    axi_w_t    w;
    logic      b_ready;
    logic      ar_valid;
    axi_s_ax_t ar;
    logic      r_ready;
  } axi_s_req_t;

  typedef struct packed {
    logic     aw_ready;
    logic     w_ready;
    logic     b_valid;
    axi_s_b_t b;
    logic     ar_ready;
    logic     r_valid;
    axi_s_r_t r;
  } axi_s_resp_t;

  // ---------------- AXI4-Lite ----------------
  localparam int unsigned AXIL_ADDR_W = 32;
  localparam int unsigned AXIL_DATA_W = 32;

  typedef struct packed {
    logic                   aw_valid;
    logic [AXIL_ADDR_W-1:0] aw_addr;
    logic                   w_valid;
    logic [AXIL_DATA_W-1:0] w_data;
    logic [3:0]             w_strb;
    logic                   b_ready;
    logic                   ar_valid;
    logic [AXIL_ADDR_W-1:0] ar_addr;
    logic                   r_ready;
  } axil_req_t;

  typedef struct packed {
    logic                   aw_ready;
    logic                   w_ready;
    logic                   b_valid;
    logic [1:0]             b_resp;
    logic                   ar_ready;
    logic                   r_valid;
    logic [AXIL_DATA_W-1:0] r_data;
    logic [1:0]             r_resp;
  } axil_resp_t;

  // ---------------- Data path ----------------
  localparam int unsigned SAMPLE_W = 16;  // ADC and DAC sample width
  localparam int unsigned NUM_ADC  = 4;   // ADC inputs drawn in the structure diagram

  typedef logic signed [SAMPLE_W-1:0] sample_t;

  // One complex sample of the demodulated signal.
  typedef struct packed {
    logic signed [SAMPLE_W-1:0] i;
    logic signed [SAMPLE_W-1:0] q;
  } iq_t;

  // Capture source for the pre-processing memory interface.
  typedef enum logic {
    SRC_RAW       = 1'b0,  // ADC samples as they arrive
    SRC_PROCESSED = 1'b1   // I/Q after demodulation and decimation
  } capture_src_e;

endpackage
