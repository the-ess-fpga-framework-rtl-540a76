// axil_interconnect: one AXI4-Lite master to N_SLV AXI4-Lite slaves.
//
// The PCIe block's AXI4-Lite master reaches all register banks over one
// bus: the framework's bank, the configuration controller and the custom
// logic's bank(s). This module is that bus. Each slave owns a window of
// 2**WIN_W bytes starting at BASE[k] (BASE[k] must be aligned to the
// window). An address outside every window is answered here with DECERR.
//
// Operation: the write and the read side are independent state machines,
// each with one transaction in flight.
//   write: IDLE takes the AW address (AWVALID) and decodes it; FWD presents
//          AW and W to the chosen slave, letting each go as soon as that
//          slave accepts it; RESP forwards the slave's B response (or a
//          DECERR of its own) and returns to IDLE when the master takes it.
//   read:  IDLE decodes ARADDR; FWD presents AR to the slave; RESP forwards
//          its R beat.
// The master's AW/AR is accepted in the cycle the request reaches the slave,
// so the minimum latency added is one cycle per direction.
//
// The paper says only that the register banks share one AXI4-Lite bus and
// that the design tools assign their addresses; the window map and the
// single-transaction state machines are this design's own choices.
module axil_interconnect
  import ess_pkg::*;
#(
  parameter int unsigned N_SLV = 3,
  parameter int unsigned WIN_W = 16,
  parameter logic [N_SLV-1:0][AXIL_ADDR_W-1:0] BASE = {32'h0002_0000, 32'h0001_0000, 32'h0000_0000}
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  axil_req_t              s_req,
  output axil_resp_t             s_resp,
  output axil_req_t  [N_SLV-1:0] m_req,
  input  axil_resp_t [N_SLV-1:0] m_resp
);

  localparam int unsigned SEL_W = (N_SLV > 1) ? $clog2(N_SLV) : 1;

  typedef enum logic [1:0] {IDLE, FWD, RESP} st_e;

  // Returns {hit, index} for an address.
  function automatic logic [SEL_W:0] decode(input logic [AXIL_ADDR_W-1:0] a);
    logic [SEL_W:0] r;
    r = '0;
    for (int k = 0; k < N_SLV; k++)
      if ((a >> WIN_W) == (BASE[k] >> WIN_W)) r = {1'b1, SEL_W'(k)};
    return r;
  endfunction

  // ---------------- write side ----------------
  st_e                     wst;
  logic [SEL_W-1:0]        wsel;
  logic                    whit, aw_done, w_done;
  logic [AXIL_ADDR_W-1:0]  waddr;
  logic [1:0]              bresp_q;
  logic [SEL_W:0]          wdec;

  logic                    aw_rdy, w_rdy;  // readiness of the target (always, for a miss)

  assign wdec   = decode(s_req.aw_addr);
  assign aw_rdy = whit ? m_resp[wsel].aw_ready : 1'b1;
  assign w_rdy  = whit ? m_resp[wsel].w_ready  : 1'b1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wst <= IDLE; wsel <= '0; whit <= 1'b0; aw_done <= 1'b0; w_done <= 1'b0;
      waddr <= '0; bresp_q <= RESP_OKAY;
    end else begin
      unique case (wst)
        IDLE: if (s_req.aw_valid) begin
          wst <= FWD; whit <= wdec[SEL_W]; wsel <= wdec[SEL_W-1:0];
          waddr <= s_req.aw_addr; aw_done <= 1'b0; w_done <= 1'b0;
        end
        FWD: begin
          if (aw_rdy) aw_done <= 1'b1;
          if (s_req.w_valid && w_rdy) w_done <= 1'b1;
          if ((aw_done || aw_rdy) && (w_done || (s_req.w_valid && w_rdy))) begin
            wst <= RESP;
            bresp_q <= whit ? RESP_OKAY : RESP_DECERR;
          end
        end
        RESP: begin
          if (whit && m_resp[wsel].b_valid && s_req.b_ready) wst <= IDLE;
          if (!whit && s_req.b_ready) wst <= IDLE;
        end
        default: wst <= IDLE;
      endcase
    end
  end

  // ---------------- read side ----------------
  st_e                     rst_q;
  logic [SEL_W-1:0]        rsel;
  logic                    rhit;
  logic [AXIL_ADDR_W-1:0]  raddr;
  logic [SEL_W:0]          rdec;

  assign rdec = decode(s_req.ar_addr);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rst_q <= IDLE; rsel <= '0; rhit <= 1'b0; raddr <= '0;
    end else begin
      unique case (rst_q)
        IDLE: if (s_req.ar_valid) begin
          rst_q <= FWD; rhit <= rdec[SEL_W]; rsel <= rdec[SEL_W-1:0]; raddr <= s_req.ar_addr;
        end
        FWD: if (!rhit || m_resp[rsel].ar_ready) rst_q <= RESP;
        RESP: begin
          if (rhit && m_resp[rsel].r_valid && s_req.r_ready) rst_q <= IDLE;
          if (!rhit && s_req.r_ready) rst_q <= IDLE;
        end
        default: rst_q <= IDLE;
      endcase
    end
  end

  // ---------------- routing ----------------
  always_comb begin
    s_resp = '0;
    for (int k = 0; k < N_SLV; k++) begin
      m_req[k]          = '0;
      m_req[k].aw_addr  = waddr;
      m_req[k].w_data   = s_req.w_data;
      m_req[k].w_strb   = s_req.w_strb;
      m_req[k].ar_addr  = raddr;
    end
    // write
    if (wst == FWD) begin
      if (whit) begin
        m_req[wsel].aw_valid = !aw_done;
        m_req[wsel].w_valid  = s_req.w_valid && !w_done;
      end
      s_resp.aw_ready = aw_rdy && !aw_done;
      s_resp.w_ready  = w_rdy && !w_done;
    end
    if (wst == RESP) begin
      if (whit) begin
        m_req[wsel].b_ready = s_req.b_ready;
        s_resp.b_valid      = m_resp[wsel].b_valid;
        s_resp.b_resp       = m_resp[wsel].b_resp;
      end else begin
        s_resp.b_valid = 1'b1;
        s_resp.b_resp  = bresp_q;
      end
    end
    // read
    if (rst_q == FWD) begin
      if (rhit) begin
        m_req[rsel].ar_valid = 1'b1;
        s_resp.ar_ready      = m_resp[rsel].ar_ready;
      end else begin
        s_resp.ar_ready      = 1'b1;
      end
    end
    if (rst_q == RESP) begin
      if (rhit) begin
        m_req[rsel].r_ready = s_req.r_ready;
        s_resp.r_valid      = m_resp[rsel].r_valid;
        s_resp.r_data       = m_resp[rsel].r_data;
        s_resp.r_resp       = m_resp[rsel].r_resp;
      end else begin
        s_resp.r_valid = 1'b1;
        s_resp.r_data  = '0;
        s_resp.r_resp  = RESP_DECERR;
      end
    end
  end

endmodule
