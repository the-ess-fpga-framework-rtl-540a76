// axil_regbank: a register bank on the AXI4-Lite bus.
//
// The framework has one of these for its own settings and status, and the
// custom logic has another with its own register map on the same bus; the
// configuration controller exchanges values with the crate CPU the same way.
// The bank holds N_CTRL control registers, which the CPU writes and reads
// back and whose values drive the fabric (ctrl_o), and N_STAT status
// registers, which the fabric drives (stat_i) and the CPU only reads.
//
// Register map inside the bank's window of 2**WIN_W bytes (byte addresses):
//   4*k,            k <  N_CTRL : control register k, read/write, reset 0
//   4*(N_CTRL+k),   k <  N_STAT : status register k, read only
//   anything else              : SLVERR on reads and writes; writes to a
//                                status register also get SLVERR.
// Address bits at and above WIN_W are ignored: the interconnect in front
// selects the bank. Byte strobes are honoured on writes.
//
// Handshake: a write is taken when AWVALID and WVALID are both high and no
// response is pending; AWREADY and WREADY rise together for one cycle and
// BVALID follows in the next cycle. wr_pulse_o[k] is high for that one
// cycle when control register k is written, so a register can also be used
// as a command. A read is taken when ARVALID is high and no read data is
// pending; RVALID with the data follows one cycle later. There is one
// transaction per direction in flight; the maximum rate is one write and one
// read every two cycles.
//
// The paper gives the register bank's role and its sharing between framework
// and custom logic; the map layout, the error responses and the write pulse
// are this design's own choices.
module axil_regbank
  import ess_pkg::*;
#(
  parameter int unsigned N_CTRL = 8,
  parameter int unsigned N_STAT = 8,
  parameter int unsigned WIN_W  = 12
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  axil_req_t                     axil_req,
  output axil_resp_t                    axil_resp,
  output logic [N_CTRL-1:0][31:0]       ctrl_o,
  output logic [N_CTRL-1:0]             wr_pulse_o,
  input  logic [N_STAT-1:0][31:0]       stat_i
);

  localparam int unsigned IDX_W = WIN_W - 2;

  logic                 bvalid_q, rvalid_q;
  logic [1:0]           bresp_q, rresp_q;
  logic [31:0]          rdata_q;

  wire                  wr_go = axil_req.aw_valid && axil_req.w_valid && !bvalid_q;
  wire                  rd_go = axil_req.ar_valid && !rvalid_q;
  wire [IDX_W-1:0]      widx  = axil_req.aw_addr[WIN_W-1:2];
  wire [IDX_W-1:0]      ridx  = axil_req.ar_addr[WIN_W-1:2];

  // Write path
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ctrl_o     <= '0;
      wr_pulse_o <= '0;
      bvalid_q   <= 1'b0;
      bresp_q    <= RESP_OKAY;
    end else begin
      wr_pulse_o <= '0;
      if (bvalid_q && axil_req.b_ready) bvalid_q <= 1'b0;
      if (wr_go) begin
        bvalid_q <= 1'b1;
        if (32'(widx) < N_CTRL) begin
          for (int k = 0; k < N_CTRL; k++)
            if (32'(widx) == k) begin
              for (int b = 0; b < 4; b++)
                if (axil_req.w_strb[b]) ctrl_o[k][8*b +: 8] <= axil_req.w_data[8*b +: 8];
              wr_pulse_o[k] <= 1'b1;
            end
          bresp_q <= RESP_OKAY;
        end else begin
          bresp_q <= RESP_SLVERR;
        end
      end
    end
  end

  // Read path
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rvalid_q <= 1'b0;
      rresp_q  <= RESP_OKAY;
      rdata_q  <= '0;
    end else begin
      if (rvalid_q && axil_req.r_ready) rvalid_q <= 1'b0;
      if (rd_go) begin
        rvalid_q <= 1'b1;
        if (32'(ridx) < N_CTRL + N_STAT) begin
          for (int k = 0; k < N_CTRL; k++)
            if (32'(ridx) == k) rdata_q <= ctrl_o[k];
          for (int k = 0; k < N_STAT; k++)
            if (32'(ridx) == N_CTRL + k) rdata_q <= stat_i[k];
          rresp_q <= RESP_OKAY;
        end else begin
          rdata_q <= '0;
          rresp_q <= RESP_SLVERR;
        end
      end
    end
  end

  always_comb begin
    axil_resp          = '0;
    axil_resp.aw_ready = wr_go;
    axil_resp.w_ready  = wr_go;
    axil_resp.b_valid  = bvalid_q;
    axil_resp.b_resp   = bresp_q;
    axil_resp.ar_ready = rd_go;
    axil_resp.r_valid  = rvalid_q;
    axil_resp.r_data   = rdata_q;
    axil_resp.r_resp   = rresp_q;
  end

  // AXI rule: a response, once valid, stays until it is taken.
  property p_hold(v, r);
    @(posedge clk) disable iff (!rst_n) v && !r |=> v;
  endproperty
  a_b_hold: assert property (p_hold(axil_resp.b_valid, axil_req.b_ready));
  a_r_hold: assert property (p_hold(axil_resp.r_valid, axil_req.r_ready));

endmodule
