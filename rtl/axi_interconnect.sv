// axi_interconnect: N_MST AXI4 masters onto one AXI4 slave (the memory
// controller).
//
// In the framework three masters share the on-board memory: the DMA engine
// of the PCIe block, the memory interface of the pre-processing block and
// the custom logic. This block merges them onto the memory controller's
// single 512-bit AXI4 port.
//
// How it works:
//   * AW and AR each have a one-entry register stage. When the stage is free
//     (or is being emptied this cycle) a round-robin arbiter picks one of the
//     requesting masters and takes its address; the master's number is put
//     in front of its ID (id_out = {master, id_in}), so the slave-side ID is
//     AXI_MID_W + clog2(N_MST) bits wide.
//   * Write data follows the order in which write addresses were accepted:
//     each accepted AW pushes its master number into a small FIFO, and the W
//     channel is connected to the master at the FIFO head until the beat with
//     WLAST passes. Because the number is pushed when AW is accepted from the
//     master, not when the slave takes it, W can reach the slave before or
//     with AW, as AXI4 allows. AW is held back while the FIFO is full.
//   * B and R are returned to the master named by the top ID bits; their
//     ready comes from that master.
// Throughput: one address per channel per cycle, one W and one R beat per
// cycle. An address passes with one cycle of latency.
//
// The paper says that an AXI4 interconnect combines and arbitrates the
// memory accesses and gives the 512-bit data width; it is vendor IP there.
// Round-robin arbitration, the ID prefix and the write-order FIFO are this
// design's own, chosen as the simplest scheme that keeps AXI4 ordering.
module axi_interconnect
  import ess_pkg::*;
#(
  parameter int unsigned N_MST    = AXI_NMST,
  parameter int unsigned WQ_DEPTH = 4
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  axi_m_req_t  [N_MST-1:0]  s_req,
  output axi_m_resp_t [N_MST-1:0]  s_resp,
  output axi_s_req_t               m_req,
  input  axi_s_resp_t              m_resp
);

  localparam int unsigned PFX_W = AXI_SID_W - AXI_MID_W;
  localparam int unsigned SEL_W = (N_MST > 1) ? $clog2(N_MST) : 1;
  localparam int unsigned QP_W  = $clog2(WQ_DEPTH);

  initial assert (N_MST <= (1 << PFX_W))
    else $error("axi_interconnect: N_MST does not fit the ID prefix");

  // Round-robin choice: first requester after the last winner.
  function automatic logic [SEL_W:0] rr_pick(input logic [N_MST-1:0] req,
                                             input logic [SEL_W-1:0] last);
    logic [SEL_W:0] r;
    int unsigned    c;
    r = '0;
    for (int unsigned k = N_MST; k >= 1; k--) begin
      c = (32'(last) + k) % N_MST;
      if (req[c]) r = {1'b1, SEL_W'(c)};
    end
    return r;
  endfunction

  // ---------------- AW stage and write-order FIFO ----------------
  logic                    aw_v;
  axi_s_ax_t               aw_q;
  logic [SEL_W-1:0]        aw_last;
  logic [N_MST-1:0]        aw_reqs, ar_reqs;
  logic [SEL_W:0]          aw_pick, ar_pick;
  logic                    aw_take, ar_take;

  logic [SEL_W-1:0]        wq [WQ_DEPTH];
  logic [QP_W:0]           wq_cnt;
  logic [QP_W-1:0]         wq_rd, wq_wr;
  logic                    wq_pop;
  logic [SEL_W-1:0]        wsel;

  always_comb
    for (int k = 0; k < N_MST; k++) begin
      aw_reqs[k] = s_req[k].aw_valid;
      ar_reqs[k] = s_req[k].ar_valid;
    end

  assign aw_pick = rr_pick(aw_reqs, aw_last);
  assign aw_take = aw_pick[SEL_W] && (!aw_v || m_resp.aw_ready) && (32'(wq_cnt) < WQ_DEPTH);
  assign wsel    = wq[wq_rd];
  assign wq_pop  = (wq_cnt != 0) && s_req[wsel].w_valid && m_resp.w_ready && s_req[wsel].w.last;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      aw_v <= 1'b0; aw_q <= '0; aw_last <= SEL_W'(N_MST - 1);
      wq_cnt <= '0; wq_rd <= '0; wq_wr <= '0;
    end else begin
      if (aw_v && m_resp.aw_ready) aw_v <= 1'b0;
      if (aw_take) begin
        aw_v       <= 1'b1;
        aw_last    <= aw_pick[SEL_W-1:0];
        aw_q.id    <= {PFX_W'(aw_pick[SEL_W-1:0]), s_req[aw_pick[SEL_W-1:0]].aw.id};
        aw_q.addr  <= s_req[aw_pick[SEL_W-1:0]].aw.addr;
        aw_q.len   <= s_req[aw_pick[SEL_W-1:0]].aw.len;
        aw_q.size  <= s_req[aw_pick[SEL_W-1:0]].aw.size;
        aw_q.burst <= s_req[aw_pick[SEL_W-1:0]].aw.burst;
        wq_wr      <= QP_W'((32'(wq_wr) + 1) % WQ_DEPTH);
      end
      if (wq_pop) wq_rd <= QP_W'((32'(wq_rd) + 1) % WQ_DEPTH);
      wq_cnt <= wq_cnt + (QP_W+1)'(aw_take) - (QP_W+1)'(wq_pop);
    end
  end

  always_ff @(posedge clk)
    if (aw_take) wq[wq_wr] <= aw_pick[SEL_W-1:0];

  // ---------------- AR stage ----------------
  logic                    ar_v;
  axi_s_ax_t               ar_q;
  logic [SEL_W-1:0]        ar_last;

  assign ar_pick = rr_pick(ar_reqs, ar_last);
  assign ar_take = ar_pick[SEL_W] && (!ar_v || m_resp.ar_ready);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ar_v <= 1'b0; ar_q <= '0; ar_last <= SEL_W'(N_MST - 1);
    end else begin
      if (ar_v && m_resp.ar_ready) ar_v <= 1'b0;
      if (ar_take) begin
        ar_v       <= 1'b1;
        ar_last    <= ar_pick[SEL_W-1:0];
        ar_q.id    <= {PFX_W'(ar_pick[SEL_W-1:0]), s_req[ar_pick[SEL_W-1:0]].ar.id};
        ar_q.addr  <= s_req[ar_pick[SEL_W-1:0]].ar.addr;
        ar_q.len   <= s_req[ar_pick[SEL_W-1:0]].ar.len;
        ar_q.size  <= s_req[ar_pick[SEL_W-1:0]].ar.size;
        ar_q.burst <= s_req[ar_pick[SEL_W-1:0]].ar.burst;
      end
    end
  end

  // ---------------- routing ----------------
  logic [PFX_W-1:0] bsel, rsel;
  assign bsel = m_resp.b.id[AXI_SID_W-1:AXI_MID_W];
  assign rsel = m_resp.r.id[AXI_SID_W-1:AXI_MID_W];

  always_comb begin
    m_req          = '0;
    m_req.aw_valid = aw_v;
    m_req.aw       = aw_q;
    m_req.ar_valid = ar_v;
    m_req.ar       = ar_q;
    if (wq_cnt != 0) begin
      m_req.w_valid = s_req[wsel].w_valid;
      m_req.w       = s_req[wsel].w;
    end
    m_req.b_ready = (32'(bsel) < N_MST) ? s_req[bsel].b_ready : 1'b1;
    m_req.r_ready = (32'(rsel) < N_MST) ? s_req[rsel].r_ready : 1'b1;

    for (int k = 0; k < N_MST; k++) begin
      s_resp[k]          = '0;
      s_resp[k].aw_ready = aw_take && (aw_pick[SEL_W-1:0] == SEL_W'(k));
      s_resp[k].ar_ready = ar_take && (ar_pick[SEL_W-1:0] == SEL_W'(k));
      s_resp[k].w_ready  = (wq_cnt != 0) && (wsel == SEL_W'(k)) && m_resp.w_ready;
      s_resp[k].b_valid  = m_resp.b_valid && (32'(bsel) == k);
      s_resp[k].b.id     = m_resp.b.id[AXI_MID_W-1:0];
      s_resp[k].b.resp   = m_resp.b.resp;
      s_resp[k].r_valid  = m_resp.r_valid && (32'(rsel) == k);
      s_resp[k].r.id     = m_resp.r.id[AXI_MID_W-1:0];
      s_resp[k].r.data   = m_resp.r.data;
      s_resp[k].r.resp   = m_resp.r.resp;
      s_resp[k].r.last   = m_resp.r.last;
    end
  end

  // AXI rule: an address, once valid towards the slave, stays until taken.
  a_aw_hold: assert property (@(posedge clk) disable iff (!rst_n)
                              m_req.aw_valid && !m_resp.aw_ready |=> m_req.aw_valid && $stable(m_req.aw));
  a_ar_hold: assert property (@(posedge clk) disable iff (!rst_n)
                              m_req.ar_valid && !m_resp.ar_ready |=> m_req.ar_valid && $stable(m_req.ar));

endmodule
