// axi_mem_model: behavioural AXI4 memory for the testbenches (not
// synthesizable; it stands in for the DDR3 controller and its memory).
//
// Slave of one AXI4 port. REQ_T/RESP_T are the request and response
// structs of the port (master-side or slave-side IDs). Memory is an
// associative array of 512-bit beats, addressed by byte address / 64;
// unwritten beats read as zero. Only INCR bursts of full beats are modelled.
// Writes: AW is queued, W beats are accepted for the oldest queued AW and
// written with their strobes, a B response follows the last beat. Reads: AR
// is queued, the beats of the oldest one are returned in order. With
// STALL_PCT > 0 every ready and valid is withheld at random with that
// probability, to exercise back-pressure. ERR_ADDR: a write burst starting
// at that address gets SLVERR.
module axi_mem_model
  import ess_pkg::*;
#(
  parameter type         REQ_T     = axi_s_req_t,
  parameter type         RESP_T    = axi_s_resp_t,
  parameter int unsigned STALL_PCT = 0,
  parameter logic [31:0] ERR_ADDR  = 32'hFFFF_FFC0
) (
  input  logic  clk,
  input  logic  rst_n,
  input  REQ_T  req,
  output RESP_T resp
);

  axi_data_t mem [longint unsigned];

  typedef struct { longint unsigned id; longint unsigned addr; int len; } burst_t;
  burst_t awq[$], arq[$];
  int     wbeat, rbeat;
  longint unsigned bq[$];
  logic [1:0]      bresp_q[$];
  int     writes_beats, read_beats;

  function automatic bit go();
    return ($urandom_range(99) >= STALL_PCT);
  endfunction

  function automatic axi_data_t rd(longint unsigned a);
    return mem.exists(a) ? mem[a] : '0;
  endfunction

  initial begin
    resp = '0;
    wbeat = 0; rbeat = 0; writes_beats = 0; read_beats = 0;
  end

  always @(posedge clk) begin
    if (!rst_n) begin
      resp <= '0;
      awq.delete(); arq.delete(); bq.delete(); bresp_q.delete();
      wbeat = 0; rbeat = 0;
    end else begin
      // handshakes that complete in this cycle
      if (req.aw_valid && resp.aw_ready)
        awq.push_back('{longint'(req.aw.id), longint'(req.aw.addr), int'(req.aw.len)});
      if (req.ar_valid && resp.ar_ready)
        arq.push_back('{longint'(req.ar.id), longint'(req.ar.addr), int'(req.ar.len)});
      if (req.w_valid && resp.w_ready) begin
        longint unsigned a;
        axi_data_t d;
        a = awq[0].addr / 64 + longint'(wbeat);
        d = rd(a);
        for (int b = 0; b < AXI_STRB_W; b++)
          if (req.w.strb[b]) d[8*b +: 8] = req.w.data[8*b +: 8];
        mem[a] = d;
        writes_beats++;
        if (wbeat == awq[0].len) begin
          if (!req.w.last) $error("axi_mem_model: WLAST missing on the last beat");
          bq.push_back(awq[0].id);
          bresp_q.push_back(awq[0].addr == longint'(ERR_ADDR) ? RESP_SLVERR : RESP_OKAY);
          void'(awq.pop_front());
          wbeat = 0;
        end else begin
          if (req.w.last) $error("axi_mem_model: early WLAST");
          wbeat++;
        end
      end
      if (resp.b_valid && req.b_ready) begin
        void'(bq.pop_front()); void'(bresp_q.pop_front());
      end
      if (resp.r_valid && req.r_ready) begin
        read_beats++;
        if (rbeat == arq[0].len) begin
          void'(arq.pop_front()); rbeat = 0;
        end else rbeat++;
      end
      // next cycle's outputs
      resp.aw_ready <= go() && awq.size() < 4;
      resp.ar_ready <= go() && arq.size() < 4;
      resp.w_ready  <= 1'b0;
      resp.b_valid  <= 1'b0;
      resp.r_valid  <= 1'b0;
      // W may only be taken when an AW is known
      if (awq.size() > 0) resp.w_ready <= go();
      if (bq.size() > 0 && (go() || resp.b_valid)) begin
        resp.b_valid <= 1'b1;
        resp.b.id    <= $bits(resp.b.id)'(bq[0]);
        resp.b.resp  <= bresp_q[0];
      end
      if (arq.size() > 0 && (go() || (resp.r_valid && !req.r_ready))) begin
        resp.r_valid <= 1'b1;
        resp.r.id    <= $bits(resp.r.id)'(arq[0].id);
        resp.r.data  <= rd(arq[0].addr / 64 + longint'(rbeat));
        resp.r.resp  <= RESP_OKAY;
        resp.r.last  <= (rbeat == arq[0].len);
      end
    end
  end

endmodule
