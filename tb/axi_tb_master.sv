// axi_tb_master: AXI4 master for testbenches (not synthesizable).
// Other testbench code calls its tasks by hierarchical name:
//   write_burst(addr, beats, seed) writes beats of a pattern made from seed
//   read_check(addr, beats, seed, ok) reads them back and compares
//   read_beat(addr, data)            reads one beat
// Bursts are INCR with 64-byte beats; ID is fixed per instance.
module axi_tb_master
  import ess_pkg::*;
#(
  parameter logic [AXI_MID_W-1:0] ID = '0
) (
  input  logic        clk,
  output axi_m_req_t  req,
  input  axi_m_resp_t resp
);

  int bursts_done = 0;

  initial req = '0;

  function automatic axi_data_t pattern(int seed, int j);
    axi_data_t d;
    for (int w = 0; w < AXI_DATA_W / 32; w++) d[32*w +: 32] = 32'(seed) * 32'h0101_0101 + 32'(j * 64 + w);
    return d;
  endfunction

  task automatic write_burst(axi_addr_t a, int beats, int seed, output logic [1:0] bresp);
    req.aw_valid = 1; req.aw.id = ID; req.aw.addr = a; req.aw.len = 8'(beats - 1);
    req.aw.size = 3'd6; req.aw.burst = BURST_INCR;
    do @(posedge clk); while (!resp.aw_ready);
    #1 req.aw_valid = 0;
    for (int j = 0; j < beats; j++) begin
      req.w_valid = 1; req.w.data = pattern(seed, j); req.w.strb = '1; req.w.last = (j == beats - 1);
      do @(posedge clk); while (!resp.w_ready);
      #1 req.w_valid = 0;
    end
    req.b_ready = 1;
    do @(posedge clk); while (!resp.b_valid);
    bresp = (resp.b.id == ID) ? resp.b.resp : RESP_DECERR;
    #1 req.b_ready = 0;
    bursts_done++;
  endtask

  task automatic read_beats(axi_addr_t a, int beats, output axi_data_t d [$]);
    d.delete();
    req.ar_valid = 1; req.ar.id = ID; req.ar.addr = a; req.ar.len = 8'(beats - 1);
    req.ar.size = 3'd6; req.ar.burst = BURST_INCR;
    do @(posedge clk); while (!resp.ar_ready);
    #1 req.ar_valid = 0; req.r_ready = 1;
    for (int j = 0; j < beats; j++) begin
      do @(posedge clk); while (!resp.r_valid);
      d.push_back(resp.r.data);
    end
    #1 req.r_ready = 0;
    bursts_done++;
  endtask

  task automatic read_check(axi_addr_t a, int beats, int seed, output bit ok);
    axi_data_t d [$];
    read_beats(a, beats, d);
    ok = 1;
    for (int j = 0; j < beats; j++) if (d[j] != pattern(seed, j)) ok = 0;
  endtask

endmodule
