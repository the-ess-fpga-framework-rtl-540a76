// axil_tb_master: AXI4-Lite master for testbenches (not synthesizable).
// Other testbench code calls its tasks by hierarchical name:
//   write(addr, data, resp)  one write, AW and W presented together
//   read(addr, data, resp)   one read
module axil_tb_master
  import ess_pkg::*;
(
  input  logic       clk,
  output axil_req_t  req,
  input  axil_resp_t resp
);

  int accesses = 0;

  initial req = '0;

  task automatic write(logic [31:0] a, logic [31:0] d, output logic [1:0] r);
    bit aw_done = 0, w_done = 0;
    #1;
    req.aw_valid = 1; req.aw_addr = a; req.w_valid = 1; req.w_data = d; req.w_strb = 4'hF;
    while (!(aw_done && w_done)) begin
      @(posedge clk);
      if (req.aw_valid && resp.aw_ready) aw_done = 1;
      if (req.w_valid && resp.w_ready) w_done = 1;
      #1;
      if (aw_done) req.aw_valid = 0;
      if (w_done) req.w_valid = 0;
    end
    req.b_ready = 1;
    do @(posedge clk); while (!resp.b_valid);
    r = resp.b_resp;
    #1 req.b_ready = 0;
    accesses++;
  endtask

  task automatic read(logic [31:0] a, output logic [31:0] d, output logic [1:0] r);
    #1;
    req.ar_valid = 1; req.ar_addr = a;
    do @(posedge clk); while (!resp.ar_ready);
    #1 req.ar_valid = 0; req.r_ready = 1;
    do @(posedge clk); while (!resp.r_valid);
    d = resp.r_data; r = resp.r_resp;
    #1 req.r_ready = 0;
    accesses++;
  endtask

endmodule
