// mem_writer: stores a stream of 32-bit words in memory over AXI4.
//
// This is the memory interface of the pre-processing block, through which
// raw or processed samples go straight into the on-board memory. A capture
// is started with start_i; it writes len_i bytes from address base_i on.
//
// How it works:
//   * Packing: words arriving with valid_i are gathered into one 512-bit
//     beat, word j of a beat in bits 32*j+31:32*j (first word at the lowest
//     address). A full beat goes into a FIFO of FIFO_DEPTH beats.
//   * Bursts: when the FIFO holds a whole burst of BURST_LEN beats, one AW
//     (INCR, 64-byte beats, len = BURST_LEN-1) is issued, the beats follow on
//     W, and the next burst starts after the B response has come back. The
//     burst size (1 KiB by default) divides 4 KiB, so no burst crosses a
//     4 KiB boundary as long as base_i is burst-aligned; the low address bits
//     below the burst size are ignored, and len_i is rounded down to whole
//     bursts.
//   * Overflow: the stream cannot be stopped. If a beat is complete while the
//     FIFO is full (the memory is too slow), that beat is dropped and the
//     sticky overflow_o flag is set; the capture still ends after the
//     requested number of beats, so the written data then has a gap.
//   * Status: busy_o during a capture; done_o from its end until the next
//     start; err_o if any burst got a non-OKAY response; beats_o counts the
//     beats written in the current capture.
// Rate: the stream gives at most one word per cycle, i.e. one beat per 16
// cycles, while the memory side can take one beat per cycle, so the FIFO
// only fills when the memory stalls.
//
// The paper gives the function (raw or processed data stored directly in
// the on-board memory, AXI4 into the interconnect) and the 512-bit width;
// the packing, the burst scheme and the overflow policy are this design's own.
module mem_writer
  import ess_pkg::*;
#(
  parameter int unsigned BURST_LEN  = 16,
  parameter int unsigned FIFO_DEPTH = 32
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start_i,
  input  axi_addr_t    base_i,
  input  logic [31:0]  len_i,
  input  logic [31:0]  data_i,
  input  logic         valid_i,
  output axi_m_req_t   axi_req,
  input  axi_m_resp_t  axi_resp,
  output logic         busy_o,
  output logic         done_o,
  output logic         overflow_o,
  output logic         err_o,
  output logic [31:0]  beats_o
);

  localparam int unsigned WPB     = AXI_DATA_W / 32;         // words per beat
  localparam int unsigned BEAT_B  = AXI_DATA_W / 8;          // bytes per beat
  localparam int unsigned BURST_B = BURST_LEN * BEAT_B;      // bytes per burst
  localparam int unsigned BB_W    = $clog2(BURST_B);
  localparam int unsigned WI_W    = $clog2(WPB);
  localparam int unsigned FP_W    = $clog2(FIFO_DEPTH);
  localparam int unsigned BL_W    = $clog2(BURST_LEN);

  typedef enum logic [1:0] {ST_IDLE, ST_ADDR, ST_DATA, ST_RESP} st_e;

  st_e                    st;
  axi_data_t              pack_q;
  logic [WI_W-1:0]        widx_q;
  logic [31:0]            beats_total, beats_in, beats_out;
  axi_addr_t              addr_q;
  logic [BL_W-1:0]        bcnt_q;

  axi_data_t              fifo [FIFO_DEPTH];
  logic [FP_W:0]          f_cnt;
  logic [FP_W-1:0]        f_rd, f_wr;
  logic                   beat_full, f_push, f_pop, taking;

  assign taking    = busy_o && valid_i && (beats_in < beats_total);
  assign beat_full = taking && (32'(widx_q) == WPB - 1);
  assign f_push    = beat_full && (32'(f_cnt) < FIFO_DEPTH);
  assign f_pop     = (st == ST_DATA) && axi_resp.w_ready;

  // Input packing and FIFO write side
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pack_q <= '0; widx_q <= '0; beats_in <= '0; overflow_o <= 1'b0;
      f_wr <= '0; f_rd <= '0; f_cnt <= '0;
    end else begin
      if (start_i && !busy_o) begin
        widx_q <= '0; beats_in <= '0; overflow_o <= 1'b0;
        f_wr <= '0; f_rd <= '0; f_cnt <= '0;
      end else begin
        if (taking) begin
          pack_q[32*widx_q +: 32] <= data_i;
          widx_q <= widx_q + 1'b1;
          if (beat_full) begin
            beats_in <= beats_in + 32'd1;
            if (!f_push) overflow_o <= 1'b1;
          end
        end
        if (f_push) f_wr <= FP_W'((32'(f_wr) + 1) % FIFO_DEPTH);
        if (f_pop)  f_rd <= FP_W'((32'(f_rd) + 1) % FIFO_DEPTH);
        f_cnt <= f_cnt + (FP_W+1)'(f_push) - (FP_W+1)'(f_pop);
      end
    end
  end

  always_ff @(posedge clk)
    if (f_push) begin
      fifo[f_wr] <= pack_q;
      fifo[f_wr][AXI_DATA_W-1 -: 32] <= data_i;  // the word completing the beat
    end

  // Burst state machine
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= ST_IDLE; busy_o <= 1'b0; done_o <= 1'b0; err_o <= 1'b0;
      beats_total <= '0; beats_out <= '0; addr_q <= '0; bcnt_q <= '0;
    end else begin
      unique case (st)
        ST_IDLE: begin
          if (start_i && !busy_o) begin
            addr_q      <= {base_i[AXI_ADDR_W-1:BB_W], BB_W'(0)};
            beats_total <= (len_i >> BB_W) * BURST_LEN;
            beats_out   <= '0;
            busy_o      <= 1'b1;
            done_o      <= 1'b0;
            err_o       <= 1'b0;
          end else if (busy_o) begin
            if (beats_out >= beats_total) begin
              busy_o <= 1'b0;
              done_o <= 1'b1;
            end else if (32'(f_cnt) >= BURST_LEN) begin
              st <= ST_ADDR;
            end else if (beats_in >= beats_total && 32'(f_cnt) < BURST_LEN) begin
              // beats were lost to overflow: nothing more will come
              busy_o <= 1'b0;
              done_o <= 1'b1;
            end
          end
        end
        ST_ADDR: if (axi_resp.aw_ready) begin
          st <= ST_DATA; bcnt_q <= '0;
        end
        ST_DATA: if (axi_resp.w_ready) begin
          bcnt_q    <= bcnt_q + 1'b1;
          beats_out <= beats_out + 32'd1;
          if (32'(bcnt_q) == BURST_LEN - 1) st <= ST_RESP;
        end
        ST_RESP: if (axi_resp.b_valid) begin
          if (axi_resp.b.resp != RESP_OKAY) err_o <= 1'b1;
          addr_q <= addr_q + AXI_ADDR_W'(BURST_B);
          st     <= ST_IDLE;
        end
        default: st <= ST_IDLE;
      endcase
    end
  end

  assign beats_o = beats_out;

  always_comb begin
    axi_req          = '0;
    axi_req.aw_valid = (st == ST_ADDR);
    axi_req.aw.id    = '0;
    axi_req.aw.addr  = addr_q;
    axi_req.aw.len   = 8'(BURST_LEN - 1);
    axi_req.aw.size  = 3'($clog2(BEAT_B));
    axi_req.aw.burst = BURST_INCR;
    axi_req.w_valid  = (st == ST_DATA);
    axi_req.w.data   = fifo[f_rd];
    axi_req.w.strb   = '1;
    axi_req.w.last   = (32'(bcnt_q) == BURST_LEN - 1);
    axi_req.b_ready  = (st == ST_RESP);
  end

  initial assert (BURST_LEN <= 256 && FIFO_DEPTH >= BURST_LEN)
    else $error("mem_writer: BURST_LEN must be 1..256 and at most FIFO_DEPTH");

endmodule
