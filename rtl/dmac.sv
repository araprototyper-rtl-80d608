// dmac: direct memory access controller between one physical memory port
// and the shared buffers.
//
// The IOMMU pushes translated commands (at most one 4 KB page each) into a
// small command queue. For a READ the DMAC fetches the page with INCR bursts
// of up to BURST beats on its AXI master port and writes each beat into the
// target buffer through the interleaved network; r_ready follows the
// network's grant, so a buffer conflict stalls the burst. For a WRITE it
// reads the buffer one word per cycle into a two-entry queue that feeds the
// W channel, so a burst streams at one beat per cycle, and waits for the
// write response before the next burst. One burst is outstanding at a time.
// When a command has been fully moved, done pulses for one cycle with the
// command's accelerator number (the IOMMU uses it to track completion).
// The paper gives the DMAC's role and the page granularity; the burst length,
// one-outstanding-burst rule, queue depth and completion pulse are this
// design's choices.
module dmac
  import ara_pkg::*;
#(
  parameter int unsigned BURST     = BURST_LEN,
  parameter int unsigned CMD_DEPTH = 4,
  localparam int unsigned CW = $clog2(CMD_DEPTH + 1)
) (
  input  logic               clk,
  input  logic               rst_n,
  // commands from the IOMMU
  input  logic               cmd_valid,
  output logic               cmd_ready,
  input  dma_cmd_t           cmd,
  output logic [CW-1:0]      cmd_count,
  // completion
  output logic               done,
  output logic [ACCID_W-1:0] done_acc,
  output logic               busy,
  // buffer access through the interleaved network
  output buf_req_t           breq,
  input  logic               bgnt,
  input  logic [DW-1:0]      brdata,
  // AXI master (physical memory port)
  output axi_req_t           axi_req,
  input  axi_rsp_t           axi_rsp
);
  typedef enum logic [2:0] {S_IDLE, S_AR, S_R, S_AW, S_W, S_B, S_DONE} state_e;
  state_e state;

  dma_cmd_t  cur, q_head;
  logic      q_valid, q_pop;
  logic [LEN_W-1:0] moved;        // words finished in earlier bursts
  logic [LEN_W-1:0] beat;         // beats of the current burst transferred
  logic [LEN_W-1:0] rd_issued;    // WRITE: buffer reads issued in this burst
  logic [LEN_W-1:0] beats;        // beats of the current burst
  logic [LEN_W-1:0] remaining;

  sync_fifo #(.T(dma_cmd_t), .DEPTH(CMD_DEPTH)) u_cmdq (
    .clk, .rst_n,
    .in_valid(cmd_valid), .in_ready(cmd_ready), .in_data(cmd),
    .out_valid(q_valid), .out_ready(q_pop), .out_data(q_head), .count(cmd_count));

  assign remaining = cur.len - moved;
  assign beats     = (remaining > LEN_W'(BURST)) ? LEN_W'(BURST) : remaining;
  assign q_pop     = (state == S_IDLE) && q_valid;
  assign busy      = (state != S_IDLE) || q_valid;

  // ---- WRITE path: two-entry queue between buffer reads and the W channel --
  logic [DW-1:0] wq0, wq1;
  logic [1:0]    wq_cnt;
  logic          inflight;          // a buffer read was granted last cycle
  logic          w_pop, rd_req;
  assign w_pop  = (state == S_W) && (wq_cnt != 0) && axi_rsp.w_ready;
  assign rd_req = (state == S_W) && (rd_issued < beats) &&
                  ((2'(wq_cnt) + 2'(inflight)) < 2'd2 || w_pop && (wq_cnt + 2'(inflight)) <= 2'd2);

  always_comb begin
    breq = '0;
    breq.buf_id = cur.buf_id;
    if (state == S_R) begin
      breq.en    = axi_rsp.r_valid;
      breq.we    = 1'b1;
      breq.addr  = cur.buf_off + BUF_AW'(moved + beat);
      breq.wdata = axi_rsp.r_data;
    end else if (state == S_W) begin
      breq.en    = rd_req;
      breq.we    = 1'b0;
      breq.addr  = cur.buf_off + BUF_AW'(moved + rd_issued);
    end
  end

  always_comb begin
    axi_req          = '0;
    axi_req.ar_valid = (state == S_AR);
    axi_req.ar_addr  = cur.paddr + AW'({moved, 2'b00});
    axi_req.ar_len   = 8'(beats - 1'b1);
    axi_req.r_ready  = (state == S_R) && bgnt;
    axi_req.aw_valid = (state == S_AW);
    axi_req.aw_addr  = cur.paddr + AW'({moved, 2'b00});
    axi_req.aw_len   = 8'(beats - 1'b1);
    axi_req.w_valid  = (state == S_W) && (wq_cnt != 0);
    axi_req.w_data   = wq0;
    axi_req.w_last   = (beat == beats - 1'b1);
    axi_req.b_ready  = (state == S_B);
  end

  assign done     = (state == S_DONE);
  assign done_acc = cur.acc;

  logic push_w;
  assign push_w = inflight;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      cur       <= '0;
      moved     <= '0;
      beat      <= '0;
      rd_issued <= '0;
      wq0       <= '0;
      wq1       <= '0;
      wq_cnt    <= '0;
      inflight  <= 1'b0;
    end else begin
      inflight <= rd_req && bgnt;
      unique case ({push_w, w_pop})
        2'b10: begin
          if (wq_cnt == 0) wq0 <= brdata; else wq1 <= brdata;
          wq_cnt <= wq_cnt + 1'b1;
        end
        2'b01: begin wq0 <= wq1; wq_cnt <= wq_cnt - 1'b1; end
        2'b11: begin
          if (wq_cnt == 1) wq0 <= brdata; else begin wq0 <= wq1; wq1 <= brdata; end
        end
        default: ;
      endcase
      if (rd_req && bgnt) rd_issued <= rd_issued + 1'b1;

      unique case (state)
        S_IDLE: if (q_valid) begin
          cur   <= q_head;
          moved <= '0;
          state <= (q_head.dir == MEM_READ) ? S_AR : S_AW;
        end
        S_AR: if (axi_rsp.ar_ready) begin beat <= '0; state <= S_R; end
        S_R: if (axi_rsp.r_valid && bgnt) begin
          beat <= beat + 1'b1;
          if (beat == beats - 1'b1) begin
            moved <= moved + beats;
            state <= (moved + beats == cur.len) ? S_DONE : S_AR;
          end
        end
        S_AW: if (axi_rsp.aw_ready) begin
          beat <= '0; rd_issued <= '0; state <= S_W;
        end
        S_W: if (w_pop) begin
          beat <= beat + 1'b1;
          if (beat == beats - 1'b1) state <= S_B;
        end
        S_B: if (axi_rsp.b_valid) begin
          moved <= moved + beats;
          state <= (moved + beats == cur.len) ? S_DONE : S_AW;
        end
        S_DONE: state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  // AXI: a valid, once raised, stays until accepted
  property p_hold(v, r); @(posedge clk) disable iff (!rst_n) v && !r |=> v; endproperty
  a_ar_hold: assert property (p_hold(axi_req.ar_valid, axi_rsp.ar_ready));
  a_aw_hold: assert property (p_hold(axi_req.aw_valid, axi_rsp.aw_ready));
  a_w_hold:  assert property (p_hold(axi_req.w_valid,  axi_rsp.w_ready));
endmodule
