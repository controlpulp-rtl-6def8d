// dma_2d: the cluster DMA engine, 1-D and 2-D strided transfers between
// the external address space (AXI master: PVT sensor registers, PLLs, L2)
// and the cluster L1.
//
// A transfer moves REPS rows of LEN bytes (LEN a multiple of 4). Row r is
// read from SRC + r*SRC_STRIDE and written to DST + r*DST_STRIDE; REPS = 1
// is a plain 1-D copy. With a source stride and LEN = 4 a single command
// gathers equally spaced registers, the PVT-sensor pattern of the paper.
// Whichever of SRC and DST lies in the L1 window goes to the L1 port, the
// other to the external port; a transfer must have exactly one end in L1.
// Programming: the worker writes the descriptor registers and then CMD;
// the descriptor enters a QDEPTH-deep queue so that the next one can be
// programmed while a transfer runs. Reads are issued back to back without
// waiting for their data, up to MAX_OUT (128) reads in flight, the
// paper's figure for hiding the latency of the on-chip network; the data land
// in a MAX_OUT-deep buffer from which writes drain in order. When the last
// write of a transfer is acknowledged done_o pulses and DONE_CNT increments.
// Registers (byte offsets): 0x00 SRC, 0x04 DST, 0x08 LEN, 0x0C SRC_STRIDE,
// 0x10 DST_STRIDE, 0x14 REPS, 0x18 CMD (write: enqueue), 0x1C STATUS
// ([0] busy, [15:8] queued descriptors), 0x20 DONE_CNT.
// From the paper: 2-D transfers, direct routing to the AXI master, L1
// access, up to 128 outstanding transactions. This design's choices: the
// register map, the queue, per-word (32-bit) accesses, strides on both ends.
module dma_2d
  import cpulp_pkg::*;
#(
  parameter int unsigned MAX_OUT = 128,
  parameter int unsigned QDEPTH  = 4,
  localparam int unsigned OW     = $clog2(MAX_OUT + 1),
  localparam int unsigned FW     = $clog2(MAX_OUT)
) (
  input  logic      clk_i,
  input  logic      rst_ni,
  input  tcdm_req_t reg_req_i,
  output tcdm_rsp_t reg_rsp_o,
  output tcdm_req_t ext_req_o,
  input  tcdm_rsp_t ext_rsp_i,
  output tcdm_req_t l1_req_o,
  input  tcdm_rsp_t l1_rsp_i,
  output logic      done_o
);

  typedef struct packed {
    logic [31:0] src;
    logic [31:0] dst;
    logic [31:0] len;
    logic [31:0] sstride;
    logic [31:0] dstride;
    logic [31:0] reps;
  } desc_t;

  // ---------------------------------------------------------------- registers
  desc_t       prog_q;
  desc_t       q_mem [QDEPTH];
  logic [$clog2(QDEPTH)-1:0] q_wp, q_rp;
  logic [$clog2(QDEPTH+1)-1:0] q_cnt;
  logic        q_push, q_pop;
  logic [31:0] done_cnt_q;
  logic        reg_rvalid_q;
  logic [31:0] reg_rdata_q;
  logic        busy_q;
  logic [3:0]  ridx;

  assign ridx   = reg_req_i.addr[5:2];
  assign q_push = reg_req_i.req && reg_req_i.we && ridx == 4'd6 && (int'(q_cnt) < QDEPTH);

  // ---------------------------------------------------------------- engine state
  desc_t       cur_q;
  logic        rd_to_l1;                 // source is L1
  logic [31:0] rd_row_q, rd_off_q;       // read address generator
  logic [31:0] wr_row_q, wr_off_q;       // write address generator
  logic [31:0] rd_left_q, wr_left_q, ack_left_q;
  logic [OW-1:0] inflight_q;             // reads issued, data not yet back
  logic [31:0] buf_q [MAX_OUT];
  logic [FW-1:0] b_wp, b_rp;
  logic [OW-1:0] b_cnt;

  tcdm_req_t rd_req, wr_req;
  tcdm_rsp_t rd_rsp, wr_rsp;
  logic      rd_fire, wr_fire, rd_back, wr_back;

  assign rd_to_l1 = in_range(cur_q.src, L1_BASE, L1_SIZE);

  always_comb begin
    rd_req       = TCDM_REQ_IDLE;
    rd_req.req   = busy_q && (rd_left_q != 0) && (int'(inflight_q) + int'(b_cnt) < MAX_OUT);
    rd_req.addr  = rd_row_q + rd_off_q;
    rd_req.be    = 4'hF;
    wr_req       = TCDM_REQ_IDLE;
    wr_req.req   = busy_q && (b_cnt != 0);
    wr_req.we    = 1'b1;
    wr_req.addr  = wr_row_q + wr_off_q;
    wr_req.be    = 4'hF;
    wr_req.wdata = buf_q[b_rp];
    if (rd_to_l1) begin
      l1_req_o  = rd_req; ext_req_o = wr_req;
      rd_rsp    = l1_rsp_i; wr_rsp  = ext_rsp_i;
    end else begin
      ext_req_o = rd_req; l1_req_o  = wr_req;
      rd_rsp    = ext_rsp_i; wr_rsp = l1_rsp_i;
    end
  end

  assign rd_fire = rd_req.req && rd_rsp.gnt;
  assign wr_fire = wr_req.req && wr_rsp.gnt;
  assign rd_back = rd_rsp.rvalid;
  assign wr_back = wr_rsp.rvalid;
  assign q_pop   = !busy_q && (q_cnt != 0);

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      prog_q <= '0; q_wp <= '0; q_rp <= '0; q_cnt <= '0;
      for (int i = 0; i < QDEPTH; i++) q_mem[i] <= '0;
      done_cnt_q <= '0; reg_rvalid_q <= 1'b0; reg_rdata_q <= '0;
      busy_q <= 1'b0; cur_q <= '0; done_o <= 1'b0;
      rd_row_q <= '0; rd_off_q <= '0; wr_row_q <= '0; wr_off_q <= '0;
      rd_left_q <= '0; wr_left_q <= '0; ack_left_q <= '0; inflight_q <= '0;
      b_wp <= '0; b_rp <= '0; b_cnt <= '0;
    end else begin
      done_o <= 1'b0;
      // -- programming port
      reg_rvalid_q <= reg_req_i.req;
      if (reg_req_i.req && reg_req_i.we) begin
        unique case (ridx)
          4'd0: prog_q.src     <= reg_req_i.wdata;
          4'd1: prog_q.dst     <= reg_req_i.wdata;
          4'd2: prog_q.len     <= reg_req_i.wdata;
          4'd3: prog_q.sstride <= reg_req_i.wdata;
          4'd4: prog_q.dstride <= reg_req_i.wdata;
          4'd5: prog_q.reps    <= reg_req_i.wdata;
          default: ;
        endcase
      end
      if (reg_req_i.req && !reg_req_i.we) begin
        unique case (ridx)
          4'd0: reg_rdata_q <= prog_q.src;
          4'd1: reg_rdata_q <= prog_q.dst;
          4'd2: reg_rdata_q <= prog_q.len;
          4'd3: reg_rdata_q <= prog_q.sstride;
          4'd4: reg_rdata_q <= prog_q.dstride;
          4'd5: reg_rdata_q <= prog_q.reps;
          4'd7: reg_rdata_q <= {16'b0, 8'(q_cnt), 7'b0, busy_q};
          4'd8: reg_rdata_q <= done_cnt_q;
          default: reg_rdata_q <= '0;
        endcase
      end
      if (q_push) begin
        q_mem[q_wp] <= prog_q;
        q_wp        <= q_wp + 1'b1;
      end
      q_cnt <= q_cnt + ($clog2(QDEPTH+1))'(q_push) - ($clog2(QDEPTH+1))'(q_pop);

      // -- start the next descriptor
      if (q_pop) begin
        desc_t d;
        d = q_mem[q_rp];
        q_rp       <= q_rp + 1'b1;
        cur_q      <= d;
        busy_q     <= 1'b1;
        rd_row_q   <= d.src; rd_off_q <= '0;
        wr_row_q   <= d.dst; wr_off_q <= '0;
        rd_left_q  <= (d.len >> 2) * d.reps;
        wr_left_q  <= (d.len >> 2) * d.reps;
        ack_left_q <= (d.len >> 2) * d.reps;
      end

      // -- read side
      if (rd_fire) begin
        rd_left_q <= rd_left_q - 1;
        if (rd_off_q + 4 >= cur_q.len) begin
          rd_off_q <= '0;
          rd_row_q <= rd_row_q + cur_q.sstride;
        end else begin
          rd_off_q <= rd_off_q + 4;
        end
      end
      inflight_q <= inflight_q + OW'(rd_fire) - OW'(rd_back);
      if (rd_back) begin
        buf_q[b_wp] <= rd_rsp.rdata;
        b_wp        <= FW'((int'(b_wp) + 1) % MAX_OUT);
      end
      b_cnt <= b_cnt + OW'(rd_back) - OW'(wr_fire);

      // -- write side
      if (wr_fire) begin
        b_rp      <= FW'((int'(b_rp) + 1) % MAX_OUT);
        wr_left_q <= wr_left_q - 1;
        if (wr_off_q + 4 >= cur_q.len) begin
          wr_off_q <= '0;
          wr_row_q <= wr_row_q + cur_q.dstride;
        end else begin
          wr_off_q <= wr_off_q + 4;
        end
      end
      if (busy_q && wr_back) begin
        ack_left_q <= ack_left_q - 1;
        if (ack_left_q == 32'd1) begin
          busy_q     <= 1'b0;
          done_o     <= 1'b1;
          done_cnt_q <= done_cnt_q + 1;
        end
      end
      // an empty transfer completes at once
      if (busy_q && ack_left_q == '0 && !q_pop) begin
        busy_q     <= 1'b0;
        done_o     <= 1'b1;
        done_cnt_q <= done_cnt_q + 1;
      end
    end
  end

  assign reg_rsp_o = '{gnt: reg_req_i.req, rvalid: reg_rvalid_q, rdata: reg_rdata_q, err: 1'b0};

  assert property (@(posedge clk_i) disable iff (!rst_ni) inflight_q + b_cnt <= OW'(MAX_OUT))
    else $error("dma_2d: data buffer overrun");

endmodule
