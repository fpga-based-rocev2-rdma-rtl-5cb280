// roce_engine: transmit-only RoCEv2 requester for one Reliable Connection queue pair.
//
// The paper's core is a full Host Channel Adapter in Bluespec that the authors cut down
// to a target adapter: the receive data path and RDMA READ are removed, RDMA WRITE is
// kept, and the Reliable Connection (RC) service with acknowledgement and retransmission
// stays. This module is a from-scratch SystemVerilog requester with that function; the
// paper does not describe the insides of its core, so the structure below is this
// design's own:
//
//  * Send queue of SQD work requests (WR). Pointers: head = oldest not yet completed,
//    hi = first WR with no PSN assigned yet, send = next WR to transmit, tail = next free.
//  * Segmentation: a WR of len bytes becomes ceil(len/PMTU) packets, WRITE_ONLY or
//    WRITE_FIRST/MIDDLE.../LAST. The first packet carries the RETH (remote VA, rkey,
//    DMA length); the last asks for an acknowledgement (AckReq). PSNs are 24-bit and
//    assigned the first time a WR is sent.
//  * Payload is read from the event memory at the WR's local address; a retransmission
//    re-reads it, so nothing is copied.
//  * Acknowledgements (BTH+AETH from the receive side) addressed to our QPN: an ACK
//    moves the acknowledged PSN forward; every WR whose last PSN is acknowledged is
//    completed in order with a CQE. A NAK "PSN sequence error" or an RNR NAK acknowledges
//    up to PSN-1 and asks for a go-back-N retransmission from that PSN. Other NAK codes
//    are fatal. An ack timer runs while packets are unacknowledged; when it expires
//    (qp.timeout cycles without progress) the engine retransmits from the oldest
//    unacknowledged PSN. After retry_max retries without progress the QP goes to the
//    error state and every queued WR is flushed with an error CQE. qp_load (from the
//    address FSM, only when idle) reloads the start PSN and leaves the error state.
//  * MSN in the AETH is not used; coalesced ACKs are handled through the PSN.
//
// Interfaces: WR in with valid/ready; event memory read port (address out, data one
// clock later); packet descriptor out with valid/ready followed by paylen/8 payload
// words on a 64-bit stream with tlast; ACK in (one-cycle strobe); CQE out (strobe,
// always accepted). Timing: one bubble per packet for the descriptor, one for priming
// the memory, then one payload word per clock.
module roce_engine
  import be_pkg::*;
#(
  parameter int unsigned SQD    = 8,
  parameter int unsigned MEM_AW = 10
) (
  input  logic              clk,
  input  logic              rst_n,
  input  qp_cfg_t           qp,
  input  target_t           tgt,
  input  logic              qp_load,
  // work requests
  input  logic              s_wr_valid,
  output logic              s_wr_ready,
  input  wr_t               s_wr,
  // event memory
  output logic [MEM_AW-1:0] mem_rd_addr,
  input  logic [63:0]       mem_rd_data,
  // packets towards UDP/MAC
  output logic              desc_valid,
  input  logic              desc_ready,
  output pkt_desc_t         desc,
  output logic [63:0]       pl_tdata,
  output logic              pl_tvalid,
  output logic              pl_tlast,
  input  logic              pl_tready,
  // acknowledgements from UDP/MAC
  input  logic              ack_valid,
  input  ack_t              ack,
  // completions
  output logic              cqe_valid,
  output cqe_t              cqe,
  // status
  output logic              idle,
  output logic              ev_retx,
  output logic              ev_timeout,
  output logic              ev_nak,
  output logic              qp_error
);
  localparam int unsigned SW = $clog2(SQD);

  typedef struct packed {
    wr_t         wr;
    logic [23:0] fpsn;
    logic [23:0] lpsn;
  } sqe_t;

  typedef enum logic [1:0] {T_IDLE, T_DESC, T_PAY} tx_state_e;

  sqe_t        sq [SQD];
  logic [SW:0] head, hi, send, tail;
  logic [23:0] next_psn, acked_psn;
  tx_state_e   ts;
  logic        wr_active;
  logic [23:0] cur_psn;
  logic [31:0] cur_off;
  logic [12:0] widx;          // payload word within the packet
  logic        primed;
  logic        retx_pend;
  logic [31:0] timer;
  logic [2:0]  retry_cnt;
  logic        err;
  cq_status_e  err_code;
  logic        err_first;

  // ------------------------------------------------------------ helpers
  wire [SW-1:0] hidx = head[SW-1:0];
  wire [SW-1:0] sidx = send[SW-1:0];
  sqe_t         se;
  assign se = sq[sidx];

  wire [12:0] pmtu      = 13'(pmtu_bytes(qp.pmtu_log2));
  wire [31:0] remain    = se.wr.len - cur_off;
  wire [12:0] plen      = (remain > 32'(pmtu)) ? pmtu : remain[12:0];
  wire        is_first  = (cur_off == 0);
  wire        is_last   = (remain <= 32'(pmtu));
  wire [12:0] nwords    = plen >> 3;

  function automatic logic [23:0] npkts(input logic [31:0] len, input logic [2:0] l2);
    logic [31:0] n;
    n = (len + 32'(pmtu_bytes(l2)) - 1) >> (8 + l2);
    return (n == 0) ? 24'd1 : n[23:0];
  endfunction

  // ------------------------------------------------------------ descriptor and payload
  always_comb begin
    desc          = '0;
    desc.opcode   = is_first ? (is_last ? OP_WRITE_ONLY : OP_WRITE_FIRST)
                             : (is_last ? OP_WRITE_LAST : OP_WRITE_MIDDLE);
    desc.ackreq   = is_last;
    desc.dqpn     = tgt.dqpn;
    desc.psn      = cur_psn;
    desc.pkey     = qp.pkey;
    desc.has_reth = is_first;
    desc.va       = se.wr.raddr;
    desc.rkey     = se.wr.rkey;
    desc.dmalen   = se.wr.len;
    desc.paylen   = 16'(plen);
  end
  assign desc_valid = (ts == T_DESC);

  wire        pl_fire = pl_tvalid && pl_tready;
  wire [31:0] wbase   = (se.wr.laddr >> 3) + (cur_off >> 3);
  assign mem_rd_addr = MEM_AW'(wbase + 32'(widx) + ((pl_fire) ? 32'd1 : 32'd0));
  assign pl_tvalid   = (ts == T_PAY) && primed;
  assign pl_tdata    = mem_rd_data;
  assign pl_tlast    = (widx == nwords - 1'b1);

  // ------------------------------------------------------------ completion rules
  wire outstanding = (head != hi);
  wire can_retire  = !err && outstanding && psn_le(sq[hidx].lpsn, acked_psn)
                     && !((head == send) && (send != hi));
  wire ack_mine    = ack_valid && (ack.dqpn == qp.sqpn);
  wire [2:0] syn_t = ack.syndrome[7:5];
  wire in_window   = psn_le(ack.psn, next_psn - 24'd1) && psn_le(acked_psn, ack.psn);

  assign s_wr_ready = ((tail - head) != (SW+1)'(SQD));
  assign idle       = (head == tail) && (ts == T_IDLE) && !wr_active;
  assign qp_error   = err;

  always_ff @(posedge clk) begin
    logic        progress, want_retry, fatal;
    logic [23:0] new_acked;
    if (!rst_n) begin
      head <= '0; hi <= '0; send <= '0; tail <= '0;
      next_psn   <= '0;
      acked_psn  <= 24'hFFFFFF;
      ts         <= T_IDLE;
      wr_active  <= 1'b0;
      cur_psn    <= '0;
      cur_off    <= '0;
      widx       <= '0;
      primed     <= 1'b0;
      retx_pend  <= 1'b0;
      timer      <= '0;
      retry_cnt  <= '0;
      err        <= 1'b0;
      err_code   <= CQ_OK;
      err_first  <= 1'b0;
      cqe_valid  <= 1'b0;
      cqe        <= '0;
      ev_retx    <= 1'b0;
      ev_timeout <= 1'b0;
      ev_nak     <= 1'b0;
    end else begin
      cqe_valid  <= 1'b0;
      ev_retx    <= 1'b0;
      ev_timeout <= 1'b0;
      ev_nak     <= 1'b0;
      progress   = 1'b0;
      want_retry = 1'b0;
      fatal      = 1'b0;
      new_acked  = acked_psn;

      // ---------------- post
      if (s_wr_valid && s_wr_ready) begin
        sq[tail[SW-1:0]].wr <= s_wr;
        tail <= tail + 1'b1;
      end

      // ---------------- acknowledgements
      if (ack_mine && !err) begin
        unique case (syn_t)
          3'b000: if (in_window && ack.psn != acked_psn) begin
            new_acked = ack.psn;
            progress  = 1'b1;
          end
          3'b001, 3'b011: begin
            if (syn_t == 3'b011 && ack.syndrome[4:0] != 5'd0) begin
              fatal = 1'b1;
            end else begin
              ev_nak <= 1'b1;
              if (in_window || ack.psn == next_psn) begin
                if (ack.psn - 24'd1 != acked_psn) begin
                  new_acked = ack.psn - 24'd1;
                  progress  = 1'b1;
                end
                want_retry = 1'b1;
              end
            end
          end
          default: ;
        endcase
      end
      acked_psn <= new_acked;

      // ---------------- ack timer
      if (progress || !outstanding || retx_pend) begin
        timer <= '0;
      end else if (timer >= qp.timeout) begin
        timer      <= '0;
        want_retry = 1'b1;
        ev_timeout <= 1'b1;
      end else begin
        timer <= timer + 1'b1;
      end
      if (progress) retry_cnt <= '0;

      if (want_retry && !err) begin
        if (retry_cnt >= qp.retry_max && !progress) begin
          fatal = 1'b1;
        end else begin
          retx_pend <= 1'b1;
          if (!progress) retry_cnt <= retry_cnt + 1'b1;
        end
      end
      if (fatal && !err) begin
        err       <= 1'b1;
        err_first <= 1'b1;
        err_code  <= (want_retry) ? CQ_RETRY_EXC : CQ_REM_ERR;
        retx_pend <= 1'b0;
      end

      // ---------------- completions (in order) and flush
      if (err) begin
        if (head != tail) begin
          cqe_valid  <= 1'b1;
          cqe.wr_id  <= sq[hidx].wr.wr_id;
          cqe.status <= err_first ? err_code : CQ_FLUSHED;
          err_first  <= 1'b0;
          head       <= head + 1'b1;
        end else if (ts == T_IDLE) begin
          send <= tail;
          hi   <= tail;
        end
      end else if (can_retire) begin
        cqe_valid  <= 1'b1;
        cqe.wr_id  <= sq[hidx].wr.wr_id;
        cqe.status <= CQ_OK;
        head       <= head + 1'b1;
      end

      // ---------------- transmitter
      unique case (ts)
        T_IDLE: if (err) begin
          wr_active <= 1'b0;
        end else begin
          if (retx_pend && !can_retire) begin
            retx_pend <= 1'b0;
            if (outstanding) begin
              ev_retx   <= 1'b1;
              send      <= head;
              wr_active <= 1'b1;
              if (psn_le(acked_psn + 24'd1, sq[hidx].fpsn)) begin
                cur_psn <= sq[hidx].fpsn;
                cur_off <= '0;
              end else begin
                cur_psn <= acked_psn + 24'd1;
                cur_off <= 32'(24'(acked_psn + 24'd1 - sq[hidx].fpsn)) << (8 + qp.pmtu_log2);
              end
            end
          end else if (wr_active) begin
            ts <= T_DESC;
          end else if (send != tail) begin
            wr_active <= 1'b1;
            cur_off   <= '0;
            if (send == hi) begin
              sq[sidx].fpsn <= next_psn;
              sq[sidx].lpsn <= next_psn + npkts(se.wr.len, qp.pmtu_log2) - 24'd1;
              next_psn      <= next_psn + npkts(se.wr.len, qp.pmtu_log2);
              cur_psn       <= next_psn;
              hi            <= hi + 1'b1;
            end else begin
              cur_psn <= se.fpsn;
            end
          end
        end
        T_DESC: if (desc_ready) begin
          ts     <= T_PAY;
          widx   <= '0;
          primed <= 1'b0;
        end
        T_PAY: begin
          primed <= 1'b1;
          if (pl_fire) begin
            if (pl_tlast) begin
              ts      <= T_IDLE;
              primed  <= 1'b0;
              cur_psn <= cur_psn + 24'd1;
              cur_off <= cur_off + 32'(plen);
              if (is_last) begin
                wr_active <= 1'b0;
                send      <= send + 1'b1;
              end
            end else begin
              widx <= widx + 1'b1;
            end
          end
        end
        default: ts <= T_IDLE;
      endcase

      // ---------------- connection (re)load from the address FSM
      if (qp_load) begin
        next_psn  <= tgt.start_psn;
        acked_psn <= tgt.start_psn - 24'd1;
        err       <= 1'b0;
        retry_cnt <= '0;
        retx_pend <= 1'b0;
      end
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) s_wr_valid && s_wr_ready |-> s_wr.len[2:0] == 3'b0)
    else $error("roce_engine: WR length must be a multiple of 8 bytes");
  assert property (@(posedge clk) disable iff (!rst_n) qp_load |-> idle);
  assert property (@(posedge clk) disable iff (!rst_n) desc_valid && !desc_ready |=> desc_valid && $stable(desc));

endmodule
