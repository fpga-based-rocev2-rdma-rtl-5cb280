// be_top: Back-End DAQ firmware, from JESD204C lane data to RoCEv2 frames on XGMII.
//
// Chain (the paper's firmware block diagram): the JESD204C receiver IP (outside, its
// 12 x 64-bit output enters on lane_valid/lane_data) feeds both the circular buffer and
// the leading-edge trigger; each trigger draws a 50 ns window from the buffer into the
// packetizer, which parks it in the event memory and posts an RDMA WRITE work request;
// the address FSM gives it a remote address in the target's ring; the RoCEv2 engine
// segments, sends and, on NAK or timeout, resends it; UDP/MAC frames it with iCRC and FCS
// on XGMII towards the 10GbE PCS/PMA IP (outside). Acknowledgements come back on the
// XGMII receive bus. Plain UDP datagrams (any port but 4791) share the Ethernet port
// through the utx_*/urx_* streams, where the register-transport layer that carries the
// connection-management traffic would attach. Software configures everything over AXI4-Lite (cfg_regs) and
// writes CTRL.apply to load the target. One clock drives the whole design; in the
// paper's board the JESD204C side runs at 187.5 MHz and the Ethernet side in its own
// domain, and clock-domain crossing FIFOs would sit between packetizer and engine.
module be_top
  import be_pkg::*;
#(
  parameter int unsigned DEPTH      = 1024,  // circular buffer rows (5.46 us)
  parameter int unsigned WINDOW     = 10,    // ceil(50 ns * 187.5 MHz)
  parameter int unsigned PRE        = 3,
  parameter int unsigned SLOTS      = 8,
  parameter int unsigned SLOT_WORDS = 128,
  parameter int unsigned SQD        = 8,
  parameter int unsigned FIFO_WORDS = 1024
) (
  input  logic                        clk,
  input  logic                        rst_n,
  // JESD204C receiver output
  input  logic                        lane_valid,
  input  logic [LANES-1:0][LANE_W-1:0] lane_data,
  // AXI4-Lite register access
  input  logic [7:0]                  s_awaddr,
  input  logic                        s_awvalid,
  output logic                        s_awready,
  input  logic [31:0]                 s_wdata,
  input  logic                        s_wvalid,
  output logic                        s_wready,
  output logic [1:0]                  s_bresp,
  output logic                        s_bvalid,
  input  logic                        s_bready,
  input  logic [7:0]                  s_araddr,
  input  logic                        s_arvalid,
  output logic                        s_arready,
  output logic [31:0]                 s_rdata,
  output logic [1:0]                  s_rresp,
  output logic                        s_rvalid,
  input  logic                        s_rready,
  // plain UDP datagrams through the same Ethernet port (register transport software side)
  input  logic                        utx_desc_valid,
  output logic                        utx_desc_ready,
  input  udp_dgram_t                  utx_desc,
  input  logic [63:0]                 utx_tdata,
  input  logic                        utx_tvalid,
  input  logic                        utx_tlast,
  output logic                        utx_tready,
  output logic [63:0]                 urx_tdata,
  output logic [7:0]                  urx_tkeep,
  output logic                        urx_tvalid,
  output logic                        urx_tlast,
  input  logic                        urx_tready,
  output udp_dgram_t                  urx_hdr,
  // XGMII towards the 10GbE PCS/PMA
  output logic [63:0]                 xgmii_txd,
  output logic [7:0]                  xgmii_txc,
  input  logic [63:0]                 xgmii_rxd,
  input  logic [7:0]                  xgmii_rxc,
  output logic                        qp_error
);
  localparam int unsigned NSTAT  = 14;
  localparam int unsigned MEM_AW = $clog2(SLOTS * SLOT_WORDS);

  // configuration
  logic [SAMPLE_W-1:0] threshold;
  logic [LANES-1:0]    ch_enable;
  qp_cfg_t             qp;
  net_cfg_t            net_src, net;
  target_t             staged, active;
  logic                apply, qp_load;

  // trigger -> circular buffer
  logic                trig_valid;
  logic [TS_W-1:0]     trig_ts;
  logic [LANES-1:0]    trig_mask;

  // circular buffer -> packetizer
  logic [63:0]         ev_tdata;
  logic                ev_tvalid, ev_tlast, ev_tready;
  logic                trig_dropped, trig_stale, evt_sent;

  // packetizer -> event memory, address FSM
  logic                mem_wr_en;
  logic [MEM_AW-1:0]   mem_wr_addr, mem_rd_addr;
  logic [63:0]         mem_wr_data, mem_rd_data;
  logic                pw_valid, pw_ready, ew_valid, ew_ready;
  wr_t                 pw, ew;
  logic                stalled, cq_error, wrapped;

  // engine <-> UDP/MAC
  logic                desc_valid, desc_ready;
  pkt_desc_t           desc;
  logic [63:0]         pl_tdata;
  logic                pl_tvalid, pl_tlast, pl_tready;
  logic                ack_valid;
  ack_t                ack;
  logic                cqe_valid;
  cqe_t                cqe;
  logic                eng_idle, ev_retx, ev_timeout, ev_nak;
  logic                frame_sent, rx_crc_err, rx_dropped;

  cfg_regs #(.NSTAT(NSTAT)) u_regs (
    .clk, .rst_n,
    .s_awaddr, .s_awvalid, .s_awready, .s_wdata, .s_wvalid, .s_wready,
    .s_bresp, .s_bvalid, .s_bready, .s_araddr, .s_arvalid, .s_arready,
    .s_rdata, .s_rresp, .s_rvalid, .s_rready,
    .threshold, .ch_enable, .qp, .net_src, .staged, .apply,
    .stat_inc({wrapped, rx_dropped, rx_crc_err, ack_valid, frame_sent, ev_nak, ev_timeout,
               ev_retx, cq_error, cqe_valid && cqe.status == CQ_OK, stalled,
               trig_stale, trig_dropped, evt_sent}),
    .st_idle(eng_idle), .st_qp_error(qp_error)
  );

  trigger #(.N_LANES(LANES), .HOLDOFF(WINDOW)) u_trigger (
    .clk, .rst_n, .lane_valid, .lane_data, .threshold, .ch_enable,
    .trig_valid, .trig_ts, .trig_mask
  );

  circ_buffer #(.N_LANES(LANES), .DEPTH(DEPTH), .WINDOW(WINDOW), .PRE(PRE)) u_cbuf (
    .clk, .rst_n, .lane_valid, .lane_data,
    .trig_valid, .trig_ts, .trig_mask,
    .m_tdata(ev_tdata), .m_tvalid(ev_tvalid), .m_tlast(ev_tlast), .m_tready(ev_tready),
    .trig_dropped, .trig_stale, .evt_sent
  );

  packetizer #(.SLOTS(SLOTS), .SLOT_WORDS(SLOT_WORDS)) u_pkt (
    .clk, .rst_n,
    .s_tdata(ev_tdata), .s_tvalid(ev_tvalid), .s_tlast(ev_tlast), .s_tready(ev_tready),
    .mem_wr_en, .mem_wr_addr, .mem_wr_data,
    .wr_valid(pw_valid), .wr_ready(pw_ready), .wr(pw),
    .cqe_valid, .cqe, .stalled, .cq_error
  );

  event_mem #(.WORDS(SLOTS * SLOT_WORDS)) u_mem (
    .clk, .wr_en(mem_wr_en), .wr_addr(mem_wr_addr), .wr_data(mem_wr_data),
    .rd_addr(mem_rd_addr), .rd_data(mem_rd_data)
  );

  addr_mgr u_addr (
    .clk, .rst_n, .staged, .apply, .engine_idle(eng_idle),
    .s_valid(pw_valid), .s_ready(pw_ready), .s_wr(pw),
    .m_valid(ew_valid), .m_ready(ew_ready), .m_wr(ew),
    .active, .qp_load, .wrapped
  );

  roce_engine #(.SQD(SQD), .MEM_AW(MEM_AW)) u_roce (
    .clk, .rst_n, .qp, .tgt(active), .qp_load,
    .s_wr_valid(ew_valid), .s_wr_ready(ew_ready), .s_wr(ew),
    .mem_rd_addr, .mem_rd_data,
    .desc_valid, .desc_ready, .desc,
    .pl_tdata, .pl_tvalid, .pl_tlast, .pl_tready,
    .ack_valid, .ack,
    .cqe_valid, .cqe,
    .idle(eng_idle), .ev_retx, .ev_timeout, .ev_nak, .qp_error
  );

  always_comb begin
    net         = net_src;
    net.dst_mac = active.dst_mac;
    net.dst_ip  = active.dst_ip;
  end

  udp_mac #(.FIFO_WORDS(FIFO_WORDS)) u_udp_mac (
    .clk, .rst_n, .net,
    .desc_valid, .desc_ready, .desc,
    .pl_tdata, .pl_tvalid, .pl_tlast, .pl_tready,
    .xgmii_txd, .xgmii_txc, .xgmii_rxd, .xgmii_rxc,
    .ack_valid, .ack, .frame_sent, .rx_crc_err, .rx_dropped,
    .utx_desc_valid, .utx_desc_ready, .utx_desc, .utx_tdata, .utx_tvalid, .utx_tlast,
    .utx_tready, .urx_tdata, .urx_tkeep, .urx_tvalid, .urx_tlast, .urx_tready, .urx_hdr
  );

endmodule
