// tb_be_top: end-to-end, full-size test of the Back-End firmware (no parameter
// overrides on be_top).
//
// Source: 12 lanes of 64-bit JESD204C words carrying 12-bit samples (16 samples per 3
// words), a low pseudo-random baseline, and pulses on random lane sets at scheduled
// sample groups. Every lane row is kept, so every event word can be traced back.
// Responder: a behavioural RoCEv2 target NIC on the XGMII pins. It checks FCS and iCRC
// of every frame, the Ethernet/IP/UDP/BTH addressing against the active target, keeps an
// expected PSN (24-bit, wrapping), writes accepted payload into a remote memory model at
// the RETH address, answers AckReq packets with ACK frames, out-of-order packets with a
// PSN-sequence-error NAK and duplicates with a repeat ACK. When a message is complete
// the event it carries is checked word by word: event number sequence, trigger
// timestamp and lane mask against the pulse schedule, and every lane word of the
// window against the stored rows. Fault injection: lost packets, withheld ACKs, a
// corrupted ACK and an ACK for another IP address.
// Phases: (1) 4096-byte PMTU, one WRITE_ONLY per event, remote ring wraps; one packet
// lost (NAK and go-back). (2) ACKs withheld while a dense burst of triggers arrives:
// ack timeouts and retransmissions, all event slots in flight (stall), trigger FIFO
// overflow (drops) and aged-out windows (stale). (3) reconfiguration: 256-byte PMTU,
// a second target applied through the registers with a start PSN just below the wrap;
// events split into FIRST/MIDDLE/LAST, a MIDDLE packet lost, a corrupted ACK and a
// foreign ACK; while these events flow, a plain UDP datagram (port 0x2001) arrives for
// this end point, the software side of the plain UDP channel (modelled here) echoes it
// back, and the echo must reach the target as a plain UDP frame with the same payload
// and swapped ports. At the end the status counters are read over AXI4-Lite and compared with
// what the responder saw; each mechanism is counted and the test fails if any never
// happened.
module tb_be_top;
  import be_pkg::*;
  import tb_pkg::*;

  localparam int PRE = 3, WINDOW = 10;
  localparam int EV_WORDS = 1 + WINDOW * LANES;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic                         lane_valid = 0;
  logic [LANES-1:0][LANE_W-1:0] lane_data = '0;
  logic [7:0]  s_awaddr = '0, s_araddr = '0;
  logic        s_awvalid = 0, s_awready, s_wvalid = 0, s_wready;
  logic [31:0] s_wdata = '0, s_rdata;
  logic [1:0]  s_bresp, s_rresp;
  logic        s_bvalid, s_bready = 0, s_arvalid = 0, s_arready, s_rvalid, s_rready = 0;
  logic [63:0] xgmii_txd, xgmii_rxd;
  logic [7:0]  xgmii_txc, xgmii_rxc;
  logic        qp_error;
  logic        utx_desc_valid = 0, utx_desc_ready, utx_tvalid = 0, utx_tlast = 0, utx_tready;
  udp_dgram_t  utx_desc = '0, urx_hdr;
  logic [63:0] utx_tdata = '0, urx_tdata;
  logic [7:0]  urx_tkeep;
  logic        urx_tvalid, urx_tlast, urx_tready = 1;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0t: %s", $time, msg); end
  endtask

  be_top dut (
    .clk, .rst_n, .lane_valid, .lane_data,
    .s_awaddr, .s_awvalid, .s_awready, .s_wdata, .s_wvalid, .s_wready,
    .s_bresp, .s_bvalid, .s_bready, .s_araddr, .s_arvalid, .s_arready,
    .s_rdata, .s_rresp, .s_rvalid, .s_rready,
    .utx_desc_valid, .utx_desc_ready, .utx_desc, .utx_tdata, .utx_tvalid, .utx_tlast,
    .utx_tready, .urx_tdata, .urx_tkeep, .urx_tvalid, .urx_tlast, .urx_tready, .urx_hdr,
    .xgmii_txd, .xgmii_txc, .xgmii_rxd, .xgmii_rxc, .qp_error
  );

  // ------------------------------------------------------------ addressing
  localparam logic [47:0] MY_MAC  = 48'h02_00_00_00_00_01;
  localparam logic [31:0] MY_IP   = 32'hC0A8_0102;
  localparam logic [15:0] MY_PORT = 16'hC0DE;
  localparam logic [23:0] SQPN    = 24'h000001;

  typedef struct {
    logic [47:0] mac;
    logic [31:0] ip;
    logic [23:0] dqpn;
    logic [23:0] start_psn;
    logic [31:0] rkey;
    logic [63:0] base;
    logic [31:0] size;
  } tgt_t;

  tgt_t tgt_a = '{48'hB8_CE_F6_00_00_0A, 32'hC0A8_0101, 24'h000011, 24'h000100,
                  32'hAAAA_0001, 64'h0000_7F00_1000_0000, 32'd8192};
  tgt_t tgt_b = '{48'hB8_CE_F6_00_00_0B, 32'hC0A8_0103, 24'h000022, 24'hFFFFF0,
                  32'hBBBB_0002, 64'h0000_7F00_2000_0000, 32'd8192};
  tgt_t cur;

  // ------------------------------------------------------------ lane source
  logic [LANES-1:0][LANE_W-1:0] hist [int];   // row written at each word count
  logic [LANES-1:0]             pulse_at [int];  // group -> lanes with a pulse
  logic [LANES-1:0]             exp_mask [int];  // trigger ts -> lane mask
  logic [LANES-1:0][191:0]      grp;
  int                           wc = 0;          // word count
  int                           n_pulses = 0;

  function automatic logic [11:0] baseline(input int l, input int n);
    return 12'((n * 37 + l * 101) % 200);
  endfunction

  always @(negedge clk) if (rst_n) begin
    if (wc % 3 == 0) begin
      int g;
      g = wc / 3;
      for (int l = 0; l < LANES; l++)
        for (int k = 0; k < 16; k++)
          grp[l][12*k +: 12] = (pulse_at.exists(g) && pulse_at[g][l] && k >= 4 && k < 12)
                               ? 12'd1000 + 12'(l) : baseline(l, 16 * g + k);
    end
    lane_valid = 1'b1;
    for (int l = 0; l < LANES; l++) lane_data[l] = grp[l][64 * (wc % 3) +: 64];
    hist[wc] = lane_data;
  end
  always @(posedge clk) if (rst_n && lane_valid) wc++;

  // schedule a pulse `groups_ahead` groups from now; expected trigger ts = first word
  task automatic pulse(input int groups_ahead);
    int g;
    logic [LANES-1:0] m;
    g = wc / 3 + groups_ahead;
    m = LANES'($urandom);
    if (m == 0) m = 12'h001;
    pulse_at[g]       = m;
    exp_mask[3 * g]   = m;
    n_pulses++;
  endtask

  // ------------------------------------------------------------ AXI4-Lite
  task automatic axi_wr(input logic [7:0] a, input logic [31:0] d);
    @(negedge clk);
    s_awaddr = a; s_wdata = d; s_awvalid = 1; s_wvalid = 1; s_bready = 1;
    do @(posedge clk); while (!(s_awready && s_wready));
    @(negedge clk); s_awvalid = 0; s_wvalid = 0;
    while (!s_bvalid) @(negedge clk);
    @(negedge clk); s_bready = 0;
  endtask

  task automatic axi_rd(input logic [7:0] a, output logic [31:0] d);
    @(negedge clk);
    s_araddr = a; s_arvalid = 1; s_rready = 1;
    do @(posedge clk); while (!s_arready);
    @(negedge clk); s_arvalid = 0;
    while (!s_rvalid) @(negedge clk);
    d = s_rdata;
    @(negedge clk); s_rready = 0;
  endtask

  task automatic load_target(input tgt_t t);
    axi_wr(8'h28, t.mac[31:0]);  axi_wr(8'h2C, 32'(t.mac[47:32]));
    axi_wr(8'h30, t.ip);         axi_wr(8'h34, 32'(t.dqpn));
    axi_wr(8'h38, 32'(t.start_psn));
    axi_wr(8'h3C, t.rkey);
    axi_wr(8'h40, t.base[31:0]); axi_wr(8'h44, t.base[63:32]);
    axi_wr(8'h48, t.size);
    axi_wr(8'h00, 32'h1);        // apply
  endtask

  // ------------------------------------------------------------ XGMII receive driver
  bq_t rxq[$];
  initial begin
    xgmii_rxd = {8{8'h07}}; xgmii_rxc = 8'hFF;
    forever begin
      @(negedge clk);
      if (rxq.size() > 0) begin
        bq_t f;
        int n;
        f = rxq.pop_front();
        xgmii_rxd = 64'hD5555555_555555FB; xgmii_rxc = 8'h01;
        n = 0;
        while (n <= f.size()) begin
          @(negedge clk);
          xgmii_rxc = 8'hFF; xgmii_rxd = {8{8'h07}};
          for (int b = 0; b < 8; b++) begin
            if (n < f.size()) begin xgmii_rxd[8*b +: 8] = f[n]; xgmii_rxc[b] = 0; end
            else if (n == f.size()) xgmii_rxd[8*b +: 8] = 8'hFD;
            n++;
          end
        end
        @(negedge clk); xgmii_rxd = {8{8'h07}}; xgmii_rxc = 8'hFF;
        repeat (30) @(negedge clk);
      end
    end
  end

  // ------------------------------------------------------------ responder
  // mechanism counters
  int m_frames = 0, m_only = 0, m_first = 0, m_middle = 0, m_last = 0;
  int m_events = 0, m_nak_sent = 0, m_dup = 0, m_lost = 0, m_acks_sent = 0;
  int m_acks_withheld = 0, m_ring_wrap = 0, m_target_b = 0, m_psn_wrap = 0;
  int m_bad_crc_tx = 0, m_bad_addr = 0, m_bad_event = 0, m_bad_seq = 0;
  int m_udp_echo = 0, m_bad_udp = 0;
  bq_t udp_pay;

  // software side of the plain UDP channel: echo every datagram back to its sender port
  bq_t urx_bytes;
  initial forever begin
    @(posedge clk);
    if (urx_tvalid && urx_tready) begin
      for (int b = 0; b < 8; b++) if (urx_tkeep[b]) urx_bytes.push_back(urx_tdata[8*b +: 8]);
      if (urx_tlast) begin
        udp_dgram_t h;
        int nw;
        h = urx_hdr;
        nw = (urx_bytes.size() + 7) / 8;
        @(negedge clk);
        utx_desc = '{ip: h.ip, sport: h.dport, dport: h.sport, len: 16'(urx_bytes.size())};
        utx_desc_valid = 1;
        do @(posedge clk); while (!utx_desc_ready);
        @(negedge clk); utx_desc_valid = 0;
        for (int w = 0; w < nw; w++) begin
          for (int b = 0; b < 8; b++)
            utx_tdata[8*b +: 8] = (8*w + b < urx_bytes.size()) ? urx_bytes[8*w + b] : 8'h00;
          utx_tvalid = 1; utx_tlast = (w == nw - 1);
          do @(posedge clk); while (!utx_tready);
          @(negedge clk);
        end
        utx_tvalid = 0; utx_tlast = 0;
        urx_bytes = {};
      end
    end
  end

  // fault injection controls
  bit   withhold = 0;             // accept packets, send no ACK/NAK
  int   lose_next_op = -1;        // opcode of the next packet to lose (-1: none)
  bit   corrupt_next_ack = 0;

  logic [23:0]  epsn;
  bit           nak_out = 0;
  logic [63:0]  msg_va, last_va = '1;
  int           msg_len, msg_off;
  byte unsigned rmem [longint unsigned];
  int           next_evno = 0;

  function automatic logic [63:0] rd64(input longint unsigned a);
    logic [63:0] v;
    for (int b = 0; b < 8; b++) v[8*b +: 8] = rmem.exists(a + b) ? rmem[a + b] : 8'hXX;
    return v;
  endfunction

  function automatic logic [63:0] get_be(input bq_t f, input int at, input int n);
    logic [63:0] v = '0;
    for (int i = 0; i < n; i++) v = {v[55:0], f[at + i]};
    return v;
  endfunction

  function automatic void send_ack(input logic [23:0] psn, input logic [7:0] syn);
    bq_t a;
    a = build_ack(MY_MAC, cur.mac, MY_IP, cur.ip, SQPN, psn, syn, 24'h0);
    if (corrupt_next_ack) begin
      a[52] ^= 8'h04;
      corrupt_next_ack = 0;
    end
    rxq.push_back(a);
    m_acks_sent++;
  endfunction

  function automatic void check_event(input logic [63:0] va, input int len);
    logic [63:0] h;
    int ts, bad;
    bad = 0;
    if (len != EV_WORDS * 8) begin
      m_bad_event++; $display("  event length %0d", len); return;
    end
    h  = rd64(va);
    ts = int'(h[31:0]);
    if (int'(h[63:48]) != next_evno % 65536) begin
      bad++; $display("  event number %0d exp %0d", h[63:48], next_evno);
    end
    next_evno = int'(h[63:48]) + 1;
    if (!exp_mask.exists(ts) || h[47:32] != 16'(exp_mask[ts])) begin
      bad++; $display("  event ts %0d mask %03x unexpected", ts, h[47:32]);
    end
    for (int r = 0; r < WINDOW; r++)
      for (int l = 0; l < LANES; l++)
        if (!hist.exists(ts - PRE + r) ||
            rd64(va + 64'(8 * (1 + r * LANES + l))) !== hist[ts - PRE + r][l]) bad++;
    if (bad != 0) begin m_bad_event++; $display("  event %0d: %0d bad words", h[63:48], bad); end
    m_events++;
  endfunction

  function automatic void respond(input bq_t f);
    logic [7:0]  op;
    logic [23:0] psn, dqpn;
    logic        ackreq;
    int          hl, plen;
    logic [23:0] diff;
    m_frames++;
    if (f.size() >= 46 && {f[36], f[37]} != 16'd4791) begin
      bq_t e;
      e = build_udp(cur.mac, MY_MAC, cur.ip, MY_IP, 16'h2001, 16'h2000, udp_pay);
      for (int i = 18; i < 20; i++) e[i] = f[i];     // IP identification is the sender's
      begin
        logic [15:0] cs;
        logic [31:0] fc;
        cs = ip_csum(e); e[24] = cs[15:8]; e[25] = cs[7:0];
        fc = ref_fcs(e, e.size() - 4);
        for (int i = 0; i < 4; i++) e[e.size() - 4 + i] = fc[8*i +: 8];
      end
      if (f == e) m_udp_echo++; else m_bad_udp++;
      return;
    end
    if (f.size() < 62 || le32(f, f.size() - 4) != ref_fcs(f, f.size() - 4) ||
        le32(f, f.size() - 8) != ref_icrc(f)) begin
      m_bad_crc_tx++; return;
    end
    op     = f[42];
    dqpn   = 24'(get_be(f, 47, 3));
    ackreq = f[50][7];
    psn    = 24'(get_be(f, 51, 3));
    if (48'(get_be(f, 0, 6)) != cur.mac || 48'(get_be(f, 6, 6)) != MY_MAC ||
        16'(get_be(f, 12, 2)) != 16'h0800 || f[23] != 8'd17 ||
        32'(get_be(f, 26, 4)) != MY_IP || 32'(get_be(f, 30, 4)) != cur.ip ||
        16'(get_be(f, 34, 2)) != MY_PORT || 16'(get_be(f, 36, 2)) != 16'd4791 ||
        16'(get_be(f, 16, 2)) != 16'(f.size() - 18) || dqpn != cur.dqpn) begin
      m_bad_addr++; $display("  frame addressing wrong"); return;
    end
    if (cur.ip == tgt_b.ip) m_target_b++;
    case (op)
      OP_WRITE_ONLY:   m_only++;
      OP_WRITE_FIRST:  m_first++;
      OP_WRITE_MIDDLE: m_middle++;
      OP_WRITE_LAST:   m_last++;
      default: begin m_bad_addr++; return; end
    endcase
    if (lose_next_op == int'(op)) begin
      lose_next_op = -1; m_lost++; return;
    end
    hl   = (op == OP_WRITE_FIRST || op == OP_WRITE_ONLY) ? 70 : 54;
    plen = f.size() - 8 - hl;
    diff = psn - epsn;
    if (diff == 0) begin
      nak_out = 0;
      if (hl == 70) begin
        msg_va  = get_be(f, 54, 8);
        msg_len = int'(get_be(f, 66, 4));
        msg_off = 0;
        if (32'(get_be(f, 62, 4)) != cur.rkey || msg_va < cur.base ||
            msg_va + 64'(msg_len) > cur.base + 64'(cur.size)) begin
          m_bad_addr++; $display("  RETH outside the target region");
        end
        if (last_va != '1 && msg_va < last_va) m_ring_wrap++;
        last_va = msg_va;
      end
      for (int i = 0; i < plen; i++) rmem[msg_va + 64'(msg_off + i)] = f[hl + i];
      msg_off += plen;
      if (epsn == 24'hFFFFFF) m_psn_wrap++;
      epsn++;
      if (op == OP_WRITE_LAST || op == OP_WRITE_ONLY) begin
        if (msg_off != msg_len) m_bad_seq++;
        check_event(msg_va, msg_len);
      end
      if (ackreq) begin
        if (withhold) m_acks_withheld++;
        else send_ack(psn, 8'h1F);
      end
    end else if (diff < 24'h800000) begin          // ahead: packets were lost
      if (!nak_out && !withhold) begin
        send_ack(epsn, 8'h60);
        m_nak_sent++;
        nak_out = 1;
      end
    end else begin                                 // duplicate
      m_dup++;
      if (ackreq && !withhold) send_ack(epsn - 1, 8'h1F);
    end
  endfunction

  // XGMII transmit capture
  bq_t cap;
  bit  in_frame = 0;
  always @(posedge clk) if (rst_n) begin
    if (!in_frame) begin
      if (xgmii_txc == 8'h01 && xgmii_txd == 64'hD5555555_555555FB) begin
        in_frame = 1; cap = {};
      end
    end else begin
      for (int b = 0; b < 8; b++)
        if (in_frame) begin
          if (xgmii_txc[b]) begin
            if (xgmii_txd[8*b +: 8] == 8'hFD) begin respond(cap); in_frame = 0; end
          end else cap.push_back(xgmii_txd[8*b +: 8]);
        end
    end
  end

  // ------------------------------------------------------------ sequence
  int ph_events[3];

  task automatic quiet(input int n);
    repeat (n) @(posedge clk);
  endtask

  initial begin
    logic [31:0] d;
    logic [31:0] ctr [14];
    repeat (5) @(posedge clk);
    rst_n = 1;

    // configuration: 4096-byte PMTU, short ack timeout, this end point, target A
    axi_wr(8'h04, 32'd256);
    axi_wr(8'h08, 32'hFFF);
    axi_wr(8'h0C, 32'(SQPN));
    axi_wr(8'h10, {9'h0, 3'd7, 1'b0, 3'd4, 16'hFFFF});
    axi_wr(8'h14, 32'd3000);
    axi_wr(8'h18, MY_MAC[31:0]); axi_wr(8'h1C, 32'(MY_MAC[47:32]));
    axi_wr(8'h20, MY_IP);        axi_wr(8'h24, 32'(MY_PORT));
    cur  = tgt_a;
    epsn = tgt_a.start_psn;
    load_target(tgt_a);
    quiet(50);

    // phase 1: single-packet events, ring wrap, one lost packet
    for (int i = 0; i < 14; i++) begin
      if (i == 6) lose_next_op = OP_WRITE_ONLY;
      pulse(20);
      quiet(600);
    end
    quiet(4000);
    ph_events[0] = m_events;
    check(m_events == 14, $sformatf("phase 1: 14 events delivered (%0d)", m_events));

    // phase 2: ACKs withheld during a dense burst
    withhold = 1;
    for (int i = 0; i < 60; i++) begin
      pulse(4);
      quiet(30);
    end
    quiet(4500);
    withhold = 0;
    quiet(12000);
    ph_events[1] = m_events;
    axi_rd(8'h7C, d);
    check(d[0] && !d[1], "engine idle and QP healthy after the burst");

    // phase 3: new PMTU and new target
    axi_wr(8'h10, {9'h0, 3'd7, 1'b0, 3'd0, 16'hFFFF});
    cur  = tgt_b;
    epsn = tgt_b.start_psn;
    nak_out = 0;
    last_va = '1;
    load_target(tgt_b);
    quiet(50);
    for (int i = 0; i < 12; i++) begin
      if (i == 3) lose_next_op = OP_WRITE_MIDDLE;
      if (i == 7) corrupt_next_ack = 1;
      if (i == 5) begin
        udp_pay = {};
        for (int k = 0; k < 45; k++) udp_pay.push_back(8'($urandom));
        rxq.push_back(build_udp(MY_MAC, cur.mac, MY_IP, cur.ip, 16'h2000, 16'h2001, udp_pay));
      end
      if (i == 9) rxq.push_back(build_ack(MY_MAC, cur.mac, MY_IP, 32'hC0A8_0199, SQPN,
                                          24'h0, 8'h1F, 24'h0));
      pulse(20);
      quiet(700);
    end
    quiet(8000);
    ph_events[2] = m_events;
    check(m_events - ph_events[1] == 12, $sformatf("phase 3: 12 events delivered (%0d)", m_events - ph_events[1]));

    // status counters
    for (int i = 0; i < 14; i++) axi_rd(8'(8'h80 + 4 * i), ctr[i]);
    $display("events %0d pulses %0d | cnt: sent %0d drop %0d stale %0d stall %0d cqe %0d cqerr %0d retx %0d tmo %0d nak %0d frames %0d acks %0d crcerr %0d rxdrop %0d wrap %0d",
             m_events, n_pulses, ctr[0], ctr[1], ctr[2], ctr[3], ctr[4], ctr[5], ctr[6], ctr[7],
             ctr[8], ctr[9], ctr[10], ctr[11], ctr[12], ctr[13]);
    $display("responder: frames %0d only %0d first %0d middle %0d last %0d naks %0d dups %0d lost %0d withheld %0d ringwrap %0d psnwrap %0d",
             m_frames, m_only, m_first, m_middle, m_last, m_nak_sent, m_dup, m_lost, m_acks_withheld,
             m_ring_wrap, m_psn_wrap);

    // consistency
    check(m_bad_crc_tx == 0, "FCS and iCRC of every transmitted frame");
    check(m_bad_addr == 0, "addressing, opcode, QPN and RETH of every frame");
    check(m_bad_event == 0, "every delivered event matches the lane data");
    check(m_bad_seq == 0, "message lengths match the RETH DMA length");
    check(ctr[0] == m_events, "events sent = events completed at the target");
    check(ctr[0] + ctr[1] + ctr[2] == n_pulses, "every trigger sent, dropped or stale");
    check(ctr[4] == m_events && ctr[5] == 0, "one good completion per event, no error completion");
    check(ctr[9] == m_frames, "frames counted = frames seen on XGMII");
    check(ctr[10] + ctr[11] + ctr[12] == m_acks_sent + 1, "every injected ACK frame accounted for");
    check(!qp_error, "no QP error");

    // mechanisms
    check(m_events > 0,                  "mechanism: triggered event delivered");
    check(m_only > 0,                    "mechanism: single-packet write at 4096-byte PMTU");
    check(m_first > 0 && m_middle > 0 && m_last > 0, "mechanism: segmentation FIRST/MIDDLE/LAST");
    check(m_nak_sent >= 2 && ctr[8] >= 2, "mechanism: NAK and go-back-N retransmission");
    check(ctr[6] > 0,                    "mechanism: retransmission");
    check(ctr[7] > 0,                    "mechanism: ack timeout");
    check(m_dup > 0,                     "mechanism: duplicate packets re-acknowledged");
    check(ctr[3] > 0,                    "mechanism: stall (all event slots in flight)");
    check(ctr[1] > 0,                    "mechanism: trigger FIFO overflow");
    check(ctr[2] > 0,                    "mechanism: aged-out window discarded");
    check(ctr[13] > 0 && m_ring_wrap > 0, "mechanism: remote ring wrap");
    check(m_target_b > 0,                "mechanism: target reconfiguration (apply)");
    check(m_psn_wrap > 0,                "mechanism: PSN wrap");
    check(ctr[11] == 1,                  "mechanism: ACK with bad CRC rejected");
    check(ctr[12] == 1,                  "mechanism: ACK for another address dropped");
    check(m_udp_echo == 1 && m_bad_udp == 0, "mechanism: plain UDP datagram in and out beside RoCEv2");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
