// tb_udp_mac: self-checking test of the UDP/IP/Ethernet layer.
//
// Transmit: sends a WRITE_FIRST packet (with RETH) and a WRITE_LAST packet, captures
// the XGMII bytes between start and terminate, and compares every header byte with a
// layout written out here from the RoCEv2/IPv4/Ethernet formats, the payload, the iCRC
// and the FCS (both recomputed bit-serially over the captured frame), and the idle gap.
// Receive: injects acknowledgement frames built by tb_pkg: a good one (fields must come
// out), one with a flipped payload bit (CRC error), and one for another IP and one from
// a source other than the target (both dropped), and a NAK.
// Plain UDP: a 37-byte datagram is offered in the same clock as a RoCEv2 packet; both
// frames must go out, and the plain one must carry the given ports, a correct IPv4
// header, the payload and the FCS, with no BTH and no iCRC; six more of random length
// (1 and 8 bytes among them) follow back to back and are checked the same way. Two plain datagrams for this
// end point are injected (one of them to a port other than 4791 but with a wrong FCS)
// and the good one must come out of the receive stream, under a random tready, with its
// header fields, byte enables and payload; the bad one must only raise a CRC error.
module tb_udp_mac;
  import be_pkg::*;
  import tb_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  net_cfg_t    net;
  logic        desc_valid = 0, desc_ready;
  pkt_desc_t   desc;
  logic [63:0] pl_tdata;
  logic        pl_tvalid = 0, pl_tlast = 0, pl_tready;
  logic [63:0] txd, rxd;
  logic [7:0]  txc, rxc;
  logic        ack_valid, frame_sent, rx_crc_err, rx_dropped;
  ack_t        ack;
  logic        utx_desc_valid = 0, utx_desc_ready, utx_tvalid = 0, utx_tlast = 0, utx_tready;
  udp_dgram_t  utx_desc, urx_hdr;
  logic [63:0] utx_tdata = '0, urx_tdata;
  logic [7:0]  urx_tkeep;
  logic        urx_tvalid, urx_tlast, urx_tready = 0;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  udp_mac dut (
    .clk, .rst_n, .net, .desc_valid, .desc_ready, .desc,
    .pl_tdata, .pl_tvalid, .pl_tlast, .pl_tready,
    .xgmii_txd(txd), .xgmii_txc(txc), .xgmii_rxd(rxd), .xgmii_rxc(rxc),
    .ack_valid, .ack, .frame_sent, .rx_crc_err, .rx_dropped,
    .utx_desc_valid, .utx_desc_ready, .utx_desc, .utx_tdata, .utx_tvalid, .utx_tlast,
    .utx_tready, .urx_tdata, .urx_tkeep, .urx_tvalid, .urx_tlast, .urx_tready, .urx_hdr
  );

  // ------------------------------------------------ plain UDP
  bq_t upay;
  task automatic send_udp(input int n);
    int nw;
    upay = {};
    for (int i = 0; i < n; i++) upay.push_back(8'($urandom));
    @(negedge clk);
    utx_desc = '{ip: '0, sport: 16'h2001, dport: 16'h2002, len: 16'(n)};
    utx_desc_valid = 1;
    do @(posedge clk); while (!utx_desc_ready);
    @(negedge clk); utx_desc_valid = 0;
    nw = (n + 7) / 8;
    for (int w = 0; w < nw; w++) begin
      for (int b = 0; b < 8; b++) utx_tdata[8*b +: 8] = (8*w + b < n) ? upay[8*w + b] : 8'hEE;
      utx_tvalid = 1; utx_tlast = (w == nw - 1);
      do @(posedge clk); while (!utx_tready);
      @(negedge clk);
    end
    utx_tvalid = 0; utx_tlast = 0;
  endtask

  bq_t urx_bytes;
  int  urx_frames = 0, urx_badkeep = 0;
  udp_dgram_t urx_last;
  always @(negedge clk) urx_tready = ($urandom % 3) != 0;
  always @(posedge clk) if (urx_tvalid && urx_tready) begin
    bit seen_gap;
    seen_gap = 0;
    for (int b = 0; b < 8; b++)
      if (urx_tkeep[b]) begin
        if (seen_gap) urx_badkeep++;
        urx_bytes.push_back(urx_tdata[8*b +: 8]);
      end else seen_gap = 1;
    if (!urx_tlast && urx_tkeep != 8'hFF) urx_badkeep++;
    if (urx_tlast) begin urx_frames++; urx_last = urx_hdr; end
  end

  // ------------------------------------------------ XGMII capture
  bq_t frames[$];
  int  idle_after[$];
  bq_t cur;
  bit  in_frame = 0;
  int  idle_cnt = 0;
  always @(posedge clk) if (rst_n) begin
    if (!in_frame) begin
      if (txc == 8'h01 && txd == 64'hD5555555_555555FB) begin
        in_frame = 1; cur = {};
        if (frames.size() > 0) idle_after.push_back(idle_cnt);
      end else begin
        for (int b = 0; b < 8; b++) if (txc[b] && txd[8*b +: 8] == 8'h07) idle_cnt++;
      end
    end else begin
      for (int b = 0; b < 8; b++) begin
        if (!in_frame) begin
          if (txc[b] && txd[8*b +: 8] == 8'h07) idle_cnt++;
        end else if (txc[b]) begin
          if (txd[8*b +: 8] == 8'hFD) begin
            frames.push_back(cur); in_frame = 0; idle_cnt = 0;
          end
        end else cur.push_back(txd[8*b +: 8]);
      end
    end
  end

  // ------------------------------------------------ expected header
  function automatic bq_t exp_hdr(input pkt_desc_t d, input int id);
    bq_t h;
    int udp_len;
    udp_len = 8 + 12 + (d.has_reth ? 16 : 0) + int'(d.paylen) + 4;
    push_be(h, net.dst_mac, 6); push_be(h, net.src_mac, 6); push_be(h, 16'h0800, 2);
    push_be(h, 8'h45, 1); push_be(h, 8'h00, 1); push_be(h, 16'(udp_len + 20), 2);
    push_be(h, 16'(id), 2); push_be(h, 16'h4000, 2); push_be(h, 8'd64, 1); push_be(h, 8'd17, 1);
    push_be(h, 16'h0, 2); push_be(h, net.src_ip, 4); push_be(h, net.dst_ip, 4);
    push_be(h, net.src_port, 2); push_be(h, 16'd4791, 2); push_be(h, 16'(udp_len), 2);
    push_be(h, 16'h0, 2);
    push_be(h, d.opcode, 1); push_be(h, 8'h00, 1); push_be(h, d.pkey, 2);
    push_be(h, 8'h00, 1); push_be(h, d.dqpn, 3); push_be(h, {d.ackreq, 7'h0}, 1); push_be(h, d.psn, 3);
    if (d.has_reth) begin
      push_be(h, d.va, 8); push_be(h, d.rkey, 4); push_be(h, d.dmalen, 4);
    end
    return h;
  endfunction

  task automatic send_pkt(input pkt_desc_t d, input logic [63:0] seed);
    @(negedge clk);
    desc = d; desc_valid = 1;
    do @(posedge clk); while (!desc_ready);
    @(negedge clk); desc_valid = 0;
    for (int w = 0; w < int'(d.paylen) / 8; w++) begin
      pl_tdata = seed + 64'(w) * 64'h0101_0101_0101_0101; pl_tvalid = 1;
      pl_tlast = (w == int'(d.paylen) / 8 - 1);
      do @(posedge clk); while (!pl_tready);
      @(negedge clk);
    end
    pl_tvalid = 0; pl_tlast = 0;
  endtask

  task automatic check_frame(input bq_t f, input pkt_desc_t d, input int id, input logic [63:0] seed);
    bq_t h;
    bit  ok;
    logic [15:0] cs;
    int hl;
    h  = exp_hdr(d, id);
    hl = h.size();
    check(f.size() == hl + int'(d.paylen) + 8, $sformatf("frame length %0d", f.size()));
    if (f.size() != hl + int'(d.paylen) + 8) return;
    cs = ip_csum(f);
    h[24] = cs[15:8]; h[25] = cs[7:0];
    ok = 1;
    for (int i = 0; i < hl; i++) if (f[i] != h[i]) begin
      ok = 0; $display("  hdr byte %0d got %02x exp %02x", i, f[i], h[i]);
    end
    check(ok, "header bytes");
    ok = 1;
    for (int w = 0; w < int'(d.paylen) / 8; w++)
      for (int b = 0; b < 8; b++) begin
        logic [63:0] v;
        v = seed + 64'(w) * 64'h0101_0101_0101_0101;
        if (f[hl + 8*w + b] != v[8*b +: 8]) ok = 0;
      end
    check(ok, "payload bytes");
    check(le32(f, f.size() - 8) == ref_icrc(f), "iCRC");
    check(le32(f, f.size() - 4) == ref_fcs(f, f.size() - 4), "FCS");
  endtask

  // ------------------------------------------------ RX injection
  task automatic inject(input bq_t f);
    int n;
    @(negedge clk);
    rxd = 64'hD5555555_555555FB; rxc = 8'h01;
    n = 0;
    while (n <= f.size()) begin
      @(negedge clk);
      rxc = 8'hFF; rxd = {8{8'h07}};
      for (int b = 0; b < 8; b++) begin
        if (n < f.size()) begin rxd[8*b +: 8] = f[n]; rxc[b] = 0; end
        else if (n == f.size()) rxd[8*b +: 8] = 8'hFD;
        n++;
      end
    end
    @(negedge clk); rxd = {8{8'h07}}; rxc = 8'hFF;
    repeat (30) @(negedge clk);
  endtask

  int acks = 0, crcs = 0, drops = 0;
  ack_t last_ack;
  always @(posedge clk) begin
    if (ack_valid) begin acks++; last_ack = ack; end
    if (rx_crc_err) crcs++;
    if (rx_dropped) drops++;
  end

  initial begin
    pkt_desc_t d1, d2;
    bq_t a;
    net = '{src_mac: 48'h02_00_00_00_00_01, dst_mac: 48'hB8_CE_F6_00_11_22,
            src_ip: 32'hC0A8_0102, dst_ip: 32'hC0A8_0101, src_port: 16'hC0DE};
    rxd = {8{8'h07}}; rxc = 8'hFF;
    repeat (3) @(posedge clk);
    rst_n = 1;

    d1 = '{opcode: OP_WRITE_FIRST, ackreq: 1'b0, dqpn: 24'h000123, psn: 24'hABCDEF,
           pkey: 16'hFFFF, has_reth: 1'b1, va: 64'h0000_7F00_1234_5000, rkey: 32'hCAFE0001,
           dmalen: 32'd968, paylen: 16'd256};
    d2 = '{opcode: OP_WRITE_LAST, ackreq: 1'b1, dqpn: 24'h000123, psn: 24'hABCDF0,
           pkey: 16'hFFFF, has_reth: 1'b0, va: '0, rkey: '0, dmalen: '0, paylen: 16'd200};
    fork
      begin send_pkt(d1, 64'h1122_3344_5566_7788); send_pkt(d2, 64'h0F0E_0D0C_0B0A_0908); end
    join
    repeat (200) @(posedge clk);
    check(frames.size() == 2, $sformatf("two frames seen (%0d)", frames.size()));
    if (frames.size() == 2) begin
      check_frame(frames[0], d1, 0, 64'h1122_3344_5566_7788);
      check_frame(frames[1], d2, 1, 64'h0F0E_0D0C_0B0A_0908);
    end
    check(idle_after.size() == 1 && idle_after[0] >= 12, "inter-frame gap of at least 12 idle bytes");

    // plain UDP offered together with a RoCEv2 packet
    fork
      send_pkt(d2, 64'h0F0E_0D0C_0B0A_0908);
      send_udp(37);
    join
    repeat (200) @(posedge clk);
    check(frames.size() == 4, $sformatf("plain and RoCEv2 frame both sent (%0d frames)", frames.size()));
    if (frames.size() == 4) begin
      bq_t f, e;
      int  k;
      k = (frames[2].size() == 42 + 37 + 4) ? 2 : 3;
      f = frames[k];
      check_frame(frames[5 - k], d2, k == 2 ? 3 : 2, 64'h0F0E_0D0C_0B0A_0908);
      e = build_udp(net.dst_mac, net.src_mac, net.dst_ip, net.src_ip, 16'h2001, 16'h2002, upay);
      e[18] = 8'h00; e[19] = 8'(k);                     // IP identification: frame count
      begin
        logic [15:0] cs;
        logic [31:0] fc;
        cs = ip_csum(e); e[24] = cs[15:8]; e[25] = cs[7:0];
        fc = ref_fcs(e, e.size() - 4);
        for (int i = 0; i < 4; i++) e[e.size() - 4 + i] = fc[8*i +: 8];
      end
      if (f != e) begin
        $display("  plain frame %0d bytes, expected %0d", f.size(), e.size());
        for (int i = 0; i < f.size() && i < e.size(); i++)
          if (f[i] != e[i]) $display("  byte %0d got %02x exp %02x", i, f[i], e[i]);
      end
      check(f == e, "plain UDP frame: header, payload and FCS, no BTH or iCRC");
    end

    // back-to-back plain datagrams of random length
    begin
      int ok_n, lens[6];
      bq_t pays[6];
      ok_n = 0;
      for (int i = 0; i < 6; i++) begin
        lens[i] = (i == 0) ? 8 : (i == 1) ? 1 : 1 + $urandom % 200;
        send_udp(lens[i]);
        pays[i] = upay;
      end
      repeat (300) @(posedge clk);
      for (int i = 0; i < 6 && frames.size() == 10; i++) begin
        bq_t e;
        e = build_udp(net.dst_mac, net.src_mac, net.dst_ip, net.src_ip, 16'h2001, 16'h2002, pays[i]);
        e[18] = 8'h00; e[19] = 8'(4 + i);
        begin
          logic [15:0] cs;
          logic [31:0] fc;
          cs = ip_csum(e); e[24] = cs[15:8]; e[25] = cs[7:0];
          fc = ref_fcs(e, e.size() - 4);
          for (int k = 0; k < 4; k++) e[e.size() - 4 + k] = fc[8*k +: 8];
        end
        if (frames[4 + i] == e) ok_n++;
        else $display("  plain datagram %0d (%0d bytes) differs", i, lens[i]);
      end
      check(frames.size() == 10 && ok_n == 6, $sformatf("6 back-to-back plain datagrams (%0d frames, %0d good)", frames.size(), ok_n));
    end

    // receive side
    a = build_ack(net.src_mac, net.dst_mac, net.src_ip, net.dst_ip, 24'h000001, 24'hABCDF0, 8'h1F, 24'h7);
    inject(a);
    check(acks == 1 && last_ack.psn == 24'hABCDF0 && last_ack.dqpn == 24'h1 &&
          last_ack.syndrome == 8'h1F && last_ack.msn == 24'h7, "good ACK decoded");
    a[56] ^= 8'h01;
    inject(a);
    check(acks == 1 && crcs == 1, "corrupted ACK rejected by CRC");
    a = build_ack(net.src_mac, net.dst_mac, 32'hC0A8_0109, net.dst_ip, 24'h1, 24'h5, 8'h00, 24'h1);
    inject(a);
    check(acks == 1 && drops == 1, "ACK for another IP dropped");
    a = build_ack(net.src_mac, net.dst_mac, net.src_ip, 32'hC0A8_0177, 24'h1, 24'h5, 8'h00, 24'h1);
    inject(a);
    check(acks == 1 && drops == 2, "ACK from a source other than the target dropped");
    a = build_ack(net.src_mac, net.dst_mac, net.src_ip, net.dst_ip, 24'h000001, 24'h000010, 8'h60, 24'h8);
    inject(a);
    check(acks == 2 && last_ack.syndrome == 8'h60 && last_ack.psn == 24'h10, "NAK decoded");

    // plain UDP receive
    begin
      bq_t pay;
      for (int i = 0; i < 61; i++) pay.push_back(8'($urandom));
      a = build_udp(net.src_mac, net.dst_mac, net.src_ip, 32'hC0A8_0155, 16'h3001, 16'h3002, pay);
      a[50] ^= 8'h80;
      inject(a);
      check(crcs == 2 && urx_frames == 0, "plain UDP frame with a bad FCS rejected");
      a = build_udp(net.src_mac, net.dst_mac, net.src_ip, 32'hC0A8_0155, 16'h3001, 16'h3002, pay);
      inject(a);
      repeat (40) @(posedge clk);
      check(urx_frames == 1 && urx_bytes == pay && urx_badkeep == 0,
            $sformatf("plain UDP payload delivered (%0d bytes)", urx_bytes.size()));
      check(urx_last.ip == 32'hC0A8_0155 && urx_last.sport == 16'h3001 && urx_last.dport == 16'h3002 &&
            urx_last.len == 16'd61, "plain UDP header fields");
      check(acks == 2 && drops == 2, "plain UDP not taken as an acknowledgement or a drop");
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
