// udp_mac_tx: RoCEv2 / UDP / IPv4 / Ethernet framer with iCRC insertion and an XGMII
// transmitter.
//
// For every packet descriptor from the RoCEv2 engine it builds the 54-byte header
// (Ethernet 14, IPv4 20, UDP 8, BTH 12) or, for packets that carry a RETH, 70 bytes,
// appends the payload words, then the 4-byte RoCEv2 invariant CRC (iCRC) and the 4-byte
// Ethernet FCS. The paper says its (SURF-based) UDP and MAC modules were modified to
// insert and validate the iCRC; the iCRC follows the RoCEv2 rule: CRC-32 over eight 0xFF
// bytes, then the IP header with TOS, TTL and checksum set to ones, the UDP header with
// its checksum set to ones, the BTH with its reserved byte 4 set to ones, and the
// payload; it is sent least significant byte first, like the FCS.
// Plain UDP datagrams (u_desc: ports and byte length; u_t*: payload words, byte 0 in bits
// 7:0, the last word carrying len mod 8 bytes, or 8; len at least 1) share the line: they get a 42-byte
// Ethernet/IPv4/UDP header and the FCS, but no BTH and no iCRC, so the RoCEv2 additions
// stay out of the way of other traffic, as the paper requires of its modified UDP/MAC.
// When both kinds are waiting, the two alternate frame by frame.
//
// Bytes travel as "chunks" of up to 8 bytes into a 16-byte packer that emits dense
// 64-bit words (byte 0 in bits 7:0) into a store-and-forward FIFO; a frame is started on
// XGMII only once it is complete in the FIFO, so the line never underruns. The XGMII
// side sends the start word (FB 55 55 55 55 55 55 D5), the frame, the terminate
// character FD, and then two idle words (at least 12 bytes of inter-frame gap).
// Own choices: IPv4 TOS 0, TTL 64, DF set, incrementing IP identification, UDP checksum
// 0 (allowed for IPv4), fixed UDP source port from the configuration, start character
// always in lane 0, two idle words between frames, plain datagrams sent to the same
// MAC and IP as the RoCEv2 traffic (no ARP), and one clock for all of it (the
// paper's 156.25 MHz Ethernet clock domain is not modelled separately).
module udp_mac_tx
  import be_pkg::*;
#(
  parameter int unsigned FIFO_WORDS = 1024
) (
  input  logic        clk,
  input  logic        rst_n,
  input  net_cfg_t    net,
  // packets from the engine
  input  logic        desc_valid,
  output logic        desc_ready,
  input  pkt_desc_t   desc,
  input  logic [63:0] pl_tdata,
  input  logic        pl_tvalid,
  input  logic        pl_tlast,
  output logic        pl_tready,
  // plain UDP datagrams (no BTH, no iCRC) sharing the line with the RoCEv2 packets
  input  logic        u_desc_valid,
  output logic        u_desc_ready,
  input  udp_dgram_t  u_desc,
  input  logic [63:0] u_tdata,
  input  logic        u_tvalid,
  input  logic        u_tlast,
  output logic        u_tready,
  // XGMII transmit
  output logic [63:0] xgmii_txd,
  output logic [7:0]  xgmii_txc,
  output logic        frame_sent
);
  localparam int unsigned FAW      = $clog2(FIFO_WORDS);
  localparam int unsigned MAXH     = 70;
  localparam int unsigned MAX_WORDS = (MAXH + 4096 + 8 + 7) / 8 + 1;

  typedef enum logic [2:0] {A_IDLE, A_HDR, A_PAY, A_ICRC, A_FCS, A_FLUSH} a_state_e;
  typedef enum logic [1:0] {B_IDLE, B_DATA, B_TERM, B_IFG} b_state_e;

  typedef struct packed {
    logic [63:0] data;
    logic [3:0]  nbytes;
    logic        last;
  } fbeat_t;

  // ------------------------------------------------------------ header construction
  logic [7:0]  hdr  [MAXH];     // header as sent
  logic [7:0]  hdrm [MAXH];     // header with the iCRC variant fields set to ones
  logic [6:0]  hlen_c;
  logic [15:0] ip_id;
  logic        rr_u;               // plain UDP has priority at the next arbitration
  logic        sel_u;              // this arbitration picks the plain UDP datagram

  assign sel_u = u_desc_valid && (!desc_valid || rr_u);

  always_comb begin
    logic [15:0] ip_len, udp_len;
    logic [31:0] csum;
    logic [15:0] w;
    for (int i = 0; i < MAXH; i++) hdr[i] = 8'h00;
    hlen_c  = sel_u ? 7'(ETH_HDR + IP_HDR + UDP_HDR) :
              desc.has_reth ? 7'(MAXH) : 7'(MAXH - RETH_LEN);
    udp_len = sel_u ? 16'(UDP_HDR) + u_desc.len
                    : 16'(UDP_HDR + BTH_LEN + (desc.has_reth ? RETH_LEN : 0) + 4) + desc.paylen;
    ip_len  = udp_len + 16'(IP_HDR);
    // Ethernet
    for (int i = 0; i < 6; i++) begin
      hdr[i]     = net.dst_mac[8*(5-i) +: 8];
      hdr[6 + i] = net.src_mac[8*(5-i) +: 8];
    end
    hdr[12] = ETH_IPV4[15:8];
    hdr[13] = ETH_IPV4[7:0];
    // IPv4
    hdr[14] = 8'h45;
    hdr[15] = 8'h00;
    hdr[16] = ip_len[15:8];
    hdr[17] = ip_len[7:0];
    hdr[18] = ip_id[15:8];
    hdr[19] = ip_id[7:0];
    hdr[20] = 8'h40;               // don't fragment
    hdr[21] = 8'h00;
    hdr[22] = 8'd64;               // TTL
    hdr[23] = IP_PROTO_UDP;
    for (int i = 0; i < 4; i++) begin
      hdr[26 + i] = net.src_ip[8*(3-i) +: 8];
      hdr[30 + i] = net.dst_ip[8*(3-i) +: 8];
    end
    csum = '0;
    for (int i = 0; i < 10; i++) begin
      w    = {hdr[14 + 2*i], hdr[15 + 2*i]};
      csum = csum + 32'(w);
    end
    csum = (csum & 32'hFFFF) + (csum >> 16);
    csum = (csum & 32'hFFFF) + (csum >> 16);
    hdr[24] = ~csum[15:8];
    hdr[25] = ~csum[7:0];
    // UDP
    hdr[34] = sel_u ? u_desc.sport[15:8] : net.src_port[15:8];
    hdr[35] = sel_u ? u_desc.sport[7:0]  : net.src_port[7:0];
    hdr[36] = sel_u ? u_desc.dport[15:8] : ROCE_UDP_PORT[15:8];
    hdr[37] = sel_u ? u_desc.dport[7:0]  : ROCE_UDP_PORT[7:0];
    hdr[38] = udp_len[15:8];
    hdr[39] = udp_len[7:0];
    // BTH
    hdr[42] = desc.opcode;
    hdr[43] = 8'h00;               // SE, M, pad count, transport version
    hdr[44] = desc.pkey[15:8];
    hdr[45] = desc.pkey[7:0];
    hdr[47] = desc.dqpn[23:16];
    hdr[48] = desc.dqpn[15:8];
    hdr[49] = desc.dqpn[7:0];
    hdr[50] = {desc.ackreq, 7'h00};
    hdr[51] = desc.psn[23:16];
    hdr[52] = desc.psn[15:8];
    hdr[53] = desc.psn[7:0];
    // RETH
    for (int i = 0; i < 8; i++) hdr[54 + i] = desc.va[8*(7-i) +: 8];
    for (int i = 0; i < 4; i++) begin
      hdr[62 + i] = desc.rkey[8*(3-i) +: 8];
      hdr[66 + i] = desc.dmalen[8*(3-i) +: 8];
    end
    for (int i = 0; i < MAXH; i++) hdrm[i] = hdr[i];
    hdrm[15] = 8'hFF; hdrm[22] = 8'hFF; hdrm[24] = 8'hFF; hdrm[25] = 8'hFF;
    hdrm[40] = 8'hFF; hdrm[41] = 8'hFF; hdrm[46] = 8'hFF;
  end

  // ------------------------------------------------------------ FIFO
  fbeat_t        fifo [FIFO_WORDS];
  logic [FAW:0]  f_wp, f_rp;
  logic [15:0]   frames_in;           // complete frames held
  wire  [FAW:0]  f_used = f_wp - f_rp;
  wire           f_room = (32'(f_used) + MAX_WORDS) <= FIFO_WORDS;
  logic          f_push, f_pop;
  fbeat_t        f_in;

  // ------------------------------------------------------------ chunk source + packer
  a_state_e    as;
  pkt_desc_t   d_q;
  logic [7:0]  hdr_q  [MAXH];
  logic [7:0]  hdrm_q [MAXH];
  logic [6:0]  hlen_q;
  logic [6:0]  hpos;
  logic        plain_q;             // frame in progress is a plain UDP datagram
  logic [15:0] urem;                // plain UDP payload bytes still to send
  logic [15:0] bpos;                  // absolute byte position of the chunk
  logic [31:0] fcs, icrc;
  logic [127:0] acc;
  logic [4:0]  cnt;

  logic [63:0] ch_data, ch_icrc_data;
  logic [3:0]  ch_n;
  logic        ch_flush, ch_icrc_on, ch_fcs_on;

  assign desc_ready   = (as == A_IDLE) && f_room && !sel_u;
  assign u_desc_ready = (as == A_IDLE) && f_room && sel_u;
  assign pl_tready    = (as == A_PAY) && !plain_q;
  assign u_tready     = (as == A_PAY) && plain_q;

  always_comb begin
    ch_data      = '0;
    ch_icrc_data = '0;
    ch_n         = '0;
    ch_flush     = 1'b0;
    ch_icrc_on   = 1'b0;
    ch_fcs_on    = 1'b0;
    unique case (as)
      A_HDR: begin
        ch_n       = ((hlen_q - hpos) >= 7'd8) ? 4'd8 : 4'(hlen_q - hpos);
        for (int b = 0; b < 8; b++)
          if (int'(hpos) + b < MAXH && b < int'(ch_n)) begin
            ch_data[8*b +: 8]      = hdr_q[int'(hpos) + b];
            ch_icrc_data[8*b +: 8] = hdrm_q[int'(hpos) + b];
          end
        ch_icrc_on = 1'b1;
        ch_fcs_on  = 1'b1;
      end
      A_PAY: if (plain_q) begin
        if (u_tvalid) begin
          ch_data   = u_tdata;
          ch_n      = (urem >= 16'd8) ? 4'd8 : 4'(urem);
          ch_fcs_on = 1'b1;
          for (int b = 0; b < 8; b++) if (b >= int'(ch_n)) ch_data[8*b +: 8] = 8'h00;
        end
      end else if (pl_tvalid) begin
        ch_data      = pl_tdata;
        ch_icrc_data = pl_tdata;
        ch_n         = 4'd8;
        ch_icrc_on   = 1'b1;
        ch_fcs_on    = 1'b1;
      end
      A_ICRC: begin
        ch_data   = {32'h0, ~icrc};
        ch_n      = 4'd4;
        ch_fcs_on = 1'b1;
      end
      A_FCS: begin
        ch_data  = {32'h0, ~fcs};
        ch_n     = 4'd4;
        ch_flush = 1'b1;
      end
      A_FLUSH: ch_flush = 1'b1;
      default: ;
    endcase
  end

  // packer
  always_comb begin
    logic [127:0] comb;
    logic [4:0]   total;
    comb   = acc | ({64'h0, ch_data} << (8 * cnt));
    total  = cnt + 5'(ch_n);
    f_push = 1'b0;
    f_in   = '0;
    if (total >= 5'd8) begin
      f_push = 1'b1;
      f_in   = '{data: comb[63:0], nbytes: 4'd8, last: ch_flush && total == 5'd8};
    end else if (ch_flush && total != 0) begin
      f_push = 1'b1;
      f_in   = '{data: comb[63:0], nbytes: total[3:0], last: 1'b1};
    end
  end

  always_ff @(posedge clk) begin
    logic [127:0] comb;
    logic [4:0]   total;
    logic [31:0]  f, ic;
    if (!rst_n) begin
      as     <= A_IDLE;
      d_q    <= '0;
      hlen_q <= '0;
      hpos   <= '0;
      bpos   <= '0;
      fcs    <= '1;
      icrc   <= icrc_seed();
      acc    <= '0;
      cnt    <= '0;
      ip_id  <= '0;
      rr_u    <= 1'b0;
      plain_q <= 1'b0;
      urem    <= '0;
    end else begin
      // CRCs over the bytes of this chunk
      f  = fcs;
      ic = icrc;
      for (int b = 0; b < 8; b++) begin
        if (b < int'(ch_n)) begin
          if (ch_fcs_on) f = crc32_byte(f, ch_data[8*b +: 8]);
          if (ch_icrc_on && (32'(bpos) + 32'(b)) >= 32'(ETH_HDR))
            ic = crc32_byte(ic, ch_icrc_data[8*b +: 8]);
        end
      end
      fcs  <= f;
      icrc <= ic;
      bpos <= bpos + 16'(ch_n);

      // packer state
      comb  = acc | ({64'h0, ch_data} << (8 * cnt));
      total = cnt + 5'(ch_n);
      if (total >= 5'd8) begin
        acc <= comb >> 64;
        cnt <= total - 5'd8;
      end else if (ch_flush) begin
        acc <= '0;
        cnt <= '0;
      end else begin
        acc <= comb;
        cnt <= total;
      end

      unique case (as)
        A_IDLE: if ((desc_valid || u_desc_valid) && f_room) begin
          d_q     <= desc;
          plain_q <= sel_u;
          rr_u    <= !sel_u;
          urem    <= u_desc.len;
          if (sel_u) d_q.paylen <= u_desc.len;
          hdr_q  <= hdr;
          hdrm_q <= hdrm;
          hlen_q <= hlen_c;
          hpos   <= '0;
          bpos   <= '0;
          fcs    <= '1;
          icrc   <= icrc_seed();
          ip_id  <= ip_id + 1'b1;
          as     <= A_HDR;
        end
        A_HDR: begin
          hpos <= hpos + 7'd8;
          if (hpos + 7'd8 >= hlen_q)
            as <= (d_q.paylen != 0) ? A_PAY : plain_q ? A_FCS : A_ICRC;
        end
        A_PAY: if (plain_q) begin
          if (u_tvalid) begin
            urem <= (urem >= 16'd8) ? urem - 16'd8 : 16'd0;
            if (urem <= 16'd8) as <= A_FCS;
          end
        end else if (pl_tvalid && pl_tlast) as <= A_ICRC;
        A_ICRC:  as <= A_FCS;
        A_FCS:   as <= (total > 5'd8) ? A_FLUSH : A_IDLE;
        A_FLUSH: as <= A_IDLE;
        default: as <= A_IDLE;
      endcase
    end
  end

  // ------------------------------------------------------------ XGMII side
  b_state_e  bs;
  logic [1:0] ifg;
  fbeat_t    f_out;
  assign f_out = fifo[f_rp[FAW-1:0]];
  assign f_pop = (bs == B_DATA);

  always_ff @(posedge clk) begin
    if (f_push) fifo[f_wp[FAW-1:0]] <= f_in;
  end

  always_comb begin
    xgmii_txd = {8{8'h07}};
    xgmii_txc = 8'hFF;
    unique case (bs)
      B_IDLE: if (frames_in != 0) begin
        xgmii_txd = 64'hD5555555_555555FB;
        xgmii_txc = 8'h01;
      end
      B_DATA: begin
        if (f_out.nbytes == 4'd8) begin
          xgmii_txd = f_out.data;
          xgmii_txc = 8'h00;
        end else begin
          for (int b = 0; b < 8; b++) begin
            if (b < int'(f_out.nbytes)) begin
              xgmii_txd[8*b +: 8] = f_out.data[8*b +: 8];
              xgmii_txc[b]        = 1'b0;
            end else if (b == int'(f_out.nbytes)) begin
              xgmii_txd[8*b +: 8] = 8'hFD;
            end
          end
        end
      end
      B_TERM: xgmii_txd = {{7{8'h07}}, 8'hFD};
      default: ;
    endcase
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      bs         <= B_IDLE;
      f_wp       <= '0;
      f_rp       <= '0;
      frames_in  <= '0;
      ifg        <= '0;
      frame_sent <= 1'b0;
    end else begin
      frame_sent <= 1'b0;
      if (f_push) f_wp <= f_wp + 1'b1;
      if (f_pop)  f_rp <= f_rp + 1'b1;
      frames_in <= frames_in + ((f_push && f_in.last) ? 16'd1 : 16'd0)
                             - ((f_pop && f_out.last) ? 16'd1 : 16'd0);
      unique case (bs)
        B_IDLE: if (frames_in != 0) bs <= B_DATA;
        B_DATA: if (f_out.last) begin
          frame_sent <= 1'b1;
          ifg        <= 2'd2;
          bs         <= (f_out.nbytes == 4'd8) ? B_TERM : B_IFG;
        end
        B_TERM: bs <= B_IFG;
        B_IFG: begin
          ifg <= ifg - 1'b1;
          if (ifg == 2'd1) bs <= B_IDLE;
        end
        default: bs <= B_IDLE;
      endcase
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) f_push |-> f_used != (FAW+1)'(FIFO_WORDS));
  assert property (@(posedge clk) disable iff (!rst_n) desc_valid && desc_ready |-> desc.paylen[2:0] == 3'b0);
  assert property (@(posedge clk) disable iff (!rst_n)
                   u_desc_valid && u_desc_ready |-> u_desc.len != 0 &&
                                                    u_desc.len <= 16'(4096 + MAXH - ETH_HDR - IP_HDR - UDP_HDR));
  assert property (@(posedge clk) disable iff (!rst_n)
                   u_tvalid && u_tready |-> u_tlast == (urem <= 16'd8));

endmodule
