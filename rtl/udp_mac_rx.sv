// udp_mac_rx: XGMII receiver that validates RoCEv2 acknowledgements.
//
// The data reception path of the RoCEv2 core is removed in the paper's design, but a
// Reliable Connection still needs the acknowledgements the target NIC sends back. This
// block receives XGMII, keeps the first MAXB bytes of each frame in a small word buffer,
// and after the terminate character checks, eight bytes per clock, the Ethernet FCS and
// the RoCEv2 iCRC (the validation the paper added to its UDP/MAC modules; same masking
// rules as the transmitter). A frame is accepted as an acknowledgement if both CRCs are
// good, it is addressed to our MAC and IP, comes from the target's IP, it is IPv4/UDP to port 4791 and its BTH
// opcode is ACKNOWLEDGE; then BTH destination QP, PSN and the AETH syndrome and MSN are
// presented on a one-cycle strobe. A frame for us on any other UDP port needs only a good
// FCS: it is a plain datagram, and its payload leaves on the u_t* stream (8 bytes per
// clock with byte enables, under u_tready) with its sender IP, ports and length on u_hdr,
// held until the last word. Anything else is dropped and counted.
// Own choices: start character accepted in lane 0 only; frames longer than MAXB bytes are
// dropped (acknowledgements are 66 bytes, so plain datagrams may carry up to MAXB-46 =
// 82 payload bytes, enough for register-access messages); a frame starting while the
// previous one is still being checked or delivered is dropped.
module udp_mac_rx
  import be_pkg::*;
#(
  parameter int unsigned MAXB = 128
) (
  input  logic        clk,
  input  logic        rst_n,
  input  net_cfg_t    net,
  input  logic [63:0] xgmii_rxd,
  input  logic [7:0]  xgmii_rxc,
  output logic        ack_valid,
  output ack_t        ack,
  output logic        crc_err,     // FCS or iCRC mismatch
  output logic        dropped,     // good CRC but neither an acknowledgement nor a datagram for us
  // plain UDP datagrams for us (any port but 4791): payload stream, header valid with it
  output logic [63:0] u_tdata,
  output logic [7:0]  u_tkeep,
  output logic        u_tvalid,
  output logic        u_tlast,
  input  logic        u_tready,
  output udp_dgram_t  u_hdr
);
  localparam int unsigned NW = MAXB / 8;
  localparam int unsigned ACK_LEN = ETH_HDR + IP_HDR + UDP_HDR + BTH_LEN + AETH_LEN + 8;
  localparam int unsigned MIN_LEN = ETH_HDR + IP_HDR + UDP_HDR + 4;
  localparam int unsigned U_OFF   = ETH_HDR + IP_HDR + UDP_HDR;

  typedef enum logic [2:0] {R_IDLE, R_CAP, R_CHK, R_EVAL, R_OUT} state_e;

  state_e      st;
  logic [63:0] buf_w [NW];
  logic [15:0] pos;          // bytes captured so far (multiple of 8 during capture)
  logic [15:0] len;
  logic        over;
  logic [15:0] kpos;         // check position
  logic [31:0] fcs, icrc;
  logic [15:0] opos;         // next payload byte to send in R_OUT

  function automatic logic [7:0] byte_at(input int unsigned i);
    return buf_w[(i / 8) % NW][8 * (i % 8) +: 8];
  endfunction

  // position of the terminate character in this word, 8 if none
  logic [3:0] tpos;
  logic       bad_ctl;
  always_comb begin
    tpos    = 4'd8;
    bad_ctl = 1'b0;
    for (int b = 7; b >= 0; b--)
      if (xgmii_rxc[b]) begin
        if (xgmii_rxd[8*b +: 8] == 8'hFD) tpos = 4'(b);
      end
    for (int b = 0; b < 8; b++)
      if (xgmii_rxc[b] && b < int'(tpos)) bad_ctl = 1'b1;
  end

  // byte as covered by the iCRC: TOS, TTL, IP checksum, UDP checksum, BTH byte 4 -> ones
  function automatic logic [7:0] icrc_byte(input int unsigned i);
    if (i == 15 || i == 22 || i == 24 || i == 25 || i == 40 || i == 41 || i == 46)
      return 8'hFF;
    return byte_at(i);
  endfunction

  logic [31:0] rx_fcs, rx_icrc;
  always_comb begin
    for (int b = 0; b < 4; b++) begin
      rx_fcs[8*b +: 8]  = byte_at(32'(len) - 4 + b);
      rx_icrc[8*b +: 8] = byte_at(32'(len) - 8 + b);
    end
  end

  // frame addressed to this end point as IPv4/UDP
  logic for_us, is_roce;
  logic [15:0] udp_len;
  always_comb begin
    for_us  = {byte_at(0), byte_at(1), byte_at(2), byte_at(3), byte_at(4), byte_at(5)} == net.src_mac
              && {byte_at(12), byte_at(13)} == ETH_IPV4
              && byte_at(14) == 8'h45 && byte_at(23) == IP_PROTO_UDP
              && {byte_at(30), byte_at(31), byte_at(32), byte_at(33)} == net.src_ip;
    is_roce = {byte_at(36), byte_at(37)} == ROCE_UDP_PORT;
    udp_len = {byte_at(38), byte_at(39)};
  end

  // payload word in R_OUT: bytes opos .. opos+7 of the frame
  always_comb begin
    logic [15:0] left;
    left     = 16'(U_OFF) + u_hdr.len - opos;
    u_tvalid = (st == R_OUT);
    u_tlast  = left <= 16'd8;
    for (int b = 0; b < 8; b++) begin
      u_tkeep[b]        = 16'(b) < left;
      u_tdata[8*b +: 8] = u_tkeep[b] ? byte_at(32'(opos) + 32'(b)) : 8'h00;
    end
  end

  always_ff @(posedge clk) begin
    logic [31:0] f, ic;
    logic        ok;
    if (!rst_n) begin
      st        <= R_IDLE;
      pos       <= '0;
      len       <= '0;
      over      <= 1'b0;
      kpos      <= '0;
      fcs       <= '1;
      icrc      <= icrc_seed();
      ack_valid <= 1'b0;
      ack       <= '0;
      crc_err   <= 1'b0;
      dropped   <= 1'b0;
      opos      <= '0;
      u_hdr     <= '0;
    end else begin
      ack_valid <= 1'b0;
      crc_err   <= 1'b0;
      dropped   <= 1'b0;
      unique case (st)
        R_IDLE: if (xgmii_rxc[0] && xgmii_rxd[7:0] == 8'hFB) begin
          pos  <= '0;
          over <= 1'b0;
          st   <= R_CAP;
        end
        R_CAP: begin
          if (32'(pos) < MAXB) buf_w[pos[$clog2(NW)+2:3]] <= xgmii_rxd;
          else                 over <= 1'b1;
          if (bad_ctl) begin
            dropped <= 1'b1;
            st      <= R_IDLE;
          end else if (tpos != 4'd8) begin
            len  <= pos + 16'(tpos);
            kpos <= '0;
            fcs  <= '1;
            icrc <= icrc_seed();
            if (over || 32'(pos) + 32'(tpos) > MAXB || 32'(pos) + 32'(tpos) < MIN_LEN) begin
              dropped <= 1'b1;
              st      <= R_IDLE;
            end else begin
              st <= R_CHK;
            end
          end else begin
            pos <= pos + 16'd8;
          end
        end
        R_CHK: begin
          f  = fcs;
          ic = icrc;
          for (int b = 0; b < 8; b++) begin
            if (32'(kpos) + 32'(b) < 32'(len) - 4)
              f = crc32_byte(f, byte_at(32'(kpos) + 32'(b)));
            if (32'(kpos) + 32'(b) >= ETH_HDR && 32'(kpos) + 32'(b) < 32'(len) - 8) begin
              ic = crc32_byte(ic, icrc_byte(32'(kpos) + 32'(b)));
            end
          end
          fcs  <= f;
          icrc <= ic;
          kpos <= kpos + 16'd8;
          if (32'(kpos) + 8 >= 32'(len)) st <= R_EVAL;
        end
        R_EVAL: begin
          st <= R_IDLE;
          // the iCRC only applies to RoCEv2 frames
          ok = (~fcs == rx_fcs) && (!is_roce || ~icrc == rx_icrc);
          if (!ok) begin
            crc_err <= 1'b1;
          end else if (for_us && !is_roce && udp_len > 16'(UDP_HDR)
                       && 32'(udp_len) + ETH_HDR + IP_HDR + 4 <= 32'(len)) begin
            u_hdr <= '{ip:    {byte_at(26), byte_at(27), byte_at(28), byte_at(29)},
                       sport: {byte_at(34), byte_at(35)},
                       dport: {byte_at(36), byte_at(37)},
                       len:   udp_len - 16'(UDP_HDR)};
            opos  <= 16'(U_OFF);
            st    <= R_OUT;
          end else if (for_us && is_roce && 32'(len) >= ACK_LEN
                       && {byte_at(26), byte_at(27), byte_at(28), byte_at(29)} == net.dst_ip
                       && byte_at(42) == OP_ACKNOWLEDGE) begin
            ack_valid    <= 1'b1;
            ack.dqpn     <= {byte_at(47), byte_at(48), byte_at(49)};
            ack.psn      <= {byte_at(51), byte_at(52), byte_at(53)};
            ack.syndrome <= byte_at(54);
            ack.msn      <= {byte_at(55), byte_at(56), byte_at(57)};
          end else begin
            dropped <= 1'b1;
          end
        end
        R_OUT: if (u_tready) begin
          opos <= opos + 16'd8;
          if (u_tlast) st <= R_IDLE;
        end
        default: st <= R_IDLE;
      endcase
    end
  end

endmodule
