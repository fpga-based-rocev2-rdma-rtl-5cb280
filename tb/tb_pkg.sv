// tb_pkg: reference functions shared by the testbenches.
//
// Byte-queue models of the RoCEv2 frame: a bit-serial CRC-32, the Ethernet FCS and the
// RoCEv2 invariant CRC computed over a whole frame, the IPv4 header checksum, and a
// builder for acknowledgement frames. They are written independently of the RTL (the
// RTL works on 64-bit words and on-the-fly masks; these work on a finished byte list).
package tb_pkg;

  typedef byte unsigned bq_t[$];

  function automatic logic [31:0] ref_crc(input bq_t d, input int from, input int to,
                                          input logic [31:0] init, input bit roce_mask);
    logic [31:0] c;
    logic [7:0]  v;
    c = init;
    for (int i = from; i < to; i++) begin
      v = d[i];
      if (roce_mask && (i == 15 || i == 22 || i == 24 || i == 25 || i == 40 || i == 41 || i == 46))
        v = 8'hFF;
      for (int k = 0; k < 8; k++) begin
        if ((c[0] ^ v[k]) == 1'b1) c = (c >> 1) ^ 32'hEDB88320;
        else                       c = c >> 1;
      end
    end
    return c;
  endfunction

  // iCRC of a frame whose last 8 bytes are iCRC and FCS
  function automatic logic [31:0] ref_icrc(input bq_t f);
    bq_t ff;
    logic [31:0] c;
    for (int i = 0; i < 8; i++) ff.push_back(8'hFF);
    c = ref_crc(ff, 0, 8, 32'hFFFF_FFFF, 1'b0);
    c = ref_crc(f, 14, f.size() - 8, c, 1'b1);
    return ~c;
  endfunction

  function automatic logic [31:0] ref_fcs(input bq_t f, input int upto);
    return ~ref_crc(f, 0, upto, 32'hFFFF_FFFF, 1'b0);
  endfunction

  function automatic logic [31:0] le32(input bq_t f, input int at);
    return {f[at+3], f[at+2], f[at+1], f[at]};
  endfunction

  function automatic logic [15:0] ip_csum(input bq_t f);
    logic [31:0] s;
    s = 0;
    for (int i = 0; i < 20; i += 2)
      if (i != 10) s += {f[14+i], f[15+i]};
    while (s > 32'hFFFF) s = (s & 32'hFFFF) + (s >> 16);
    return ~s[15:0];
  endfunction

  function automatic void push_be(ref bq_t q, input logic [63:0] v, input int n);
    for (int i = n - 1; i >= 0; i--) q.push_back(v[8*i +: 8]);
  endfunction

  // plain UDP/IPv4 frame (no RoCEv2 headers) carrying the given payload, with FCS
  function automatic bq_t build_udp(input logic [47:0] dmac, input logic [47:0] smac,
                                    input logic [31:0] dip, input logic [31:0] sip,
                                    input logic [15:0] sport, input logic [15:0] dport,
                                    input bq_t pay);
    bq_t f;
    logic [15:0] cs;
    logic [31:0] fc;
    push_be(f, dmac, 6); push_be(f, smac, 6); push_be(f, 16'h0800, 2);
    push_be(f, 8'h45, 1); push_be(f, 8'h00, 1); push_be(f, 16'(28 + pay.size()), 2);
    push_be(f, 16'h0042, 2); push_be(f, 16'h4000, 2); push_be(f, 8'd64, 1); push_be(f, 8'd17, 1);
    push_be(f, 16'h0000, 2); push_be(f, sip, 4); push_be(f, dip, 4);
    cs = ip_csum(f); f[24] = cs[15:8]; f[25] = cs[7:0];
    push_be(f, sport, 2); push_be(f, dport, 2); push_be(f, 16'(8 + pay.size()), 2); push_be(f, 16'h0, 2);
    foreach (pay[i]) f.push_back(pay[i]);
    fc = ref_fcs(f, f.size());
    for (int i = 0; i < 4; i++) f.push_back(fc[8*i +: 8]);
    return f;
  endfunction

  // ACKNOWLEDGE frame from the target NIC back to the Back-End
  function automatic bq_t build_ack(input logic [47:0] dmac, input logic [47:0] smac,
                                    input logic [31:0] dip, input logic [31:0] sip,
                                    input logic [23:0] qpn, input logic [23:0] psn,
                                    input logic [7:0] syndrome, input logic [23:0] msn);
    bq_t f;
    logic [15:0] cs;
    logic [31:0] ic, fc;
    push_be(f, dmac, 6); push_be(f, smac, 6); push_be(f, 16'h0800, 2);
    push_be(f, 8'h45, 1); push_be(f, 8'h00, 1); push_be(f, 16'd48, 2);  // 20+8+12+4+4
    push_be(f, 16'h1234, 2); push_be(f, 16'h4000, 2); push_be(f, 8'd64, 1); push_be(f, 8'd17, 1);
    push_be(f, 16'h0000, 2); push_be(f, sip, 4); push_be(f, dip, 4);
    cs = ip_csum(f); f[24] = cs[15:8]; f[25] = cs[7:0];
    push_be(f, 16'hC000, 2); push_be(f, 16'd4791, 2); push_be(f, 16'd28, 2); push_be(f, 16'h0, 2);
    push_be(f, 8'h11, 1); push_be(f, 8'h00, 1); push_be(f, 16'hFFFF, 2);
    push_be(f, 8'h00, 1); push_be(f, qpn, 3); push_be(f, 8'h00, 1); push_be(f, psn, 3);
    push_be(f, syndrome, 1); push_be(f, msn, 3);
    for (int i = 0; i < 8; i++) f.push_back(8'h00);
    ic = ref_icrc(f);
    for (int i = 0; i < 4; i++) f[f.size() - 8 + i] = ic[8*i +: 8];
    fc = ref_fcs(f, f.size() - 4);
    for (int i = 0; i < 4; i++) f[f.size() - 4 + i] = fc[8*i +: 8];
    return f;
  endfunction

endpackage
