// be_pkg: types, constants and helper functions shared by the Back-End DAQ firmware.
//
// The Back-End receives 12 JESD204C lanes, each delivering one 64-bit word per clock
// (187.5 MHz, 12 Gb/s per lane), keeps them in a circular buffer, triggers on a leading
// edge, and ships 50 ns windows around each trigger with RDMA WRITE over RoCEv2 / UDP /
// IPv4 / 10 Gb Ethernet. The numbers the paper prints (12 lanes, 64-bit lane words,
// 187.5 MHz, 50 ns window, 4096-byte MTU, UDP port of RoCEv2) are the defaults here; the
// record layouts (work request, completion, header descriptor) are this design's own.
package be_pkg;

  // ---------------------------------------------------------------- front end
  localparam int unsigned LANES      = 12;   // JESD204C lanes, one ADC channel each
  localparam int unsigned LANE_W     = 64;   // bits per lane word from the JESD204C IP
  localparam int unsigned ROW_W      = LANES * LANE_W;
  localparam int unsigned SAMPLE_W   = 12;   // sample container: 16 samples per 3 lane words
  localparam int unsigned TS_W       = 32;   // word timestamp (5.33 ns units)

  // ---------------------------------------------------------------- RoCEv2 constants
  localparam logic [15:0] ROCE_UDP_PORT = 16'd4791;
  localparam logic [15:0] ETH_IPV4      = 16'h0800;
  localparam logic [7:0]  IP_PROTO_UDP  = 8'd17;
  localparam logic [15:0] DEFAULT_PKEY  = 16'hFFFF;

  // RC opcodes used by a write-only requester (IBTA vol.1, table 38)
  localparam logic [7:0] OP_WRITE_FIRST  = 8'h06;
  localparam logic [7:0] OP_WRITE_MIDDLE = 8'h07;
  localparam logic [7:0] OP_WRITE_LAST   = 8'h08;
  localparam logic [7:0] OP_WRITE_ONLY   = 8'h0A;
  localparam logic [7:0] OP_ACKNOWLEDGE  = 8'h11;

  // header sizes in bytes
  localparam int unsigned ETH_HDR  = 14;
  localparam int unsigned IP_HDR   = 20;
  localparam int unsigned UDP_HDR  = 8;
  localparam int unsigned BTH_LEN  = 12;
  localparam int unsigned RETH_LEN = 16;
  localparam int unsigned AETH_LEN = 4;

  // ---------------------------------------------------------------- records
  // Work request posted by the packetizer: RDMA WRITE of len bytes from local event
  // memory (byte address laddr) to remote virtual address raddr under rkey.
  typedef struct packed {
    logic [7:0]  wr_id;
    logic [31:0] laddr;
    logic [63:0] raddr;
    logic [31:0] rkey;
    logic [31:0] len;
  } wr_t;

  typedef enum logic [1:0] {
    CQ_OK        = 2'd0,
    CQ_RETRY_EXC = 2'd1,   // retry counter exhausted (timeouts / sequence NAKs)
    CQ_REM_ERR   = 2'd2,   // fatal NAK from the responder
    CQ_FLUSHED   = 2'd3    // flushed after the QP entered the error state
  } cq_status_e;

  typedef struct packed {
    logic [7:0] wr_id;
    cq_status_e status;
  } cqe_t;

  // Packet descriptor from the RoCEv2 engine to UDP/MAC: everything that goes into
  // BTH and RETH, plus payload byte count (payload words follow on the data stream).
  typedef struct packed {
    logic [7:0]  opcode;
    logic        ackreq;
    logic [23:0] dqpn;
    logic [23:0] psn;
    logic [15:0] pkey;
    logic        has_reth;
    logic [63:0] va;
    logic [31:0] rkey;
    logic [31:0] dmalen;
    logic [15:0] paylen;
  } pkt_desc_t;

  // Acknowledge seen on the receive side (BTH + AETH of an ACKNOWLEDGE packet).
  typedef struct packed {
    logic [23:0] dqpn;
    logic [23:0] psn;
    logic [7:0]  syndrome;
    logic [23:0] msn;
  } ack_t;

  // Plain (non-RoCEv2) UDP datagram header, for the pass-through channel of the UDP/MAC
  // layer: ip is the far end's address (receive side only), len the UDP payload in bytes.
  typedef struct packed {
    logic [31:0] ip;
    logic [15:0] sport;
    logic [15:0] dport;
    logic [15:0] len;
  } udp_dgram_t;

  // Network identity of this end point and of the target.
  typedef struct packed {
    logic [47:0] src_mac;
    logic [47:0] dst_mac;
    logic [31:0] src_ip;
    logic [31:0] dst_ip;
    logic [15:0] src_port;
  } net_cfg_t;

  // Queue-pair context written by the connection-management software (the remote QP
  // number and start PSN travel with the target, see target_t).
  typedef struct packed {
    logic [23:0] sqpn;        // our QP number (acks are addressed to it)
    logic [15:0] pkey;
    logic [2:0]  pmtu_log2;   // 0:256 1:512 2:1024 3:2048 4:4096 bytes
    logic [31:0] timeout;     // local ack timeout in clock cycles
    logic [2:0]  retry_max;   // transport retry count
  } qp_cfg_t;

  // Target of the RDMA writes, switched as a whole by the address FSM.
  typedef struct packed {
    logic [47:0] dst_mac;
    logic [31:0] dst_ip;
    logic [23:0] dqpn;
    logic [23:0] start_psn;
    logic [31:0] rkey;
    logic [63:0] base;        // remote virtual address of the receive ring
    logic [31:0] size;        // bytes in the remote ring
  } target_t;

  // ---------------------------------------------------------------- CRC-32
  // Reflected CRC-32 (polynomial 0x04C11DB7, LSB first), as used by the Ethernet FCS
  // and by the InfiniBand/RoCEv2 invariant CRC.
  function automatic logic [31:0] crc32_byte(input logic [31:0] crc, input logic [7:0] d);
    logic [31:0] c;
    c = crc ^ {24'h0, d};
    for (int i = 0; i < 8; i++)
      c = c[0] ? ((c >> 1) ^ 32'hEDB88320) : (c >> 1);
    return c;
  endfunction

  // CRC state after the 8 bytes of 0xFF that stand for the masked LRH in the RoCEv2 iCRC.
  function automatic logic [31:0] icrc_seed();
    logic [31:0] c;
    c = 32'hFFFF_FFFF;
    for (int i = 0; i < 8; i++) c = crc32_byte(c, 8'hFF);
    return c;
  endfunction

  // 24-bit PSN ordering: a is before-or-equal b (serial-number arithmetic).
  function automatic logic psn_le(input logic [23:0] a, input logic [23:0] b);
    logic [23:0] d;
    d = b - a;
    return ~d[23];
  endfunction

  function automatic int unsigned pmtu_bytes(input logic [2:0] l2);
    return 256 << l2;
  endfunction

endpackage
