// udp_mac: the UDP/IP and Ethernet MAC layer between the RoCEv2 engine and the 10GbE
// PCS/PMA (the "UDP/MAC" box of the firmware block diagram).
//
// Transmit: packet descriptors plus payload from the engine become complete RoCEv2
// frames with iCRC and FCS on the XGMII transmit bus (udp_mac_tx). Receive: XGMII
// frames are checked (FCS, iCRC, addresses, UDP port 4791) and RoCEv2 acknowledgements
// are handed to the engine (udp_mac_rx). Plain UDP datagrams on other ports pass both
// ways through the utx_*/urx_* streams without BTH or iCRC, so the layer still serves
// other users when no RoCEv2 packets flow. The paper builds this layer from the SURF
// library's UDP and MAC modules, modified for iCRC insertion and validation; this is a
// compact rewrite with that function, not SURF itself (no ARP, and no RUDP or register
// transport on top of the plain UDP channel). See the two sub-modules for framing details and timing.
module udp_mac
  import be_pkg::*;
#(
  parameter int unsigned FIFO_WORDS = 1024,
  parameter int unsigned RX_MAXB    = 128
) (
  input  logic        clk,
  input  logic        rst_n,
  input  net_cfg_t    net,
  input  logic        desc_valid,
  output logic        desc_ready,
  input  pkt_desc_t   desc,
  input  logic [63:0] pl_tdata,
  input  logic        pl_tvalid,
  input  logic        pl_tlast,
  output logic        pl_tready,
  output logic [63:0] xgmii_txd,
  output logic [7:0]  xgmii_txc,
  input  logic [63:0] xgmii_rxd,
  input  logic [7:0]  xgmii_rxc,
  output logic        ack_valid,
  output ack_t        ack,
  output logic        frame_sent,
  output logic        rx_crc_err,
  output logic        rx_dropped,
  // plain UDP datagrams, transmit and receive
  input  logic        utx_desc_valid,
  output logic        utx_desc_ready,
  input  udp_dgram_t  utx_desc,
  input  logic [63:0] utx_tdata,
  input  logic        utx_tvalid,
  input  logic        utx_tlast,
  output logic        utx_tready,
  output logic [63:0] urx_tdata,
  output logic [7:0]  urx_tkeep,
  output logic        urx_tvalid,
  output logic        urx_tlast,
  input  logic        urx_tready,
  output udp_dgram_t  urx_hdr
);
  udp_mac_tx #(.FIFO_WORDS(FIFO_WORDS)) u_tx (
    .clk, .rst_n, .net,
    .desc_valid, .desc_ready, .desc,
    .pl_tdata, .pl_tvalid, .pl_tlast, .pl_tready,
    .u_desc_valid(utx_desc_valid), .u_desc_ready(utx_desc_ready), .u_desc(utx_desc),
    .u_tdata(utx_tdata), .u_tvalid(utx_tvalid), .u_tlast(utx_tlast), .u_tready(utx_tready),
    .xgmii_txd, .xgmii_txc, .frame_sent
  );

  udp_mac_rx #(.MAXB(RX_MAXB)) u_rx (
    .clk, .rst_n, .net,
    .xgmii_rxd, .xgmii_rxc,
    .ack_valid, .ack,
    .crc_err(rx_crc_err), .dropped(rx_dropped),
    .u_tdata(urx_tdata), .u_tkeep(urx_tkeep), .u_tvalid(urx_tvalid), .u_tlast(urx_tlast),
    .u_tready(urx_tready), .u_hdr(urx_hdr)
  );
endmodule
