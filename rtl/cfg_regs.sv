// cfg_regs: AXI4-Lite register file for the Back-End firmware.
//
// In the paper, connection management (protection domain, queue pair, keys) runs in
// software that reaches the firmware through the reliable register access of the
// SURF/ROGUE framework; only time-critical address handling is in hardware. This block is
// the register file such software writes: trigger threshold and channel enables, the
// queue-pair context, this end point's MAC/IP/UDP port, and a staged target (MAC, IP,
// remote QPN, start PSN, rkey, remote ring base and size) that the address FSM loads when
// bit 0 of CTRL is written (apply). It also counts status events. The register map and
// reset values are this design's own.
//
//   0x00 CTRL      W: bit0 apply                0x04 THRESH    [11:0]
//   0x08 CH_EN     [11:0]                        0x0C SQPN      [23:0]
//   0x10 QPCTL     [15:0] pkey, [18:16] log2(PMTU/256), [22:20] retry count
//   0x14 TIMEOUT   ack timeout, clock cycles     0x18/0x1C SRC_MAC low 32 / high 16
//   0x20 SRC_IP    0x24 SRC_PORT                  0x28/0x2C DST_MAC low / high
//   0x30 DST_IP    0x34 DQPN    0x38 START_PSN    0x3C RKEY
//   0x40/0x44 BASE low / high   0x48 SIZE         0x7C STATUS (RO) [0] idle [1] QP error
//   0x80 + 4*i     event counter i (RO), i < NSTAT
//
// Timing: a write takes effect the clock after AW and W are both valid; read data are
// returned one clock after AR.
module cfg_regs
  import be_pkg::*;
#(
  parameter int unsigned NSTAT = 12
) (
  input  logic              clk,
  input  logic              rst_n,
  // AXI4-Lite slave
  input  logic [7:0]        s_awaddr,
  input  logic              s_awvalid,
  output logic              s_awready,
  input  logic [31:0]       s_wdata,
  input  logic              s_wvalid,
  output logic              s_wready,
  output logic [1:0]        s_bresp,
  output logic              s_bvalid,
  input  logic              s_bready,
  input  logic [7:0]        s_araddr,
  input  logic              s_arvalid,
  output logic              s_arready,
  output logic [31:0]       s_rdata,
  output logic [1:0]        s_rresp,
  output logic              s_rvalid,
  input  logic              s_rready,
  // configuration
  output logic [SAMPLE_W-1:0] threshold,
  output logic [LANES-1:0]  ch_enable,
  output qp_cfg_t           qp,
  output net_cfg_t          net_src,
  output target_t           staged,
  output logic              apply,
  // status
  input  logic [NSTAT-1:0]  stat_inc,
  input  logic              st_idle,
  input  logic              st_qp_error
);
  localparam int unsigned SW = (NSTAT > 1) ? $clog2(NSTAT) : 1;   // counter index width
  logic [31:0] cnt [NSTAT];

  wire wr_fire = s_awvalid && s_wvalid && !s_bvalid;
  assign s_awready = wr_fire;
  assign s_wready  = wr_fire;
  assign s_bresp   = 2'b00;
  assign s_rresp   = 2'b00;
  assign s_arready = !s_rvalid;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      threshold <= 12'd256;
      ch_enable <= '1;
      qp        <= '{sqpn: 24'd1, pkey: DEFAULT_PKEY, pmtu_log2: 3'd4,
                     timeout: 32'd65536, retry_max: 3'd7};
      net_src   <= '0;
      staged    <= '0;
      apply     <= 1'b0;
      s_bvalid  <= 1'b0;
      s_rvalid  <= 1'b0;
      s_rdata   <= '0;
      for (int i = 0; i < NSTAT; i++) cnt[i] <= '0;
    end else begin
      apply <= 1'b0;
      for (int i = 0; i < NSTAT; i++) if (stat_inc[i]) cnt[i] <= cnt[i] + 1'b1;

      if (s_bvalid && s_bready) s_bvalid <= 1'b0;
      if (wr_fire) begin
        s_bvalid <= 1'b1;
        unique case (s_awaddr)
          8'h00: apply                  <= s_wdata[0];
          8'h04: threshold              <= s_wdata[SAMPLE_W-1:0];
          8'h08: ch_enable              <= s_wdata[LANES-1:0];
          8'h0C: qp.sqpn                <= s_wdata[23:0];
          8'h10: begin
            qp.pkey      <= s_wdata[15:0];
            qp.pmtu_log2 <= s_wdata[18:16];
            qp.retry_max <= s_wdata[22:20];
          end
          8'h14: qp.timeout             <= s_wdata;
          8'h18: net_src.src_mac[31:0]  <= s_wdata;
          8'h1C: net_src.src_mac[47:32] <= s_wdata[15:0];
          8'h20: net_src.src_ip         <= s_wdata;
          8'h24: net_src.src_port       <= s_wdata[15:0];
          8'h28: staged.dst_mac[31:0]   <= s_wdata;
          8'h2C: staged.dst_mac[47:32]  <= s_wdata[15:0];
          8'h30: staged.dst_ip          <= s_wdata;
          8'h34: staged.dqpn            <= s_wdata[23:0];
          8'h38: staged.start_psn       <= s_wdata[23:0];
          8'h3C: staged.rkey            <= s_wdata;
          8'h40: staged.base[31:0]      <= s_wdata;
          8'h44: staged.base[63:32]     <= s_wdata;
          8'h48: staged.size            <= s_wdata;
          default: ;
        endcase
      end

      if (s_rvalid && s_rready) s_rvalid <= 1'b0;
      if (s_arvalid && s_arready) begin
        s_rvalid <= 1'b1;
        unique casez (s_araddr)
          8'h04: s_rdata <= 32'(threshold);
          8'h08: s_rdata <= 32'(ch_enable);
          8'h0C: s_rdata <= 32'(qp.sqpn);
          8'h10: s_rdata <= {9'h0, qp.retry_max, 1'b0, qp.pmtu_log2, qp.pkey};
          8'h14: s_rdata <= qp.timeout;
          8'h18: s_rdata <= net_src.src_mac[31:0];
          8'h1C: s_rdata <= 32'(net_src.src_mac[47:32]);
          8'h20: s_rdata <= net_src.src_ip;
          8'h24: s_rdata <= 32'(net_src.src_port);
          8'h28: s_rdata <= staged.dst_mac[31:0];
          8'h2C: s_rdata <= 32'(staged.dst_mac[47:32]);
          8'h30: s_rdata <= staged.dst_ip;
          8'h34: s_rdata <= 32'(staged.dqpn);
          8'h38: s_rdata <= 32'(staged.start_psn);
          8'h3C: s_rdata <= staged.rkey;
          8'h40: s_rdata <= staged.base[31:0];
          8'h44: s_rdata <= staged.base[63:32];
          8'h48: s_rdata <= staged.size;
          8'h7C: s_rdata <= {30'h0, st_qp_error, st_idle};
          8'b1???_??00: s_rdata <= (32'(s_araddr[6:2]) < NSTAT) ? cnt[SW'(s_araddr[6:2] % 5'(NSTAT))] : 32'h0;
          default: s_rdata <= 32'h0;
        endcase
      end
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) s_bvalid && !s_bready |=> s_bvalid);
  assert property (@(posedge clk) disable iff (!rst_n) s_rvalid && !s_rready |=> s_rvalid && $stable(s_rdata));

endmodule
