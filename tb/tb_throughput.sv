// tb_throughput: event throughput of the whole back-end against the PMTU, at default
// parameters (no parameter overrides on be_top).
//
// The lanes carry a pulse every 20 sample groups (60 words), more triggers than one
// 10 Gb/s line can ship, so the output side runs saturated and the surplus triggers are
// dropped at the trigger FIFO. A target model on the XGMII pins checks FCS, iCRC and
// the PSN sequence of every frame and acknowledges each AckReq packet at once. For each
// PMTU of 256, 512, 1024, 2048 and 4096 bytes (set through QPCTL while the engine is
// idle), it measures over 20,000 clocks, after a warm-up, the share of the 64-bit XGMII
// bandwidth that carries event payload. That share is compared with the bound set by the
// wire format for one 968-byte event per write:
//     share = 968 / (968 + 82 * packets + 16),  packets = ceil(968 / PMTU),
// where 82 bytes = preamble 8 + Ethernet 14 + IPv4 20 + UDP 8 + BTH 12 + iCRC 4 + FCS 4 +
// gap 12, and 16 bytes is the RETH of the first packet. The measured share must be at
// least 95 % of that bound and may not exceed it. With a 156.25 MHz XGMII clock the
// share times 10 Gb/s is the goodput on a 10 Gb/s line.
module tb_throughput;
  import be_pkg::*;
  import tb_pkg::*;

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
  logic        utx_desc_ready, utx_tready, urx_tvalid, urx_tlast;
  udp_dgram_t  urx_hdr;
  logic [63:0] urx_tdata;
  logic [7:0]  urx_tkeep;

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
    .utx_desc_valid(1'b0), .utx_desc_ready, .utx_desc('0), .utx_tdata('0), .utx_tvalid(1'b0),
    .utx_tlast(1'b0), .utx_tready, .urx_tdata, .urx_tkeep, .urx_tvalid, .urx_tlast,
    .urx_tready(1'b1), .urx_hdr,
    .xgmii_txd, .xgmii_txc, .xgmii_rxd, .xgmii_rxc, .qp_error
  );

  localparam logic [47:0] MY_MAC = 48'h02_00_00_00_00_01, T_MAC = 48'hB8_CE_F6_00_00_0A;
  localparam logic [31:0] MY_IP  = 32'hC0A8_0102,         T_IP  = 32'hC0A8_0101;

  // ------------------------------------------------------------ lane source
  bit pulses_on = 0;
  int wc = 0;
  logic [LANES-1:0][191:0] grp;
  always @(negedge clk) if (rst_n) begin
    if (wc % 3 == 0) begin
      int g;
      g = wc / 3;
      for (int l = 0; l < LANES; l++)
        for (int k = 0; k < 16; k++)
          grp[l][12*k +: 12] = (pulses_on && g % 20 == 0 && k >= 4 && k < 12) ? 12'd900
                                                                               : 12'(50 + (k * 7 + l) % 60);
    end
    lane_valid = 1'b1;
    for (int l = 0; l < LANES; l++) lane_data[l] = grp[l][64 * (wc % 3) +: 64];
  end
  always @(posedge clk) if (rst_n && lane_valid) wc++;

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

  // ------------------------------------------------------------ ACK injection
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
        repeat (20) @(negedge clk);
      end
    end
  end

  // ------------------------------------------------------------ target model
  logic [23:0] epsn = 24'h000100;
  int  bad_frames = 0, bad_psn = 0;
  bit  measuring = 0;
  longint pay_bytes = 0;

  function automatic void respond(input bq_t f);
    logic [7:0]  op;
    logic [23:0] psn;
    int          hl;
    if (f.size() < 62 || le32(f, f.size() - 4) != ref_fcs(f, f.size() - 4) ||
        le32(f, f.size() - 8) != ref_icrc(f)) begin
      bad_frames++; return;
    end
    op  = f[42];
    psn = {f[51], f[52], f[53]};
    hl  = (op == OP_WRITE_FIRST || op == OP_WRITE_ONLY) ? 70 : 54;
    if (psn != epsn) bad_psn++;
    epsn = psn + 1;
    if (measuring) pay_bytes += f.size() - 8 - hl;
    if (f[50][7]) rxq.push_back(build_ack(MY_MAC, T_MAC, MY_IP, T_IP, 24'h1, psn, 8'h1F, 24'h0));
  endfunction

  bq_t cap;
  bit  in_frame = 0;
  always @(posedge clk) if (rst_n) begin
    if (!in_frame) begin
      if (xgmii_txc == 8'h01 && xgmii_txd == 64'hD5555555_555555FB) begin in_frame = 1; cap = {}; end
    end else
      for (int b = 0; b < 8; b++)
        if (in_frame) begin
          if (xgmii_txc[b]) begin
            if (xgmii_txd[8*b +: 8] == 8'hFD) begin respond(cap); in_frame = 0; end
          end else cap.push_back(xgmii_txd[8*b +: 8]);
        end
  end

  // ------------------------------------------------------------ sequence
  localparam int MEAS = 20000;

  initial begin
    logic [31:0] d;
    real share, bound;
    int  pkts;
    repeat (5) @(posedge clk);
    rst_n = 1;
    axi_wr(8'h0C, 32'h1);
    axi_wr(8'h14, 32'd20000);
    axi_wr(8'h18, MY_MAC[31:0]); axi_wr(8'h1C, 32'(MY_MAC[47:32]));
    axi_wr(8'h20, MY_IP);        axi_wr(8'h24, 32'hC0DE);
    axi_wr(8'h28, T_MAC[31:0]);  axi_wr(8'h2C, 32'(T_MAC[47:32]));
    axi_wr(8'h30, T_IP);         axi_wr(8'h34, 32'h11);
    axi_wr(8'h38, 32'h100);      axi_wr(8'h3C, 32'hAAAA0001);
    axi_wr(8'h40, 32'h1000_0000); axi_wr(8'h44, 32'h7F00);
    axi_wr(8'h48, 32'h0010_0000);
    axi_wr(8'h00, 32'h1);

    for (int l2 = 0; l2 <= 4; l2++) begin
      axi_wr(8'h10, {9'h0, 3'd7, 1'b0, 3'(l2), 16'hFFFF});
      pulses_on = 1;
      repeat (3000) @(posedge clk);
      measuring = 1; pay_bytes = 0;
      repeat (MEAS) @(posedge clk);
      measuring = 0;
      pulses_on = 0;
      // drain before the PMTU changes
      do begin repeat (500) @(posedge clk); axi_rd(8'h7C, d); end while (!d[0]);
      repeat (200) @(posedge clk);

      pkts  = (968 + (256 << l2) - 1) / (256 << l2);
      bound = 968.0 / (968.0 + 82.0 * pkts + 16.0);
      share = real'(pay_bytes) / (8.0 * MEAS);
      $display("PMTU %4d: %0d packet(s) per event, payload share of XGMII %.3f (bound %.3f) = %.2f Gb/s on a 10 Gb/s line",
               256 << l2, pkts, share, bound, share * 10.0);
      check(share >= 0.95 * bound, $sformatf("PMTU %0d: throughput within 5 %% of the wire-format bound", 256 << l2));
      check(share <= bound + 0.005, $sformatf("PMTU %0d: throughput not above the bound", 256 << l2));
    end
    check(bad_frames == 0, "FCS and iCRC of every frame");
    check(bad_psn == 0, "PSNs consecutive, no retransmission needed");
    check(!qp_error, "no QP error");
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
