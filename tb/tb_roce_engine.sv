// tb_roce_engine: self-checking test of the transmit-only RoCEv2 requester.
//
// A model memory feeds the engine; a sink with random back-pressure records every
// packet descriptor and its payload words. Acknowledgements are injected at the ack_t
// level. Checked: segmentation of a 968-byte write into FIRST/MIDDLE/MIDDLE/LAST at a
// 256-byte PMTU (opcodes, PSNs, RETH fields, AckReq, payload words); in-order completion
// on a coalesced ACK; go-back-N from a NAK (PSN sequence error) at a WR boundary and in
// the middle of a WR (payload restarts at the right offset); retransmission on ack
// timeout; error state after the retry count, with error and flush completions; recovery
// through qp_load with a new start PSN.
module tb_roce_engine;
  import be_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  qp_cfg_t     qp;
  target_t     tgt;
  logic        qp_load = 0;
  logic        s_wr_valid = 0, s_wr_ready;
  wr_t         s_wr;
  logic [9:0]  mem_rd_addr;
  logic [63:0] mem_rd_data;
  logic        desc_valid, desc_ready;
  pkt_desc_t   desc;
  logic [63:0] pl_tdata;
  logic        pl_tvalid, pl_tlast, pl_tready;
  logic        ack_valid = 0;
  ack_t        ack;
  logic        cqe_valid;
  cqe_t        cqe;
  logic        idle, ev_retx, ev_timeout, ev_nak, qp_error;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0t: %s", $time, msg); end
  endtask

  roce_engine #(.SQD(8), .MEM_AW(10)) dut (
    .clk, .rst_n, .qp, .tgt, .qp_load,
    .s_wr_valid, .s_wr_ready, .s_wr,
    .mem_rd_addr, .mem_rd_data,
    .desc_valid, .desc_ready, .desc,
    .pl_tdata, .pl_tvalid, .pl_tlast, .pl_tready,
    .ack_valid, .ack, .cqe_valid, .cqe,
    .idle, .ev_retx, .ev_timeout, .ev_nak, .qp_error
  );

  function automatic logic [63:0] mword(input int a);
    return {32'hA5A5_0000 | 32'(a), ~32'(a)};
  endfunction
  always_ff @(posedge clk) mem_rd_data <= mword(int'(mem_rd_addr));

  // ------------------------------------------------ sink
  pkt_desc_t descs[$];
  int        pstart[$];
  logic [63:0] words[$];
  int        bad_last = 0;
  always @(posedge clk) begin
    desc_ready <= ($urandom % 4) != 0;
    pl_tready  <= ($urandom % 5) != 0;
    if (rst_n) begin
      if (desc_valid && desc_ready) begin descs.push_back(desc); pstart.push_back(words.size()); end
      if (pl_tvalid && pl_tready) begin
        words.push_back(pl_tdata);
        if (pl_tlast != ((words.size() - pstart[$]) == int'(descs[$].paylen) / 8)) bad_last++;
      end
    end
  end

  cqe_t cqes[$];
  int   n_retx = 0, n_to = 0, n_nak = 0;
  always @(posedge clk) if (rst_n) begin
    if (cqe_valid) cqes.push_back(cqe);
    if (ev_retx) n_retx++;
    if (ev_timeout) n_to++;
    if (ev_nak) n_nak++;
  end

  task automatic post(input logic [7:0] id, input int laddr, input int len, input logic [63:0] ra);
    @(negedge clk);
    s_wr = '{wr_id: id, laddr: 32'(laddr), raddr: ra, rkey: 32'hBEEF0001, len: 32'(len)};
    s_wr_valid = 1;
    do @(posedge clk); while (!s_wr_ready);
    @(negedge clk); s_wr_valid = 0;
  endtask

  task automatic send_ack(input logic [23:0] psn, input logic [7:0] syn);
    @(negedge clk);
    ack = '{dqpn: 24'd1, psn: psn, syndrome: syn, msn: 24'd0};
    ack_valid = 1;
    @(negedge clk); ack_valid = 0;
  endtask

  task automatic wait_pkts(input int n);
    int t = 0;
    while (descs.size() < n && t < 20000) begin @(posedge clk); t++; end
    while (words.size() < pstart[n-1] + int'(descs[n-1].paylen) / 8 && t < 20000) begin @(posedge clk); t++; end
    check(descs.size() >= n, $sformatf("%0d packets sent (have %0d)", n, descs.size()));
  endtask

  task automatic check_pkt(input int i, input logic [7:0] op, input logic [23:0] psn,
                           input int laddr, input int off, input int plen,
                           input logic [63:0] va, input int dmalen);
    pkt_desc_t d;
    bit ok;
    if (i >= descs.size()) begin check(0, $sformatf("packet %0d missing", i)); return; end
    d = descs[i];
    check(d.opcode == op, $sformatf("pkt %0d opcode %02x exp %02x", i, d.opcode, op));
    check(d.psn == psn, $sformatf("pkt %0d psn %06x exp %06x", i, d.psn, psn));
    check(int'(d.paylen) == plen, $sformatf("pkt %0d paylen %0d exp %0d", i, d.paylen, plen));
    check(d.dqpn == 24'h77 && d.pkey == 16'hFFFF, "dqpn/pkey");
    check(d.ackreq == (op == OP_WRITE_LAST || op == OP_WRITE_ONLY), "AckReq on last packet only");
    check(d.has_reth == (op == OP_WRITE_FIRST || op == OP_WRITE_ONLY), "RETH on first packet only");
    if (d.has_reth) check(d.va == va && int'(d.dmalen) == dmalen && d.rkey == 32'hBEEF0001, "RETH fields");
    ok = 1;
    for (int w = 0; w < plen / 8; w++)
      if (pstart[i] + w >= words.size() || words[pstart[i] + w] != mword(laddr / 8 + off / 8 + w)) ok = 0;
    check(ok, $sformatf("pkt %0d payload", i));
  endtask

  initial begin
    qp  = '{sqpn: 24'd1, pkey: 16'hFFFF, pmtu_log2: 3'd0, timeout: 32'd600, retry_max: 3'd2};
    tgt = '{dst_mac: 48'h1, dst_ip: 32'h1, dqpn: 24'h77, start_psn: 24'h000100, rkey: 32'h0,
            base: 64'h0, size: 32'h0};
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk); qp_load = 1; @(negedge clk); qp_load = 0;

    // 1: segmentation
    post(8'd5, 0, 968, 64'h0000_1000);
    wait_pkts(4);
    check_pkt(0, OP_WRITE_FIRST,  24'h100, 0, 0,   256, 64'h1000, 968);
    check_pkt(1, OP_WRITE_MIDDLE, 24'h101, 0, 256, 256, 0, 0);
    check_pkt(2, OP_WRITE_MIDDLE, 24'h102, 0, 512, 256, 0, 0);
    check_pkt(3, OP_WRITE_LAST,   24'h103, 0, 768, 200, 0, 0);
    send_ack(24'h103, 8'h1F);
    repeat (5) @(posedge clk);
    check(cqes.size() == 1 && cqes[0].wr_id == 8'd5 && cqes[0].status == CQ_OK, "CQE for WR 5");

    // 2: NAK at a WR boundary
    post(8'd6, 1024, 64, 64'h2000);
    post(8'd7, 2048, 512, 64'h3000);
    wait_pkts(7);
    check_pkt(4, OP_WRITE_ONLY,  24'h104, 1024, 0, 64, 64'h2000, 64);
    check_pkt(5, OP_WRITE_FIRST, 24'h105, 2048, 0, 256, 64'h3000, 512);
    check_pkt(6, OP_WRITE_LAST,  24'h106, 2048, 256, 256, 0, 0);
    send_ack(24'h105, 8'h60);
    wait_pkts(9);
    check(cqes.size() == 2 && cqes[1].wr_id == 8'd6, "NAK completes the WR before the PSN");
    check_pkt(7, OP_WRITE_FIRST, 24'h105, 2048, 0, 256, 64'h3000, 512);
    check_pkt(8, OP_WRITE_LAST,  24'h106, 2048, 256, 256, 0, 0);
    send_ack(24'h106, 8'h00);
    repeat (5) @(posedge clk);
    check(cqes.size() == 3 && cqes[2].wr_id == 8'd7 && cqes[2].status == CQ_OK, "CQE for WR 7");

    // 3: NAK in the middle of a WR
    post(8'd8, 4096, 768, 64'h4000);
    wait_pkts(12);
    send_ack(24'h108, 8'h60);
    wait_pkts(14);
    check_pkt(12, OP_WRITE_MIDDLE, 24'h108, 4096, 256, 256, 0, 0);
    check_pkt(13, OP_WRITE_LAST,   24'h109, 4096, 512, 256, 0, 0);
    send_ack(24'h109, 8'h00);
    repeat (5) @(posedge clk);
    check(cqes.size() == 4 && cqes[3].wr_id == 8'd8, "CQE for WR 8");

    // 4: timeout
    post(8'd9, 0, 64, 64'h5000);
    wait_pkts(15);
    wait_pkts(16);
    check_pkt(15, OP_WRITE_ONLY, 24'h10A, 0, 0, 64, 64'h5000, 64);
    check(n_to == 1, "one ack timeout");
    send_ack(24'h10A, 8'h00);
    repeat (5) @(posedge clk);
    check(cqes.size() == 5 && cqes[4].status == CQ_OK, "CQE after timeout retransmission");

    // 5: retry exhaustion -> error, flush
    post(8'd10, 0, 64, 64'h6000);
    post(8'd11, 0, 64, 64'h7000);
    repeat (3000) @(posedge clk);
    check(qp_error, "QP in error state");
    check(cqes.size() == 7 && cqes[5].wr_id == 8'd10 && cqes[5].status == CQ_RETRY_EXC &&
          cqes[6].wr_id == 8'd11 && cqes[6].status == CQ_FLUSHED, "error and flush completions");
    check(idle, "engine idle after flush");

    // 6: recovery with a new start PSN
    tgt.start_psn = 24'hFFFFFE;
    @(negedge clk); qp_load = 1; @(negedge clk); qp_load = 0;
    check(!qp_error, "error cleared by qp_load");
    post(8'd12, 0, 768, 64'h8000);
    wait_pkts(descs.size() + 3);
    check_pkt(descs.size() - 3, OP_WRITE_FIRST, 24'hFFFFFE, 0, 0, 256, 64'h8000, 768);
    check_pkt(descs.size() - 1, OP_WRITE_LAST, 24'h000000, 0, 512, 256, 0, 0);
    send_ack(24'h000000, 8'h00);
    repeat (5) @(posedge clk);
    check(cqes.size() == 8 && cqes[7].wr_id == 8'd12 && cqes[7].status == CQ_OK, "CQE across PSN wrap");
    check(bad_last == 0, "tlast on the last payload word of every packet");
    check(n_retx >= 5 && n_nak == 2, $sformatf("retransmissions %0d, NAKs %0d", n_retx, n_nak));

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
