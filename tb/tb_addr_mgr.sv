// tb_addr_mgr: self-checking test of the remote-address / target-switch FSM.
//
// Before any apply, work requests must be held. After apply the FSM must wait for the
// engine to be idle, load the staged target and pulse qp_load once. A stream of work
// requests of random length (random valid and ready) must then get consecutive ring
// addresses base+offset with the target's rkey, wrapping to the base (with a `wrapped`
// pulse) when the next write would not fit; the expected address is computed here from
// the lengths. A second apply, issued while requests are flowing and while the engine
// reports busy, must switch to the new target only after idle, and the ring restarts at
// the new base. Other work-request fields must pass unchanged.
module tb_addr_mgr;
  import be_pkg::*;

  logic    clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  target_t staged;
  logic    apply = 0, engine_idle = 0;
  logic    s_valid = 0, s_ready;
  wr_t     s_wr;
  logic    m_valid, m_ready = 0;
  wr_t     m_wr;
  target_t active;
  logic    qp_load, wrapped;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0t: %s", $time, msg); end
  endtask

  addr_mgr dut (
    .clk, .rst_n, .staged, .apply, .engine_idle,
    .s_valid, .s_ready, .s_wr, .m_valid, .m_ready, .m_wr,
    .active, .qp_load, .wrapped
  );

  target_t tgt_a, tgt_b, cur_t;
  int unsigned offs = 0;
  int n_taken = 0, n_load = 0, n_wrap = 0, exp_wrap = 0, bad = 0;
  bit busy_hold = 0;

  always @(negedge clk) begin
    m_ready     = ($urandom % 3) != 0;
    engine_idle = !busy_hold && (($urandom % 4) != 0);
  end

  always @(posedge clk) if (rst_n) begin
    if (qp_load) n_load++;
    if (wrapped) n_wrap++;
    if (m_valid && m_ready) begin
      int unsigned use_off;
      use_off = (offs + s_wr.len <= cur_t.size) ? offs : 0;
      if (use_off != offs) exp_wrap++;
      if (m_wr.raddr != cur_t.base + 64'(use_off) || m_wr.rkey != cur_t.rkey ||
          m_wr.wr_id != s_wr.wr_id || m_wr.laddr != s_wr.laddr || m_wr.len != s_wr.len) begin
        bad++;
        $display("  wr %0d raddr %0h exp %0h", n_taken, m_wr.raddr, cur_t.base + 64'(use_off));
      end
      offs = use_off + s_wr.len;
      n_taken++;
    end
  end

  task automatic post(input int id);
    @(negedge clk);
    s_wr = '{wr_id: 8'(id), laddr: 32'(id * 1024), raddr: '0, rkey: '0,
             len: 32'(8 * (1 + $urandom % 128))};
    s_valid = 1;
    do @(posedge clk); while (!(s_valid && s_ready));
    @(negedge clk); s_valid = 0;
    repeat ($urandom % 3) @(negedge clk);
  endtask

  task automatic do_apply(input target_t t);
    @(negedge clk);
    staged = t; apply = 1;
    @(negedge clk); apply = 0;
  endtask

  initial begin
    tgt_a = '{dst_mac: 48'hAA, dst_ip: 32'h0A000001, dqpn: 24'h11, start_psn: 24'h100,
              rkey: 32'hAAAA0001, base: 64'h0000_7000_0001_0000, size: 32'd4096};
    tgt_b = '{dst_mac: 48'hBB, dst_ip: 32'h0A000002, dqpn: 24'h22, start_psn: 24'h200,
              rkey: 32'hBBBB0002, base: 64'h0000_7000_0200_0000, size: 32'd3000};
    staged = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // held before the first apply
    @(negedge clk);
    s_wr = '{wr_id: 8'd0, laddr: 32'd0, raddr: '0, rkey: '0, len: 32'd512};
    s_valid = 1;
    repeat (20) @(posedge clk);
    check(!m_valid && !s_ready, "work request held before any target is applied");
    @(negedge clk); s_valid = 0;

    busy_hold = 1;
    do_apply(tgt_a);
    repeat (20) @(posedge clk);
    check(n_load == 0, "no switch while the engine is busy");
    busy_hold = 0;
    repeat (20) @(posedge clk);
    check(n_load == 1 && active == tgt_a, "target A loaded with one qp_load pulse");
    cur_t = tgt_a; offs = 0;

    for (int i = 0; i < 40; i++) post(i);
    repeat (5) @(posedge clk);
    check(n_taken == 40, "40 work requests passed");
    check(exp_wrap > 0 && n_wrap == exp_wrap, $sformatf("ring wraps %0d exp %0d", n_wrap, exp_wrap));

    // switch while traffic flows and the engine is busy
    busy_hold = 1;
    fork
      for (int i = 40; i < 60; i++) post(i);
      begin
        repeat (30) @(posedge clk);
        do_apply(tgt_b);
        repeat (40) @(posedge clk);
        check(n_load == 1 && active == tgt_a, "switch deferred while busy");
        @(negedge clk);
        // everything accepted so far used target A; the rest must use B
        cur_t = tgt_b; offs = 0;
        busy_hold = 0;
      end
    join
    repeat (5) @(posedge clk);
    check(n_load == 2 && active == tgt_b, "target B loaded");
    check(n_taken == 60, "all 60 work requests passed");
    check(bad == 0, $sformatf("remote address, rkey and pass-through fields (%0d bad)", bad));
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
