// tb_circ_buffer: self-checking test of the circular buffer and its triggered readout.
//
// Lane word l at word count t carries {l, 24'hC0FFEE, t}, so every word read out tells
// where it came from. Triggers carry the current word count as timestamp and a random
// lane mask. A random-ready sink parses each event (header + WINDOW rows x 12 lanes)
// and checks the header fields, the event number sequence, that row r of the event
// holds word count ts-PRE+r on every lane in lane order, and tlast on the final word.
// Phase 1: spaced triggers with a randomly stalling sink, all delivered. Phase 2: the
// sink holds ready low for a long time while a burst of triggers arrives: the FIFO
// overflows (drops counted) and the oldest queued windows age out (stale counted);
// every trigger must end up delivered, dropped or stale, exactly once.
// Runs with a 256-row buffer so that ageing out takes a few hundred clocks.
module tb_circ_buffer;
  import be_pkg::*;

  localparam int DEPTH = 256, WINDOW = 10, PRE = 3;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic                         lane_valid = 0;
  logic [LANES-1:0][LANE_W-1:0] lane_data;
  logic                         trig_valid = 0;
  logic [TS_W-1:0]              trig_ts;
  logic [LANES-1:0]             trig_mask;
  logic [63:0]                  m_tdata;
  logic                         m_tvalid, m_tlast;
  logic                         m_tready = 0;
  logic                         trig_dropped, trig_stale, evt_sent;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0t: %s", $time, msg); end
  endtask

  circ_buffer #(.N_LANES(LANES), .DEPTH(DEPTH), .WINDOW(WINDOW), .PRE(PRE), .TFIFO(4)) dut (
    .clk, .rst_n, .lane_valid, .lane_data, .trig_valid, .trig_ts, .trig_mask,
    .m_tdata, .m_tvalid, .m_tlast, .m_tready, .trig_dropped, .trig_stale, .evt_sent
  );

  // ------------------------------------------------ lane source
  int unsigned wc = 0;       // word count of the next lane word
  always @(negedge clk) if (rst_n) begin
    lane_valid = ($urandom % 8) != 0;
    for (int l = 0; l < LANES; l++) lane_data[l] = {8'(l), 24'hC0FFEE, 32'(wc)};
  end
  always @(posedge clk) if (rst_n && lane_valid) wc++;

  // ------------------------------------------------ sink
  bit          sink_random = 1;
  bit          sink_hold   = 0;
  int          widx = 0, n_ev = 0, n_drop = 0, n_stale = 0, n_sent = 0;
  logic [31:0] ev_ts;
  logic [LANES-1:0] mask_of [int unsigned];
  int unsigned got_ts[$];
  int          bad_data = 0, bad_last = 0, bad_hdr = 0;

  always @(negedge clk) m_tready = !sink_hold && (!sink_random || ($urandom % 4) != 0);

  always @(posedge clk) if (rst_n) begin
    if (trig_dropped) n_drop++;
    if (trig_stale)   n_stale++;
    if (evt_sent)     n_sent++;
    if (m_tvalid && m_tready) begin
      if (widx == 0) begin
        ev_ts = m_tdata[31:0];
        got_ts.push_back(ev_ts);
        if (m_tdata[63:48] != 16'(n_ev)) bad_hdr++;
        if (!mask_of.exists(ev_ts) || m_tdata[47:32] != 16'(mask_of[ev_ts])) bad_hdr++;
        if (m_tlast) bad_last++;
      end else begin
        int r, l;
        r = (widx - 1) / LANES;
        l = (widx - 1) % LANES;
        if (m_tdata != {8'(l), 24'hC0FFEE, 32'(ev_ts - PRE + r)}) begin
          bad_data++;
          if (bad_data < 4) $display("  data ev %0d row %0d lane %0d: %016x", n_ev, r, l, m_tdata);
        end
        if (m_tlast != (widx == WINDOW * LANES)) bad_last++;
      end
      widx++;
      if (m_tlast) begin widx = 0; n_ev++; end
    end
  end

  int n_trig = 0;
  int unsigned last_ts;
  task automatic fire();
    logic [LANES-1:0] m;
    m = LANES'($urandom) | 1;
    @(negedge clk);
    trig_ts = wc; trig_mask = m; mask_of[wc] = m; last_ts = wc;
    trig_valid = 1;
    @(negedge clk); trig_valid = 0;
    n_trig++;
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (20) @(posedge clk);

    // phase 1
    for (int i = 0; i < 12; i++) begin
      fire();
      repeat (250 + $urandom % 100) @(posedge clk);
    end
    check(n_ev == 12 && got_ts.size() == 12, $sformatf("phase 1: 12 events delivered (%0d)", n_ev));
    check(n_drop == 0 && n_stale == 0, "phase 1: no drop, no stale");

    // phase 2
    sink_random = 0;
    sink_hold   = 1;
    for (int i = 0; i < 8; i++) begin
      fire();
      repeat (3) @(posedge clk);
    end
    repeat (400) @(posedge clk);
    sink_hold = 0;
    repeat (2000) @(posedge clk);
    fire();                                  // fresh trigger after recovery
    repeat (400) @(posedge clk);

    check(n_drop > 0, $sformatf("FIFO overflow drops seen (%0d)", n_drop));
    check(n_stale > 0, $sformatf("aged-out windows seen (%0d)", n_stale));
    check(n_ev + n_drop + n_stale == n_trig,
          $sformatf("every trigger accounted: %0d sent + %0d dropped + %0d stale = %0d", n_ev, n_drop, n_stale, n_trig));
    check(n_sent == n_ev, "evt_sent count matches events received");
    check(got_ts.size() > 0 && got_ts[$] == last_ts, "trigger after recovery delivered");
    for (int i = 1; i < got_ts.size(); i++)
      check(got_ts[i] > got_ts[i-1], $sformatf("events in trigger order (%0d)", i));
    check(bad_data == 0, $sformatf("window data (%0d bad words)", bad_data));
    check(bad_hdr == 0, "header event number and lane mask");
    check(bad_last == 0, "tlast on the last word only");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
