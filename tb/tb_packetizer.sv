// tb_packetizer: self-checking test of the event-to-work-request packetizer.
//
// Sends 40 events of random length (2..128 words, random valid gaps) and records every
// event-memory write into a model memory. Each posted work request (accepted with a
// random-ready handshake) must carry the next wr_id, the byte address of the next slot
// in order, and the event length in bytes; the model memory at that slot must hold the
// event words. Completions are returned in posting order after a random delay; while
// none are returned the packetizer must fill all 8 slots, then raise `stalled` and
// hold s_tready low at the next event start. One completion carries an error status
// and must pulse cq_error.
module tb_packetizer;
  import be_pkg::*;

  localparam int SLOTS = 8, SLOT_WORDS = 128, AW = 10;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [63:0]   s_tdata;
  logic          s_tvalid = 0, s_tlast = 0, s_tready;
  logic          mem_wr_en;
  logic [AW-1:0] mem_wr_addr;
  logic [63:0]   mem_wr_data;
  logic          wr_valid, wr_ready = 0;
  wr_t           wr;
  logic          cqe_valid = 0;
  cqe_t          cqe;
  logic          stalled, cq_error;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0t: %s", $time, msg); end
  endtask

  packetizer #(.SLOTS(SLOTS), .SLOT_WORDS(SLOT_WORDS)) dut (
    .clk, .rst_n, .s_tdata, .s_tvalid, .s_tlast, .s_tready,
    .mem_wr_en, .mem_wr_addr, .mem_wr_data,
    .wr_valid, .wr_ready, .wr, .cqe_valid, .cqe, .stalled, .cq_error
  );

  logic [63:0] model [1 << AW];
  always @(posedge clk) if (mem_wr_en) model[mem_wr_addr] <= mem_wr_data;

  // ------------------------------------------------ expected events
  typedef logic [63:0] wq_t[$];
  wq_t   sent[$];
  wr_t   posted[$];
  int    n_post = 0, bad_wr = 0, bad_mem = 0, n_stall = 0, n_cqerr = 0;

  always @(negedge clk) wr_ready = ($urandom % 3) != 0;

  always @(posedge clk) if (rst_n) begin
    if (stalled) n_stall++;
    if (cq_error) n_cqerr++;
    if (wr_valid && wr_ready) begin
      wq_t ev;
      ev = sent[n_post];
      if (wr.wr_id != 8'(n_post) || wr.laddr != 32'((n_post % SLOTS) * SLOT_WORDS * 8) ||
          wr.len != 32'(ev.size() * 8)) begin
        bad_wr++;
        $display("  wr %0d: id %0d laddr %0h len %0d", n_post, wr.wr_id, wr.laddr, wr.len);
      end
      for (int i = 0; i < ev.size(); i++)
        if (model[(n_post % SLOTS) * SLOT_WORDS + i] != ev[i]) bad_mem++;
      posted.push_back(wr);
      n_post++;
    end
  end

  task automatic send_event(input int n);
    wq_t ev;
    for (int i = 0; i < n; i++) ev.push_back({$urandom, $urandom});
    sent.push_back(ev);
    for (int i = 0; i < n; i++) begin
      @(negedge clk);
      while (($urandom % 5) == 0) begin s_tvalid = 0; @(negedge clk); end
      s_tdata = ev[i]; s_tvalid = 1; s_tlast = (i == n - 1);
      do @(posedge clk); while (!s_tready);
    end
    @(negedge clk); s_tvalid = 0; s_tlast = 0;
  endtask

  int n_cqe = 0;
  task automatic complete(input cq_status_e st);
    @(negedge clk);
    cqe = '{wr_id: posted[n_cqe].wr_id, status: st};
    cqe_valid = 1;
    @(negedge clk); cqe_valid = 0;
    n_cqe++;
  endtask

  initial begin
    int stall_seen_ready;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // fill all slots without completions
    for (int e = 0; e < SLOTS; e++) send_event(2 + $urandom % (SLOT_WORDS - 1));
    repeat (20) @(posedge clk);
    check(n_post == SLOTS, $sformatf("%0d work requests posted", n_post));

    // ninth event must wait
    fork
      send_event(SLOT_WORDS);
      begin
        repeat (50) @(posedge clk);
        check(n_stall > 0 && stalled, "stalled while all slots are in flight");
        check(!s_tready, "s_tready low while stalled");
        check(n_post == SLOTS, "no work request while stalled");
        complete(CQ_OK);
      end
    join
    repeat (20) @(posedge clk);
    check(n_post == SLOTS + 1, "event sent after one completion");

    // stream with completions interleaved, one error completion
    fork
      for (int e = 0; e < 31; e++) send_event(2 + $urandom % (SLOT_WORDS - 1));
      while (n_cqe < SLOTS + 32) begin
        if (n_cqe < n_post) begin
          repeat ($urandom % 40) @(posedge clk);
          complete(n_cqe == 20 ? CQ_RETRY_EXC : CQ_OK);
        end else @(posedge clk);
      end
    join
    repeat (20) @(posedge clk);
    check(n_post == 40, $sformatf("all 40 events posted (%0d)", n_post));
    check(bad_wr == 0, "work request id, slot address and length");
    check(bad_mem == 0, $sformatf("slot contents (%0d bad words)", bad_mem));
    check(n_cqerr == 1, "error completion reported once");
    check(!stalled && s_tready, "idle and ready at the end");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
