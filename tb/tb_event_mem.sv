// tb_event_mem: self-checking test of the event memory.
//
// Random writes and reads (4000 clocks) against a model array; every read returns, one
// clock after its address, the content before any write to the same address in the same
// clock (read-before-write). Also checks that holding the read address holds the data
// while other addresses are written, which the engine relies on when its payload
// stream stalls. Finally every word is read once in a scrambled order.
module tb_event_mem;
  localparam int WORDS = 1024, AW = 10;

  logic clk = 0;
  always #5 clk = ~clk;

  logic          wr_en = 0;
  logic [AW-1:0] wr_addr, rd_addr;
  logic [63:0]   wr_data, rd_data;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0t: %s", $time, msg); end
  endtask

  event_mem #(.WORDS(WORDS)) dut (.clk, .wr_en, .wr_addr, .wr_data, .rd_addr, .rd_data);

  logic [63:0] model [WORDS];
  logic [63:0] exp_q;
  int          bad = 0, nread = 0;

  initial begin
    // initialise every word through the write port
    for (int a = 0; a < WORDS; a++) begin
      @(negedge clk);
      wr_en = 1; wr_addr = AW'(a); wr_data = {32'(a), ~32'(a)}; model[a] = wr_data;
    end
    @(negedge clk); wr_en = 0;

    // random traffic; read address kept within a small window to collide with writes
    rd_addr = '0;
    for (int i = 0; i < 4000; i++) begin
      @(negedge clk);
      rd_addr = AW'($urandom % 64);
      wr_en   = ($urandom % 2) != 0;
      wr_addr = (($urandom % 4) == 0) ? rd_addr : AW'($urandom % 64);
      wr_data = {$urandom, $urandom};
      exp_q   = model[rd_addr];
      @(posedge clk);
      if (wr_en) model[wr_addr] = wr_data;
      #1;
      nread++;
      if (rd_data !== exp_q) begin
        bad++;
        if (bad < 4) $display("  addr %0d got %016x exp %016x", rd_addr, rd_data, exp_q);
      end
    end
    check(bad == 0, $sformatf("%0d random reads match the model (%0d bad)", nread, bad));

    // held address, writes elsewhere
    @(negedge clk);
    rd_addr = AW'(700); wr_en = 0;
    bad = 0;
    for (int i = 0; i < 50; i++) begin
      @(negedge clk);
      wr_en = 1; wr_addr = AW'(100 + i); wr_data = {$urandom, $urandom}; model[100 + i] = wr_data;
      if (i > 0 && rd_data !== model[700]) bad++;
    end
    @(negedge clk); wr_en = 0;
    check(bad == 0, "held read address holds its data");

    // every word read back once, addresses in random order
    bad = 0;
    for (int i = 0; i < WORDS; i++) begin
      int a;
      a = (i * 389 + 17) % WORDS;                   // 389 is odd: a permutation of 0..1023
      @(negedge clk);
      rd_addr = AW'(a);
      @(posedge clk); #1;
      if (rd_data !== model[a]) begin bad++; if (bad < 4) $display("  word %0d got %016x exp %016x", a, rd_data, model[a]); end
    end
    check(bad == 0, $sformatf("every word of the memory read back (%0d bad)", bad));
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
