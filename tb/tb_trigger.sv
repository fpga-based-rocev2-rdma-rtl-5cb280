// tb_trigger: self-checking test of the leading-edge trigger.
//
// Builds 12 channels of 12-bit samples (baseline 100), packs them 16 samples per three
// 64-bit lane words, and places pulses whose expected trigger word and lane mask are
// worked out here from the sample index: a single pulse, two lanes firing in the same
// group (earliest sample wins), a pulse inside the hold-off (suppressed), a pulse on a
// disabled lane (ignored), a level that stays high (one trigger only), and a crossing on
// the last sample of a group. Also checks the one-clock latency after the group's third
// word.
module tb_trigger;
  import be_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic                        lane_valid = 0;
  logic [LANES-1:0][LANE_W-1:0] lane_data;
  logic [SAMPLE_W-1:0]         threshold = 12'd256;
  logic [LANES-1:0]            ch_enable = 12'hFDF;   // lane 5 disabled
  logic                        trig_valid;
  logic [TS_W-1:0]             trig_ts;
  logic [LANES-1:0]            trig_mask;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  trigger #(.N_LANES(LANES), .HOLDOFF(10)) dut (
    .clk, .rst_n, .lane_valid, .lane_data, .threshold, .ch_enable,
    .trig_valid, .trig_ts, .trig_mask
  );

  localparam int NG = 45;
  logic [11:0] smp [LANES][NG*16];

  typedef struct { int ts; logic [LANES-1:0] mask; } exp_t;
  exp_t exp_q[$];
  int   got_ts[$];
  logic [LANES-1:0] got_mask[$];
  int   lat_bad = 0;
  int   cyc = 0, third_word_cyc = -10;

  always @(posedge clk) begin
    cyc++;
    if (trig_valid) begin
      got_ts.push_back(int'(trig_ts)); got_mask.push_back(trig_mask);
      if (cyc != third_word_cyc + 2) lat_bad++;  // word taken at edge +1, flag seen at edge +2
    end
  end

  initial begin
    for (int l = 0; l < LANES; l++) for (int n = 0; n < NG*16; n++) smp[l][n] = 12'd100;
    // a) lane 3, crossing at sample 37: group 2, k=5, bit 60 -> word 6
    for (int n = 37; n <= 40; n++) smp[3][n] = 12'd500;
    exp_q.push_back('{6, 12'h008});
    // b) lane 0 at sample 167 (k=7, word 1) and lane 11 at 172 (k=12, word 2) -> ts 31
    for (int n = 167; n <= 169; n++) smp[0][n] = 12'd300;
    for (int n = 172; n <= 173; n++) smp[11][n] = 12'd900;
    exp_q.push_back('{31, 12'h801});
    // c) lane 2 at sample 179 (group 11, word 33) is inside the hold-off: no trigger
    smp[2][179] = 12'd400;
    // d) lane 5 disabled
    for (int n = 320; n <= 330; n++) smp[5][n] = 12'd4000;
    // e) lane 6 high from sample 480 to 560: one trigger at ts 90
    for (int n = 480; n <= 560; n++) smp[6][n] = 12'd1000;
    exp_q.push_back('{90, 12'h040});
    // f) lane 7 crossing on sample 655 (group 40, k=15, bit 180 -> word 122)
    smp[7][655] = 12'd257;
    exp_q.push_back('{122, 12'h080});
    // threshold is strict: 256 itself does not fire
    smp[8][600] = 12'd256;

    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int g = 0; g < NG; g++) begin
      logic [LANES-1:0][191:0] grp;
      for (int l = 0; l < LANES; l++)
        for (int k = 0; k < 16; k++) grp[l][12*k +: 12] = smp[l][16*g + k];
      for (int j = 0; j < 3; j++) begin
        @(negedge clk);
        lane_valid = 1;
        for (int l = 0; l < LANES; l++) lane_data[l] = grp[l][64*j +: 64];
        if (j == 2) third_word_cyc = cyc;
        // occasional gap in lane_valid
        if (g % 7 == 3 && j == 1) begin @(negedge clk); lane_valid = 0; end
      end
    end
    @(negedge clk); lane_valid = 0;
    repeat (5) @(posedge clk);

    check(got_ts.size() == exp_q.size(), $sformatf("trigger count %0d exp %0d", got_ts.size(), exp_q.size()));
    for (int i = 0; i < exp_q.size() && i < got_ts.size(); i++) begin
      check(got_ts[i] == exp_q[i].ts, $sformatf("trigger %0d ts %0d exp %0d", i, got_ts[i], exp_q[i].ts));
      check(got_mask[i] == exp_q[i].mask, $sformatf("trigger %0d mask %03x exp %03x", i, got_mask[i], exp_q[i].mask));
    end
    check(lat_bad == 0, "trigger one clock after the third word of the group");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
