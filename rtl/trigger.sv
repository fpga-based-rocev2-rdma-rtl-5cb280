// trigger: leading-edge trigger on the 12 digitised channels.
//
// Each JESD204C lane carries one ADC channel as a stream of 64-bit words. Three
// consecutive words (192 bits) hold 16 samples of 12 bits, sample k in bits
// [12k+11:12k], which is what 12 Gb/s per lane at 1 Gsample/s implies; this packing and
// the alignment of the first word after reset to group phase 0 are this design's
// assumptions, the paper gives only the rates. Every third word the block compares the
// 16 samples of every enabled lane with a programmable threshold. A lane fires when a
// sample is above the threshold while the sample before it (possibly the last one of the
// previous group) was not: the leading edge named in the paper. The earliest firing
// sample of the group gives the trigger timestamp, counted in lane words from reset, so
// the circular buffer (which counts written words the same way) can locate the data.
// Reset is synchronous and active low. After a trigger, new triggers are held off for HOLDOFF words (own choice, so that
// windows do not overlap).
//
// Interface: lane_valid/lane_data is the JESD204C output (all lanes in step).
// trig_valid pulses one cycle with trig_ts (word index) and trig_mask (lanes that
// crossed in that group). Timing: trig_valid rises the cycle after the third word of
// the group is presented.
module trigger
  import be_pkg::*;
#(
  parameter int unsigned N_LANES = LANES,
  parameter int unsigned HOLDOFF = 10
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          lane_valid,
  input  logic [N_LANES-1:0][LANE_W-1:0] lane_data,
  input  logic [SAMPLE_W-1:0]           threshold,
  input  logic [N_LANES-1:0]            ch_enable,
  output logic                          trig_valid,
  output logic [TS_W-1:0]               trig_ts,
  output logic [N_LANES-1:0]            trig_mask
);
  localparam int unsigned SPG = 3 * LANE_W / SAMPLE_W;  // samples per 3-word group (16)

  logic [1:0]                          phase;
  logic [TS_W-1:0]                     word_cnt;
  logic [N_LANES-1:0][LANE_W-1:0]      w0, w1;
  logic [N_LANES-1:0][SAMPLE_W-1:0]    last_s;
  logic [TS_W-1:0]                     holdoff_until;
  logic                                armed_once;

  // combinational evaluation of the group completed by the current word
  logic [N_LANES-1:0]                  fire;
  logic [N_LANES-1:0][SAMPLE_W-1:0]    new_last;
  logic [$clog2(SPG)-1:0]              first_k;
  logic                                any_fire;

  always_comb begin
    logic [3*LANE_W-1:0]  g;
    logic [SAMPLE_W-1:0]  s, p;
    logic [SPG-1:0]       hit_any;
    hit_any  = '0;
    fire     = '0;
    new_last = last_s;
    for (int l = 0; l < N_LANES; l++) begin
      g = {lane_data[l], w1[l], w0[l]};
      p = last_s[l];
      for (int k = 0; k < SPG; k++) begin
        s = g[SAMPLE_W*k +: SAMPLE_W];
        if (ch_enable[l] && s > threshold && p <= threshold) begin
          fire[l]    = 1'b1;
          hit_any[k] = 1'b1;
        end
        p = s;
      end
      new_last[l] = p;
    end
    any_fire = |fire;
    first_k  = '0;
    for (int k = SPG - 1; k >= 0; k--)
      if (hit_any[k]) first_k = k[$clog2(SPG)-1:0];
  end

  wire [TS_W-1:0] group_ts = word_cnt - TS_W'(2);
  wire [TS_W-1:0] fire_ts  = group_ts + TS_W'((int'(first_k) * SAMPLE_W) / LANE_W);
  wire            held     = armed_once && (signed'(fire_ts - holdoff_until) < 0);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      phase         <= '0;
      word_cnt      <= '0;
      w0            <= '0;
      w1            <= '0;
      last_s        <= '0;
      trig_valid    <= 1'b0;
      trig_ts       <= '0;
      trig_mask     <= '0;
      holdoff_until <= '0;
      armed_once    <= 1'b0;
    end else begin
      trig_valid <= 1'b0;
      if (lane_valid) begin
        word_cnt <= word_cnt + 1'b1;
        unique case (phase)
          2'd0: begin w0 <= lane_data; phase <= 2'd1; end
          2'd1: begin w1 <= lane_data; phase <= 2'd2; end
          default: begin
            phase  <= 2'd0;
            last_s <= new_last;
            if (any_fire && !held) begin
              trig_valid    <= 1'b1;
              trig_ts       <= fire_ts;
              trig_mask     <= fire;
              holdoff_until <= fire_ts + TS_W'(HOLDOFF);
              armed_once    <= 1'b1;
            end
          end
        endcase
      end
    end
  end

  // unused-bit guard for the group phase encoding
  assert property (@(posedge clk) disable iff (!rst_n) phase != 2'd3);

endmodule
