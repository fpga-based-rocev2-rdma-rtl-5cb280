// circ_buffer: circular buffer of the recovered JESD204C data with triggered readout.
//
// Every valid clock the 12 lane words (one 768-bit row) are written at the row address
// given by the low bits of a free-running word counter, so the buffer always holds the
// last DEPTH rows (DEPTH x 5.33 ns). A trigger (timestamp in the same word count) is
// queued in a small FIFO; when the whole window has been written, the readout FSM
// sends one event on a 64-bit AXI4-Stream: a header word followed by WINDOW rows,
// each row as N_LANES consecutive lane words (lane 0 first); tlast marks the final word.
// The paper fixes the 50 ns window (WINDOW = ceil(50 ns x 187.5 MHz) = 10 words) and
// that it is drawn "related to the trigger timestamp"; the PRE words of pre-trigger
// data, the buffer depth, the trigger-FIFO depth and the header layout are this
// design's choices.
//
// Header word: [63:48] event number, [47:32] lane mask of the firing lanes,
// [31:0] trigger timestamp (lane words since reset).
//
// Overflow handling: a trigger arriving with the FIFO full is dropped (trig_dropped
// pulses). A trigger whose window start is older than DEPTH-(N_LANES+1)*WINDOW rows when
// its readout would start has been (or would be) overwritten and is discarded
// (trig_stale pulses). Both happen only if the downstream stalls for long. The age
// test repeats every clock while the sink is not ready, and the header is offered only
// once the sink shows ready, so with a sink that then takes the whole event without
// pause (the packetizer does) no overwritten row is ever sent.
// Timing: one row is emitted every N_LANES+1 clocks (one bubble per row to read the
// memory); the header leaves the clock after the window is complete.
module circ_buffer
  import be_pkg::*;
#(
  parameter int unsigned N_LANES = LANES,
  parameter int unsigned DEPTH   = 1024,
  parameter int unsigned WINDOW  = 10,
  parameter int unsigned PRE     = 3,
  parameter int unsigned TFIFO   = 4
) (
  input  logic                           clk,
  input  logic                           rst_n,
  input  logic                           lane_valid,
  input  logic [N_LANES-1:0][LANE_W-1:0] lane_data,
  input  logic                           trig_valid,
  input  logic [TS_W-1:0]                trig_ts,
  input  logic [N_LANES-1:0]             trig_mask,
  output logic [63:0]                    m_tdata,
  output logic                           m_tvalid,
  output logic                           m_tlast,
  input  logic                           m_tready,
  output logic                           trig_dropped,
  output logic                           trig_stale,
  output logic                           evt_sent
);
  localparam int unsigned AW    = $clog2(DEPTH);
  localparam int unsigned FAW   = $clog2(TFIFO);
  localparam int unsigned LW    = (N_LANES > 1) ? $clog2(N_LANES) : 1;
  localparam int unsigned RW    = $clog2(WINDOW + 1);
  localparam int unsigned LIMIT = DEPTH - (N_LANES + 1) * WINDOW;

  typedef struct packed {
    logic [TS_W-1:0]    ts;
    logic [N_LANES-1:0] mask;
  } trig_rec_t;

  typedef enum logic [2:0] {S_IDLE, S_CHECK, S_HDR, S_RD, S_LANES} state_e;

  // ------------------------------------------------------------ row storage
  logic [N_LANES*LANE_W-1:0] mem [DEPTH];
  logic [N_LANES*LANE_W-1:0] rd_q;
  logic [TS_W-1:0]           wr_ts;
  logic [AW-1:0]             raddr;

  always_ff @(posedge clk) begin
    if (lane_valid) mem[wr_ts[AW-1:0]] <= lane_data;
    rd_q <= mem[raddr];
  end

  // ------------------------------------------------------------ trigger FIFO
  trig_rec_t       tq [TFIFO];
  logic [FAW:0]    tq_wp, tq_rp;
  wire             tq_empty = (tq_wp == tq_rp);
  wire             tq_full  = (tq_wp - tq_rp) == (FAW+1)'(TFIFO);
  logic            tq_pop;

  // ------------------------------------------------------------ readout FSM
  state_e          st;
  trig_rec_t       cur;
  logic [TS_W-1:0] start;
  logic [RW-1:0]   row;
  logic [LW-1:0]   lane;
  logic [15:0]     evno;

  wire [TS_W-1:0]  age   = wr_ts - start;         // rows written since window start
  assign raddr = start[AW-1:0] + AW'(row);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wr_ts        <= '0;
      tq_wp        <= '0;
      tq_rp        <= '0;
      st           <= S_IDLE;
      cur          <= '0;
      start        <= '0;
      row          <= '0;
      lane         <= '0;
      evno         <= '0;
      trig_dropped <= 1'b0;
      trig_stale   <= 1'b0;
      evt_sent     <= 1'b0;
    end else begin
      trig_dropped <= 1'b0;
      trig_stale   <= 1'b0;
      evt_sent     <= 1'b0;
      if (lane_valid) wr_ts <= wr_ts + 1'b1;

      if (trig_valid) begin
        if (!tq_full) begin
          tq[tq_wp[FAW-1:0]] <= '{ts: trig_ts, mask: trig_mask};
          tq_wp              <= tq_wp + 1'b1;
        end else begin
          trig_dropped <= 1'b1;
        end
      end
      if (tq_pop) tq_rp <= tq_rp + 1'b1;

      unique case (st)
        S_IDLE: if (!tq_empty) begin
          cur   <= tq[tq_rp[FAW-1:0]];
          start <= tq[tq_rp[FAW-1:0]].ts - TS_W'(PRE);
          st    <= S_CHECK;
        end
        S_CHECK: begin
          if (age > TS_W'(LIMIT)) begin          // overwritten, or before the first row
            trig_stale <= 1'b1;
            st         <= S_IDLE;
          end else if (age >= TS_W'(WINDOW) && m_tready) begin
            st <= S_HDR;                       // sink ready: the event goes out unbroken
          end
        end
        S_HDR: if (m_tready) begin
          row <= '0;
          st  <= S_RD;
        end
        S_RD: begin
          lane <= '0;
          st   <= S_LANES;
        end
        S_LANES: if (m_tready) begin
          if (lane == LW'(N_LANES - 1)) begin
            if (row == RW'(WINDOW - 1)) begin
              evno     <= evno + 1'b1;
              evt_sent <= 1'b1;
              st       <= S_IDLE;
            end else begin
              row <= row + 1'b1;
              st  <= S_RD;
            end
          end else begin
            lane <= lane + 1'b1;
          end
        end
        default: st <= S_IDLE;
      endcase
    end
  end

  assign tq_pop = (st == S_IDLE) && !tq_empty;

  always_comb begin
    m_tvalid = 1'b0;
    m_tlast  = 1'b0;
    m_tdata  = '0;
    unique case (st)
      S_HDR: begin
        m_tvalid = 1'b1;
        m_tdata  = {evno, 16'(cur.mask), cur.ts};
      end
      S_LANES: begin
        m_tvalid = 1'b1;
        m_tdata  = rd_q[LANE_W*lane +: LANE_W];
        m_tlast  = (lane == LW'(N_LANES - 1)) && (row == RW'(WINDOW - 1));
      end
      default: ;
    endcase
  end

  // AXI4-Stream rule: data stays stable while valid is held without ready
  assert property (@(posedge clk) disable iff (!rst_n)
                   m_tvalid && !m_tready |=> m_tvalid && $stable(m_tdata));

endmodule
