// packetizer: turns each triggered window into an RDMA WRITE work request.
//
// The paper places the packetizer between the circular buffer and the RoCEv2 engine
// and says only that it interfaces the two. Here it stores each event arriving on the
// 64-bit AXI4-Stream (header word + window data, tlast on the last word) into one slot
// of the local event memory, then posts a work request {wr_id, local byte address,
// length} towards the engine; the remote address and key are filled in downstream by
// the address FSM. Slots are used and freed in order: a slot is released when the
// engine reports the completion (CQE) of its write, which in a Reliable Connection
// arrives in posting order. While every slot is in flight, the packetizer refuses the
// next event (s_tready low at the event start), which back-pressures the circular
// buffer: this is the stall of the readout chain. An event longer than a slot is cut
// at the slot size (an assertion flags it). Slot count and size are own choices.
//
// Timing: one word per clock while collecting; the work request is offered the clock
// after tlast; input is held off until it is accepted.
module packetizer
  import be_pkg::*;
#(
  parameter int unsigned SLOTS      = 8,
  parameter int unsigned SLOT_WORDS = 128,
  parameter int unsigned AW         = $clog2(SLOTS * SLOT_WORDS)
) (
  input  logic          clk,
  input  logic          rst_n,
  // event stream from the circular buffer
  input  logic [63:0]   s_tdata,
  input  logic          s_tvalid,
  input  logic          s_tlast,
  output logic          s_tready,
  // event memory write port
  output logic          mem_wr_en,
  output logic [AW-1:0] mem_wr_addr,
  output logic [63:0]   mem_wr_data,
  // work request towards the address FSM / engine
  output logic          wr_valid,
  input  logic          wr_ready,
  output wr_t           wr,
  // completions from the engine
  input  logic          cqe_valid,
  input  cqe_t          cqe,
  // status
  output logic          stalled,      // every slot in flight: no new event can start
  output logic          cq_error      // pulses on a completion with error status
);
  localparam int unsigned SW = $clog2(SLOTS);
  localparam int unsigned OW = $clog2(SLOT_WORDS);

  logic [SW:0]   used;          // slots holding an event not yet completed
  logic [SW-1:0] alloc_slot;
  logic [OW:0]   widx;          // words written into the current slot
  logic          in_event;      // first word of the current event accepted
  logic [7:0]    next_id;
  logic          posting;

  wire slot_free = (used != (SW+1)'(SLOTS));
  assign s_tready = !posting && (in_event || slot_free);
  wire beat = s_tvalid && s_tready;

  assign mem_wr_en   = beat && (widx < (OW+1)'(SLOT_WORDS));
  assign mem_wr_addr = AW'({alloc_slot, widx[OW-1:0]});
  assign mem_wr_data = s_tdata;
  assign stalled     = !in_event && !slot_free;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      used       <= '0;
      alloc_slot <= '0;
      widx       <= '0;
      in_event   <= 1'b0;
      next_id    <= '0;
      posting    <= 1'b0;
      wr_valid   <= 1'b0;
      wr         <= '0;
      cq_error   <= 1'b0;
    end else begin
      cq_error <= cqe_valid && (cqe.status != CQ_OK);

      if (beat) begin
        in_event <= !s_tlast;
        if (widx < (OW+1)'(SLOT_WORDS)) widx <= widx + 1'b1;
        if (s_tlast) begin
          posting  <= 1'b1;
          wr_valid <= 1'b1;
          wr.wr_id <= next_id;
          wr.laddr <= 32'({alloc_slot, {OW{1'b0}}, 3'b000});
          wr.raddr <= '0;
          wr.rkey  <= '0;
          wr.len   <= (32'(widx) + ((widx < (OW+1)'(SLOT_WORDS)) ? 32'd1 : 32'd0)) << 3;
        end
      end

      if (wr_valid && wr_ready) begin
        wr_valid   <= 1'b0;
        posting    <= 1'b0;
        widx       <= '0;
        next_id    <= next_id + 1'b1;
        alloc_slot <= alloc_slot + 1'b1;
      end

      // a slot is taken when its first word arrives and freed by its completion
      unique case ({beat && !in_event, cqe_valid})
        2'b10:   used <= used + 1'b1;
        2'b01:   used <= used - 1'b1;
        default: ;
      endcase
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) beat |-> widx < (OW+1)'(SLOT_WORDS))
    else $error("packetizer: event longer than a slot, truncated");
  assert property (@(posedge clk) disable iff (!rst_n) cqe_valid |-> used != 0);
  assert property (@(posedge clk) disable iff (!rst_n) wr_valid && !wr_ready |=> wr_valid && $stable(wr));

endmodule
