// addr_mgr: hardware FSM for remote memory-address management and target
// reconfiguration.
//
// The paper leaves connection set-up (PD, QP, keys) to software but puts "memory address
// management and target IP reconfiguration" in a dedicated hardware FSM for low latency.
// This module is that FSM. It sits on the work-request path between the packetizer and
// the RoCEv2 engine and fills in the remote virtual address and rkey of every write: the
// target's receive region is used as a ring, each event going to the next free offset and
// wrapping to the base when the next event would not fit.
// The active target (destination MAC/IP, remote QPN, start PSN, rkey, ring base and
// size) is loaded from the staged copy that software writes, on an `apply` pulse:
//   S_INIT   no target yet; work requests are held.
//   S_RUN    work requests pass, each getting the next ring address.
//   S_DRAIN  apply seen: new work requests are held until the engine has no write
//            outstanding, so no packet of the old connection is in flight.
//   S_SWITCH load the staged target, reset the ring offset, pulse qp_load so the engine
//            restarts its PSN at the new start PSN; back to S_RUN.
// The state encoding, the ring policy and "drain before switching" are this design's
// choices. Timing: a work request passes combinationally in S_RUN (valid/ready through).
module addr_mgr
  import be_pkg::*;
(
  input  logic    clk,
  input  logic    rst_n,
  input  target_t staged,
  input  logic    apply,
  input  logic    engine_idle,
  // from the packetizer
  input  logic    s_valid,
  output logic    s_ready,
  input  wr_t     s_wr,
  // to the engine
  output logic    m_valid,
  input  logic    m_ready,
  output wr_t     m_wr,
  // active target
  output target_t active,
  output logic    qp_load,
  output logic    wrapped      // pulses when the ring offset wraps
);
  typedef enum logic [1:0] {S_INIT, S_RUN, S_DRAIN, S_SWITCH} state_e;

  state_e      st;
  logic [31:0] offset;
  logic        apply_pend;

  wire         fits = (64'(offset) + 64'(s_wr.len)) <= 64'(active.size);
  wire [31:0]  use_off = fits ? offset : 32'd0;

  assign m_valid = (st == S_RUN) && s_valid;
  assign s_ready = (st == S_RUN) && m_ready;

  always_comb begin
    m_wr       = s_wr;
    m_wr.raddr = active.base + 64'(use_off);
    m_wr.rkey  = active.rkey;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      st         <= S_INIT;
      offset     <= '0;
      active     <= '0;
      qp_load    <= 1'b0;
      wrapped    <= 1'b0;
      apply_pend <= 1'b0;
    end else begin
      qp_load <= 1'b0;
      wrapped <= 1'b0;
      if (apply) apply_pend <= 1'b1;
      unique case (st)
        S_INIT:   if (apply || apply_pend) st <= S_DRAIN;
        S_RUN: begin
          if (s_valid && m_ready) begin
            offset  <= use_off + s_wr.len;
            wrapped <= !fits;
          end
          // never withdraw an offered request: switch once it is taken or absent
          if ((apply || apply_pend) && !(s_valid && !m_ready)) st <= S_DRAIN;
        end
        S_DRAIN:  if (engine_idle) st <= S_SWITCH;
        S_SWITCH: begin
          active     <= staged;
          offset     <= '0;
          qp_load    <= 1'b1;
          apply_pend <= 1'b0;
          st         <= S_RUN;
        end
        default: st <= S_INIT;
      endcase
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n)
                   m_valid && !m_ready |=> m_valid && $stable(m_wr));

endmodule
