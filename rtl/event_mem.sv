// event_mem: local memory holding event fragments between the packetizer and the
// RoCEv2 engine.
//
// The paper's RoCEv2 core reads the data it sends from "the system's memory"; this is
// that memory, written here as a simple dual-port RAM of 64-bit words (one write port
// for the packetizer, one read port for the engine, which reads a fragment once and
// again for every retransmission). Read data appear one clock after the address and
// are refreshed every clock, so holding the address holds the data. Size (8 slots of
// 1 KiB) is this design's choice; the paper gives none.
module event_mem #(
  parameter int unsigned WORDS = 1024,
  parameter int unsigned AW    = $clog2(WORDS)
) (
  input  logic          clk,
  input  logic          wr_en,
  input  logic [AW-1:0] wr_addr,
  input  logic [63:0]   wr_data,
  input  logic [AW-1:0] rd_addr,
  output logic [63:0]   rd_data
);
  logic [63:0] mem [WORDS];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
    rd_data <= mem[rd_addr];
  end
endmodule
