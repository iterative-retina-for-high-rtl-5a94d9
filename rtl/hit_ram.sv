// Hit memory of one sector event (the "Block Ram" unit of the processor).
//
// Holds the (r, theta) positions of up to DEPTH hits of the current event.
// The event source writes the hits through the write port; during each Retina
// iteration the control unit reads them back one per cycle and the read data
// is broadcast to every calculation cell. Simple dual-port RAM written as an
// array: one synchronous write port, one synchronous read port with one cycle
// of latency. The depth of 18 follows the paper's maximum of 18 hits per event
// in one sector; the port arrangement is this design's choice.
module hit_ram
  import retina_pkg::*;
#(
  parameter int unsigned DEPTH = MAX_HITS
) (
  input  logic     clk,
  input  logic     wr_en,
  input  hit_idx_t wr_addr,
  input  hit_t     wr_data,
  input  logic     rd_en,
  input  hit_idx_t rd_addr,
  output hit_t     rd_data
);

  hit_t mem [DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en && 32'(wr_addr) < DEPTH) mem[wr_addr] <= wr_data;
    if (rd_en) rd_data <= (32'(rd_addr) < DEPTH) ? mem[rd_addr] : '0;
  end

  // An access outside the event's hit slots is a protocol error upstream.
  a_wr_addr: assert property (@(posedge clk) wr_en |-> 32'(wr_addr) < DEPTH);
  a_rd_addr: assert property (@(posedge clk) rd_en |-> 32'(rd_addr) < DEPTH);

endmodule
