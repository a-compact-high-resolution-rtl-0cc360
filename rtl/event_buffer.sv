// event_buffer: readout buffer of one serial data line.
//
// A simple dual-port RAM of 1024 words of 16 bits (16 kbit), written by the
// line capture and read by the packet builder, both on the same clock.  Seen
// as 32 blocks of 32 words, one 512-bit block per event.  The read port is
// registered (one cycle latency), which maps onto FPGA block RAM.
//
// The 16 kbit size and the 32 x 512-bit split follow the tracker design; the
// word width is this design's choice.  The contents are not reset.
module event_buffer #(
  parameter int unsigned DEPTH = 1024,
  parameter int unsigned WIDTH = 16
) (
  input  logic                     clk,
  input  logic                     wr_en,
  input  logic [$clog2(DEPTH)-1:0] wr_addr,
  input  logic [WIDTH-1:0]         wr_data,
  input  logic [$clog2(DEPTH)-1:0] rd_addr,
  output logic [WIDTH-1:0]         rd_data
);
  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
    rd_data <= mem[rd_addr];
  end
endmodule
