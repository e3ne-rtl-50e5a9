// act_buffer: one ping or pong activation buffer.
//
// Two-dimensional feature maps are stored one row of binary spikes per address
// (width W >= largest input feature-map size, height H >= D*C*T); a channel c of a
// D x D map occupies rows c*T*D .. c*T*D+T*D-1, time step t of it rows
// c*T*D + t*D .. + D-1. One-dimensional activations are stored one T-bit spike
// train (LSB = first time step) per address. Sizing follows the buffer generation
// rule of the framework; the address layout is this design's choice.
// One write port and one synchronous read port (data one clock after rd_en).
// Contents are not reset: every location is written before it is read.
module act_buffer #(
  parameter int unsigned W  = 32,
  parameter int unsigned H  = 336,
  parameter int unsigned AW = $clog2(H)
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] wr_addr,
  input  logic [W-1:0]  wr_data,
  input  logic          rd_en,
  input  logic [AW-1:0] rd_addr,
  output logic [W-1:0]  rd_data
);
  logic [W-1:0] mem [H];

  always_ff @(posedge clk) begin
    if (we) mem[wr_addr] <= wr_data;
    if (rd_en) rd_data <= mem[rd_addr];
  end

  // address range checks
  always_ff @(posedge clk) begin
    if (we)    assert (wr_addr < AW'(H)) else $error("act_buffer write address %0d out of range", wr_addr);
    if (rd_en) assert (rd_addr < AW'(H)) else $error("act_buffer read address %0d out of range", rd_addr);
  end
endmodule
