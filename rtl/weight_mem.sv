// weight_mem: weight memory of one layer.
//
// For a convolution layer each row holds one K x K kernel at B bits per value
// (W = K*K*B, H = C_out*C_in); value (ky,kx) sits at bits [(ky*K+kx)*B +: B].
// For a fully-connected layer each row holds the weights of the output features
// computed in parallel (W = P*B), lane j at bits [j*B +: B]. The sizes follow the
// framework's memory sizing rule. The memory is read-only for inference; its write
// port is used to initialise it and, when weights live in external DRAM, by the
// KERD transfer that copies a row into it. Reads are synchronous (one clock).
module weight_mem #(
  parameter int unsigned W  = 75,
  parameter int unsigned H  = 1920,
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

  always_ff @(posedge clk) begin
    if (rd_en) assert (rd_addr < AW'(H)) else $error("weight_mem read address %0d out of range", rd_addr);
  end
endmodule
