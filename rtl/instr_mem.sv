// instr_mem: the instruction decoder's local memory.
//
// A simple dual-port RAM of 32-bit instruction words. The host writes the
// compiled instruction stream through the write port before starting the
// accelerator; the decoder reads it through the read port. Reads are
// synchronous: the word at rd_addr appears on rd_data one clock later, which is
// the fetch cycle of the non-pipelined decoder. The memory is not reset; its
// contents are defined by the host load. Depth is this design's choice, sized
// for the LeNet-5 instruction stream (about 25k instructions with four
// convolution modules).
module instr_mem #(
  parameter int unsigned DEPTH = 32768,
  parameter int unsigned AW    = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] wr_addr,
  input  logic [31:0]   wr_data,
  input  logic [AW-1:0] rd_addr,
  output logic [31:0]   rd_data
);
  logic [31:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[wr_addr] <= wr_data;
    rd_data <= mem[rd_addr];
  end
endmodule
