// e3ne_pkg: types and constants shared by the E3NE spiking-network accelerator.
//
// Instruction word (32 bits, most significant field first):
//   configuration  : opcode[31:28] | parameter[27:23] | value[22:0]
//   command        : opcode[31:28] | reserved[27:0]
//   memory         : opcode[31:28] | module[27:23]    | address[22:0]
//   wait           : opcode[31:28] | module[27:23]    | cond[22:21] | reserved[20:0]
// The field widths (4/5/23, 4/28, 4/5/23, 4/5/2/21) are the published ones. The
// numeric opcode values, module ids, configuration indices and wait conditions
// below are this implementation's own encoding; only the mnemonics are published.
//
// Activations use radix ("power-of-two weighted") spike trains: the spike at
// time step t carries weight 2^t, so a T-step train is the binary representation
// of a T-bit unsigned integer, LSB first. Requantization after a layer is an
// arithmetic right shift with round-to-nearest done by adding the last bit shifted
// out; the result is clamped to the representable range [0, 2^T-1].
package e3ne_pkg;

  // ---------------------------------------------------------------- opcodes
  typedef enum logic [3:0] {
    OP_ENA  = 4'd0,   // enable processing modules (value = enable mask)
    OP_CONF = 4'd1,   // set configuration parameter in enabled modules
    OP_PROC = 4'd2,   // start processing one activation row (2D modules)
    OP_LIN  = 4'd3,   // start processing a linear layer
    OP_RST  = 4'd4,   // reset enabled processing modules
    OP_END  = 4'd5,   // last layer reached, stop
    OP_KERL = 4'd6,   // load kernel from on-chip weight memory into PMs
    OP_KERD = 4'd7,   // copy one weight row from external DRAM into weight memory
    OP_ACTL = 4'd8,   // load activation row from a 2D buffer into enabled PMs
    OP_ACTS = 4'd9,   // store (requantized) activations from a PM into a buffer
    OP_WAIT = 4'd10   // stall until condition in module holds
  } opcode_e;

  typedef struct packed {
    opcode_e     op;
    logic [4:0]  field;   // parameter (CONF) or module (memory, WAIT)
    logic [22:0] value;   // value (CONF/ENA) or address (memory); [22:21] cond (WAIT)
  } instr_t;

  // ---------------------------------------------------------------- module ids
  localparam logic [4:0] MOD_CONV0  = 5'd0;   // conv PMs occupy ids 0..15
  localparam logic [4:0] MOD_POOL   = 5'd16;
  localparam logic [4:0] MOD_LIN    = 5'd17;
  localparam logic [4:0] MOD_PING2D = 5'd20;
  localparam logic [4:0] MOD_PONG2D = 5'd21;
  localparam logic [4:0] MOD_PING1D = 5'd22;
  localparam logic [4:0] MOD_PONG1D = 5'd23;
  localparam logic [4:0] MOD_WMEM0  = 5'd24;  // weight memories occupy ids 24..31

  // bit positions in the ENA mask
  localparam int unsigned ENA_POOL_BIT = 16;
  localparam int unsigned ENA_LIN_BIT  = 17;

  // ---------------------------------------------------------------- config indices
  localparam logic [4:0] CFG_STRIDE = 5'd0;   // kernel stride (2D)
  localparam logic [4:0] CFG_PAD    = 5'd1;   // zero padding (2D)
  localparam logic [4:0] CFG_DIN    = 5'd2;   // input feature-map size / linear input count
  localparam logic [4:0] CFG_DOUT   = 5'd3;   // output feature-map size / linear output count
  localparam logic [4:0] CFG_PAR    = 5'd4;   // parallel output channels in a 2D PM
  localparam logic [4:0] CFG_SHIFT  = 5'd5;   // requantization right shift
  localparam logic [4:0] CFG_TSTEP  = 5'd6;   // current time step (2D)
  localparam logic [4:0] CFG_LSRC   = 5'd7;   // linear: 0 = read ping1d / write pong1d, 1 = reverse
  localparam logic [4:0] CFG_WMEM   = 5'd8;   // linear: weight memory index
  localparam logic [4:0] CFG_WBASE  = 5'd9;   // linear: first weight row

  // ---------------------------------------------------------------- wait conditions
  localparam logic [1:0] COND_PROC = 2'd0;    // module finished processing
  localparam logic [1:0] COND_XFER = 2'd1;    // module finished its memory transfer

  // ---------------------------------------------------------------- helpers
  function automatic instr_t mk_instr(opcode_e op, logic [4:0] field, logic [22:0] value);
    instr_t i;
    i.op    = op;
    i.field = field;
    i.value = value;
    return i;
  endfunction

  // Requantize a signed partial sum to a T-bit unsigned activation:
  // shift right with round-to-nearest (conditional add of the last bit shifted
  // out), then clamp to [0, 2^T-1].
  function automatic logic [15:0] requant(logic signed [31:0] psum, logic [4:0] shift,
                                          int unsigned t_bits);
    logic signed [31:0] q;
    logic signed [31:0] maxv;
    q = psum >>> shift;
    if (shift != 0) q = q + 32'(psum[shift - 5'd1]);
    maxv = (32'sd1 <<< t_bits) - 32'sd1;
    if (q < 0)         q = 0;
    else if (q > maxv) q = maxv;
    return q[15:0];
  endfunction

endpackage
