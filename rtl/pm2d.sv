// pm2d: two-dimensional processing module (convolution or pooling).
//
// The module is Y rows (= kernel size K) by X columns. It sweeps a feature map
// row by row: each PROC command processes one input row (one time step's binary
// spikes of one input channel) against all Y kernel rows at once, with the X
// output columns also in parallel; only the Y kernel columns are walked
// sequentially. For every spike the module adds the weight: there are no
// multipliers, only conditional accumulation.
//
// Intra-module parallelism: up to P_MAX output channels share the module, placed
// side by side along X. Window p starts at column S_p = floor(p*(D_in+pad)/stride)
// and ends at E_p = S_p + D_out - 1 (the published placement rule). The input row
// is laid out P times with period D_in+pad in an internal "extended row", with
// zeros for padding, and PM column x computes the output at extended position
// x*stride. For convolution all windows see the same input row (different output
// channels of one input channel, each with its own kernel). For pooling
// (IS_POOL=1) the windows are independent channels, window p taking its own
// input row; ACTL commands fill the input slots in order. Pooling is average
// pooling: a fixed all-ones kernel, the division by K*K is the requantization
// shift. The pooling type is this design's choice.
//
// Timing of PROC (from the cycle after the command): 1 load cycle (build the
// extended row, decide which output rows the input row feeds), K accumulate
// cycles (one kernel column each), 1 cycle weighting by 2^t (radix encoding: the
// spike of time step t counts 2^t), 1 cycle adding into the partial-sum memory.
// busy_proc is high for K+3 cycles, 8 for K=5 as published. The next input row
// may be loaded (row_we) while the module is busy.
//
// Partial-sum memory (the module's local memory): D_MAX rows by X columns of
// PSUM_W-bit signed sums, accumulated across time steps and input channels.
// Input row r feeds output row o with kernel row ky when r+pad-ky = o*stride;
// rows outside the map (padding) contribute nothing and need no command.
//
// ACTS: a transfer of P*T*D_out (2D destination) or P*D_out*D_out (1D
// destination) one-per-cycle writes of requantized activations, addresses
// base, base+1, ... in the buffer layout (channel, time step, row) or
// (channel, row, column). busy_xfer is high during it; at its end the
// partial-sum memory is cleared for the next group of output channels.
//
// RST clears the row counter, the input-slot pointer and keeps partial sums.
// Configuration (CONF, forwarded only when the module is enabled) sets stride,
// padding, D_in, D_out, parallel channels, requantization shift and time step.
module pm2d
  import e3ne_pkg::*;
#(
  parameter int unsigned Y       = 5,    // rows = kernel size
  parameter int unsigned X       = 28,   // columns
  parameter int unsigned W_IN    = 32,   // input row width
  parameter int unsigned P_MAX   = 6,    // max parallel output channels
  parameter int unsigned B       = 3,    // weight bits
  parameter int unsigned T       = 4,    // time steps
  parameter int unsigned PSUM_W  = 18,   // partial sum bits
  parameter int unsigned D_MAX   = 28,   // max output feature-map size
  parameter int unsigned STR_MAX = 1,    // largest stride built in
  parameter bit          IS_POOL = 1'b0,
  parameter int unsigned PW      = (P_MAX > 1) ? $clog2(P_MAX) : 1
) (
  input  logic                clk,
  input  logic                rst_n,
  // configuration and commands (already gated by this module's enable)
  input  logic                cfg_we,
  input  logic [4:0]          cfg_idx,
  input  logic [22:0]         cfg_val,
  input  logic                rst_cmd,
  input  logic                proc_cmd,
  input  logic                acts_cmd,
  input  logic [22:0]         acts_base,
  input  logic                acts_1d,
  // kernel load
  input  logic                ker_we,
  input  logic [PW-1:0]       ker_slot,
  input  logic [Y*Y*B-1:0]    ker_data,
  // activation row load
  input  logic                row_we,
  input  logic [W_IN-1:0]     row_data,
  // activation store
  output logic                out_we,
  output logic                out_1d,
  output logic [22:0]         out_addr,
  output logic [X-1:0]        out_row,
  output logic [T-1:0]        out_word,
  // status
  output logic                busy_proc,
  output logic                busy_xfer
);
  localparam int unsigned E     = X * STR_MAX + Y - 1;  // extended row width
  localparam int unsigned NSLOT = IS_POOL ? P_MAX : 1;
  localparam int unsigned SW    = (NSLOT > 1) ? $clog2(NSLOT) : 1;
  localparam int unsigned KW    = (Y > 1) ? $clog2(Y + 1) : 1;

  typedef logic signed [PSUM_W-1:0] psum_t;
  typedef logic signed [B-1:0]      wgt_t;

  // ------------------------------------------------------------ configuration
  logic [7:0] cfg_stride, cfg_pad, cfg_din, cfg_dout, cfg_par;
  logic [4:0] cfg_shift;
  logic [3:0] cfg_tstep;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cfg_stride <= 8'd1;
      cfg_pad    <= 8'd0;
      cfg_din    <= 8'(W_IN);
      cfg_dout   <= 8'(X);
      cfg_par    <= 8'd1;
      cfg_shift  <= 5'd0;
      cfg_tstep  <= 4'd0;
    end else if (cfg_we) begin
      unique case (cfg_idx)
        CFG_STRIDE: cfg_stride <= cfg_val[7:0];
        CFG_PAD:    cfg_pad    <= cfg_val[7:0];
        CFG_DIN:    cfg_din    <= cfg_val[7:0];
        CFG_DOUT:   cfg_dout   <= cfg_val[7:0];
        CFG_PAR:    cfg_par    <= cfg_val[7:0];
        CFG_SHIFT:  cfg_shift  <= cfg_val[4:0];
        CFG_TSTEP:  cfg_tstep  <= cfg_val[3:0];
        default: ;
      endcase
    end
  end

  // window start columns S_p and the window each column belongs to
  logic [7:0]    s_idx  [P_MAX];
  logic [PW-1:0] colwin [X];
  always_comb begin
    for (int p = 0; p < P_MAX; p++)
      s_idx[p] = 8'((p * (int'(cfg_din) + int'(cfg_pad))) / ((cfg_stride == 0) ? 1 : int'(cfg_stride)));
    for (int x = 0; x < X; x++) begin
      colwin[x] = '0;
      for (int p = 1; p < P_MAX; p++)
        if (p < int'(cfg_par) && int'(s_idx[p]) <= x) colwin[x] = PW'(p);
    end
  end

  // ------------------------------------------------------------ kernels
  wgt_t [P_MAX-1:0][Y-1:0][Y-1:0] kern;
  if (IS_POOL) begin : g_pool_kernel
    always_comb
      for (int p = 0; p < P_MAX; p++)
        for (int i = 0; i < Y; i++)
          for (int j = 0; j < Y; j++) kern[p][i][j] = wgt_t'(1);
  end else begin : g_conv_kernel
    always_ff @(posedge clk) begin
      if (ker_we)
        for (int i = 0; i < Y; i++)
          for (int j = 0; j < Y; j++)
            kern[ker_slot][i][j] <= wgt_t'(ker_data[(i*Y + j)*B +: B]);
    end
  end

  // ------------------------------------------------------------ input slots
  logic [W_IN-1:0] slot [NSLOT];
  logic [SW-1:0]   ld_ptr;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ld_ptr <= '0;
      for (int s = 0; s < NSLOT; s++) slot[s] <= '0;
    end else begin
      if (row_we) begin
        slot[ld_ptr] <= row_data;
        if (NSLOT > 1) ld_ptr <= (int'(ld_ptr) == NSLOT - 1) ? '0 : ld_ptr + 1'b1;
      end
      if (rst_cmd || proc_cmd) ld_ptr <= '0;
    end
  end

  // extended row: P copies of the input row with period D_in + pad
  logic [E-1:0] ext_next;
  always_comb begin
    int pos;
    ext_next = '0;
    for (int p = 0; p < P_MAX; p++)
      for (int i = 0; i < W_IN; i++) begin
        pos = p * (int'(cfg_din) + int'(cfg_pad)) + int'(cfg_pad) + i;
        if (p < int'(cfg_par) && i < int'(cfg_din) && pos < int'(E))
          ext_next[pos] = slot[IS_POOL ? p % NSLOT : 0][i];
      end
  end

  // ------------------------------------------------------------ processing FSM
  typedef enum logic [2:0] {P_IDLE, P_LOAD, P_ACC, P_SCALE, P_WRITE} pstate_e;
  pstate_e       pst;
  logic [E-1:0]  ext;
  logic [KW-1:0] kx;
  logic [7:0]    rowcnt;
  logic          ovalid [Y];
  logic [7:0]    oidx   [Y];
  psum_t [Y-1:0][X-1:0]     acc;
  psum_t [D_MAX-1:0][X-1:0] psum;

  // output rows fed by the current input row
  logic          ovalid_n [Y];
  logic [7:0]    oidx_n   [Y];
  always_comb begin
    int d, s;
    s = (cfg_stride == 0) ? 1 : int'(cfg_stride);
    for (int ky = 0; ky < Y; ky++) begin
      d = int'(rowcnt) + int'(cfg_pad) - ky;
      ovalid_n[ky] = (d >= 0) && (d % s == 0) && (d / s < int'(cfg_dout)) && (d / s < int'(D_MAX));
      oidx_n[ky]   = (d >= 0) ? 8'(d / s) : 8'd0;
    end
  end

  // partial-sum rows touched by the current input row, and the kernel row
  // (accumulator row) that feeds each of them
  logic          row_hit [D_MAX];
  logic [KW-1:0] row_src [D_MAX];
  always_comb begin
    for (int o = 0; o < D_MAX; o++) begin
      row_hit[o] = 1'b0;
      row_src[o] = '0;
      for (int ky = 0; ky < Y; ky++)
        if (ovalid[ky] && int'(oidx[ky]) == o) begin
          row_hit[o] = 1'b1;
          row_src[o] = KW'(ky);
        end
    end
  end

  // one kernel column: conditional accumulation of the weights under the spikes
  function automatic logic spike_at(logic [E-1:0] row, int idx);
    return (idx < int'(E)) ? row[idx] : 1'b0;
  endfunction

  assign busy_proc = (pst != P_IDLE);

  // ------------------------------------------------------------ store transfer
  logic          xfer;
  logic          x1d;
  logic [PW-1:0] xp;
  logic [3:0]    xt;
  logic [7:0]    xo, xc;
  logic [22:0]   xaddr;
  logic          xlast;
  assign busy_xfer = xfer;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pst    <= P_IDLE;
      ext    <= '0;
      kx     <= '0;
      rowcnt <= '0;
      for (int ky = 0; ky < Y; ky++) begin
        ovalid[ky] <= 1'b0;
        oidx[ky]   <= '0;
      end
      xfer  <= 1'b0;
      x1d   <= 1'b0;
      xp    <= '0;
      xt    <= '0;
      xo    <= '0;
      xc    <= '0;
      xaddr <= '0;
    end else begin
      // ---- processing
      unique case (pst)
        P_IDLE: if (proc_cmd) pst <= P_LOAD;
        P_LOAD: begin
          ext <= ext_next;
          for (int ky = 0; ky < Y; ky++) begin
            ovalid[ky] <= ovalid_n[ky];
            oidx[ky]   <= oidx_n[ky];
          end
          rowcnt <= rowcnt + 8'd1;
          kx     <= '0;
          pst    <= P_ACC;
        end
        P_ACC: begin
          if (int'(kx) == Y - 1) pst <= P_SCALE;
          kx <= kx + 1'b1;
        end
        P_SCALE: pst <= P_WRITE;
        P_WRITE: pst <= P_IDLE;
        default: pst <= P_IDLE;
      endcase
      if (rst_cmd) rowcnt <= '0;

      // ---- store transfer: order (p, t, o) for 2D, (p, o, c) for 1D
      if (acts_cmd && !xfer) begin
        xfer  <= 1'b1;
        x1d   <= acts_1d;
        xp    <= '0;
        xt    <= '0;
        xo    <= '0;
        xc    <= '0;
        xaddr <= acts_base;
      end else if (xfer) begin
        xaddr <= xaddr + 23'd1;
        if (!x1d) begin
          if (xo == cfg_dout - 8'd1) begin
            xo <= '0;
            if (int'(xt) == T - 1) begin
              xt <= '0;
              xp <= xp + 1'b1;
            end else xt <= xt + 4'd1;
          end else xo <= xo + 8'd1;
        end else begin
          if (xc == cfg_dout - 8'd1) begin
            xc <= '0;
            if (xo == cfg_dout - 8'd1) begin
              xo <= '0;
              xp <= xp + 1'b1;
            end else xo <= xo + 8'd1;
          end else xc <= xc + 8'd1;
        end
        if (xlast) xfer <= 1'b0;
      end
    end
  end

  // last word of the store transfer (the partial sums are cleared after it)
  assign xlast = xfer && (xp == PW'(cfg_par - 8'd1)) &&
                 (x1d ? (xc == cfg_dout - 8'd1 && xo == cfg_dout - 8'd1)
                      : (xo == cfg_dout - 8'd1 && int'(xt) == T - 1));

  // accumulator and partial-sum registers, one process per row
  for (genvar gy = 0; gy < Y; gy++) begin : g_acc_row
    psum_t [X-1:0] row_q;
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) row_q <= '0;
      else if (pst == P_LOAD) row_q <= '0;
      else if (pst == P_ACC) begin
        for (int x = 0; x < X; x++)
          if (spike_at(ext, x * int'(cfg_stride) + int'(kx)))
            row_q[x] <= row_q[x] + psum_t'(kern[colwin[x]][gy][kx]);
      end else if (pst == P_SCALE)
        for (int x = 0; x < X; x++) row_q[x] <= row_q[x] <<< cfg_tstep;
    end
    assign acc[gy] = row_q;
  end
  for (genvar go = 0; go < D_MAX; go++) begin : g_psum_row
    psum_t [X-1:0] row_q;
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) row_q <= '0;
      else if (xlast) row_q <= '0;
      else if (pst == P_WRITE && row_hit[go])
        for (int x = 0; x < X; x++) row_q[x] <= row_q[x] + acc[row_src[go]][x];
    end
    assign psum[go] = row_q;
  end

  // requantized output of the current transfer position: select the psum row,
  // requantize it, then pick the columns of window xp
  logic [7:0]   s_cur;
  psum_t        prow [X];
  logic [T-1:0] qrow [X];
  assign s_cur = (int'(xp) < int'(P_MAX)) ? s_idx[xp] : 8'd0;
  always_comb begin
    logic [15:0] q;
    for (int x = 0; x < X; x++) prow[x] = '0;
    for (int o = 0; o < D_MAX; o++)
      if (int'(xo) == o)
        for (int x = 0; x < X; x++) prow[x] = psum[o][x];
    for (int x = 0; x < X; x++) begin
      q       = requant(32'(prow[x]), cfg_shift, T);
      qrow[x] = q[T-1:0];
    end
  end
  always_comb begin
    int col;
    out_we   = xfer;
    out_1d   = x1d;
    out_addr = xaddr;
    out_row  = '0;
    for (int c = 0; c < X; c++) begin
      col = int'(s_cur) + c;
      if (c < int'(cfg_dout) && col < int'(X)) out_row[c] = qrow[col][xt];
    end
    col      = int'(s_cur) + int'(xc);
    out_word = (col < int'(X)) ? qrow[col] : '0;
  end

  // ------------------------------------------------------------ protocol checks
  always_ff @(posedge clk) begin
    if (rst_n) begin
      assert (!(proc_cmd && busy_proc)) else $error("pm2d: PROC while processing");
      assert (!(acts_cmd && busy_xfer)) else $error("pm2d: ACTS while storing");
      assert (!(proc_cmd && busy_xfer)) else $error("pm2d: PROC during store transfer");
    end
  end
endmodule
