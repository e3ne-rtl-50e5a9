// pm_linear: one-dimensional processing module for fully-connected layers.
//
// Computes P output features at a time ("parallel-computed output features").
// Its only datapath is P conditional accumulators: for every input feature i it
// reads the input's T-bit spike train from the source 1D buffer and one weight
// row (the P weights of i towards the current output group, P*B bits, so all
// weights of a step arrive in one clock as published) and adds, for each spike
// s_t, the weight scaled by 2^t (radix encoding). The T conditional additions of
// one input are done in the same clock.
//
// LIN starts the whole layer. For each output group g = 0 .. ceil(N_out/P)-1:
// clear accumulators, stream the N_in inputs (one per clock; weight row
// WBASE + g*N_in + i), wait one clock for the last read, then write the group's
// requantized outputs (right shift with rounding, clamp to [0, 2^T-1]) to the
// destination 1D buffer at addresses g*P + j, one per clock, skipping lanes
// beyond N_out. Cycles per layer: groups * (N_in + 1 + P). busy is high
// throughout. Buffers: CFG_LSRC = 0 reads ping1d and writes pong1d, 1 reverses.
// The group-wise schedule and the one-input-per-clock rate are this design's
// choice; the paper fixes only the parallel output lanes fed by one memory row.
// Addresses are 23 bits wide to match the instruction value field, but layer
// sizes are held in 10-bit counters, so the upper address bits of the buffer
// ports (and the unused high bits of w_sel) are constant zero by design.
module pm_linear
  import e3ne_pkg::*;
#(
  parameter int unsigned P      = 12,   // parallel output features
  parameter int unsigned B      = 3,    // weight bits
  parameter int unsigned T      = 4,    // time steps
  parameter int unsigned PSUM_W = 18    // accumulator bits
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           cfg_we,
  input  logic [4:0]     cfg_idx,
  input  logic [22:0]    cfg_val,
  input  logic           lin_cmd,
  // source activations (1D buffer selected by lsrc)
  output logic           lsrc,
  output logic           act_rd_en,
  output logic [22:0]    act_rd_addr,
  input  logic [T-1:0]   act_rd_data,
  // weights
  output logic [2:0]     w_sel,
  output logic           w_rd_en,
  output logic [22:0]    w_rd_addr,
  input  logic [P*B-1:0] w_rd_data,
  // results (1D buffer selected by !lsrc)
  output logic           out_we,
  output logic [22:0]    out_addr,
  output logic [T-1:0]   out_word,
  output logic           busy
);
  localparam int unsigned PWID = (P > 1) ? $clog2(P) : 1;
  typedef logic signed [PSUM_W-1:0] psum_t;

  logic [9:0]  cfg_nin, cfg_nout;
  logic [4:0]  cfg_shift;
  logic [22:0] cfg_wbase;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cfg_nin   <= 10'd1;
      cfg_nout  <= 10'd1;
      cfg_shift <= '0;
      cfg_wbase <= '0;
      lsrc      <= 1'b0;
      w_sel     <= '0;
    end else if (cfg_we) begin
      unique case (cfg_idx)
        CFG_DIN:   cfg_nin   <= cfg_val[9:0];
        CFG_DOUT:  cfg_nout  <= cfg_val[9:0];
        CFG_SHIFT: cfg_shift <= cfg_val[4:0];
        CFG_LSRC:  lsrc      <= cfg_val[0];
        CFG_WMEM:  w_sel     <= cfg_val[2:0];
        CFG_WBASE: cfg_wbase <= cfg_val;
        default: ;
      endcase
    end
  end

  typedef enum logic [1:0] {L_IDLE, L_RUN, L_DRAIN, L_WRITE} lstate_e;
  lstate_e       st;
  logic [9:0]    in_idx;     // next input to read
  logic [9:0]    grp_base;   // first output of the current group
  logic [22:0]   wptr;
  logic          dvalid;     // read data valid this cycle
  logic [PWID-1:0] lane;
  psum_t         acc [P];

  assign busy        = (st != L_IDLE);
  assign act_rd_en   = (st == L_RUN);
  assign act_rd_addr = 23'(in_idx);
  assign w_rd_en     = (st == L_RUN);
  assign w_rd_addr   = wptr;

  // conditional accumulation of one input spike train against P weights
  psum_t acc_next [P];
  always_comb begin
    for (int j = 0; j < P; j++) begin
      acc_next[j] = acc[j];
      for (int t = 0; t < T; t++)
        if (act_rd_data[t])
          acc_next[j] = acc_next[j] + (psum_t'(signed'(w_rd_data[j*B +: B])) <<< t);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st       <= L_IDLE;
      in_idx   <= '0;
      grp_base <= '0;
      wptr     <= '0;
      dvalid   <= 1'b0;
      lane     <= '0;
      for (int j = 0; j < P; j++) acc[j] <= '0;
    end else begin
      dvalid <= (st == L_RUN);
      if (dvalid)
        for (int j = 0; j < P; j++) acc[j] <= acc_next[j];
      unique case (st)
        L_IDLE: if (lin_cmd) begin
          st       <= L_RUN;
          in_idx   <= '0;
          grp_base <= '0;
          wptr     <= cfg_wbase;
          for (int j = 0; j < P; j++) acc[j] <= '0;
        end
        L_RUN: begin
          wptr <= wptr + 23'd1;
          if (in_idx == cfg_nin - 10'd1) st <= L_DRAIN;
          else in_idx <= in_idx + 10'd1;
        end
        L_DRAIN: begin
          st   <= L_WRITE;
          lane <= '0;
        end
        L_WRITE: begin
          if (int'(lane) == P - 1 || grp_base + 10'(lane) + 10'd1 >= cfg_nout) begin
            if (grp_base + 10'(P) >= cfg_nout) st <= L_IDLE;
            else begin
              st       <= L_RUN;
              in_idx   <= '0;
              grp_base <= grp_base + 10'(P);
              for (int j = 0; j < P; j++) acc[j] <= '0;
            end
          end
          lane <= lane + 1'b1;
        end
        default: st <= L_IDLE;
      endcase
    end
  end

  always_comb begin
    logic [15:0] q;
    q        = (int'(lane) < P) ? requant(32'(acc[lane]), cfg_shift, T) : '0;
    out_we   = (st == L_WRITE);
    out_addr = 23'(grp_base) + 23'(lane);
    out_word = q[T-1:0];
  end

  always_ff @(posedge clk) begin
    if (rst_n) assert (!(lin_cmd && busy)) else $error("pm_linear: LIN while busy");
  end
endmodule
