// e3ne_top: the E3NE spiking-network accelerator configured for LeNet-5.
//
// Blocks and data flow:
//   * instr_decoder + instr_mem: the central controller. It executes the compiled
//     instruction stream and issues one command at a time.
//   * N_CONV convolution modules (pm2d, Y=5 x X=28, up to 6 parallel output
//     channels each) and one pooling module (pm2d, Y=2 x X=14, up to 2 channels):
//     the two-dimensional processing modules, reused by all layers of a kernel size.
//   * one linear module (pm_linear, P_LIN parallel outputs).
//   * ping2d/pong2d: activation buffers for 2D feature maps (one spike row per
//     address); ping1d/pong1d: buffers for 1D features (one T-bit train per
//     address). Activations bounce between ping and pong from layer to layer.
//   * N_WMEM weight memories, one per layer: three convolution, two linear.
//
// Command routing (this design's own encoding of the published instruction set):
//   ENA  value = enable mask, bit i = conv module i, bit 16 = pool, bit 17 = linear.
//   CONF parameter/value broadcast to every enabled module.
//   PROC starts every enabled 2D module on its loaded row; LIN starts the linear module.
//   RST  resets enabled modules and the kernel-load pointer.
//   KERL module = weight memory id, address = row. The kernel read is delivered one
//        clock later to the kernel-load pointer (conv module m, window slot s); the
//        pointer starts at (0,0) after RST and steps through the slots of the
//        configured parallelism, then on to the next convolution module.
//   KERD module = weight memory id, address = row: copies that row from external
//        DRAM into the weight memory (for networks whose weights do not fit).
//   ACTL module = 2D buffer id, address = row: the row reaches all enabled 2D
//        modules one clock later (two clocks in all, as published).
//   ACTS module = destination buffer id, address = base: starts the store
//        transfer of the lowest-numbered enabled 2D module.
//   WAIT module = processing module or weight memory, cond 0 = processing done,
//        cond 1 = transfer done.
//   END  halts the decoder and raises done.
// The host loads instructions, weights and the input spike rows through the load
// ports while the accelerator is idle and reads results through the read port.
// External DRAM is reached through a simple request/response port.
module e3ne_top
  import e3ne_pkg::*;
#(
  parameter int unsigned N_CONV    = 4,
  parameter int unsigned K_CONV    = 5,
  parameter int unsigned X_CONV    = 28,
  parameter int unsigned P_CONV    = 6,
  parameter int unsigned K_POOL    = 2,
  parameter int unsigned X_POOL    = 14,
  parameter int unsigned P_POOL    = 2,
  parameter int unsigned STR_CONV  = 1,
  parameter int unsigned STR_POOL  = 2,
  parameter int unsigned B         = 3,
  parameter int unsigned T         = 4,
  parameter int unsigned PSUM_W    = 18,
  parameter int unsigned P_LIN     = 12,
  parameter int unsigned PING2D_W  = 32,
  parameter int unsigned PING2D_H  = 336,
  parameter int unsigned PONG2D_W  = 28,
  parameter int unsigned PONG2D_H  = 672,
  parameter int unsigned PING1D_H  = 120,
  parameter int unsigned PONG1D_H  = 84,
  parameter int unsigned N_WMEM    = 5,
  parameter int unsigned WM_H   [N_WMEM] = '{6, 96, 1920, 840, 84},
  parameter bit          WM_LIN [N_WMEM] = '{1'b0, 1'b0, 1'b0, 1'b1, 1'b1},
  parameter int unsigned IMEM_DEPTH = 32768,
  // derived
  parameter int unsigned KW_CONV   = K_CONV * K_CONV * B,
  parameter int unsigned WMAX      = (KW_CONV > P_LIN * B) ? KW_CONV : P_LIN * B,
  parameter int unsigned IAW       = $clog2(IMEM_DEPTH),
  parameter int unsigned W_IN      = (PING2D_W > PONG2D_W) ? PING2D_W : PONG2D_W
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  output logic            done,
  output logic            running,
  // host: instruction load
  input  logic            imem_we,
  input  logic [IAW-1:0]  imem_addr,
  input  logic [31:0]     imem_data,
  // host: weight load
  input  logic            wm_we,
  input  logic [2:0]      wm_sel,
  input  logic [22:0]     wm_addr,
  input  logic [WMAX-1:0] wm_data,
  // host: activation load (buffer id MOD_PING2D .. MOD_PONG1D)
  input  logic            act_we,
  input  logic [4:0]      act_sel,
  input  logic [22:0]     act_addr,
  input  logic [W_IN-1:0] act_data,
  // host: activation read (1 clock latency, only while not running)
  input  logic            hrd_en,
  input  logic [4:0]      hrd_sel,
  input  logic [22:0]     hrd_addr,
  output logic [W_IN-1:0] hrd_data,
  // external DRAM (weights that do not fit on chip)
  output logic            dram_req,
  output logic [22:0]     dram_addr,
  input  logic            dram_rvalid,
  input  logic [WMAX-1:0] dram_rdata,
  // performance counters
  output logic [31:0]     instr_count,
  output logic [31:0]     cycle_count,
  output logic [31:0]     wait_cycles
);
  localparam int unsigned N2D  = N_CONV + 1;         // 2D modules, pool last
  localparam int unsigned PWC  = (P_CONV > 1) ? $clog2(P_CONV) : 1;
  localparam int unsigned PWP  = (P_POOL > 1) ? $clog2(P_POOL) : 1;
  localparam int unsigned MW   = (N_CONV > 1) ? $clog2(N_CONV) : 1;

  // ------------------------------------------------------------ controller
  logic [IAW-1:0] dec_addr;
  logic [31:0]    dec_data;
  logic           cmd_valid;
  instr_t         cmd;
  logic           wait_active, wait_ok;
  logic [4:0]     wait_mod;
  logic [1:0]     wait_cond;

  instr_mem #(.DEPTH(IMEM_DEPTH)) u_imem (
    .clk, .we(imem_we), .wr_addr(imem_addr), .wr_data(imem_data),
    .rd_addr(dec_addr), .rd_data(dec_data)
  );

  instr_decoder #(.AW(IAW)) u_dec (
    .clk, .rst_n, .start, .done, .running,
    .imem_addr(dec_addr), .imem_data(dec_data),
    .cmd_valid, .cmd,
    .wait_active, .wait_mod, .wait_cond, .wait_ok,
    .instr_count, .cycle_count, .wait_cycles
  );

  logic is_ena, is_conf, is_proc, is_lin, is_rst, is_kerl, is_kerd, is_actl, is_acts;
  assign is_ena  = cmd_valid && cmd.op == OP_ENA;
  assign is_conf = cmd_valid && cmd.op == OP_CONF;
  assign is_proc = cmd_valid && cmd.op == OP_PROC;
  assign is_lin  = cmd_valid && cmd.op == OP_LIN;
  assign is_rst  = cmd_valid && cmd.op == OP_RST;
  assign is_kerl = cmd_valid && cmd.op == OP_KERL;
  assign is_kerd = cmd_valid && cmd.op == OP_KERD;
  assign is_actl = cmd_valid && cmd.op == OP_ACTL;
  assign is_acts = cmd_valid && cmd.op == OP_ACTS;

  // enable mask and the layer's parallelism (kernel-pointer wrap)
  logic [17:0] ena;
  logic [7:0]  par_cfg;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ena     <= '0;
      par_cfg <= 8'd1;
    end else begin
      if (is_ena) ena <= cmd.value[17:0];
      if (is_conf && cmd.field == CFG_PAR) par_cfg <= cmd.value[7:0];
    end
  end

  logic [N2D-1:0] ena2d;
  always_comb begin
    for (int i = 0; i < N_CONV; i++) ena2d[i] = ena[i];
    ena2d[N_CONV] = ena[ENA_POOL_BIT];
  end

  // ------------------------------------------------------------ ACTL: buffer -> PMs
  logic           actl_q;
  logic [4:0]     actl_src;
  logic [W_IN-1:0] row_bus;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      actl_q   <= 1'b0;
      actl_src <= '0;
    end else begin
      actl_q   <= is_actl;
      if (is_actl) actl_src <= cmd.field;
    end
  end

  // ------------------------------------------------------------ weight memories
  logic            kerl_q;
  logic [2:0]      wrd_sel, wrd_sel_q;
  logic            wrd_en;
  logic [22:0]     wrd_addr;
  logic [WMAX-1:0] wm_rdata [N_WMEM];
  logic [WMAX-1:0] w_bus;
  // linear module's weight port
  logic            lin_busy, lin_w_en, lin_a_en, lin_lsrc;
  logic [2:0]      lin_w_sel;
  logic [22:0]     lin_w_addr, lin_a_addr;

  always_comb begin
    if (lin_busy) begin
      wrd_en   = lin_w_en;
      wrd_sel  = lin_w_sel;
      wrd_addr = lin_w_addr;
    end else begin
      wrd_en   = is_kerl;
      wrd_sel  = 3'(cmd.field - MOD_WMEM0);
      wrd_addr = cmd.value;
    end
  end

  // KERD: DRAM -> weight memory
  logic        kerd_pend;
  logic [2:0]  kerd_sel;
  logic [22:0] kerd_addr;
  assign dram_req  = is_kerd;
  assign dram_addr = cmd.value;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      kerd_pend <= 1'b0;
      kerd_sel  <= '0;
      kerd_addr <= '0;
      kerl_q    <= 1'b0;
      wrd_sel_q <= '0;
    end else begin
      kerl_q    <= is_kerl;
      wrd_sel_q <= wrd_sel;
      if (is_kerd) begin
        kerd_pend <= 1'b1;
        kerd_sel  <= 3'(cmd.field - MOD_WMEM0);
        kerd_addr <= cmd.value;
      end else if (dram_rvalid) kerd_pend <= 1'b0;
    end
  end

  for (genvar m = 0; m < N_WMEM; m++) begin : g_wmem
    localparam int unsigned WW = WM_LIN[m] ? P_LIN * B : KW_CONV;
    localparam int unsigned AW = $clog2(WM_H[m]);
    logic          we;
    logic [AW-1:0] wa;
    logic [WW-1:0] wd, rd;
    always_comb begin
      we = 1'b0;
      wa = AW'(wm_addr);
      wd = WW'(wm_data);
      if (kerd_pend && dram_rvalid && kerd_sel == 3'(m)) begin
        we = 1'b1;
        wa = AW'(kerd_addr);
        wd = WW'(dram_rdata);
      end else if (wm_we && wm_sel == 3'(m)) we = 1'b1;
    end
    weight_mem #(.W(WW), .H(WM_H[m])) u_wm (
      .clk, .we, .wr_addr(wa), .wr_data(wd),
      .rd_en(wrd_en && wrd_sel == 3'(m)), .rd_addr(AW'(wrd_addr)), .rd_data(rd)
    );
    assign wm_rdata[m] = WMAX'(rd);
  end
  assign w_bus = (int'(wrd_sel_q) < int'(N_WMEM)) ? wm_rdata[wrd_sel_q] : '0;

  // kernel-load pointer
  logic [MW-1:0]  kptr_pm;
  logic [PWC-1:0] kptr_slot;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      kptr_pm   <= '0;
      kptr_slot <= '0;
    end else if (is_rst) begin
      kptr_pm   <= '0;
      kptr_slot <= '0;
    end else if (kerl_q) begin
      if (8'(kptr_slot) + 8'd1 >= par_cfg) begin
        kptr_slot <= '0;
        kptr_pm   <= kptr_pm + 1'b1;
      end else kptr_slot <= kptr_slot + 1'b1;
    end
  end

  // ------------------------------------------------------------ ACTS source
  logic [N2D-1:0] acts_go;
  logic           acts_1d;
  logic [4:0]     acts_dst;
  always_comb begin
    acts_go = '0;
    for (int i = N2D - 1; i >= 0; i--)
      if (ena2d[i]) acts_go = N2D'(1) << i;
    if (!is_acts) acts_go = '0;
  end
  assign acts_1d = (cmd.field == MOD_PING1D) || (cmd.field == MOD_PONG1D);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) acts_dst <= '0;
    else if (is_acts) acts_dst <= cmd.field;
  end

  // ------------------------------------------------------------ 2D processing modules
  logic [N2D-1:0]  pm_busy_proc, pm_busy_xfer, pm_out_we;
  logic [22:0]     pm_out_addr [N2D];
  logic [W_IN-1:0] pm_out_row  [N2D];
  logic [T-1:0]    pm_out_word [N2D];

  for (genvar i = 0; i < N_CONV; i++) begin : g_conv
    logic [X_CONV-1:0] orow;
    logic              o1d;
    pm2d #(
      .Y(K_CONV), .X(X_CONV), .W_IN(W_IN), .P_MAX(P_CONV), .B(B), .T(T),
      .PSUM_W(PSUM_W), .D_MAX(X_CONV), .STR_MAX(STR_CONV), .IS_POOL(1'b0)
    ) u_conv (
      .clk, .rst_n,
      .cfg_we(is_conf && ena2d[i]), .cfg_idx(cmd.field), .cfg_val(cmd.value),
      .rst_cmd(is_rst && ena2d[i]), .proc_cmd(is_proc && ena2d[i]),
      .acts_cmd(acts_go[i]), .acts_base(cmd.value), .acts_1d,
      .ker_we(kerl_q && kptr_pm == MW'(i)), .ker_slot(kptr_slot), .ker_data(w_bus[KW_CONV-1:0]),
      .row_we(actl_q && ena2d[i]), .row_data(row_bus),
      .out_we(pm_out_we[i]), .out_1d(o1d), .out_addr(pm_out_addr[i]), .out_row(orow),
      .out_word(pm_out_word[i]),
      .busy_proc(pm_busy_proc[i]), .busy_xfer(pm_busy_xfer[i])
    );
    assign pm_out_row[i] = W_IN'(orow);
  end

  begin : g_pool
    logic [X_POOL-1:0] orow;
    logic              o1d;
    pm2d #(
      .Y(K_POOL), .X(X_POOL), .W_IN(W_IN), .P_MAX(P_POOL), .B(B), .T(T),
      .PSUM_W(PSUM_W), .D_MAX(X_POOL), .STR_MAX(STR_POOL), .IS_POOL(1'b1)
    ) u_pool (
      .clk, .rst_n,
      .cfg_we(is_conf && ena2d[N_CONV]), .cfg_idx(cmd.field), .cfg_val(cmd.value),
      .rst_cmd(is_rst && ena2d[N_CONV]), .proc_cmd(is_proc && ena2d[N_CONV]),
      .acts_cmd(acts_go[N_CONV]), .acts_base(cmd.value), .acts_1d,
      .ker_we(1'b0), .ker_slot(PWP'(0)), .ker_data('0),
      .row_we(actl_q && ena2d[N_CONV]), .row_data(row_bus),
      .out_we(pm_out_we[N_CONV]), .out_1d(o1d), .out_addr(pm_out_addr[N_CONV]), .out_row(orow),
      .out_word(pm_out_word[N_CONV]),
      .busy_proc(pm_busy_proc[N_CONV]), .busy_xfer(pm_busy_xfer[N_CONV])
    );
    assign pm_out_row[N_CONV] = W_IN'(orow);
  end

  // store bus: at most one module transfers at a time
  logic            st_we;
  logic [22:0]     st_addr;
  logic [W_IN-1:0] st_row;
  logic [T-1:0]    st_word;
  always_comb begin
    st_we   = 1'b0;
    st_addr = '0;
    st_row  = '0;
    st_word = '0;
    for (int i = 0; i < N2D; i++)
      if (pm_out_we[i]) begin
        st_we   = 1'b1;
        st_addr = pm_out_addr[i];
        st_row  = pm_out_row[i];
        st_word = pm_out_word[i];
      end
  end

  // ------------------------------------------------------------ linear module
  logic         lin_out_we;
  logic [22:0]  lin_out_addr;
  logic [T-1:0] lin_out_word, lin_a_data;
  pm_linear #(.P(P_LIN), .B(B), .T(T), .PSUM_W(PSUM_W)) u_lin (
    .clk, .rst_n,
    .cfg_we(is_conf && ena[ENA_LIN_BIT]), .cfg_idx(cmd.field), .cfg_val(cmd.value),
    .lin_cmd(is_lin && ena[ENA_LIN_BIT]),
    .lsrc(lin_lsrc), .act_rd_en(lin_a_en), .act_rd_addr(lin_a_addr), .act_rd_data(lin_a_data),
    .w_sel(lin_w_sel), .w_rd_en(lin_w_en), .w_rd_addr(lin_w_addr),
    .w_rd_data(w_bus[P_LIN*B-1:0]),
    .out_we(lin_out_we), .out_addr(lin_out_addr), .out_word(lin_out_word),
    .busy(lin_busy)
  );

  // ------------------------------------------------------------ activation buffers
  // write ports: host (while idle), PM store transfer, linear results
  // read ports: ACTL (2D), linear source (1D), host
  logic [3:0]      buf_we, buf_re;
  logic [22:0]     buf_wa [4];
  logic [22:0]     buf_ra [4];
  logic [W_IN-1:0] buf_wd [4];
  logic [W_IN-1:0] buf_rd [4];
  logic [4:0]      hrd_sel_q;

  always_comb begin
    for (int b = 0; b < 4; b++) begin
      logic [4:0] id;
      id = MOD_PING2D + 5'(b);
      buf_we[b] = 1'b0;
      buf_wa[b] = act_addr;
      buf_wd[b] = act_data;
      if (st_we && acts_dst == id) begin
        buf_we[b] = 1'b1;
        buf_wa[b] = st_addr;
        buf_wd[b] = (b >= 2) ? W_IN'(st_word) : st_row;
      end else if (lin_out_we && ((b == 3 && !lin_lsrc) || (b == 2 && lin_lsrc))) begin
        buf_we[b] = 1'b1;
        buf_wa[b] = lin_out_addr;
        buf_wd[b] = W_IN'(lin_out_word);
      end else if (act_we && act_sel == id) buf_we[b] = 1'b1;

      buf_re[b] = 1'b0;
      buf_ra[b] = hrd_addr;
      if (is_actl && cmd.field == id) begin
        buf_re[b] = 1'b1;
        buf_ra[b] = cmd.value;
      end else if (lin_a_en && ((b == 2 && !lin_lsrc) || (b == 3 && lin_lsrc))) begin
        buf_re[b] = 1'b1;
        buf_ra[b] = lin_a_addr;
      end else if (hrd_en && hrd_sel == id) buf_re[b] = 1'b1;
    end
  end

  act_buffer #(.W(PING2D_W), .H(PING2D_H)) u_ping2d (
    .clk, .we(buf_we[0]), .wr_addr($clog2(PING2D_H)'(buf_wa[0])), .wr_data(PING2D_W'(buf_wd[0])),
    .rd_en(buf_re[0]), .rd_addr($clog2(PING2D_H)'(buf_ra[0])), .rd_data(buf_rd[0][PING2D_W-1:0])
  );
  act_buffer #(.W(PONG2D_W), .H(PONG2D_H)) u_pong2d (
    .clk, .we(buf_we[1]), .wr_addr($clog2(PONG2D_H)'(buf_wa[1])), .wr_data(PONG2D_W'(buf_wd[1])),
    .rd_en(buf_re[1]), .rd_addr($clog2(PONG2D_H)'(buf_ra[1])), .rd_data(buf_rd[1][PONG2D_W-1:0])
  );
  act_buffer #(.W(T), .H(PING1D_H)) u_ping1d (
    .clk, .we(buf_we[2]), .wr_addr($clog2(PING1D_H)'(buf_wa[2])), .wr_data(buf_wd[2][T-1:0]),
    .rd_en(buf_re[2]), .rd_addr($clog2(PING1D_H)'(buf_ra[2])), .rd_data(buf_rd[2][T-1:0])
  );
  act_buffer #(.W(T), .H(PONG1D_H)) u_pong1d (
    .clk, .we(buf_we[3]), .wr_addr($clog2(PONG1D_H)'(buf_wa[3])), .wr_data(buf_wd[3][T-1:0]),
    .rd_en(buf_re[3]), .rd_addr($clog2(PONG1D_H)'(buf_ra[3])), .rd_data(buf_rd[3][T-1:0])
  );
  if (PING2D_W < W_IN) begin : g_pad0
    assign buf_rd[0][W_IN-1:PING2D_W] = '0;
  end
  if (PONG2D_W < W_IN) begin : g_pad1
    assign buf_rd[1][W_IN-1:PONG2D_W] = '0;
  end
  assign buf_rd[2][W_IN-1:T] = '0;
  assign buf_rd[3][W_IN-1:T] = '0;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) hrd_sel_q <= '0;
    else if (hrd_en) hrd_sel_q <= hrd_sel;
  end
  assign row_bus    = (actl_src == MOD_PONG2D) ? buf_rd[1] : buf_rd[0];
  assign lin_a_data = lin_lsrc ? buf_rd[3][T-1:0] : buf_rd[2][T-1:0];
  assign hrd_data   = (int'(hrd_sel_q) >= int'(MOD_PING2D) && int'(hrd_sel_q) <= int'(MOD_PONG1D))
                      ? buf_rd[hrd_sel_q - MOD_PING2D] : '0;

  // ------------------------------------------------------------ wait conditions
  always_comb begin
    wait_ok = 1'b1;
    if (int'(wait_mod) < int'(N_CONV))
      wait_ok = (wait_cond == COND_XFER) ? !pm_busy_xfer[wait_mod] : !pm_busy_proc[wait_mod];
    else if (wait_mod == MOD_POOL)
      wait_ok = (wait_cond == COND_XFER) ? !pm_busy_xfer[N_CONV] : !pm_busy_proc[N_CONV];
    else if (wait_mod == MOD_LIN)
      wait_ok = !lin_busy;
    else if (wait_mod >= MOD_WMEM0)
      wait_ok = !kerd_pend;
  end

  // ------------------------------------------------------------ protocol checks
  always_ff @(posedge clk) begin
    if (rst_n) begin
      assert ($countones(pm_out_we) <= 1) else $error("e3ne_top: two store transfers at once");
      assert (!(is_kerl && lin_busy)) else $error("e3ne_top: KERL while linear module busy");
      assert (!(is_kerd && kerd_pend)) else $error("e3ne_top: KERD while DRAM read pending");
      assert (!(running && (imem_we || wm_we || act_we))) else $error("e3ne_top: host load while running");
    end
  end
endmodule
