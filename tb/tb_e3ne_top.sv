// tb_e3ne_top: end-to-end test of the accelerator running LeNet-5 at the
// default configuration (four convolution modules, T=4, 3-bit weights).
//
// The testbench plays the part of the compiler and the host:
//   * it draws random weights in [-4,3] and a random 32x32 input image with
//     4-bit pixels, and computes the network with plain integer arithmetic
//     (convolution, average pooling, fully-connected), choosing each layer's
//     requantization shift from the largest partial sum as a compiler would
//     from a representative input;
//   * it generates the instruction stream layer by layer following the
//     convolution loop nest (output-channel groups, time steps, input channels,
//     rows) with the next row loaded while the current one is processed;
//   * it loads instructions, weights and the input spike rows, except the first
//     layer's weights, which are fetched from a DRAM model with KERD to exercise
//     the off-chip weight path;
//   * it runs the accelerator and compares the 10 outputs, and also every
//     intermediate feature map by snooping the buffer writes.
// It counts the mechanisms exercised (WAIT stalls, row loads overlapped with
// processing, parallel output channels inside a module, several convolution
// modules at once, stride 2, flatten to 1D, several linear output groups,
// DRAM weight loads, clamping in requantization) and fails if one never
// happened. It checks the 8-cycle PROC time of the 5x5 module and that the
// instruction rate is between 0.3 and 0.5 per clock.
module tb_e3ne_top;
  import e3ne_pkg::*;

  // ---------------------------------------------------------------- DUT configuration (defaults)
  localparam int N_CONV = 4, K_CONV = 5, X_CONV = 28, P_CONV = 6;
  localparam int K_POOL = 2, X_POOL = 14, P_POOL = 2;
  localparam int B = 3, T = 4, P_LIN = 12;
  localparam int KW = K_CONV * K_CONV * B;
  localparam int WMAX = KW;

  logic clk = 0, rst_n = 0, start = 0;
  always #5 clk = ~clk;

  logic            done, running;
  logic            imem_we = 0;
  logic [14:0]     imem_addr = 0;
  logic [31:0]     imem_data = 0;
  logic            wm_we = 0;
  logic [2:0]      wm_sel = 0;
  logic [22:0]     wm_addr = 0;
  logic [WMAX-1:0] wm_data = 0;
  logic            act_we = 0;
  logic [4:0]      act_sel = 0;
  logic [22:0]     act_addr = 0;
  logic [31:0]     act_data = 0;
  logic            hrd_en = 0;
  logic [4:0]      hrd_sel = 0;
  logic [22:0]     hrd_addr = 0;
  logic [31:0]     hrd_data;
  logic            dram_req, dram_rvalid = 0;
  logic [22:0]     dram_addr;
  logic [WMAX-1:0] dram_rdata = 0;
  logic [31:0]     instr_count, cycle_count, wait_cycles;

  e3ne_top dut (.*);

  int checks = 0, failures = 0;

  // ---------------------------------------------------------------- network description
  typedef enum int {L_CONV, L_POOL, L_LIN} ltype_e;
  typedef struct {
    ltype_e typ;
    int k, cin, cout, din, dout, str, pad;
    logic [4:0] src, dst;
    int wm;
    int shift;
  } layer_t;

  localparam int NL = 7;
  layer_t net [NL];

  initial begin
    net[0] = '{L_CONV, 5,   1,   6, 32, 28, 1, 0, MOD_PING2D, MOD_PONG2D, 0, 0};
    net[1] = '{L_POOL, 2,   6,   6, 28, 14, 2, 0, MOD_PONG2D, MOD_PING2D, -1, 2};
    net[2] = '{L_CONV, 5,   6,  16, 14, 10, 1, 0, MOD_PING2D, MOD_PONG2D, 1, 0};
    net[3] = '{L_POOL, 2,  16,  16, 10,  5, 2, 0, MOD_PONG2D, MOD_PING2D, -1, 2};
    net[4] = '{L_CONV, 5,  16, 120,  5,  1, 1, 0, MOD_PING2D, MOD_PING1D, 2, 0};
    net[5] = '{L_LIN,  1, 120,  84,  1,  1, 1, 0, MOD_PING1D, MOD_PONG1D, 3, 0};
    net[6] = '{L_LIN,  1,  84,  10,  1,  1, 1, 0, MOD_PONG1D, MOD_PING1D, 4, 0};
  end

  // weights: conv w[layer][oc][ci][ky][kx], linear w[layer][o][i]
  int wconv [3][120][16][5][5];
  int wlin  [2][84][120];
  // activations after each layer: act[l][c][y][x]; 1D features as act[l][i][0][0]
  int act [NL+1][120][32][32];
  int img [32][32];
  int nclamp = 0;

  function automatic int clog2i(int v);
    int r = 0;
    while ((1 << r) < v) r++;
    return r;
  endfunction

  function automatic int rq(int psum, int shift);
    int q;
    q = psum >>> shift;
    if (shift > 0) q += (psum >>> (shift - 1)) & 1;
    if (q < 0) q = 0;
    if (q > (1 << T) - 1) begin q = (1 << T) - 1; nclamp++; end
    return q;
  endfunction

  // reference computation of the whole network; fills act[] and each shift
  task automatic reference();
    for (int y = 0; y < 32; y++)
      for (int x = 0; x < 32; x++) act[0][0][y][x] = img[y][x];
    for (int l = 0; l < NL; l++) begin
      int ps [120][32][32];
      int mx = 1;
      layer_t L = net[l];
      int dsz = (L.typ == L_LIN) ? 1 : L.dout;
      for (int c = 0; c < L.cout; c++)
        for (int y = 0; y < dsz; y++)
          for (int x = 0; x < dsz; x++) begin
            int s = 0;
            if (L.typ == L_CONV) begin
              for (int ci = 0; ci < L.cin; ci++)
                for (int ky = 0; ky < L.k; ky++)
                  for (int kx = 0; kx < L.k; kx++) begin
                    int iy = y * L.str + ky - L.pad, ix = x * L.str + kx - L.pad;
                    if (iy >= 0 && iy < L.din && ix >= 0 && ix < L.din)
                      s += wconv[L.wm][c][ci][ky][kx] * act[l][ci][iy][ix];
                  end
            end else if (L.typ == L_POOL) begin
              for (int ky = 0; ky < L.k; ky++)
                for (int kx = 0; kx < L.k; kx++)
                  s += act[l][c][y * L.str + ky][x * L.str + kx];
            end else begin
              for (int i = 0; i < L.cin; i++) s += wlin[L.wm - 3][c][i] * act[l][i][0][0];
            end
            ps[c][y][x] = s;
            if (s > mx) mx = s;
          end
      if (L.typ != L_POOL) begin
        // compiler-style choice: the largest partial sum lands at the top of T bits
        net[l].shift = clog2i(mx + 1) - T - 1;
        if (net[l].shift < 0) net[l].shift = 0;
      end
      // flatten conv output to 1D when the next layer is linear
      if (L.typ == L_CONV && (L.dst == MOD_PING1D || L.dst == MOD_PONG1D)) begin
        for (int i = 0; i < L.cout * dsz * dsz; i++)
          act[l+1][i][0][0] = rq(ps[i / (dsz*dsz)][(i / dsz) % dsz][i % dsz], net[l].shift);
      end else begin
        for (int c = 0; c < L.cout; c++)
          for (int y = 0; y < dsz; y++)
            for (int x = 0; x < dsz; x++) act[l+1][c][y][x] = rq(ps[c][y][x], net[l].shift);
      end
    end
  endtask

  // ---------------------------------------------------------------- compiler: instruction stream
  logic [31:0] prog [$];
  int kerd_rows = 0;

  function automatic void emit(opcode_e op, logic [4:0] f, int v);
    prog.push_back(32'(mk_instr(op, f, 23'(v))));
  endfunction

  function automatic void emit_wait(logic [4:0] m, logic [1:0] cond);
    prog.push_back(32'(mk_instr(OP_WAIT, m, {cond, 21'd0})));
  endfunction

  // parallel output channels by the placement rule S_p = p*(Din+pad)/str, E_p = S_p+Dout-1 < X
  function automatic int par_of(layer_t L, int X, int PMAX);
    int p = 0;
    while (p < PMAX && (p * (L.din + L.pad)) / L.str + L.dout - 1 < X && (p + 1) * L.dout <= X) p++;
    while (L.cout % p != 0) p--;
    return p;
  endfunction

  function automatic void compile();
    // first layer's weights come from DRAM
    for (int r = 0; r < net[0].cout * net[0].cin; r++) begin
      emit(OP_KERD, MOD_WMEM0 + 5'(net[0].wm), r);
      emit_wait(MOD_WMEM0 + 5'(net[0].wm), COND_XFER);
      kerd_rows++;
    end
    for (int l = 0; l < NL; l++) begin
      layer_t L = net[l];
      if (L.typ == L_CONV) begin
        int P = par_of(L, X_CONV, P_CONV);
        int oc = 0;
        bit to1d = (L.dst == MOD_PING1D || L.dst == MOD_PONG1D);
        emit(OP_ENA, 0, (1 << N_CONV) - 1);
        emit(OP_CONF, CFG_STRIDE, L.str);
        emit(OP_CONF, CFG_PAD, L.pad);
        emit(OP_CONF, CFG_DIN, L.din);
        emit(OP_CONF, CFG_DOUT, L.dout);
        emit(OP_CONF, CFG_PAR, P);
        emit(OP_CONF, CFG_SHIFT, L.shift);
        while (oc < L.cout) begin
          int npm = (L.cout - oc) / P;
          if (npm > N_CONV) npm = N_CONV;
          emit(OP_ENA, 0, (1 << npm) - 1);
          for (int t = 0; t < T; t++) begin
            emit(OP_CONF, CFG_TSTEP, t);
            for (int ci = 0; ci < L.cin; ci++) begin
              int rowbase = ci * T * L.din + t * L.din;
              emit(OP_RST, 0, 0);
              for (int k = 0; k < npm * P; k++)
                emit(OP_KERL, MOD_WMEM0 + 5'(L.wm), (oc + k) * L.cin + ci);
              emit(OP_ACTL, L.src, rowbase);
              for (int r = 0; r < L.din; r++) begin
                emit(OP_PROC, 0, 0);
                if (r + 1 < L.din) emit(OP_ACTL, L.src, rowbase + r + 1);
                emit_wait(MOD_CONV0, COND_PROC);
              end
            end
          end
          for (int m = 0; m < npm; m++) begin
            int c0 = oc + m * P;
            emit(OP_ENA, 0, 1 << m);
            emit(OP_ACTS, L.dst, to1d ? c0 * L.dout * L.dout : c0 * T * L.dout);
            emit_wait(MOD_CONV0 + 5'(m), COND_XFER);
          end
          oc += npm * P;
        end
      end else if (L.typ == L_POOL) begin
        int P = par_of(L, X_POOL, P_POOL);
        emit(OP_ENA, 0, 1 << ENA_POOL_BIT);
        emit(OP_CONF, CFG_STRIDE, L.str);
        emit(OP_CONF, CFG_PAD, L.pad);
        emit(OP_CONF, CFG_DIN, L.din);
        emit(OP_CONF, CFG_DOUT, L.dout);
        emit(OP_CONF, CFG_PAR, P);
        emit(OP_CONF, CFG_SHIFT, L.shift);
        for (int c0 = 0; c0 < L.cout; c0 += P) begin
          for (int t = 0; t < T; t++) begin
            emit(OP_CONF, CFG_TSTEP, t);
            emit(OP_RST, 0, 0);
            for (int p = 0; p < P; p++) emit(OP_ACTL, L.src, (c0 + p) * T * L.din + t * L.din);
            for (int r = 0; r < L.din; r++) begin
              emit(OP_PROC, 0, 0);
              if (r + 1 < L.din)
                for (int p = 0; p < P; p++) emit(OP_ACTL, L.src, (c0 + p) * T * L.din + t * L.din + r + 1);
              emit_wait(MOD_POOL, COND_PROC);
            end
          end
          emit(OP_ACTS, L.dst, c0 * T * L.dout);
          emit_wait(MOD_POOL, COND_XFER);
        end
      end else begin
        emit(OP_ENA, 0, 1 << ENA_LIN_BIT);
        emit(OP_CONF, CFG_DIN, L.cin);
        emit(OP_CONF, CFG_DOUT, L.cout);
        emit(OP_CONF, CFG_SHIFT, L.shift);
        emit(OP_CONF, CFG_LSRC, (L.src == MOD_PONG1D) ? 1 : 0);
        emit(OP_CONF, CFG_WMEM, L.wm);
        emit(OP_CONF, CFG_WBASE, 0);
        emit(OP_LIN, 0, 0);
        emit_wait(MOD_LIN, COND_PROC);
      end
    end
    emit(OP_END, 0, 0);
  endfunction

  // ---------------------------------------------------------------- weight rows
  function automatic logic [WMAX-1:0] conv_row(int wm, int row, int cin);
    logic [WMAX-1:0] r = '0;
    int oc = row / cin, ci = row % cin;
    for (int ky = 0; ky < 5; ky++)
      for (int kx = 0; kx < 5; kx++) r[(ky*5 + kx)*B +: B] = B'(wconv[wm][oc][ci][ky][kx]);
    return r;
  endfunction

  // ---------------------------------------------------------------- DRAM model
  initial begin
    forever begin
      @(negedge clk);
      if (dram_req) begin
        int a;
        a = int'(dram_addr);
        repeat (6) @(negedge clk);
        dram_rdata  <= conv_row(net[0].wm, a, net[0].cin);
        dram_rvalid <= 1'b1;
        @(negedge clk);
        dram_rvalid <= 1'b0;
      end
    end
  end

  // ---------------------------------------------------------------- snoop and mechanism counters
  int n_stall = 0, n_overlap = 0, n_intra = 0, n_inter = 0, n_stride2 = 0, n_flat = 0;
  int n_lingrp = 0, n_kerd = 0;
  int snoop_err = 0, snoop_cnt = 0;
  int cur_layer = 0;
  int proc_len = 0, proc_len_bad = 0, proc_len_seen = 0;

  always @(negedge clk) if (rst_n && running) begin
    if (dut.u_dec.state == dut.u_dec.S_WAIT) n_stall++;
    if (dut.actl_q && (|dut.pm_busy_proc)) n_overlap++;
    if (dut.is_proc && dut.par_cfg > 1) n_intra++;
    if (dut.is_proc && $countones(dut.ena[N_CONV-1:0]) > 1) n_inter++;
    if (dut.is_proc && dut.ena[ENA_POOL_BIT]) n_stride2++;
    if (dut.st_we && (dut.acts_dst == MOD_PING1D || dut.acts_dst == MOD_PONG1D)) n_flat++;
    if (dut.u_lin.st == dut.u_lin.L_RUN && dut.u_lin.grp_base != 0 && dut.u_lin.in_idx == 0) n_lingrp++;
    if (dram_rvalid) n_kerd++;
    // PROC time of convolution module 0
    if (dut.pm_busy_proc[0]) proc_len++;
    else if (proc_len != 0) begin
      proc_len_seen++;
      if (proc_len != K_CONV + 3) proc_len_bad++;
      proc_len = 0;
    end
  end

  // check every 2D store against the reference of the layer being stored
  int st_layer = 0;
  always @(negedge clk) if (rst_n && running && dut.st_we) begin
    layer_t L;
    int a;
    a = int'(dut.st_addr);
    // find the layer: stores are in program order, layer changes with the source module
    L = net[st_layer];
    while (L.typ == L_LIN) begin st_layer++; L = net[st_layer]; end
    snoop_cnt++;
    if (L.dst == MOD_PING1D || L.dst == MOD_PONG1D) begin
      if (int'(dut.st_word) != act[st_layer+1][a][0][0]) begin
        snoop_err++;
        if (snoop_err < 10) $display("layer %0d feature %0d: got %0d expected %0d", st_layer, a, dut.st_word, act[st_layer+1][a][0][0]);
      end
    end else begin
      int c, t, o;
      c = a / (T * L.dout);
      t = (a / L.dout) % T;
      o = a % L.dout;
      for (int x = 0; x < L.dout; x++)
        if (dut.st_row[x] != 1'((act[st_layer+1][c][o][x] >> t) & 1)) begin
          snoop_err++;
          if (snoop_err < 10) $display("%0t layer %0d addr %0d c %0d t %0d row %0d col %0d: mismatch got %b exp %0d", $time, st_layer, a, c, t, o, x, dut.st_row, act[st_layer+1][c][o][x]);
        end
    end
  end
  // advance the snoop layer when the producing module type changes
  always @(negedge clk) if (rst_n && running && dut.cmd_valid && dut.cmd.op == OP_ENA) begin
    if (st_layer < NL) begin
      bit pool_now, lin_now;
      pool_now = dut.cmd.value[ENA_POOL_BIT];
      lin_now  = dut.cmd.value[ENA_LIN_BIT];
      if (net[st_layer].typ == L_POOL && !pool_now) st_layer++;
      else if (net[st_layer].typ == L_CONV && (pool_now || lin_now)) st_layer++;
      // a new convolution layer starts with the all-modules ENA followed by CONF
    end
  end

  // ---------------------------------------------------------------- watchdog
  initial begin
    repeat (400000) @(negedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // ---------------------------------------------------------------- main
  initial begin
    // random network
    for (int m = 0; m < 3; m++) begin
      automatic int li = (m == 0) ? 0 : (m == 1) ? 2 : 4;
      for (int oc = 0; oc < net[li].cout; oc++)
        for (int ci = 0; ci < net[li].cin; ci++)
          for (int ky = 0; ky < 5; ky++)
            for (int kx = 0; kx < 5; kx++)
              wconv[m][oc][ci][ky][kx] = int'($urandom_range(7)) - 4;
    end
    for (int m = 0; m < 2; m++) begin
      for (int o = 0; o < net[5 + m].cout; o++)
        for (int i = 0; i < net[5 + m].cin; i++) wlin[m][o][i] = int'($urandom_range(7)) - 4;
    end
    for (int y = 0; y < 32; y++)
      for (int x = 0; x < 32; x++) img[y][x] = int'($urandom_range(15));
    #1;
    reference();
    compile();
    $display("program: %0d instructions, shifts %0d %0d %0d %0d %0d", prog.size(),
             net[0].shift, net[2].shift, net[4].shift, net[5].shift, net[6].shift);

    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    // load instructions
    foreach (prog[i]) begin
      imem_we <= 1; imem_addr <= 15'(i); imem_data <= prog[i];
      @(negedge clk);
    end
    imem_we <= 0;
    // load weights of layers 2..5 (layer 1 via DRAM)
    for (int m = 1; m < 3; m++) begin
      automatic int li = (m == 1) ? 2 : 4;
      for (int r = 0; r < net[li].cout * net[li].cin; r++) begin
        wm_we <= 1; wm_sel <= 3'(m); wm_addr <= 23'(r); wm_data <= conv_row(m, r, net[li].cin);
        @(negedge clk);
      end
    end
    for (int m = 0; m < 2; m++) begin
      automatic layer_t L = net[5 + m];
      automatic int ng = (L.cout + P_LIN - 1) / P_LIN;
      for (int g = 0; g < ng; g++)
        for (int i = 0; i < L.cin; i++) begin
          automatic logic [WMAX-1:0] r = '0;
          for (int j = 0; j < P_LIN; j++)
            if (g * P_LIN + j < L.cout) r[j*B +: B] = B'(wlin[m][g * P_LIN + j][i]);
          wm_we <= 1; wm_sel <= 3'(3 + m); wm_addr <= 23'(g * L.cin + i); wm_data <= r;
          @(negedge clk);
        end
    end
    wm_we <= 0;
    // input spike rows: time step t of row y at address t*32 + y
    for (int t = 0; t < T; t++)
      for (int y = 0; y < 32; y++) begin
        automatic logic [31:0] r = '0;
        for (int x = 0; x < 32; x++) r[x] = 1'((img[y][x] >> t) & 1);
        act_we <= 1; act_sel <= MOD_PING2D; act_addr <= 23'(t * 32 + y); act_data <= r;
        @(negedge clk);
      end
    act_we <= 0;

    // run
    @(negedge clk);
    start <= 1;
    @(negedge clk);
    start <= 0;
    wait (done);
    @(negedge clk);

    // read the 10 results
    for (int i = 0; i < 10; i++) begin
      hrd_en <= 1; hrd_sel <= MOD_PING1D; hrd_addr <= 23'(i);
      @(negedge clk);
      hrd_en <= 0;
      @(negedge clk);
      check(int'(hrd_data[T-1:0]) == act[NL][i][0][0],
            $sformatf("output %0d: got %0d expected %0d", i, hrd_data[T-1:0], act[NL][i][0][0]));
    end

    check(snoop_cnt > 0 && snoop_err == 0, $sformatf("intermediate maps: %0d mismatching bits in %0d stores", snoop_err, snoop_cnt));
    check(instr_count == prog.size(), $sformatf("executed %0d of %0d instructions", instr_count, prog.size()));
    check(proc_len_seen > 0 && proc_len_bad == 0, $sformatf("PROC of 5x5 module not %0d cycles (%0d of %0d)", K_CONV + 3, proc_len_bad, proc_len_seen));
    begin
      automatic real ipc = (1.0 * instr_count) / (1.0 * cycle_count);
      $display("cycles %0d, instructions %0d, IPC %0.3f, stall cycles %0d (published LeNet-5 latency with 4 conv modules: 294 us = 58800 cycles at 200 MHz)",
               cycle_count, instr_count, ipc, wait_cycles);
      check(ipc > 0.3 && ipc <= 0.5, $sformatf("IPC %0.3f outside 0.3..0.5", ipc));
    end
    $display("mechanisms: stall=%0d overlap=%0d intra=%0d inter=%0d stride2=%0d flatten=%0d lingroups=%0d kerd=%0d clamp=%0d",
             n_stall, n_overlap, n_intra, n_inter, n_stride2, n_flat, n_lingrp, n_kerd, nclamp);
    check(n_stall > 0,   "no WAIT stall");
    check(n_overlap > 0, "no row load overlapped with processing");
    check(n_intra > 0,   "no intra-module parallelism");
    check(n_inter > 0,   "no inter-module parallelism");
    check(n_stride2 > 0, "no stride-2 pooling");
    check(n_flat > 0,    "no flatten to 1D");
    check(n_lingrp > 0,  "no second linear output group");
    check(n_kerd == kerd_rows && kerd_rows > 0, "DRAM weight loads missing");
    check(nclamp > 0,    "no clamping in requantization");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
