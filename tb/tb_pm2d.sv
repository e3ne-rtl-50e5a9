// tb_pm2d: self-checking test of the 2D processing module.
//
// A 3x3 convolution module (X=12, up to 3 parallel windows, strides 1 and 2) is
// run on random data in three configurations, each compared with a direct
// integer convolution followed by requantization:
//   A) 2 input channels 6x6, pad 1, stride 2, 3 parallel output channels, T=3,
//      stored to a 2D buffer (rows of spikes, layout channel/time/row);
//   B) same input, pad 0, stride 1, 2 parallel channels, stored flattened (1D);
//   C) a 2x2 stride-2 average-pooling module, 2 channels 8x8 side by side.
// It also checks that PROC keeps the module busy for Y+3 cycles and that a store
// transfer takes one cycle per written row or word.
module tb_pm2d;
  import e3ne_pkg::*;

  localparam int Y = 3, X = 12, W_IN = 16, P_MAX = 3, B = 3, T = 3, PSUM_W = 16;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // ------------------------------------------------------------ conv DUT
  logic            cfg_we = 0, rst_cmd = 0, proc_cmd = 0, acts_cmd = 0, acts_1d = 0;
  logic [4:0]      cfg_idx = 0;
  logic [22:0]     cfg_val = 0, acts_base = 0;
  logic            ker_we = 0;
  logic [1:0]      ker_slot = 0;
  logic [Y*Y*B-1:0] ker_data = 0;
  logic            row_we = 0;
  logic [W_IN-1:0] row_data = 0;
  logic            out_we, out_1d, busy_proc, busy_xfer;
  logic [22:0]     out_addr;
  logic [X-1:0]    out_row;
  logic [T-1:0]    out_word;

  pm2d #(.Y(Y), .X(X), .W_IN(W_IN), .P_MAX(P_MAX), .B(B), .T(T), .PSUM_W(PSUM_W),
         .D_MAX(X), .STR_MAX(2), .IS_POOL(1'b0)) dut (
    .clk, .rst_n, .cfg_we, .cfg_idx, .cfg_val, .rst_cmd, .proc_cmd, .acts_cmd, .acts_base,
    .acts_1d, .ker_we, .ker_slot, .ker_data, .row_we, .row_data, .out_we, .out_1d, .out_addr,
    .out_row, .out_word, .busy_proc, .busy_xfer);

  // ------------------------------------------------------------ pool DUT
  logic            p_cfg_we = 0, p_rst = 0, p_proc = 0, p_acts = 0;
  logic [4:0]      p_cfg_idx = 0;
  logic [22:0]     p_cfg_val = 0;
  logic            p_row_we = 0;
  logic [W_IN-1:0] p_row = 0;
  logic            p_out_we, p_out_1d, p_busy, p_busy_x;
  logic [22:0]     p_out_addr;
  logic [7:0]      p_out_row;
  logic [T-1:0]    p_out_word;

  pm2d #(.Y(2), .X(8), .W_IN(W_IN), .P_MAX(2), .B(B), .T(T), .PSUM_W(PSUM_W),
         .D_MAX(8), .STR_MAX(2), .IS_POOL(1'b1)) dut_pool (
    .clk, .rst_n, .cfg_we(p_cfg_we), .cfg_idx(p_cfg_idx), .cfg_val(p_cfg_val), .rst_cmd(p_rst),
    .proc_cmd(p_proc), .acts_cmd(p_acts), .acts_base(23'd0), .acts_1d(1'b0),
    .ker_we(1'b0), .ker_slot(1'b0), .ker_data('0), .row_we(p_row_we), .row_data(p_row),
    .out_we(p_out_we), .out_1d(p_out_1d), .out_addr(p_out_addr), .out_row(p_out_row),
    .out_word(p_out_word), .busy_proc(p_busy), .busy_xfer(p_busy_x));

  // ------------------------------------------------------------ data
  int img [2][8][8];
  int w   [3][2][3][3];   // [oc][ci][ky][kx]
  int busy_len;

  function automatic int rq(int psum, int shift);
    int q;
    q = psum >>> shift;
    if (shift > 0) q += (psum >>> (shift - 1)) & 1;
    if (q < 0) q = 0;
    if (q > (1 << T) - 1) q = (1 << T) - 1;
    return q;
  endfunction

  function automatic int ref_conv(int oc, int oy, int ox, int din, int str, int pad);
    int s = 0;
    for (int ci = 0; ci < 2; ci++)
      for (int ky = 0; ky < Y; ky++)
        for (int kx = 0; kx < Y; kx++) begin
          int iy, ix;
          iy = oy * str + ky - pad;
          ix = ox * str + kx - pad;
          if (iy >= 0 && iy < din && ix >= 0 && ix < din) s += w[oc][ci][ky][kx] * img[ci][iy][ix];
        end
    return s;
  endfunction

  task automatic conf(logic [4:0] idx, int v);
    cfg_we = 1; cfg_idx = idx; cfg_val = 23'(v);
    @(negedge clk);
    cfg_we = 0;
  endtask

  task automatic load_row(int ci, int t, int y, int din);
    logic [W_IN-1:0] r = '0;
    for (int x = 0; x < din; x++) r[x] = 1'((img[ci][y][x] >> t) & 1);
    row_we = 1; row_data = r;
    @(negedge clk);
    row_we = 0;
  endtask

  // run a whole conv layer: par windows, din x din input, 2 input channels
  task automatic run_conv(int din, int dout, int str, int pad, int par, int shift);
    conf(CFG_STRIDE, str); conf(CFG_PAD, pad); conf(CFG_DIN, din); conf(CFG_DOUT, dout);
    conf(CFG_PAR, par); conf(CFG_SHIFT, shift);
    for (int t = 0; t < T; t++) begin
      conf(CFG_TSTEP, t);
      for (int ci = 0; ci < 2; ci++) begin
        rst_cmd = 1; @(negedge clk); rst_cmd = 0;
        for (int p = 0; p < par; p++) begin
          logic [Y*Y*B-1:0] k = '0;
          for (int ky = 0; ky < Y; ky++)
            for (int kx = 0; kx < Y; kx++) k[(ky*Y + kx)*B +: B] = B'(w[p][ci][ky][kx]);
          ker_we = 1; ker_slot = 2'(p); ker_data = k;
          @(negedge clk);
          ker_we = 0;
        end
        load_row(ci, t, 0, din);
        for (int y = 0; y < din; y++) begin
          proc_cmd = 1; @(negedge clk); proc_cmd = 0;
          busy_len = 0;
          if (y + 1 < din) load_row(ci, t, y + 1, din);   // overlapped with processing
          #1;
          while (busy_proc) begin @(negedge clk); #1; end
        end
      end
    end
  endtask

  // measure busy length of PROC
  int plen = 0, plen_bad = 0, plen_n = 0;
  always @(negedge clk) begin
    if (busy_proc) plen++;
    else if (plen != 0) begin
      plen_n++;
      if (plen != Y + 3) plen_bad++;
      plen = 0;
    end
  end
  // capture stores
  logic [X-1:0] cap_row [256];
  int           cap_word [256];
  int           ncap = 0;
  always @(negedge clk) if (out_we) begin
    cap_row[out_addr[7:0]]  <= out_row;
    cap_word[out_addr[7:0]] <= int'(out_word);
    ncap <= ncap + 1;
  end
  logic [7:0] pcap [256];
  int         npcap = 0;
  always @(negedge clk) if (p_out_we) begin
    pcap[p_out_addr[7:0]] <= p_out_row;
    npcap <= npcap + 1;
  end

  initial begin
    repeat (400000) @(negedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int errs, dout;
    for (int c = 0; c < 2; c++)
      for (int y = 0; y < 8; y++)
        for (int x = 0; x < 8; x++) img[c][y][x] = int'($urandom_range((1 << T) - 1));
    for (int o = 0; o < 3; o++)
      for (int c = 0; c < 2; c++)
        for (int ky = 0; ky < Y; ky++)
          for (int kx = 0; kx < Y; kx++) w[o][c][ky][kx] = int'($urandom_range(7)) - 4;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);

    // ---- A: 7x7, pad 1, stride 2 -> 4x4 outputs, 3 windows (S_p = p*8/2 = 0,4,8).
    // The row period D_in+pad must be a multiple of the stride for the windows
    // to line up with whole output columns.
    dout = 4;
    run_conv(7, dout, 2, 1, 3, 2);
    ncap = 0;
    acts_cmd = 1; acts_1d = 0; acts_base = 23'd10;
    @(negedge clk);
    acts_cmd = 0;
    begin
      automatic int n = 0;
      while (busy_xfer || n == 0) begin @(negedge clk); n++; end
      check(n == 3 * T * dout, $sformatf("A: transfer took %0d cycles", n));
    end
    @(negedge clk);
    errs = 0;
    for (int p = 0; p < 3; p++)
      for (int t = 0; t < T; t++)
        for (int oy = 0; oy < dout; oy++)
          for (int ox = 0; ox < dout; ox++) begin
            automatic int e = (rq(ref_conv(p, oy, ox, 7, 2, 1), 2) >> t) & 1;
            if (cap_row[10 + (p*T + t)*dout + oy][ox] != 1'(e)) errs++;
          end
    check(errs == 0, $sformatf("A: %0d wrong output bits", errs));
    check(ncap == 3 * T * dout, $sformatf("A: %0d stores", ncap));

    // ---- B: 6x6, pad 0, stride 1 -> 4x4, 2 windows, flattened to 1D
    dout = 4;
    run_conv(6, dout, 1, 0, 2, 3);
    ncap = 0;
    acts_cmd = 1; acts_1d = 1; acts_base = 23'd0;
    @(negedge clk);
    acts_cmd = 0;
    @(negedge clk);
    while (busy_xfer) @(negedge clk);
    @(negedge clk);
    errs = 0;
    for (int p = 0; p < 2; p++)
      for (int oy = 0; oy < dout; oy++)
        for (int ox = 0; ox < dout; ox++)
          if (cap_word[p*16 + oy*4 + ox] != rq(ref_conv(p, oy, ox, 6, 1, 0), 3)) errs++;
    check(errs == 0, $sformatf("B: %0d wrong output words", errs));
    check(ncap == 2 * dout * dout, $sformatf("B: %0d stores", ncap));
    check(plen_n > 0 && plen_bad == 0, $sformatf("PROC busy not %0d cycles in %0d of %0d", Y + 3, plen_bad, plen_n));

    // ---- C: pooling, 2 channels 8x8 -> 4x4, side by side (S_1 = 8/2 = 4)
    begin
      task_pool();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic pconf(logic [4:0] idx, int v);
    p_cfg_we = 1; p_cfg_idx = idx; p_cfg_val = 23'(v);
    @(negedge clk);
    p_cfg_we = 0;
  endtask

  task automatic task_pool();
    int errs = 0;
    pconf(CFG_STRIDE, 2); pconf(CFG_PAD, 0); pconf(CFG_DIN, 8); pconf(CFG_DOUT, 4);
    pconf(CFG_PAR, 2); pconf(CFG_SHIFT, 2);
    for (int t = 0; t < T; t++) begin
      pconf(CFG_TSTEP, t);
      p_rst = 1; @(negedge clk); p_rst = 0;
      for (int y = 0; y < 8; y++) begin
        for (int c = 0; c < 2; c++) begin
          logic [W_IN-1:0] r;
          r = '0;
          for (int x = 0; x < 8; x++) r[x] = 1'((img[c][y][x] >> t) & 1);
          p_row_we = 1; p_row = r;
          @(negedge clk);
        end
        p_row_we = 0;
        p_proc = 1; @(negedge clk); p_proc = 0;
        @(negedge clk);
        while (p_busy) @(negedge clk);
      end
    end
    p_acts = 1; @(negedge clk); p_acts = 0;
    @(negedge clk);
    while (p_busy_x) @(negedge clk);
    @(negedge clk);
    for (int c = 0; c < 2; c++)
      for (int t = 0; t < T; t++)
        for (int oy = 0; oy < 4; oy++)
          for (int ox = 0; ox < 4; ox++) begin
            int s = img[c][2*oy][2*ox] + img[c][2*oy][2*ox+1] + img[c][2*oy+1][2*ox] + img[c][2*oy+1][2*ox+1];
            if (pcap[(c*T + t)*4 + oy][ox] != 1'((rq(s, 2) >> t) & 1)) begin
              errs++;
              if (errs < 6) $display("pool c%0d t%0d (%0d,%0d): sum %0d row %b", c, t, oy, ox, s, pcap[(c*T + t)*4 + oy]);
            end
          end
    check(errs == 0, $sformatf("C: %0d wrong pooled bits", errs));
    check(npcap == 2 * T * 4, $sformatf("C: %0d stores", npcap));
  endtask
endmodule
