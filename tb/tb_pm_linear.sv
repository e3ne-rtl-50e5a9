// tb_pm_linear: self-checking testbench for the fully-connected processing module.
// Connects the module to two 1D buffer models and a weight memory model, runs a
// layer with more outputs than parallel lanes (several output groups, the last one
// partial) in both buffer directions, and compares every written output with an
// integer reference (sum over inputs and time steps of w * s_t * 2^t, then
// rounding right shift and clamp). Also checks the cycle count of the schedule.
module tb_pm_linear;
  import e3ne_pkg::*;
  localparam int unsigned P = 4, B = 3, T = 4, PSUM_W = 18;
  localparam int NIN = 23, NOUT = 10;
  logic clk = 0, rst_n = 0;
  logic           cfg_we = 0;
  logic [4:0]     cfg_idx = '0;
  logic [22:0]    cfg_val = '0;
  logic           lin_cmd = 0;
  logic           lsrc, act_rd_en, w_rd_en, out_we, busy;
  logic [22:0]    act_rd_addr, w_rd_addr, out_addr;
  logic [T-1:0]   act_rd_data, out_word;
  logic [2:0]     w_sel;
  logic [P*B-1:0] w_rd_data;

  int inp [NIN];
  int wt  [NOUT][NIN];
  logic [T-1:0]   buf0 [64], buf1 [64];
  logic [P*B-1:0] wmem [128];
  int checks = 0, failures = 0, nwritten = 0;

  always #5 clk = ~clk;

  pm_linear #(.P(P), .B(B), .T(T), .PSUM_W(PSUM_W)) dut (.*);

  // synchronous memory models
  always @(posedge clk) begin
    if (act_rd_en) act_rd_data <= lsrc ? buf1[act_rd_addr[5:0]] : buf0[act_rd_addr[5:0]];
    if (w_rd_en)   w_rd_data   <= wmem[w_rd_addr[6:0]];
    if (out_we) begin
      if (lsrc) buf0[out_addr[5:0]] <= out_word;
      else      buf1[out_addr[5:0]] <= out_word;
    end
  end
  always @(negedge clk) if (out_we) nwritten++;

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", msg);
    end
  endtask

  task automatic conf(logic [4:0] idx, int v);
    cfg_we = 1; cfg_idx = idx; cfg_val = 23'(v);
    @(negedge clk);
    cfg_we = 0;
  endtask

  function automatic int rq(int v, int sh);
    int r;
    r = (sh == 0) ? v : ((v >>> sh) + ((v >>> (sh - 1)) & 1));
    if (r < 0) r = 0;
    if (r > (1 << T) - 1) r = (1 << T) - 1;
    return r;
  endfunction

  initial begin
    repeat (20000) @(negedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  task automatic run_layer(bit src, int wbase, int shift);
    int cyc, ngrp;
    // weights: group g, input i at row wbase + g*NIN + i, lane j = output g*P + j
    ngrp = (NOUT + P - 1) / P;
    for (int g = 0; g < ngrp; g++)
      for (int i = 0; i < NIN; i++) begin
        logic [P*B-1:0] row;
        row = '0;
        for (int j = 0; j < P; j++)
          if (g * P + j < NOUT) row[j*B +: B] = B'(wt[g*P + j][i]);
        wmem[wbase + g*NIN + i] = row;
      end
    for (int i = 0; i < NIN; i++)
      if (src) buf1[i] = T'(inp[i]); else buf0[i] = T'(inp[i]);
    for (int o = 0; o < 64; o++)
      if (src) buf0[o] = 'x; else buf1[o] = 'x;
    conf(CFG_DIN, NIN); conf(CFG_DOUT, NOUT); conf(CFG_SHIFT, shift);
    conf(CFG_LSRC, int'(src)); conf(CFG_WMEM, 3); conf(CFG_WBASE, wbase);
    check(w_sel == 3'd3 && lsrc == src, "configuration registers");
    nwritten = 0;
    lin_cmd = 1; @(negedge clk); lin_cmd = 0;
    cyc = 1;
    while (busy) begin @(negedge clk); cyc++; end
    check(cyc == ngrp * (NIN + 1 + P) - (ngrp * P - NOUT) + 1,
          $sformatf("layer took %0d cycles", cyc));
    check(nwritten == NOUT, $sformatf("%0d outputs written", nwritten));
    for (int o = 0; o < NOUT; o++) begin
      int sum, got;
      sum = 0;
      for (int i = 0; i < NIN; i++) sum += wt[o][i] * inp[i];
      got = int'(src ? buf0[o] : buf1[o]);
      check(got == rq(sum, shift), $sformatf("out %0d got %0d exp %0d (sum %0d)", o, got, rq(sum, shift), sum));
    end
  endtask

  initial begin
    int clamps;
    for (int i = 0; i < NIN; i++) inp[i] = int'($urandom_range((1 << T) - 1));
    for (int o = 0; o < NOUT; o++)
      for (int i = 0; i < NIN; i++) wt[o][i] = int'($urandom_range(7)) - 4;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    run_layer(1'b0, 5, 3);
    // make outputs clamp at both ends by a small shift and reversed direction
    for (int i = 0; i < NIN; i++) inp[i] = int'($urandom_range((1 << T) - 1));
    run_layer(1'b1, 40, 1);
    clamps = 0;
    for (int o = 0; o < NOUT; o++) if (buf0[o] == 0 || buf0[o] == (1 << T) - 1) clamps++;
    check(clamps > 0, "no clamped output exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
