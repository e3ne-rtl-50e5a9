// tb_instr_decoder: self-checking testbench for the instruction decoder.
// A random program of command instructions, WAITs and a final END is loaded into
// an instruction memory. A model datapath answers each WAIT after a random delay.
// The testbench checks that every command is issued exactly once, in order, with
// the right fields; that WAIT stalls until wait_ok and presents its module and
// condition; that END halts; and that the instruction/cycle/wait counters match.
module tb_instr_decoder;
  import e3ne_pkg::*;
  localparam int unsigned AW = 10;
  localparam int NPROG = 300;
  logic          clk = 0, rst_n = 0, start = 0;
  logic          done, running;
  logic [AW-1:0] imem_addr;
  logic [31:0]   imem_data;
  logic          cmd_valid;
  instr_t        cmd;
  logic          wait_active;
  logic [4:0]    wait_mod;
  logic [1:0]    wait_cond;
  logic          wait_ok = 0;
  logic [31:0]   instr_count, cycle_count, wait_cycles;
  logic          im_we = 0;
  logic [AW-1:0] im_waddr = '0;
  logic [31:0]   im_wdata = '0;

  instr_t prog [NPROG];
  int     delay [NPROG];
  int checks = 0, failures = 0;
  int issued = 0, waits_seen = 0, exp_wait_cycles = 0, exp_cycles = 0;

  always #5 clk = ~clk;

  instr_mem #(.DEPTH(1 << AW)) u_mem (
    .clk, .we(im_we), .wr_addr(im_waddr), .wr_data(im_wdata),
    .rd_addr(imem_addr), .rd_data(imem_data));

  instr_decoder #(.AW(AW)) dut (.*);

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", msg);
    end
  endtask

  initial begin
    repeat (50000) @(negedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  // expected-stream tracker
  int pc_exp = 0;
  int wait_cnt = 0;
  always @(negedge clk) if (rst_n && running && !done) begin
    exp_cycles++;
    if (cmd_valid) begin
      // skip WAITs in the expected stream are handled below
      check(pc_exp < NPROG && prog[pc_exp] == cmd,
            $sformatf("cmd %0d: got %h exp %h", pc_exp, cmd, prog[pc_exp]));
      check(prog[pc_exp].op != OP_WAIT && prog[pc_exp].op != OP_END, "WAIT/END issued as command");
      issued++;
      pc_exp++;
    end else if (wait_active) begin
      check(prog[pc_exp].op == OP_WAIT, $sformatf("unexpected wait at %0d", pc_exp));
      check(wait_mod == prog[pc_exp].field && wait_cond == prog[pc_exp].value[22:21],
            "wait module/condition");
      if (wait_cnt >= delay[pc_exp]) begin
        wait_ok = 1;
      end else begin
        wait_ok = 0;
        wait_cnt++;
        exp_wait_cycles++;
      end
    end else begin
      if (wait_ok) begin
        waits_seen++;
        pc_exp++;
      end
      wait_ok = 0;
      wait_cnt = 0;
    end
  end

  initial begin
    int nwait = 0;
    for (int i = 0; i < NPROG - 1; i++) begin
      automatic int r = int'($urandom_range(9));
      automatic opcode_e op;
      if (r < 3) op = OP_WAIT;
      else begin
        op = opcode_e'($urandom_range(9));
        if (op == OP_END || op == OP_WAIT) op = OP_PROC;
      end
      prog[i] = mk_instr(op, 5'($urandom), 23'($urandom));
      delay[i] = (op == OP_WAIT) ? int'($urandom_range(5)) : 0;
      if (op == OP_WAIT) nwait++;
    end
    prog[NPROG - 1] = mk_instr(OP_END, '0, '0);
    // garbage after END must never be issued
    @(negedge clk);
    for (int i = 0; i < (1 << AW); i++) begin
      im_we = 1; im_waddr = AW'(i);
      im_wdata = (i < NPROG) ? 32'(prog[i]) : 32'(mk_instr(OP_PROC, 5'd31, 23'h7FFFFF));
      @(negedge clk);
    end
    im_we = 0;
    rst_n = 1;
    repeat (3) @(negedge clk);
    check(!running && !done, "idle after reset");
    start = 1; @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    repeat (5) @(negedge clk);
    check(done && !running, "halted after END");
    check(pc_exp == NPROG - 1, $sformatf("reached %0d of %0d", pc_exp, NPROG - 1));
    check(waits_seen == nwait, $sformatf("waits %0d exp %0d", waits_seen, nwait));
    check(instr_count == NPROG, $sformatf("instr_count %0d", instr_count));
    check(wait_cycles == exp_wait_cycles, $sformatf("wait_cycles %0d exp %0d", wait_cycles, exp_wait_cycles));
    // two cycles per instruction plus the stall cycles
    check(cycle_count == 2 * NPROG + exp_wait_cycles,
          $sformatf("cycle_count %0d exp %0d", cycle_count, 2 * NPROG + exp_wait_cycles));
    check(int'(cycle_count) == exp_cycles, $sformatf("cycle_count vs observed %0d", exp_cycles));
    // restart runs the program again from address 0
    pc_exp = 0; issued = 0; waits_seen = 0; exp_wait_cycles = 0; exp_cycles = 0;
    start = 1; @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    check(pc_exp == NPROG - 1 && instr_count == NPROG, "second run");
    $display("IPC %0d/%0d", instr_count, cycle_count);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
