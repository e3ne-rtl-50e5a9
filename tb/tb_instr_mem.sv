// tb_instr_mem: self-checking testbench for the instruction memory.
// Fills the whole default-depth memory with an address-dependent pattern, then
// reads back random and sequential addresses, checking the one-clock read
// latency and that a write does not disturb neighbouring words.
module tb_instr_mem;
  localparam int unsigned DEPTH = 32768;
  localparam int unsigned AW    = $clog2(DEPTH);
  logic          clk = 0;
  logic          we = 0;
  logic [AW-1:0] wr_addr = '0, rd_addr = '0;
  logic [31:0]   wr_data = '0, rd_data;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  instr_mem #(.DEPTH(DEPTH)) dut (.*);

  function automatic logic [31:0] pat(int a, int salt);
    return 32'(a) * 32'h9E3779B1 ^ 32'(salt);
  endfunction

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", msg);
    end
  endtask

  initial begin
    repeat (200000) @(negedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    @(negedge clk);
    for (int a = 0; a < DEPTH; a++) begin
      we = 1; wr_addr = AW'(a); wr_data = pat(a, 0);
      @(negedge clk);
    end
    we = 0;
    // sequential reads: data for address a appears one clock after it is presented
    for (int a = 0; a < 64; a++) begin
      rd_addr = AW'(a);
      @(negedge clk);
      check(rd_data === pat(a, 0), $sformatf("seq addr %0d got %h", a, rd_data));
    end
    // random reads
    for (int i = 0; i < 2000; i++) begin
      automatic int a = int'($urandom_range(DEPTH - 1));
      rd_addr = AW'(a);
      @(negedge clk);
      check(rd_data === pat(a, 0), $sformatf("rand addr %0d got %h", a, rd_data));
    end
    // read-before-write latency: output must not change until the next clock edge
    rd_addr = AW'(100);
    @(negedge clk);
    check(rd_data === pat(100, 0), "hold value");
    // overwrite one word, neighbours unchanged
    we = 1; wr_addr = AW'(100); wr_data = pat(100, 7);
    @(negedge clk);
    we = 0;
    @(negedge clk);
    check(rd_data === pat(100, 7), "overwritten word");
    rd_addr = AW'(99);  @(negedge clk); check(rd_data === pat(99, 0), "neighbour 99");
    rd_addr = AW'(101); @(negedge clk); check(rd_data === pat(101, 0), "neighbour 101");
    rd_addr = AW'(DEPTH - 1); @(negedge clk); check(rd_data === pat(DEPTH - 1, 0), "last word");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
