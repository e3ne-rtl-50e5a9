// tb_act_buffer: self-checking testbench for the activation buffer (ping 2D size).
// Writes every row with random data kept in a scoreboard, reads back in random
// order, and checks the one-clock synchronous read, that the output holds when
// rd_en is low, and simultaneous read and write of different rows.
module tb_act_buffer;
  localparam int unsigned W  = 32;
  localparam int unsigned H  = 336;
  localparam int unsigned AW = $clog2(H);
  logic          clk = 0;
  logic          we = 0, rd_en = 0;
  logic [AW-1:0] wr_addr = '0, rd_addr = '0;
  logic [W-1:0]  wr_data = '0, rd_data;
  logic [W-1:0]  model [H];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  act_buffer #(.W(W), .H(H)) dut (.*);

  function automatic logic [W-1:0] rnd();
    logic [W-1:0] v;
    for (int i = 0; i < W; i += 32) v[i +: 32] = $urandom;
    return v;
  endfunction

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", msg);
    end
  endtask

  initial begin
    repeat (100000) @(negedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    @(negedge clk);
    for (int a = 0; a < H; a++) begin
      model[a] = rnd();
      we = 1; wr_addr = AW'(a); wr_data = model[a];
      @(negedge clk);
    end
    we = 0;
    for (int i = 0; i < 3000; i++) begin
      automatic int a = int'($urandom_range(H - 1));
      rd_en = 1; rd_addr = AW'(a);
      @(negedge clk);
      check(rd_data === model[a], $sformatf("addr %0d got %h exp %h", a, rd_data, model[a]));
    end
    // output holds while rd_en is low
    rd_en = 1; rd_addr = AW'(3); @(negedge clk);
    rd_en = 0; rd_addr = AW'(4); @(negedge clk); @(negedge clk);
    check(rd_data === model[3], "hold while rd_en low");
    // simultaneous write and read of different rows
    for (int i = 0; i < 500; i++) begin
      automatic int wa = int'($urandom_range(H - 1));
      automatic int ra = int'($urandom_range(H - 1));
      automatic logic [W-1:0] d = rnd();
      if (ra == wa) ra = (ra + 1) % H;
      we = 1; wr_addr = AW'(wa); wr_data = d;
      rd_en = 1; rd_addr = AW'(ra);
      @(negedge clk);
      check(rd_data === model[ra], $sformatf("r/w addr %0d", ra));
      model[wa] = d;
    end
    we = 0;
    for (int a = 0; a < H; a++) begin
      rd_en = 1; rd_addr = AW'(a);
      @(negedge clk);
      check(rd_data === model[a], $sformatf("final sweep addr %0d", a));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
