// tb_pipe_serdes: self-checking testbench for pipe_serdes.
//
// Sends random FP16 values on a 32-bit pipe (junk in the upper half) with
// random pauses, and checks that each group of 8 arrives as one 128-bit word,
// lane 0 first, at consecutive addresses, one cycle after the 8th write;
// then checks that clear restarts the address at 0.
`timescale 1ns/1ps
module tb_pipe_serdes;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst = 1'b1, clear = 1'b0, ep_write = 1'b0;
  logic [31:0] ep_dataout = '0;
  logic wr_en;
  logic [9:0] wr_addr;
  logic [127:0] wr_data;
  int checks = 0, failures = 0;
  logic [127:0] expq [$];
  int exp_addr = 0, last_write_cycle = -10, cycle = 0;

  pipe_serdes #(.BURST_LEN(8), .AW(10)) dut (.*);

  always @(posedge clk) cycle <= cycle + 1;
  always @(posedge clk) if (!rst && wr_en) begin
    checks++;
    if (expq.size() == 0 || wr_data !== expq[0] || wr_addr != 10'(exp_addr) || cycle - last_write_cycle != 1) begin
      failures++;
      if (failures < 10) $display("FAIL: addr %0d/%0d data %h exp %h dt %0d", wr_addr, exp_addr, wr_data, expq[0], cycle - last_write_cycle);
    end
    if (expq.size() != 0) void'(expq.pop_front());
    exp_addr++;
  end

  logic [15:0] stim [$];
  int lane_cnt = 0;
  logic [127:0] word_acc;

  // pipe driver: one value per cycle with random pauses
  always @(posedge clk) begin
    ep_write <= 1'b0;
    if (!rst && stim.size() != 0 && ($urandom % 3 != 0)) begin
      logic [15:0] v;
      v = stim.pop_front();
      ep_write   <= 1'b1;
      ep_dataout <= {16'($urandom), v};
      word_acc[16*lane_cnt +: 16] = v;
      if (lane_cnt == 7) begin
        expq.push_back(word_acc);
        last_write_cycle = cycle + 1;
        lane_cnt = 0;
      end else lane_cnt++;
    end
  end

  task automatic send_words(input int n);
    for (int i = 0; i < 8 * n; i++) stim.push_back(16'($urandom));
    while (stim.size() != 0) @(posedge clk);
    repeat (3) @(posedge clk);
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst <= 1'b0;
    @(posedge clk);
    send_words(100);
    repeat (5) @(posedge clk);
    clear <= 1'b1;
    @(posedge clk);
    clear <= 1'b0;
    exp_addr = 0;
    send_words(10);
    repeat (5) @(posedge clk);
    checks++;
    if (expq.size() != 0 || exp_addr != 10) begin failures++; $display("FAIL: words missing"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1ms;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
