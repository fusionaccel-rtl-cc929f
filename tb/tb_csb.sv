// tb_csb: self-checking testbench for the command block.
//
// A queue models the command FIFO with a standard read. The testbench
// writes random three-word layer commands, raises op_en, and checks that
// exactly three words are read, that the decoded layer equals the words,
// that engine_valid pulses once and that engine_ready is low until
// engine_done. A restart edge must rerun the last layer without reading the
// FIFO, and op_en with an empty FIFO must wait, without starting the engine,
// until a command arrives.
`timescale 1ns/1ps
module tb_csb;
  import fa_pkg::*;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst = 1'b1, op_en = 1'b0, restart = 1'b0, engine_done = 1'b0;
  logic cmd_rd_en, cmd_valid = 1'b0, cmd_empty, engine_valid, engine_ready;
  logic [31:0] cmd_dout = '0;
  layer_t layer;
  int checks = 0, failures = 0, reads = 0, valids = 0;
  layer_t seen;

  csb dut (.*);

  logic [31:0] fifo [$];
  assign cmd_empty = (fifo.size() == 0);
  always @(posedge clk) begin
    cmd_valid <= 1'b0;
    if (cmd_rd_en) begin
      if (fifo.size() == 0) begin failures++; $display("FAIL: read while empty"); end
      else begin cmd_dout <= fifo.pop_front(); cmd_valid <= 1'b1; reads++; end
    end
    if (engine_valid && !rst) begin valids++; seen <= layer; end
  end

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // v0: value of the engine_valid counter before the run was requested
  task automatic finish_run(input layer_t want, input int v0);
    while (valids == v0) @(posedge clk);
    @(posedge clk);
    check(seen == want, "decoded layer");
    check(!engine_valid, "engine_valid is one cycle");
    check(!engine_ready, "engine_ready low while running");
    repeat ($urandom_range(5, 30)) @(posedge clk);
    check(!engine_ready, "engine_ready low until done");
    engine_done <= 1'b1;
    @(posedge clk);
    engine_done <= 1'b0;
    repeat (2) @(posedge clk);
    check(engine_ready, "engine_ready high after done");
    check(valids - v0 == 1, "single engine_valid");
  endtask

  initial begin
    layer_t l;
    int r0, v0;
    repeat (4) @(posedge clk);
    rst <= 1'b0;
    repeat (4) @(posedge clk);
    check(engine_ready, "ready after reset");
    for (int i = 0; i < 6; i++) begin
      logic [95:0] w;
      w = {$urandom, $urandom, $urandom};
      l = layer_t'(w);
      fifo.push_back(w[31:0]); fifo.push_back(w[63:32]); fifo.push_back(w[95:64]);
      r0 = reads;
      v0 = valids;
      op_en <= 1'b1;
      repeat (6) @(posedge clk);
      op_en <= 1'b0;
      finish_run(l, v0);
      check(reads - r0 == 3, "three words read");
      if (i % 2 == 1) begin
        r0 = reads;
        v0 = valids;
        restart <= 1'b1;
        repeat (6) @(posedge clk);
        restart <= 1'b0;
        finish_run(l, v0);
        check(reads == r0, "restart reads nothing");
      end
      repeat (6) @(posedge clk);
    end
    // op_en with the FIFO empty: the command may arrive afterwards
    begin
      logic [95:0] w;
      w = {$urandom, $urandom, $urandom};
      l = layer_t'(w);
      r0 = valids;
      op_en <= 1'b1;
      repeat (20) @(posedge clk);
      check(valids == r0, "no run without a command");
      fifo.push_back(w[31:0]); fifo.push_back(w[63:32]); fifo.push_back(w[95:64]);
      op_en <= 1'b0;
      finish_run(l, r0);
    end
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
