// tb_async_fifo: self-checking testbench for async_fifo.
//
// Runs the FIFO with unrelated write and read clocks and random write and
// read strobes that respect full and empty, and checks that every word comes
// out once, in order, with valid one read-clock after rd_en. It also fills
// the FIFO to check full, prog_full and wr_count, and drains it to check
// empty.
`timescale 1ns/1ps
module tb_async_fifo;
  localparam int W = 32, D = 16;
  logic rst = 1'b1, wr_clk = 1'b0, rd_clk = 1'b0;
  always #3.1 wr_clk = ~wr_clk;
  always #4.7 rd_clk = ~rd_clk;
  logic wr_en, wr_req = 1'b0, wr_man = 1'b0, rd_en, rd_req = 1'b0, rd_man = 1'b0;
  assign wr_en = phase_fill ? wr_man : (wr_req && !full);
  assign rd_en = phase_fill ? rd_man : (rd_req && !empty);
  logic [W-1:0] din = '0, dout;
  logic full, prog_full, valid, empty;
  logic [$clog2(D):0] wr_count, rd_count;
  int checks = 0, failures = 0;
  logic [W-1:0] model [$];
  bit phase_fill = 1'b0;
  int written = 0;

  async_fifo #(.WIDTH(W), .DEPTH(D), .PROG_FULL(D-4)) dut (.*);

  always @(posedge wr_clk) begin
    if (!rst && !phase_fill) begin
      if (wr_en) begin model.push_back(din); written++; end
      wr_req <= ($urandom % 3 == 0) && written < 1999;
      din   <= $urandom;
    end
  end
  logic rd_q = 1'b0;
  always @(posedge rd_clk) begin
    if (!rst) begin
      rd_q <= rd_en;
      if (valid && !phase_fill) begin
        checks++;
        if (!rd_q || model.size() == 0 || dout !== model[0]) begin
          failures++;
          if (failures < 10) $display("FAIL: read %h", dout);
        end
        if (model.size() != 0) void'(model.pop_front());
      end
      rd_req <= ($urandom % 2 == 0);
    end
  end

  initial begin
    repeat (4) @(posedge wr_clk);
    rst = 1'b0;
    wait (written >= 1999);
    repeat (50) @(posedge rd_clk);
    checks++;
    if (model.size() != 0 || !empty) begin failures++; $display("FAIL: %0d words left", model.size()); end
    // fill completely
    phase_fill = 1'b1;
    @(posedge wr_clk);
    for (int i = 0; i < D; i++) begin
      @(posedge wr_clk);
      checks++;
      if (full) begin failures++; $display("FAIL: full too early at %0d", i); end
      wr_man <= 1'b1; din <= i;
      @(posedge wr_clk);
      wr_man <= 1'b0;
    end
    repeat (3) @(posedge wr_clk);
    checks++;
    if (!full || !prog_full || wr_count != D) begin
      failures++; $display("FAIL: full=%b prog_full=%b wr_count=%0d", full, prog_full, wr_count);
    end
    repeat (4) @(posedge rd_clk);
    for (int i = 0; i < D; i++) begin
      @(posedge rd_clk);
      rd_man <= 1'b1;
      @(posedge rd_clk);
      rd_man <= 1'b0;
      #0.1;
      checks++;
      if (!valid || dout !== W'(i)) begin failures++; $display("FAIL: drain %0d got %h", i, dout); end
    end
    repeat (3) @(posedge rd_clk);
    checks++;
    if (!empty || rd_count != 0) begin failures++; $display("FAIL: not empty after drain"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #200us;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
