// tb_avepool_unit: self-checking testbench for avepool_unit.
//
// Streams windows of random FP16 words (mixed signs) while honouring credit,
// stalls out_ready at random, and compares every result word with
// the lane-wise sum divided by the window size, computed with real arithmetic in the same order. Window sizes 9,
// 4 and 169 (13x13, the paper's example) are used.
`timescale 1ns/1ps
module tb_avepool_unit;
  import fp16_ref::*;
  localparam int BL = 8;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst = 1'b1, start = 1'b0;
  logic [7:0] ks = '0, positions = '0;
  logic [15:0] groups = '0;
  logic in_valid = 1'b0;
  logic [BL-1:0][15:0] data = '0;
  logic credit, out_valid, out_ready = 1'b0, done;
  logic [BL-1:0][15:0] out_data;
  int checks = 0, failures = 0;

  avepool_unit dut (.*);

  always @(posedge clk) out_ready <= ($urandom % 3 != 0);

  logic [BL-1:0][15:0] expq [$];
  always @(posedge clk) if (!rst && out_valid && out_ready) begin
    checks++;
    if (expq.size() == 0) begin failures++; $display("FAIL: extra result"); end
    else begin
      for (int l = 0; l < BL; l++) if (!fp16_same(out_data[l], expq[0][l])) begin
        failures++;
        if (failures < 10) $display("FAIL: lane %0d got %h expected %h", l, out_data[l], expq[0][l]);
      end
      void'(expq.pop_front());
    end
  end

  // Word driver: sends one queued word per cycle while credit is high.
  logic [BL-1:0][15:0] dq [$];
  always @(posedge clk) begin
    in_valid <= 1'b0;
    if (dq.size() != 0 && credit && ($urandom % 4 != 0)) begin
      in_valid <= 1'b1;
      data     <= dq.pop_front();
    end
  end

  task automatic run(input int k, input int g_n, input int pos);
    logic [BL-1:0][15:0] d [];
    d = new[g_n * pos * k];
    foreach (d[i]) for (int l = 0; l < BL; l++) d[i][l] = rand_fp16(10, 16);
    for (int g = 0; g < g_n; g++)
      for (int p = 0; p < pos; p++) begin
        logic [BL-1:0][15:0] e;
        for (int l = 0; l < BL; l++) begin
          logic [15:0] r;
          r = 16'h0000;
          for (int kk = 0; kk < k; kk++) begin
            logic [15:0] v;
            v = d[(g*pos + p)*k + kk][l];
            r = add(r, v);
          end
          r = div(r, to_fp16(real'(k)));
          e[l] = r;
        end
        expq.push_back(e);
      end
    @(posedge clk);
    ks <= 8'(k); groups <= 16'(g_n); positions <= 8'(pos);
    start <= 1'b1;
    @(posedge clk);
    start <= 1'b0;
    foreach (d[i]) dq.push_back(d[i]);
    @(posedge clk);
    while (dq.size() != 0 || !done) @(posedge clk);
    repeat (3) @(posedge clk);
    checks++;
    if (expq.size() != 0) begin failures++; $display("FAIL: %0d results missing", expq.size()); end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst <= 1'b0;
    repeat (3) @(posedge clk);
    run(9, 2, 5);
    run(4, 1, 7);
    run(169, 1, 2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #20ms;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
