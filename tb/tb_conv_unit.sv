// tb_conv_unit: self-checking testbench for conv_unit.
//
// Feeds the unit the word stream of three convolutions (3x3 with 2 input
// groups, 1x1 with 3 groups, 3x3 with 1 group over 20 positions) while
// honouring credit, serves the bias reads from a model memory with a
// one-cycle read, stalls out_ready at random, and compares each result with
// the real-arithmetic reference computed in the unit's order of operations.
// It also checks that the multipliers alone never add less than 6 cycles:
// the first result cannot appear before 6 + 4*KS cycles after the first word.
`timescale 1ns/1ps
module tb_conv_unit;
  import fp16_ref::*;
  localparam int BL = 8;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst = 1'b1, start = 1'b0;
  logic [7:0] ks = '0, positions = '0;
  logic [15:0] groups = '0, channels = '0;
  logic in_valid = 1'b0;
  logic [BL-1:0][15:0] data = '0, weight = '0;
  logic credit, out_valid, out_ready = 1'b0, done;
  logic [9:0] bias_raddr;
  logic [15:0] bias_rdata;
  logic [15:0] out_data;
  int checks = 0, failures = 0, cycle = 0;

  conv_unit #(.BIAS_AW(10)) dut (.*);

  logic [15:0] bmem [1024];
  always @(posedge clk) bias_rdata <= bmem[bias_raddr];
  always @(posedge clk) cycle <= cycle + 1;
  always @(posedge clk) out_ready <= ($urandom % 3 != 0);

  logic [15:0] expq [$];
  int first_out = -1;
  always @(posedge clk) if (!rst && out_valid && out_ready) begin
    checks++;
    if (first_out < 0) first_out = cycle;
    if (expq.size() == 0 || !fp16_same(out_data, expq[0])) begin
      failures++;
      if (failures < 10) $display("FAIL: got %h expected %h", out_data, expq.size() ? expq[0] : 16'hxxxx);
    end
    if (expq.size() != 0) void'(expq.pop_front());
  end

  // Word driver: sends one queued word per cycle while credit is high.
  logic [BL-1:0][15:0] dq [$];
  logic [BL-1:0][15:0] wq [$];
  always @(posedge clk) begin
    in_valid <= 1'b0;
    if (dq.size() != 0 && credit && ($urandom % 4 != 0)) begin
      in_valid <= 1'b1;
      data     <= dq.pop_front();
      weight   <= wq.pop_front();
    end
  end

  task automatic run(input int k, input int g_n, input int pos, input int oc);
    logic [BL-1:0][15:0] d [];
    logic [BL-1:0][15:0] w [];
    logic [15:0] runsum [];
    logic [15:0] c [BL];
    int t0;
    d = new[g_n * pos * k];
    w = new[oc * g_n * k];
    runsum = new[pos];
    foreach (d[i]) for (int l = 0; l < BL; l++) d[i][l] = rand_fp16(12, 16);
    foreach (w[i]) for (int l = 0; l < BL; l++) w[i][l] = rand_fp16(10, 15);
    for (int n = 0; n < oc; n++) bmem[n] = rand_fp16(10, 16);
    for (int n = 0; n < oc; n++)
      for (int g = 0; g < g_n; g++)
        for (int p = 0; p < pos; p++) begin
          logic [15:0] s;
          for (int l = 0; l < BL; l++) c[l] = 16'h0;
          for (int kk = 0; kk < k; kk++)
            for (int l = 0; l < BL; l++)
              c[l] = add(c[l], mul(d[(g*pos + p)*k + kk][l], w[(n*g_n + g)*k + kk][l]));
          s = (g == 0) ? bmem[n] : runsum[p];
          for (int l = 0; l < BL; l++) s = add(s, c[l]);
          runsum[p] = s;
          if (g == g_n - 1) expq.push_back(relu(s));
        end
    @(posedge clk);
    ks <= 8'(k); groups <= 16'(g_n); positions <= 8'(pos); channels <= 16'(oc);
    start <= 1'b1;
    @(posedge clk);
    start <= 1'b0;
    first_out = -1;
    t0 = cycle + 1;
    for (int n = 0; n < oc; n++)
      for (int g = 0; g < g_n; g++)
        for (int p = 0; p < pos; p++)
          for (int kk = 0; kk < k; kk++) begin
            dq.push_back(d[(g*pos + p)*k + kk]);
            wq.push_back(w[(n*g_n + g)*k + kk]);
          end
    @(posedge clk);
    while (dq.size() != 0 || !done) @(posedge clk);
    repeat (3) @(posedge clk);
    checks++;
    if (expq.size() != 0) begin failures++; $display("FAIL: %0d results missing", expq.size()); end
    checks++;
    if (first_out - t0 < 6 + 4 * k) begin
      failures++; $display("FAIL: first result after %0d cycles", first_out - t0);
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst <= 1'b0;
    repeat (3) @(posedge clk);
    run(9, 2, 4, 3);
    run(1, 3, 6, 2);
    run(9, 1, 20, 2);
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
