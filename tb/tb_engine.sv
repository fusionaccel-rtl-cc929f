// tb_engine: self-checking testbench for the engine.
//
// The three caches are modelled as memories with a one-cycle read and the
// result FIFO as a queue whose full flag is raised at random. For a
// convolution (3x3, 16 input channels, 3 positions, 2 output channels), a
// 1x1 convolution, a max-pooling and an average-pooling run, the testbench
// fills the caches, pulses engine_valid with the layer and compares every
// result word written with the reference. It also checks that an idle
// command completes at once, that busy covers each run, and that no result
// is written while full is high.
`timescale 1ns/1ps
module tb_engine;
  import fp16_ref::*;
  import fa_pkg::*;
  localparam int BL = 8;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst = 1'b1, engine_valid = 1'b0, engine_done, busy;
  layer_t layer = '0;
  logic [9:0] data_raddr, bias_raddr;
  logic [12:0] weight_raddr;
  logic [16*BL-1:0] data_rdata, weight_rdata, bias_rdata;
  logic res_wr_en, res_full = 1'b0;
  logic [31:0] res_din;
  int checks = 0, failures = 0, full_stalls = 0, dones = 0;

  engine dut (.*);

  logic [16*BL-1:0] dmem [1024], wmem [8192], bmem [1024];
  always @(posedge clk) begin
    data_rdata   <= dmem[data_raddr];
    weight_rdata <= wmem[weight_raddr];
    bias_rdata   <= bmem[bias_raddr];
  end

  logic [31:0] expq [$];
  always @(posedge clk) begin
    res_full <= ($urandom % 5 == 0);
    if (res_full && !res_wr_en) full_stalls++;
    if (engine_done && !rst) dones++;
    if (!rst && res_wr_en) begin
      checks++;
      if (res_full) begin failures++; $display("FAIL: write while full"); end
      if (expq.size() == 0) begin failures++; $display("FAIL: extra result %h", res_din); end
      else begin
        if (res_din[31:16] != 16'h0 || !fp16_same(res_din[15:0], expq[0][15:0])) begin
          failures++;
          if (failures < 10) $display("FAIL: got %h expected %h", res_din, expq[0]);
        end
        void'(expq.pop_front());
      end
    end
  end

  task automatic issue(input layer_t l);
    @(posedge clk);
    layer <= l;
    engine_valid <= 1'b1;
    @(posedge clk);
    engine_valid <= 1'b0;
    @(posedge clk);
    checks++;
    if (!busy && l.op_type != OP_IDLE) begin failures++; $display("FAIL: busy low during run"); end
    while (busy) @(posedge clk);
    repeat (3) @(posedge clk);
    checks++;
    if (expq.size() != 0) begin failures++; $display("FAIL: %0d results missing", expq.size()); end
  endtask

  task automatic conv(input int k, input int g_n, input int pos, input int oc);
    layer_t l;
    logic [15:0] runsum [];
    runsum = new[pos];
    for (int i = 0; i < g_n * pos * k; i++)
      for (int b = 0; b < BL; b++) dmem[i][16*b +: 16] = rand_fp16(12, 16);
    for (int i = 0; i < oc * g_n * k; i++)
      for (int b = 0; b < BL; b++) wmem[i][16*b +: 16] = rand_fp16(10, 15);
    for (int n = 0; n < oc; n++) bmem[n] = {112'h0, rand_fp16(10, 16)};
    for (int n = 0; n < oc; n++)
      for (int g = 0; g < g_n; g++)
        for (int p = 0; p < pos; p++) begin
          logic [15:0] s;
          logic [15:0] c [BL];
          for (int b = 0; b < BL; b++) c[b] = 16'h0;
          for (int kk = 0; kk < k; kk++)
            for (int b = 0; b < BL; b++)
              c[b] = add(c[b], mul(dmem[(g*pos + p)*k + kk][16*b +: 16],
                                   wmem[(n*g_n + g)*k + kk][16*b +: 16]));
          s = (g == 0) ? bmem[n][15:0] : runsum[p];
          for (int b = 0; b < BL; b++) s = add(s, c[b]);
          runsum[p] = s;
          if (g == g_n - 1) expq.push_back({16'h0, relu(s)});
        end
    l = '0;
    l.op_type = OP_CONV;
    l.kernel = (k == 9) ? 8'd3 : 8'd1;
    l.kernel_size = 8'(k);
    l.stride = 4'd1;
    l.output_side_size = 8'(pos);
    l.input_channel_size = 16'(g_n * BL);
    l.output_channel_size = 16'(oc);
    issue(l);
  endtask

  task automatic pool(input bit is_max, input int k, input int g_n, input int pos);
    layer_t l;
    for (int i = 0; i < g_n * pos * k; i++)
      for (int b = 0; b < BL; b++) dmem[i][16*b +: 16] = rand_fp16(8, 16);
    for (int i = 0; i < g_n * pos; i++)
      for (int b = 0; b < BL; b++) begin
        logic [15:0] r;
        r = 16'h0;
        for (int kk = 0; kk < k; kk++) begin
          logic [15:0] v;
          v = dmem[i*k + kk][16*b +: 16];
          if (is_max) begin if (gt(v, r)) r = v; end
          else r = add(r, v);
        end
        if (!is_max) r = div(r, to_fp16(real'(k)));
        expq.push_back({16'h0, r});
      end
    l = '0;
    l.op_type = is_max ? OP_MAXPOOL : OP_AVEPOOL;
    l.kernel = (k == 9) ? 8'd3 : 8'd2;
    l.kernel_size = 8'(k);
    l.stride = 4'd2;
    l.output_side_size = 8'(pos);
    l.input_channel_size = 16'(g_n * BL);
    l.output_channel_size = 16'(g_n * BL);
    issue(l);
  endtask

  initial begin
    layer_t l;
    repeat (3) @(posedge clk);
    rst <= 1'b0;
    repeat (3) @(posedge clk);
    conv(9, 2, 3, 2);
    conv(1, 3, 5, 3);
    pool(1'b1, 4, 2, 3);
    pool(1'b0, 9, 1, 2);
    l = '0;
    issue(l);
    checks++;
    if (dones != 5) begin failures++; $display("FAIL: %0d done pulses, expected 5", dones); end
    checks++;
    if (full_stalls == 0) begin failures++; $display("FAIL: result backpressure never exercised"); end
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
