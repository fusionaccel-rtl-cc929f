// tb_fusion_accel: end-to-end testbench of fusion_accel.
//
// The testbench plays the host: it streams layer commands, biases, weights
// and data through the pipe endpoints, pulses op_en / restart, waits for
// engine_ready and reads the results back through the result pipe. Every
// expected value is computed here with real arithmetic (fp16_ref) in the
// same order of operations the hardware uses (products summed per lane over
// the window, lanes summed onto the bias or the running sum, ReLU last).
// With a 16-word result FIFO the following all happen and are counted:
// convolution with several input-channel groups and output channels, ReLU
// clamping, a restart with new data, max-pooling and average-pooling runs,
// an idle command, result-FIFO-full stalls and credit stalls of the reader.
`timescale 1ns/1ps
module tb_fusion_accel;
  import fp16_ref::*;
  localparam int BL = 8;

  logic ti_clk = 1'b0, clk = 1'b0;
  always #4.96 ti_clk = ~ti_clk;
  always #5.00 clk = ~clk;

  logic        host_rst = 1'b1, op_en = 1'b0, restart = 1'b0;
  logic        engine_ready_ti;
  logic        cmd_ep_write = 1'b0, data_ep_write = 1'b0, weight_ep_write = 1'b0, bias_ep_write = 1'b0;
  logic [31:0] cmd_ep_dataout = '0, data_ep_dataout = '0, weight_ep_dataout = '0, bias_ep_dataout = '0;
  logic        cmd_ep_ready, load_ep_ready;
  logic        res_ep_read = 1'b0;
  logic [31:0] res_ep_datain;
  logic        res_ep_ready;

  fusion_accel #(.RES_DEPTH(16), .WEIGHT_DEPTH(1024)) dut (
    .ti_clk, .clk, .host_rst, .op_en, .restart, .engine_ready_ti,
    .cmd_ep_write, .cmd_ep_dataout, .cmd_ep_ready,
    .data_ep_write, .data_ep_dataout, .weight_ep_write, .weight_ep_dataout,
    .bias_ep_write, .bias_ep_dataout, .load_ep_ready,
    .res_ep_read, .res_ep_datain, .res_ep_ready
  );

  int checks = 0, failures = 0;
  int n_conv = 0, n_maxpool = 0, n_avepool = 0, n_idle = 0, n_restart = 0;
  int n_relu = 0, n_multigroup = 0, n_res_stall = 0, n_credit_stall = 0;

  // ---------------- host model ----------------
  logic [15:0] dmem [][BL];   // data words
  logic [15:0] wmem [][BL];   // weight words
  logic [15:0] bmem [];       // biases
  logic [15:0] expq [$];
  logic [31:0] gotq [$];
  bit          hold_reads = 1'b0;

  task automatic pipe_write(input int kind, input logic [31:0] w);
    @(posedge ti_clk);
    unique case (kind)
      0: begin cmd_ep_write <= 1'b1; cmd_ep_dataout <= w; end
      1: begin data_ep_write <= 1'b1; data_ep_dataout <= w; end
      2: begin weight_ep_write <= 1'b1; weight_ep_dataout <= w; end
      default: begin bias_ep_write <= 1'b1; bias_ep_dataout <= w; end
    endcase
    @(posedge ti_clk);
    cmd_ep_write <= 1'b0; data_ep_write <= 1'b0; weight_ep_write <= 1'b0; bias_ep_write <= 1'b0;
  endtask

  task automatic send_cmd(input int op, input int ks, input int ic, input int pos, input int oc);
    checks++;
    if (!cmd_ep_ready) begin failures++; $display("FAIL: command pipe not ready"); end
    pipe_write(0, {8'd0, 8'(ks), 8'(ks == 9 ? 3 : 1), 4'd1, 4'(op)});
    pipe_write(0, {8'd0, 4'd0, 4'd1, 8'(pos), 8'(pos)});
    pipe_write(0, {16'(oc), 16'(ic)});
  endtask

  task automatic load_caches(input bit with_weights);
    foreach (dmem[i]) for (int l = 0; l < BL; l++) pipe_write(1, {16'hDEAD, dmem[i][l]});
    if (with_weights) begin
      foreach (wmem[i]) for (int l = 0; l < BL; l++) pipe_write(2, {16'h0, wmem[i][l]});
      foreach (bmem[i]) pipe_write(3, {16'h0, bmem[i]});
    end
  endtask

  task automatic pulse(input bit is_restart);
    repeat (2) @(posedge ti_clk);
    if (is_restart) restart <= 1'b1; else op_en <= 1'b1;
    repeat (6) @(posedge ti_clk);
    restart <= 1'b0; op_en <= 1'b0;
  endtask

  task automatic wait_ready();
    int t = 0;
    while (engine_ready_ti && t < 40) begin @(posedge ti_clk); t++; end
    while (!engine_ready_ti) @(posedge ti_clk);
  endtask

  task automatic wait_results();
    int t = 0;
    while ((gotq.size() < expq.size()) && t < 200000) begin @(posedge ti_clk); t++; end
    repeat (20) @(posedge ti_clk);
    checks++;
    if (gotq.size() != expq.size()) begin
      failures++;
      $display("FAIL: got %0d results, expected %0d", gotq.size(), expq.size());
    end
    for (int i = 0; i < expq.size() && i < gotq.size(); i++) begin
      checks++;
      if (gotq[i][31:16] != 16'h0 || !fp16_same(gotq[i][15:0], expq[i])) begin
        failures++;
        if (failures < 12) $display("FAIL: result %0d = %h, expected %h", i, gotq[i], expq[i]);
      end
    end
    expq.delete();
    gotq.delete();
  endtask

  // result pipe-out reader: EP_READ for one word whenever EP_READY
  always @(posedge ti_clk) begin
    res_ep_read <= 1'b0;
    if (!host_rst && res_ep_ready && !hold_reads && !res_ep_read) res_ep_read <= 1'b1;
  end
  logic res_read_q = 1'b0;
  always @(posedge ti_clk) begin
    res_read_q <= res_ep_read;
    if (res_read_q) gotq.push_back(res_ep_datain);
  end

  // mechanism monitors
  always @(posedge clk) begin
    if (dut.u_engine.res_wr_en == 1'b0 && dut.res_full && dut.u_engine.ser_left != 0) n_res_stall++;
    if (dut.u_engine.state == 2'd1 && !dut.u_engine.credit) n_credit_stall++;
  end

  // ---------------- workloads ----------------
  function automatic logic [15:0] rnd(input int emin, input int emax);
    return rand_fp16(emin, emax);
  endfunction

  task automatic make_data(input int words, input int emin, input int emax, input bit pos_only);
    dmem = new[words];
    foreach (dmem[i]) for (int l = 0; l < BL; l++) begin
      dmem[i][l] = rnd(emin, emax);
      if (pos_only) dmem[i][l][15] = 1'b0;
    end
  endtask

  // conv reference, in the hardware's order
  task automatic expect_conv(input int ks, input int g_n, input int pos, input int oc);
    logic [15:0] run [];
    logic [15:0] c [BL];
    run = new[pos];
    for (int n = 0; n < oc; n++) begin
      for (int g = 0; g < g_n; g++) begin
        for (int p = 0; p < pos; p++) begin
          logic [15:0] s;
          for (int l = 0; l < BL; l++) c[l] = 16'h0000;
          for (int k = 0; k < ks; k++)
            for (int l = 0; l < BL; l++)
              c[l] = add(c[l], mul(dmem[(g*pos + p)*ks + k][l], wmem[(n*g_n + g)*ks + k][l]));
          s = (g == 0) ? bmem[n] : run[p];
          for (int l = 0; l < BL; l++) s = add(s, c[l]);
          run[p] = s;
          if (g == g_n - 1) begin
            expq.push_back(relu(s));
            if (s[15] && s[14:10] != 0) n_relu++;
          end
        end
      end
    end
    if (g_n > 1) n_multigroup++;
  endtask

  task automatic expect_pool(input bit is_max, input int ks, input int g_n, input int pos);
    for (int g = 0; g < g_n; g++)
      for (int p = 0; p < pos; p++)
        for (int l = 0; l < BL; l++) begin
          logic [15:0] r;
          r = 16'h0000;
          for (int k = 0; k < ks; k++) begin
            logic [15:0] v;
            v = dmem[(g*pos + p)*ks + k][l];
            if (is_max) begin if (gt(v, r)) r = v; end
            else r = add(r, v);
          end
          if (!is_max) r = div(r, to_fp16(real'(ks)));
          expq.push_back(r);
        end
  endtask

  task automatic run_conv(input int ks, input int ic, input int pos, input int oc, input bit first);
    int g_n = (ic + BL - 1) / BL;
    make_data(g_n * pos * ks, 12, 16, 1'b0);
    if (first) begin
      wmem = new[oc * g_n * ks];
      foreach (wmem[i]) for (int l = 0; l < BL; l++) wmem[i][l] = rnd(10, 15);
      bmem = new[oc];
      foreach (bmem[i]) bmem[i] = rnd(10, 16);
      send_cmd(1, ks, ic, pos, oc);
    end
    load_caches(first);
    expect_conv(ks, g_n, pos, oc);
    pulse(!first);
    if (!first) n_restart++;
    wait_ready();
    wait_results();
    n_conv++;
  endtask

  initial begin
    repeat (10) @(posedge ti_clk);
    host_rst <= 1'b0;
    repeat (10) @(posedge ti_clk);
    // convolution, 3x3, 16 input channels (2 groups), 5 positions, 3 output channels
    run_conv(9, 16, 5, 3, 1'b1);
    // next piece of the same layer: new data, restart
    run_conv(9, 16, 5, 3, 1'b0);
    // 1x1 convolution, 24 channels (3 groups), 7 positions, 2 output channels
    run_conv(1, 24, 7, 2, 1'b1);
    // max-pooling 3x3, 16 channels, 4 positions, with the host slow to read
    make_data(2 * 4 * 9, 10, 16, 1'b1);
    send_cmd(2, 9, 16, 4, 16);
    load_caches(1'b0);
    expect_pool(1'b1, 9, 2, 4);
    hold_reads = 1'b1;
    pulse(1'b0);
    repeat (3000) @(posedge ti_clk);
    hold_reads = 1'b0;
    wait_ready();
    wait_results();
    n_maxpool++;
    // average pooling over 4-element windows, 8 channels, 3 positions
    make_data(1 * 3 * 4, 10, 16, 1'b1);
    send_cmd(3, 4, 8, 3, 8);
    load_caches(1'b0);
    expect_pool(1'b0, 4, 1, 3);
    pulse(1'b0);
    wait_ready();
    wait_results();
    n_avepool++;
    // average pooling 13x13 = 169 (the divisor of the paper's example), 8 channels
    make_data(169, 10, 13, 1'b1);
    send_cmd(3, 169, 8, 1, 8);
    load_caches(1'b0);
    expect_pool(1'b0, 169, 1, 1);
    pulse(1'b0);
    wait_ready();
    wait_results();
    n_avepool++;
    // idle command: engine reports done at once, no results
    send_cmd(0, 1, 8, 1, 1);
    pulse(1'b0);
    wait_ready();
    wait_results();
    n_idle++;

    $display("mechanisms: conv=%0d maxpool=%0d avepool=%0d idle=%0d restart=%0d relu=%0d multigroup=%0d res_stall=%0d credit_stall=%0d",
             n_conv, n_maxpool, n_avepool, n_idle, n_restart, n_relu, n_multigroup, n_res_stall, n_credit_stall);
    checks++; if (n_conv == 0) begin failures++; $display("FAIL: no conv"); end
    checks++; if (n_maxpool == 0) begin failures++; $display("FAIL: no maxpool"); end
    checks++; if (n_avepool == 0) begin failures++; $display("FAIL: no avepool"); end
    checks++; if (n_idle == 0) begin failures++; $display("FAIL: no idle"); end
    checks++; if (n_restart == 0) begin failures++; $display("FAIL: no restart"); end
    checks++; if (n_relu == 0) begin failures++; $display("FAIL: ReLU never clamped"); end
    checks++; if (n_multigroup == 0) begin failures++; $display("FAIL: no multi-group conv"); end
    checks++; if (n_res_stall == 0) begin failures++; $display("FAIL: result FIFO never stalled the engine"); end
    checks++; if (n_credit_stall == 0) begin failures++; $display("FAIL: reader never waited for credit"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #5ms;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
