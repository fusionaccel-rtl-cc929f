// tb_usb_io: self-checking testbench for the host interface block.
//
// Drives the command, data, weight and bias pipe-ins with random words and
// random gaps, and checks: command words pass to the command FIFO unchanged;
// eight data or weight pipe words (one FP16 value in the low half of each)
// form one cache word, lane 0 first, written at consecutive addresses from
// 0; each bias word is written as one cache word with the value in bits
// [15:0]; an op_en edge restarts the write addresses; the pipe ready flags
// follow the FIFO fill levels; the result pipe reads the result FIFO
// directly; engine_ready reaches the host clock after two flops.
// Stimulus changes on the falling clock edge.
`timescale 1ns/1ps
module tb_usb_io;
  localparam int BL = 8;
  logic ti_clk = 1'b0;
  always #5 ti_clk = ~ti_clk;
  logic rst = 1'b1, op_en = 1'b0, restart = 1'b0, engine_ready = 1'b0, engine_ready_ti;
  logic cmd_ep_write = 1'b0, cmd_ep_ready, cmd_wr_en;
  logic [31:0] cmd_ep_dataout = '0, cmd_din;
  logic [10:0] cmd_wr_count = '0, res_rd_count = '0;
  logic data_ep_write = 1'b0, weight_ep_write = 1'b0, bias_ep_write = 1'b0;
  logic [31:0] data_ep_dataout = '0, weight_ep_dataout = '0, bias_ep_dataout = '0;
  logic data_we, weight_we, bias_we, load_ep_ready;
  logic [9:0] data_waddr, bias_waddr;
  logic [12:0] weight_waddr;
  logic [16*BL-1:0] data_wdata, weight_wdata, bias_wdata;
  logic res_ep_read = 1'b0, res_ep_ready, res_rd_en;
  logic [31:0] res_ep_datain, res_dout = '0;
  int checks = 0, failures = 0;

  usb_io dut (.*);

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; if (failures < 10) $display("FAIL: %s", msg); end
  endtask

  logic [16*BL-1:0] dmem [1024], wmem [8192], bmem [1024];
  int dwrites = 0, wwrites = 0, bwrites = 0;
  always @(posedge ti_clk) begin
    if (data_we)   begin dmem[data_waddr]   <= data_wdata;   dwrites++; end
    if (weight_we) begin wmem[weight_waddr] <= weight_wdata; wwrites++; end
    if (bias_we)   begin bmem[bias_waddr]   <= bias_wdata;   bwrites++; end
  end

  // send n cache words through one pipe and return the expected contents
  task automatic load(input int which, input int n, output logic [16*BL-1:0] exp []);
    exp = new[n];
    for (int i = 0; i < n; i++) begin
      for (int b = 0; b < ((which == 2) ? 1 : BL); b++) begin
        logic [31:0] v;
        v = $urandom;
        if (which == 2) exp[i] = {112'h0, v[15:0]};
        else exp[i][16*b +: 16] = v[15:0];
        while ($urandom % 3 == 0) @(negedge ti_clk);
        case (which)
          0: begin data_ep_write = 1'b1; data_ep_dataout = v; end
          1: begin weight_ep_write = 1'b1; weight_ep_dataout = v; end
          default: begin bias_ep_write = 1'b1; bias_ep_dataout = v; end
        endcase
        @(negedge ti_clk);
        data_ep_write = 1'b0; weight_ep_write = 1'b0; bias_ep_write = 1'b0;
      end
    end
    repeat (4) @(negedge ti_clk);
  endtask

  task automatic edge_op;
    op_en = 1'b1;
    @(negedge ti_clk);
    @(negedge ti_clk);
    op_en = 1'b0;
    @(negedge ti_clk);
  endtask

  initial begin
    logic [16*BL-1:0] e [];
    repeat (3) @(negedge ti_clk);
    rst = 1'b0;
    @(negedge ti_clk);
    check(load_ep_ready, "load_ep_ready after reset");
    // command pass-through and ready flag
    for (int i = 0; i < 50; i++) begin
      logic [31:0] v;
      v = $urandom;
      cmd_ep_write = 1'b1; cmd_ep_dataout = v;
      #1;
      check(cmd_wr_en && cmd_din == v, "command word passes to FIFO");
      @(negedge ti_clk);
      cmd_ep_write = 1'b0;
    end
    for (int c = 1018; c <= 1024; c++) begin
      cmd_wr_count = 11'(c);
      #1;
      check(cmd_ep_ready == (c + 3 <= 1024), "command ready flag");
      @(negedge ti_clk);
    end
    // two loads per cache, separated by an op_en edge
    for (int rep = 0; rep < 2; rep++) begin
      int n;
      edge_op();
      for (int which = 0; which < 3; which++) begin
        int w0;
        n = $urandom_range(3, 12);
        w0 = (which == 0) ? dwrites : (which == 1) ? wwrites : bwrites;
        load(which, n, e);
        check(((which == 0) ? dwrites : (which == 1) ? wwrites : bwrites) - w0 == n, "number of cache writes");
        for (int i = 0; i < n; i++)
          check(((which == 0) ? dmem[i] : (which == 1) ? wmem[i] : bmem[i]) == e[i], "cache word contents");
      end
    end
    // result pipe
    for (int i = 0; i < 30; i++) begin
      logic [31:0] v;
      v = $urandom;
      res_dout = v; res_ep_read = ($urandom % 2 == 1); res_rd_count = 11'($urandom_range(0, 3));
      #1;
      check(res_ep_datain == v && res_rd_en == res_ep_read && res_ep_ready == (res_rd_count >= 1), "result pipe");
      @(negedge ti_clk);
    end
    res_ep_read = 1'b0;
    // engine_ready synchroniser
    engine_ready = 1'b1;
    @(negedge ti_clk);
    #1 check(!engine_ready_ti, "engine_ready needs two flops");
    @(negedge ti_clk);
    @(negedge ti_clk);
    #1 check(engine_ready_ti, "engine_ready reaches host clock");
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
