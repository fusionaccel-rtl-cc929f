// tb_bram_sdp: self-checking testbench for bram_sdp.
//
// Writes random words to random addresses on the write clock, then reads
// every address on the read clock and checks the data and the one-cycle
// read latency.
`timescale 1ns/1ps
module tb_bram_sdp;
  localparam int WID = 128, DEP = 1024;
  logic wr_clk = 1'b0, rd_clk = 1'b0;
  always #3.3 wr_clk = ~wr_clk;
  always #5.0 rd_clk = ~rd_clk;
  logic we = 1'b0;
  logic [$clog2(DEP)-1:0] waddr = '0, raddr = '0;
  logic [WID-1:0] wdata = '0, rdata;
  logic [WID-1:0] model [DEP];
  int checks = 0, failures = 0;

  bram_sdp #(.WIDTH(WID), .DEPTH(DEP)) dut (.*);

  initial begin
    for (int i = 0; i < DEP; i++) begin
      @(posedge wr_clk);
      we <= 1'b1; waddr <= i;
      wdata <= {$urandom, $urandom, $urandom, $urandom};
      @(negedge wr_clk);
      model[i] = wdata;
    end
    for (int i = 0; i < 3000; i++) begin
      int a = $urandom % DEP;
      @(posedge wr_clk);
      we <= 1'b1; waddr <= a;
      wdata <= {$urandom, $urandom, $urandom, $urandom};
      @(negedge wr_clk);
      model[a] = wdata;
    end
    @(posedge wr_clk);
    we <= 1'b0;
    for (int i = 0; i < DEP; i++) begin
      @(posedge rd_clk);
      raddr <= i;
      @(posedge rd_clk);
      #0.1;
      checks++;
      if (rdata !== model[i]) begin failures++; if (failures < 10) $display("FAIL: addr %0d", i); end
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
