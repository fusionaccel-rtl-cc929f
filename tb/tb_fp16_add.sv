// tb_fp16_add: self-checking testbench for fp16_add.
//
// Drives random normal operands (plus zeros and special cases), one pair per
// cycle with random gaps, and compares each result with the real-arithmetic
// reference in fp16_ref. It also checks that every result appears exactly
// 2 cycles after its operands.
module tb_fp16_add;
  import fp16_ref::*;
  logic clk = 1'b0;
  logic rst = 1'b1;
  logic in_valid = 1'b0;
  logic [15:0] a = '0, b = '0;
  logic out_valid;
  logic [16-1:0] result;
  int checks = 0, failures = 0;
  int cycle = 0;

  fp16_add dut (.clk, .rst, .in_valid, .a, .b, .out_valid, .result);

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  typedef struct { logic [15:0] a, b; int t; } item_t;
  item_t q[$];

  function automatic logic [16-1:0] expect_of(input logic [15:0] x, input logic [15:0] y);
    return add(x, y);
  endfunction

  always @(posedge clk) begin
    if (!rst && in_valid) q.push_back('{a, b, cycle});
    if (!rst && out_valid) begin
      item_t it;
      logic [16-1:0] e;
      checks++;
      if (q.size() == 0) begin
        failures++;
        $display("FAIL: result without operands");
      end else begin
        it = q.pop_front();
        e  = expect_of(it.a, it.b);
        if (!((16 == 1) ? (result == e) : fp16_same(16'(result), 16'(e)))) begin
          failures++;
          if (failures < 10) $display("FAIL: %h op %h = %h, expected %h", it.a, it.b, result, e);
        end
        checks++;
        if (cycle - it.t != 2) begin
          failures++;
          if (failures < 10) $display("FAIL: latency %0d, expected 2", cycle - it.t);
        end
      end
    end
  end

  logic [15:0] specials [8] = '{16'h0000, 16'h8000, 16'h3C00, 16'hBC00, 16'h7BFF, 16'h0400, 16'h5948, 16'hAC88};

  initial begin
    repeat (3) @(posedge clk);
    rst <= 1'b0;
    for (int i = 0; i < 4000; i++) begin
      @(posedge clk);
      in_valid <= ($urandom % 4) != 0;
      if (i < 64) begin
        a <= specials[i % 8];
        b <= specials[(i / 8) % 8];
      end else begin
        a <= rand_fp16(1, 30);
        b <= rand_fp16(1, 30);
        if ($urandom % 8 == 0) b <= a;
      end
    end
    @(posedge clk);
    in_valid <= 1'b0;
    repeat (20) @(posedge clk);
    checks++;
    if (q.size() != 0) begin failures++; $display("FAIL: %0d results missing", q.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
