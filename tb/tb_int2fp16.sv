// tb_int2fp16: self-checking testbench for int2fp16.
//
// Converts every integer 0..65535 and compares with the real-arithmetic
// reference; also checks the paper's example 169 -> 16'h5948.
module tb_int2fp16;
  import fp16_ref::*;
  logic [15:0] value;
  logic [15:0] result;
  int checks = 0, failures = 0;

  int2fp16 dut (.value, .result);

  initial begin
    for (int i = 0; i < 65536; i++) begin
      value = 16'(i);
      #1;
      checks++;
      if (result !== to_fp16(real'(i))) begin
        failures++;
        if (failures < 10) $display("FAIL: %0d -> %h, expected %h", i, result, to_fp16(real'(i)));
      end
    end
    value = 16'd169;
    #1;
    checks++;
    if (result !== 16'h5948) begin failures++; $display("FAIL: 169 -> %h", result); end
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
