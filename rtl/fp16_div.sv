// fp16_div: pipelined FP16 divider (average-pooling lane).
//
// Computes result = a / b. Used by the average-pooling unit to divide each
// window sum by the window size.
// The operation is evaluated combinationally on the inputs and then carried
// through LATENCY register stages, so a new operand pair can be accepted on
// every cycle and the result appears exactly LATENCY cycles after in_valid.
// The default latency of 6 cycles is the one the paper reports for its
// FP16 divider at 100 MHz; the arithmetic itself (round to nearest even,
// flush-to-zero, see fp16_pkg) is this design's choice, as the paper uses a
// vendor floating-point core without describing its insides.
//
// Interface: in_valid/a/b in, out_valid/result out, synchronous active-high
// reset clearing the valid pipeline.
module fp16_div #(
  parameter int LATENCY = 6
) (
  input  logic                  clk,
  input  logic                  rst,
  input  logic                  in_valid,
  input  fp16_pkg::fp16_t       a,
  input  fp16_pkg::fp16_t       b,
  output logic                  out_valid,
  output fp16_pkg::fp16_t       result
);
  import fp16_pkg::*;

  fp16_pkg::fp16_t       res_pipe [LATENCY];
  logic valid_pipe [LATENCY];

  always_ff @(posedge clk) begin
    res_pipe[0] <= fp16_div_f(a, b);
    for (int i = 1; i < LATENCY; i++) res_pipe[i] <= res_pipe[i-1];
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int i = 0; i < LATENCY; i++) valid_pipe[i] <= 1'b0;
    end else begin
      valid_pipe[0] <= in_valid;
      for (int i = 1; i < LATENCY; i++) valid_pipe[i] <= valid_pipe[i-1];
    end
  end

  assign result    = res_pipe[LATENCY-1];
  assign out_valid = valid_pipe[LATENCY-1];

  initial assert (LATENCY >= 1) else $fatal(1, "fp16_div: LATENCY must be at least 1");
endmodule
