// usb_io: the accelerator side of the USB 3.0 endpoints, in the host (USB
// interface) clock domain.
//
// The host library moves 32-bit words through block-throttled pipes: on a
// pipe-in, ep_write is high for every cycle that carries a word on
// ep_dataout; on a pipe-out, ep_read is high for every word the host takes,
// and the word is expected on ep_datain on the following cycle. ep_ready
// tells the host that a whole block may be moved. This block connects:
//   * the command pipe to the write side of the command FIFO; its ep_ready
//     is high while the FIFO has room for CMD_BLOCK more words;
//   * the data and weight pipes to the data and weight caches through a
//     pipe_serdes each (BURST_LEN FP16 values per 128-bit word);
//   * the bias pipe to the bias cache, one bias per word in bits [15:0] with
//     the other bits zero;
//   * the result pipe to the read side of the result FIFO (standard read, so
//     the FIFO's one-cycle read latency gives the pipe-out timing directly);
//     its ep_ready is high while at least RES_BLOCK words are waiting;
//   * engine_ready, brought into this domain through two flip-flops, to a
//     status bit for the host.
// The cache write addresses start at 0 after reset and after each op_en or
// restart strobe, so the host loads every piece from address 0 before it
// starts the engine. The endpoint timing follows the host library's
// documented pipe timing; the ep_ready rules and the address restart are
// this design's.
module usb_io #(
  parameter int BURST_LEN = fa_pkg::BURST_LEN,
  parameter int DATA_AW   = 10,
  parameter int WEIGHT_AW = 13,
  parameter int BIAS_AW   = 10,
  parameter int CMD_DEPTH = 1024,
  parameter int RES_DEPTH = 1024,
  parameter int CMD_BLOCK = fa_pkg::CMD_BURST_LEN,
  parameter int RES_BLOCK = 1
) (
  input  logic                          ti_clk,
  input  logic                          rst,
  input  logic                          op_en,
  input  logic                          restart,
  input  logic                          engine_ready,
  output logic                          engine_ready_ti,
  // command pipe-in -> command FIFO
  input  logic                          cmd_ep_write,
  input  logic [31:0]                   cmd_ep_dataout,
  output logic                          cmd_ep_ready,
  output logic                          cmd_wr_en,
  output logic [31:0]                   cmd_din,
  input  logic [$clog2(CMD_DEPTH):0]    cmd_wr_count,
  // data / weight / bias pipe-ins -> caches
  input  logic                          data_ep_write,
  input  logic [31:0]                   data_ep_dataout,
  output logic                          data_we,
  output logic [DATA_AW-1:0]            data_waddr,
  output logic [16*BURST_LEN-1:0]       data_wdata,
  input  logic                          weight_ep_write,
  input  logic [31:0]                   weight_ep_dataout,
  output logic                          weight_we,
  output logic [WEIGHT_AW-1:0]          weight_waddr,
  output logic [16*BURST_LEN-1:0]       weight_wdata,
  input  logic                          bias_ep_write,
  input  logic [31:0]                   bias_ep_dataout,
  output logic                          bias_we,
  output logic [BIAS_AW-1:0]            bias_waddr,
  output logic [16*BURST_LEN-1:0]       bias_wdata,
  output logic                          load_ep_ready,
  // result FIFO -> result pipe-out
  input  logic                          res_ep_read,
  output logic [31:0]                   res_ep_datain,
  output logic                          res_ep_ready,
  output logic                          res_rd_en,
  input  logic [31:0]                   res_dout,
  input  logic [$clog2(RES_DEPTH):0]    res_rd_count
);
  logic [1:0] ctrl_q;
  logic [1:0] ready_s;
  logic       clear;

  always_ff @(posedge ti_clk) begin
    if (rst) begin
      ctrl_q  <= '0;
      ready_s <= '0;
    end else begin
      ctrl_q  <= {restart, op_en};
      ready_s <= {ready_s[0], engine_ready};
    end
  end
  assign clear           = (op_en && !ctrl_q[0]) || (restart && !ctrl_q[1]);
  assign engine_ready_ti = ready_s[1];

  // command pipe
  assign cmd_wr_en    = cmd_ep_write;
  assign cmd_din      = cmd_ep_dataout;
  assign cmd_ep_ready = !rst && (32'(cmd_wr_count) + 32'(CMD_BLOCK) <= 32'(CMD_DEPTH));

  // data and weight pipes
  pipe_serdes #(.BURST_LEN(BURST_LEN), .AW(DATA_AW)) u_data_serdes (
    .clk(ti_clk), .rst, .clear, .ep_write(data_ep_write), .ep_dataout(data_ep_dataout),
    .wr_en(data_we), .wr_addr(data_waddr), .wr_data(data_wdata)
  );
  pipe_serdes #(.BURST_LEN(BURST_LEN), .AW(WEIGHT_AW)) u_weight_serdes (
    .clk(ti_clk), .rst, .clear, .ep_write(weight_ep_write), .ep_dataout(weight_ep_dataout),
    .wr_en(weight_we), .wr_addr(weight_waddr), .wr_data(weight_wdata)
  );

  // bias pipe: one bias per word
  always_ff @(posedge ti_clk) begin
    if (rst || clear) begin
      bias_we    <= 1'b0;
      bias_waddr <= '0;
    end else begin
      bias_we <= bias_ep_write;
      if (bias_we) bias_waddr <= bias_waddr + 1'b1;
    end
    if (bias_ep_write) bias_wdata <= {{(16*BURST_LEN-16){1'b0}}, bias_ep_dataout[15:0]};
  end
  assign load_ep_ready = !rst;

  // result pipe
  assign res_rd_en     = res_ep_read;
  assign res_ep_datain = res_dout;
  assign res_ep_ready  = !rst && (32'(res_rd_count) >= 32'(RES_BLOCK));
endmodule
