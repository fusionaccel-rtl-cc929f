// fusion_accel: top level of the stream accelerator.
//
// The host PC prepares every piece of work (padding and im2col of the data,
// slicing of the weights) and streams it over USB 3.0; the FPGA holds no
// network in memory, only the caches for the current piece:
//
//   host pipes --usb_io--> command FIFO --csb--> layer register --+
//              \--SERDES--> data / weight / bias caches ----------+--> engine
//   host pipe  <--usb_io-- result FIFO <------------------------------+
//
// Two clock domains: ti_clk is the USB interface clock (100.8 MHz in the
// paper), clk the engine clock (100 MHz). The command FIFO and the result
// FIFO (32 bits x 1024 each) are dual-clock FIFOs, and the caches are
// written on ti_clk and read on clk. host_rst is the host's reset bit; it is
// synchronised into each domain. op_en and restart are the host's control
// bits (see csb). engine_ready_ti tells the host that the current run is
// finished and its results are in the result FIFO.
//
// Sizes are the paper's: parallelism 8 (128-bit cache words), data cache
// 1024 words, weight cache 8192 words, bias cache 1024 words, full-sum cache
// 128 entries. The USB controller and the host library's endpoint modules
// are vendor parts and are not included: their endpoint signals are the
// ports of this module.
//
// Lint note: verilator reports SYNCASYNCNET on rst_clk_s and fifo_rst. Each
// reset synchroniser is set asynchronously by host_rst and released on its
// own clock; its output is the synchronous reset of that domain's logic and
// also the asynchronous reset of the dual-clock FIFOs, which must clear both
// pointer sides together. The mix is intended and the warning stands.
module fusion_accel #(
  parameter int BURST_LEN    = fa_pkg::BURST_LEN,
  parameter int MAX_O_SIDE   = fa_pkg::MAX_O_SIDE,
  parameter int DATA_DEPTH   = 1024,
  parameter int WEIGHT_DEPTH = 8192,
  parameter int BIAS_DEPTH   = 1024,
  parameter int CMD_DEPTH    = 1024,
  parameter int RES_DEPTH    = 1024,
  parameter int RES_BLOCK    = 1
) (
  input  logic        ti_clk,
  input  logic        clk,
  // host control and status bits
  input  logic        host_rst,
  input  logic        op_en,
  input  logic        restart,
  output logic        engine_ready_ti,
  // command pipe-in
  input  logic        cmd_ep_write,
  input  logic [31:0] cmd_ep_dataout,
  output logic        cmd_ep_ready,
  // data, weight and bias pipe-ins
  input  logic        data_ep_write,
  input  logic [31:0] data_ep_dataout,
  input  logic        weight_ep_write,
  input  logic [31:0] weight_ep_dataout,
  input  logic        bias_ep_write,
  input  logic [31:0] bias_ep_dataout,
  output logic        load_ep_ready,
  // result pipe-out
  input  logic        res_ep_read,
  output logic [31:0] res_ep_datain,
  output logic        res_ep_ready
);
  localparam int DATA_AW   = $clog2(DATA_DEPTH);
  localparam int WEIGHT_AW = $clog2(WEIGHT_DEPTH);
  localparam int BIAS_AW   = $clog2(BIAS_DEPTH);
  localparam int WW        = 16 * BURST_LEN;

  // ---------------- resets ----------------
  logic [1:0] rst_ti_s, rst_clk_s;
  logic       rst_ti, rst_clk, fifo_rst;
  always_ff @(posedge ti_clk or posedge host_rst)
    if (host_rst) rst_ti_s <= '1; else rst_ti_s <= {rst_ti_s[0], 1'b0};
  always_ff @(posedge clk or posedge host_rst)
    if (host_rst) rst_clk_s <= '1; else rst_clk_s <= {rst_clk_s[0], 1'b0};
  assign rst_ti   = rst_ti_s[1];
  assign rst_clk  = rst_clk_s[1];
  assign fifo_rst = rst_ti || rst_clk;

  // ---------------- USB side ----------------
  logic                       engine_ready;
  logic                       cmd_wr_en, cmd_full, cmd_prog_full;
  logic [31:0]                cmd_din;
  logic [$clog2(CMD_DEPTH):0] cmd_wr_count, cmd_rd_count;
  logic                       data_we, weight_we, bias_we;
  logic [DATA_AW-1:0]         data_waddr;
  logic [WEIGHT_AW-1:0]       weight_waddr;
  logic [BIAS_AW-1:0]         bias_waddr;
  logic [WW-1:0]              data_wdata, weight_wdata, bias_wdata;
  logic                       res_rd_en, res_valid, res_empty;
  logic [31:0]                res_dout;
  logic [$clog2(RES_DEPTH):0] res_rd_count, res_wr_count;

  usb_io #(
    .BURST_LEN(BURST_LEN), .DATA_AW(DATA_AW), .WEIGHT_AW(WEIGHT_AW), .BIAS_AW(BIAS_AW),
    .CMD_DEPTH(CMD_DEPTH), .RES_DEPTH(RES_DEPTH), .RES_BLOCK(RES_BLOCK)
  ) u_usb_io (
    .ti_clk, .rst(rst_ti), .op_en, .restart, .engine_ready, .engine_ready_ti,
    .cmd_ep_write, .cmd_ep_dataout, .cmd_ep_ready, .cmd_wr_en, .cmd_din, .cmd_wr_count,
    .data_ep_write, .data_ep_dataout, .data_we, .data_waddr, .data_wdata,
    .weight_ep_write, .weight_ep_dataout, .weight_we, .weight_waddr, .weight_wdata,
    .bias_ep_write, .bias_ep_dataout, .bias_we, .bias_waddr, .bias_wdata,
    .load_ep_ready,
    .res_ep_read, .res_ep_datain, .res_ep_ready, .res_rd_en, .res_dout, .res_rd_count
  );

  // ---------------- command FIFO ----------------
  logic        cmd_rd_en, cmd_valid, cmd_empty;
  logic [31:0] cmd_dout;
  async_fifo #(.WIDTH(32), .DEPTH(CMD_DEPTH), .PROG_FULL(CMD_DEPTH - 16)) u_cmd_fifo (
    .rst(fifo_rst),
    .wr_clk(ti_clk), .wr_en(cmd_wr_en), .din(cmd_din), .full(cmd_full),
    .prog_full(cmd_prog_full), .wr_count(cmd_wr_count),
    .rd_clk(clk), .rd_en(cmd_rd_en), .dout(cmd_dout), .valid(cmd_valid), .empty(cmd_empty),
    .rd_count(cmd_rd_count)
  );

  // ---------------- caches ----------------
  logic [DATA_AW-1:0]   data_raddr;
  logic [WEIGHT_AW-1:0] weight_raddr;
  logic [BIAS_AW-1:0]   bias_raddr;
  logic [WW-1:0]        data_rdata, weight_rdata, bias_rdata;

  bram_sdp #(.WIDTH(WW), .DEPTH(DATA_DEPTH)) u_data_cache (
    .wr_clk(ti_clk), .we(data_we), .waddr(data_waddr), .wdata(data_wdata),
    .rd_clk(clk), .raddr(data_raddr), .rdata(data_rdata)
  );
  bram_sdp #(.WIDTH(WW), .DEPTH(WEIGHT_DEPTH)) u_weight_cache (
    .wr_clk(ti_clk), .we(weight_we), .waddr(weight_waddr), .wdata(weight_wdata),
    .rd_clk(clk), .raddr(weight_raddr), .rdata(weight_rdata)
  );
  bram_sdp #(.WIDTH(WW), .DEPTH(BIAS_DEPTH)) u_bias_cache (
    .wr_clk(ti_clk), .we(bias_we), .waddr(bias_waddr), .wdata(bias_wdata),
    .rd_clk(clk), .raddr(bias_raddr), .rdata(bias_rdata)
  );

  // ---------------- control and engine ----------------
  fa_pkg::layer_t layer;
  logic           engine_valid, engine_done, engine_busy;
  logic           res_wr_en, res_full, res_prog_full;
  logic [31:0]    res_din;

  csb u_csb (
    .clk, .rst(rst_clk), .op_en, .restart,
    .cmd_rd_en, .cmd_dout, .cmd_valid, .cmd_empty,
    .layer, .engine_valid, .engine_done, .engine_ready
  );

  engine #(
    .BURST_LEN(BURST_LEN), .MAX_O_SIDE(MAX_O_SIDE),
    .DATA_AW(DATA_AW), .WEIGHT_AW(WEIGHT_AW), .BIAS_AW(BIAS_AW)
  ) u_engine (
    .clk, .rst(rst_clk), .engine_valid, .layer, .engine_done, .busy(engine_busy),
    .data_raddr, .data_rdata, .weight_raddr, .weight_rdata, .bias_raddr, .bias_rdata,
    .res_wr_en, .res_din, .res_full
  );

  // ---------------- result FIFO ----------------
  async_fifo #(.WIDTH(32), .DEPTH(RES_DEPTH), .PROG_FULL(RES_DEPTH - 16)) u_res_fifo (
    .rst(fifo_rst),
    .wr_clk(clk), .wr_en(res_wr_en), .din(res_din), .full(res_full),
    .prog_full(res_prog_full), .wr_count(res_wr_count),
    .rd_clk(ti_clk), .rd_en(res_rd_en), .dout(res_dout), .valid(res_valid), .empty(res_empty),
    .rd_count(res_rd_count)
  );
endmodule
