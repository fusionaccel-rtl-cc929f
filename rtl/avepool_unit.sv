// avepool_unit: channel-parallel average pooling (S_FIFO -> BURST_LEN
// accumulators -> BURST_LEN dividers).
//
// For one engine run the unit takes P x G windows of KS words each (order
// g, p, kk with kk fastest; BURST_LEN channels per word) and returns, per
// window, the BURST_LEN lane-wise means as one result word.
//
// Stage 1: the data words go into S_FIFO; BURST_LEN FP16 adders (2-cycle
// latency) accumulate each lane from +0 until KS words are summed.
// Stage 2: a one-cycle div_data_ready pulse starts BURST_LEN FP16 dividers
// (6-cycle latency) with a_div = the sums and b_div = KS converted to FP16
// by the int-FP converter (for KS = 169 that is 16'h5948). The quotients are
// offered on out_valid/out_data. This two-stage structure follows the
// paper; the FIFO depth and credit rule are this design's.
//
// Interface: as maxpool_unit.
module avepool_unit #(
  parameter int BURST_LEN    = fa_pkg::BURST_LEN,
  parameter int FIFO_DEPTH   = 16,
  parameter int CREDIT_SLACK = 4
) (
  input  logic                       clk,
  input  logic                       rst,
  input  logic                       start,
  input  logic [7:0]                 ks,
  input  logic [15:0]                groups,
  input  logic [7:0]                 positions,
  input  logic                       in_valid,
  input  logic [BURST_LEN-1:0][15:0] data,
  output logic                       credit,
  output logic                       out_valid,
  output logic [BURST_LEN-1:0][15:0] out_data,
  input  logic                       out_ready,
  output logic                       done
);
  import fp16_pkg::*;
  localparam int FW = $clog2(FIFO_DEPTH) + 1;

  logic                       s_full, s_prog_full, s_rd_en, s_valid, s_empty;
  logic [BURST_LEN-1:0][15:0] s_dout;
  logic [FW-1:0]              s_wr_count, s_rd_count;

  async_fifo #(.WIDTH(16*BURST_LEN), .DEPTH(FIFO_DEPTH), .PROG_FULL(FIFO_DEPTH-CREDIT_SLACK)) u_s_fifo (
    .rst, .wr_clk(clk), .wr_en(in_valid), .din(data), .full(s_full),
    .prog_full(s_prog_full), .wr_count(s_wr_count),
    .rd_clk(clk), .rd_en(s_rd_en), .dout(s_dout), .valid(s_valid), .empty(s_empty),
    .rd_count(s_rd_count)
  );
  assign credit = !s_prog_full;

  fp16_t b_div;
  int2fp16 u_i2f (.value({8'd0, ks}), .result(b_div));

  typedef enum logic [2:0] {A_IDLE, A_READ, A_ADD, A_DIV, A_WAIT, A_OUT} astate_t;
  astate_t                    state;
  logic [7:0]                 count;
  logic [23:0]                windows;
  logic [BURST_LEN-1:0][15:0] acc, quot;
  logic [BURST_LEN-1:0]       add_valid, div_valid;
  logic [BURST_LEN-1:0][15:0] add_result, div_result;
  logic                       div_data_ready;
  logic                       done_r;
  logic [23:0]                total;

  assign total          = 24'(groups) * 24'(positions);
  assign s_rd_en        = (state == A_IDLE) && !s_empty;
  assign div_data_ready = (state == A_DIV);

  for (genvar l = 0; l < BURST_LEN; l++) begin : g_lane
    fp16_add u_add (
      .clk, .rst, .in_valid(s_valid), .a(acc[l]), .b(s_dout[l]),
      .out_valid(add_valid[l]), .result(add_result[l])
    );
    fp16_div u_div (
      .clk, .rst, .in_valid(div_data_ready), .a(acc[l]), .b(b_div),
      .out_valid(div_valid[l]), .result(div_result[l])
    );
  end

  always_ff @(posedge clk) begin
    if (rst || start) begin
      state   <= A_IDLE;
      count   <= '0;
      windows <= '0;
      acc     <= '0;
      done_r  <= rst;
    end else begin
      unique case (state)
        A_IDLE: if (!s_empty) state <= A_READ;
        A_READ: state <= A_ADD;
        A_ADD: if (add_valid[0]) begin
          acc <= add_result;
          if (count == ks - 8'd1) begin
            count <= '0;
            state <= A_DIV;
          end else begin
            count <= count + 8'd1;
            state <= A_IDLE;
          end
        end
        A_DIV: state <= A_WAIT;
        A_WAIT: if (div_valid[0]) begin
          quot  <= div_result;
          acc   <= '0;
          state <= A_OUT;
        end
        A_OUT: if (out_ready) begin
          windows <= windows + 24'd1;
          if (windows == total - 24'd1) done_r <= 1'b1;
          state <= A_IDLE;
        end
        default: state <= A_IDLE;
      endcase
    end
  end

  assign out_valid = (state == A_OUT);
  assign out_data  = quot;
  assign done      = done_r;

  assert property (@(posedge clk) disable iff (rst) in_valid |-> !s_full)
    else $error("avepool_unit: S_FIFO overflow, credit rule broken");
endmodule
