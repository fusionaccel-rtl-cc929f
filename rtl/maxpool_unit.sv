// maxpool_unit: channel-parallel max-pooling (M_FIFO -> BURST_LEN comparators).
//
// For one engine run the unit takes P x G windows of KS words each (the
// engine streams them in the order g, p, kk with kk fastest; each word
// holds BURST_LEN channels) and returns, per window, the BURST_LEN lane-wise
// maxima as one result word.
//
// The data words are written straight into M_FIFO. For each word the
// BURST_LEN comparators (2-cycle latency) test new > b_cmp lane by lane,
// and a lane whose new value is larger replaces its b_cmp. b_cmp starts at
// 16'h0000 as in the paper, so the result is max(0, window maximum); the
// inputs of max-pooling follow a ReLU and are never negative in practice.
// The paper's sentence on which register is replaced reads the other way
// round, but it then states that b_cmp holds the maximum, which is what is
// built. After KS words the maxima are offered on out_valid/out_data and
// b_cmp is cleared.
//
// Interface: start pulses with ks, groups and positions; in_valid/data is
// the word stream, allowed while credit was high (room for CREDIT_SLACK
// words in flight); out_valid/out_data/out_ready gives one BURST_LEN-lane
// word per window; done is high from the last result until the next start.
module maxpool_unit #(
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
  localparam int FW = $clog2(FIFO_DEPTH) + 1;

  logic                       m_full, m_prog_full, m_rd_en, m_valid, m_empty;
  logic [BURST_LEN-1:0][15:0] m_dout;
  logic [FW-1:0]              m_wr_count, m_rd_count;

  async_fifo #(.WIDTH(16*BURST_LEN), .DEPTH(FIFO_DEPTH), .PROG_FULL(FIFO_DEPTH-CREDIT_SLACK)) u_m_fifo (
    .rst, .wr_clk(clk), .wr_en(in_valid), .din(data), .full(m_full),
    .prog_full(m_prog_full), .wr_count(m_wr_count),
    .rd_clk(clk), .rd_en(m_rd_en), .dout(m_dout), .valid(m_valid), .empty(m_empty),
    .rd_count(m_rd_count)
  );
  assign credit = !m_prog_full;

  typedef enum logic [1:0] {M_IDLE, M_READ, M_CMP, M_OUT} mstate_t;
  mstate_t                    state;
  logic [7:0]                 count;
  logic [23:0]                windows;
  logic [BURST_LEN-1:0][15:0] a_cmp, b_cmp;
  logic [BURST_LEN-1:0]       cmp_valid, cmp_gt;
  logic                       done_r;
  logic [23:0]                total;

  assign total   = 24'(groups) * 24'(positions);
  assign m_rd_en = (state == M_IDLE) && !m_empty;

  for (genvar l = 0; l < BURST_LEN; l++) begin : g_cmp
    fp16_cmp u_cmp (
      .clk, .rst, .in_valid(m_valid), .a(m_dout[l]), .b(b_cmp[l]),
      .out_valid(cmp_valid[l]), .result(cmp_gt[l])
    );
  end

  always_ff @(posedge clk) begin
    if (rst || start) begin
      state   <= M_IDLE;
      count   <= '0;
      windows <= '0;
      b_cmp   <= '0;
      done_r  <= rst;
    end else begin
      unique case (state)
        M_IDLE: if (!m_empty) state <= M_READ;
        M_READ: begin
          a_cmp <= m_dout;
          state <= M_CMP;
        end
        M_CMP: if (cmp_valid[0]) begin
          for (int l = 0; l < BURST_LEN; l++) if (cmp_gt[l]) b_cmp[l] <= a_cmp[l];
          if (count == ks - 8'd1) begin
            count <= '0;
            state <= M_OUT;
          end else begin
            count <= count + 8'd1;
            state <= M_IDLE;
          end
        end
        M_OUT: if (out_ready) begin
          b_cmp   <= '0;
          windows <= windows + 24'd1;
          if (windows == total - 24'd1) done_r <= 1'b1;
          state <= M_IDLE;
        end
        default: state <= M_IDLE;
      endcase
    end
  end

  assign out_valid = (state == M_OUT);
  assign out_data  = b_cmp;
  assign done      = done_r;

  assert property (@(posedge clk) disable iff (rst) in_valid |-> !m_full)
    else $error("maxpool_unit: M_FIFO overflow, credit rule broken");
endmodule
