// conv_unit: channel-parallel convolution datapath (MULT -> P_FIFO -> CSUM ->
// F_FIFO -> FSUM), followed by ReLU.
//
// For one engine run the unit computes, for every output channel n < N and
// every output position p < P,
//     A[p][n] = ReLU( B[n] + sum over g < G, kk < KS, lane < BURST_LEN of
//                     W[n][g][kk][lane] * D[g][p][kk][lane] )
// where G = input channels / BURST_LEN and KS = kernel_size. The engine
// streams the cache words in the order n, g, p, kk (kk fastest); each word
// carries BURST_LEN FP16 lanes of data and of weight.
//
// Stage 1 (MULT): BURST_LEN FP16 multipliers, fed on every cycle, write the
//   lane products into P_FIFO.
// Stage 2 (CSUM): BURST_LEN FP16 adders, used as accumulators, each sum the
//   KS products of their lane (starting from +0) and push the BURST_LEN
//   partial sums as one word into F_FIFO.
// Stage 3 (FSUM): a single FP16 accumulator adds the BURST_LEN partial sums
//   of a word, lane 0 first, onto a start value: the bias B[n] for the first
//   input-channel group, otherwise the running sum of position p kept in the
//   full-sum cache (MAX_O_SIDE x 16 bits). The new sum goes back into the
//   cache; after the last group it leaves the unit through ReLU.
// The stage structure, the bias as FSUM start value, the cache of running
// sums and its depth of 128 follow the paper. The FIFO depths, the credit
// rule and the exact order of the additions are this design's: the adders
// take 2 cycles, so an accumulator takes one value every 4 cycles while the
// multipliers take one per cycle, and the FIFOs absorb the difference.
//
// Interface: start pulses with the run's sizes (ks, groups, positions,
// channels). in_valid/data/weight is the word stream, accepted whenever the
// engine has seen credit high (credit leaves room for CREDIT_SLACK words in
// flight). bias_raddr/bias_rdata reach the bias cache (one-cycle read,
// bias in bits [15:0]). Results leave on out_valid/out_data/out_ready.
// done is high from the last result until the next start.
module conv_unit #(
  parameter int BURST_LEN    = fa_pkg::BURST_LEN,
  parameter int MAX_O_SIDE   = fa_pkg::MAX_O_SIDE,
  parameter int BIAS_AW      = 10,
  parameter int FIFO_DEPTH   = 32,
  parameter int CREDIT_SLACK = 12
) (
  input  logic                              clk,
  input  logic                              rst,
  input  logic                              start,
  input  logic [7:0]                        ks,
  input  logic [15:0]                       groups,
  input  logic [7:0]                        positions,
  input  logic [15:0]                       channels,
  input  logic                              in_valid,
  input  logic [BURST_LEN-1:0][15:0]        data,
  input  logic [BURST_LEN-1:0][15:0]        weight,
  output logic                              credit,
  output logic [BIAS_AW-1:0]                bias_raddr,
  input  logic [15:0]                       bias_rdata,
  output logic                              out_valid,
  output fp16_pkg::fp16_t                   out_data,
  input  logic                              out_ready,
  output logic                              done
);
  import fp16_pkg::*;

  localparam int FW = $clog2(FIFO_DEPTH) + 1;
  localparam int PW = $clog2(MAX_O_SIDE);

  // ---------------- stage 1: multipliers ----------------
  logic                       reg_valid;
  logic [BURST_LEN-1:0][15:0] data_reg, weight_reg;
  logic [BURST_LEN-1:0]       mul_valid;
  logic [BURST_LEN-1:0][15:0] mul_result;

  always_ff @(posedge clk) begin
    reg_valid  <= rst ? 1'b0 : in_valid;
    data_reg   <= data;
    weight_reg <= weight;
  end

  for (genvar l = 0; l < BURST_LEN; l++) begin : g_mult
    fp16_mul u_mul (
      .clk, .rst, .in_valid(reg_valid), .a(data_reg[l]), .b(weight_reg[l]),
      .out_valid(mul_valid[l]), .result(mul_result[l])
    );
  end

  logic                       p_full, p_prog_full, p_rd_en, p_valid, p_empty;
  logic [BURST_LEN-1:0][15:0] p_dout;
  logic [FW-1:0]              p_wr_count, p_rd_count;

  async_fifo #(.WIDTH(16*BURST_LEN), .DEPTH(FIFO_DEPTH), .PROG_FULL(FIFO_DEPTH-CREDIT_SLACK)) u_p_fifo (
    .rst, .wr_clk(clk), .wr_en(mul_valid[0]), .din(mul_result), .full(p_full),
    .prog_full(p_prog_full), .wr_count(p_wr_count),
    .rd_clk(clk), .rd_en(p_rd_en), .dout(p_dout), .valid(p_valid), .empty(p_empty),
    .rd_count(p_rd_count)
  );
  assign credit = !p_prog_full;

  // ---------------- stage 2: CSUM accumulators ----------------
  typedef enum logic [1:0] {C_IDLE, C_READ, C_ADD, C_PUSH} cstate_t;
  cstate_t                    cstate;
  logic [7:0]                 ccount;
  logic [BURST_LEN-1:0][15:0] cacc;
  logic [BURST_LEN-1:0]       cadd_valid;
  logic [BURST_LEN-1:0][15:0] cadd_result;
  logic                       f_full, f_prog_full, f_wr_en;
  logic [FW-1:0]              f_wr_count;

  assign p_rd_en = (cstate == C_IDLE) && !p_empty;
  assign f_wr_en = (cstate == C_PUSH) && !f_full;

  for (genvar l = 0; l < BURST_LEN; l++) begin : g_csum
    fp16_add u_add (
      .clk, .rst, .in_valid(p_valid), .a(cacc[l]), .b(p_dout[l]),
      .out_valid(cadd_valid[l]), .result(cadd_result[l])
    );
  end

  always_ff @(posedge clk) begin
    if (rst || start) begin
      cstate <= C_IDLE;
      ccount <= '0;
      cacc   <= '0;
    end else begin
      unique case (cstate)
        C_IDLE: if (!p_empty) cstate <= C_READ;
        C_READ: cstate <= C_ADD;
        C_ADD: if (cadd_valid[0]) begin
          cacc <= cadd_result;
          if (ccount == ks - 8'd1) begin
            ccount <= '0;
            cstate <= C_PUSH;
          end else begin
            ccount <= ccount + 8'd1;
            cstate <= C_IDLE;
          end
        end
        C_PUSH: if (!f_full) begin
          cacc   <= '0;
          cstate <= C_IDLE;
        end
        default: cstate <= C_IDLE;
      endcase
    end
  end

  logic                       f_rd_en, f_valid, f_empty;
  logic [BURST_LEN-1:0][15:0] f_dout;
  logic [FW-1:0]              f_rd_count;

  async_fifo #(.WIDTH(16*BURST_LEN), .DEPTH(FIFO_DEPTH), .PROG_FULL(FIFO_DEPTH-2)) u_f_fifo (
    .rst, .wr_clk(clk), .wr_en(f_wr_en), .din(cacc), .full(f_full),
    .prog_full(f_prog_full), .wr_count(f_wr_count),
    .rd_clk(clk), .rd_en(f_rd_en), .dout(f_dout), .valid(f_valid), .empty(f_empty),
    .rd_count(f_rd_count)
  );

  // ---------------- stage 3: FSUM accumulator ----------------
  typedef enum logic [2:0] {F_IDLE, F_LOAD, F_ISSUE, F_WAIT, F_WB, F_OUT} fstate_t;
  fstate_t                      fstate;
  logic [PW-1:0]                fpos;
  logic [15:0]                  fgrp, fchn;
  logic [$clog2(BURST_LEN)-1:0] flane;
  logic [BURST_LEN-1:0][15:0]   fword;
  fp16_t                        facc, fsum_q;
  logic                         fadd_valid;
  fp16_t                        fadd_result;
  logic                         done_r;
  fp16_t                        fsum_mem [MAX_O_SIDE];

  assign f_rd_en    = (fstate == F_IDLE) && !f_empty && !done_r;
  assign bias_raddr = BIAS_AW'(fchn);

  fp16_add u_fsum (
    .clk, .rst, .in_valid(fstate == F_ISSUE), .a(facc), .b(fword[flane]),
    .out_valid(fadd_valid), .result(fadd_result)
  );

  always_ff @(posedge clk) begin
    fsum_q <= fsum_mem[fpos];
    if (fstate == F_WB) fsum_mem[fpos] <= facc;
  end

  logic last_pos, last_grp, last_chn;
  assign last_pos = (fpos == PW'(positions - 8'd1));
  assign last_grp = (fgrp == groups - 16'd1);
  assign last_chn = (fchn == channels - 16'd1);

  always_ff @(posedge clk) begin
    if (rst || start) begin
      fstate <= F_IDLE;
      fpos   <= '0;
      fgrp   <= '0;
      fchn   <= '0;
      flane  <= '0;
      done_r <= rst;
    end else begin
      unique case (fstate)
        F_IDLE: if (f_rd_en) fstate <= F_LOAD;
        F_LOAD: begin
          fword  <= f_dout;
          facc   <= (fgrp == 16'd0) ? bias_rdata : fsum_q;
          flane  <= '0;
          fstate <= F_ISSUE;
        end
        F_ISSUE: fstate <= F_WAIT;
        F_WAIT: if (fadd_valid) begin
          facc <= fadd_result;
          if (flane == ($clog2(BURST_LEN))'(BURST_LEN - 1)) begin
            fstate <= F_WB;
          end else begin
            flane  <= flane + 1'b1;
            fstate <= F_ISSUE;
          end
        end
        F_WB: fstate <= last_grp ? F_OUT : F_IDLE;
        F_OUT: if (out_ready) fstate <= F_IDLE;
        default: fstate <= F_IDLE;
      endcase
      // advance (p, g, n) once a word is fully accounted for
      if ((fstate == F_WB && !last_grp) || (fstate == F_OUT && out_ready)) begin
        if (last_pos) begin
          fpos <= '0;
          if (last_grp) begin
            fgrp <= '0;
            if (last_chn) done_r <= 1'b1;
            else fchn <= fchn + 16'd1;
          end else begin
            fgrp <= fgrp + 16'd1;
          end
        end else begin
          fpos <= fpos + 1'b1;
        end
      end
    end
  end

  assign out_valid = (fstate == F_OUT);
  assign out_data  = fp16_relu(facc);
  assign done      = done_r;

  assert property (@(posedge clk) disable iff (rst) start |-> (positions <= 8'(MAX_O_SIDE)))
    else $error("conv_unit: more output positions than the full-sum cache holds");
  assert property (@(posedge clk) disable iff (rst) mul_valid[0] |-> !p_full)
    else $error("conv_unit: P_FIFO overflow, credit rule broken");
endmodule
