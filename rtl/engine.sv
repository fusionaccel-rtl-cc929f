// engine: the computation engine. It reads the caches in the order one layer
// command asks for, drives the convolution, max-pooling or average-pooling
// unit, and writes the results, one FP16 value per 32-bit word, into the
// result FIFO.
//
// A run starts with engine_valid and the layer register. The engine derives
//   KS = kernel_size, G = ceil(input_channel_size / BURST_LEN),
//   P  = output_side_size (output positions in this run),
//   N  = output_channel_size for convolution, 1 for pooling,
// and streams the cache words with four nested counters n, g, p, kk (kk
// fastest). The data address runs 0, 1, 2, ... and restarts for every n; the
// weight address is (n*G + g)*KS + kk. So the host lays the data cache out as
// D[g][p][kk] and the weight cache as W[n][g][kk]; bias n sits in bits
// [15:0] of bias cache word n. Only the unit selected by op_type sees the
// word stream (its enable), so the data path needs no multiplexer. A word is
// read only while the selected unit shows credit, and the result FIFO's full
// flag stalls the unit, so a slow host stalls the whole pipeline back to the
// cache reads.
//
// The paper specifies what the engine computes, the three units, the cache
// widths, the caches being read once per cycle and the result FIFO; it leaves
// the order of the words in the caches to its host software, so the layout
// above is this design's. Padding, stride, kernel side and input side are
// applied by the host when it prepares the windows (im2col) and are not used
// here. A pooling result is BURST_LEN words (lane 0 first), a convolution
// result one word; the upper 16 bits of each word are zero.
//
// engine_done pulses for one cycle after the last result has been written.
module engine #(
  parameter int BURST_LEN  = fa_pkg::BURST_LEN,
  parameter int MAX_O_SIDE = fa_pkg::MAX_O_SIDE,
  parameter int DATA_AW    = 10,
  parameter int WEIGHT_AW  = 13,
  parameter int BIAS_AW    = 10
) (
  input  logic                        clk,
  input  logic                        rst,
  input  logic                        engine_valid,
  input  fa_pkg::layer_t              layer,
  output logic                        engine_done,
  output logic                        busy,
  // cache read ports (one-cycle read latency)
  output logic [DATA_AW-1:0]          data_raddr,
  input  logic [16*BURST_LEN-1:0]     data_rdata,
  output logic [WEIGHT_AW-1:0]        weight_raddr,
  input  logic [16*BURST_LEN-1:0]     weight_rdata,
  output logic [BIAS_AW-1:0]          bias_raddr,
  input  logic [16*BURST_LEN-1:0]     bias_rdata,
  // result FIFO write port
  output logic                        res_wr_en,
  output logic [31:0]                 res_din,
  input  logic                        res_full
);
  import fa_pkg::*;

  typedef enum logic [1:0] {E_IDLE, E_READ, E_DRAIN} estate_t;
  estate_t state;
  op_t     op;

  logic [7:0]           ks, npos;
  logic [15:0]          ngrp, nchn;
  logic [7:0]           kk, pp;
  logic [15:0]          gg, nn;
  logic [DATA_AW-1:0]   daddr;
  logic [WEIGHT_AW-1:0] wbase;
  logic                 rd_q;       // a word is on the cache outputs
  logic                 credit;
  logic                 unit_done;
  logic                 ser_idle;
  logic                 start;

  // ---------------- sizes of the run ----------------
  logic [7:0]  cfg_ks, cfg_pos;
  logic [15:0] cfg_grp, cfg_chn;
  logic        cfg_empty;
  assign cfg_ks    = layer.kernel_size;
  assign cfg_pos   = layer.output_side_size;
  assign cfg_grp   = 16'((17'(layer.input_channel_size) + 17'(BURST_LEN - 1)) / 17'(BURST_LEN));
  assign cfg_chn   = (layer.op_type == OP_CONV) ? layer.output_channel_size : 16'd1;
  assign cfg_empty = (layer.op_type == OP_IDLE) || (cfg_ks == 0) || (cfg_pos == 0) ||
                     (cfg_grp == 0) || (cfg_chn == 0) ||
                     !(layer.op_type inside {OP_CONV, OP_MAXPOOL, OP_AVEPOOL});

  assign start = (state == E_IDLE) && engine_valid && !cfg_empty;

  // ---------------- cache reader ----------------
  logic issue, last_kk, last_pos, last_grp, last_chn;
  assign issue    = (state == E_READ) && credit;
  assign last_kk  = (kk == ks - 8'd1);
  assign last_pos = (pp == npos - 8'd1);
  assign last_grp = (gg == ngrp - 16'd1);
  assign last_chn = (nn == nchn - 16'd1);

  assign data_raddr   = daddr;
  assign weight_raddr = wbase + WEIGHT_AW'(kk);

  always_ff @(posedge clk) begin
    if (rst) begin
      state <= E_IDLE;
      op    <= OP_IDLE;
      rd_q  <= 1'b0;
      kk <= '0; pp <= '0; gg <= '0; nn <= '0;
      daddr <= '0; wbase <= '0;
      ks <= '0; npos <= '0; ngrp <= '0; nchn <= '0;
    end else begin
      rd_q <= issue;
      unique case (state)
        E_IDLE: if (start) begin
          op    <= layer.op_type;
          ks    <= cfg_ks;
          npos  <= cfg_pos;
          ngrp  <= cfg_grp;
          nchn  <= cfg_chn;
          kk <= '0; pp <= '0; gg <= '0; nn <= '0;
          daddr <= '0; wbase <= '0;
          state <= E_READ;
        end
        E_READ: if (issue) begin
          daddr <= daddr + 1'b1;
          if (last_kk) begin
            kk <= '0;
            if (last_pos) begin
              pp    <= '0;
              wbase <= wbase + WEIGHT_AW'(ks);
              if (last_grp) begin
                gg    <= '0;
                daddr <= '0;
                if (last_chn) state <= E_DRAIN;
                else nn <= nn + 16'd1;
              end else begin
                gg <= gg + 16'd1;
              end
            end else begin
              pp <= pp + 8'd1;
            end
          end else begin
            kk <= kk + 8'd1;
          end
        end
        E_DRAIN: if (unit_done && ser_idle && !rd_q) state <= E_IDLE;
        default: state <= E_IDLE;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    engine_done <= !rst && (((state == E_DRAIN) && unit_done && ser_idle && !rd_q) ||
                            ((state == E_IDLE) && engine_valid && cfg_empty));
  end
  assign busy = (state != E_IDLE);

  // ---------------- computation units ----------------
  logic cmac_enable, maxpool_enable, avepool_enable;
  assign cmac_enable    = (op == OP_CONV);
  assign maxpool_enable = (op == OP_MAXPOOL);
  assign avepool_enable = (op == OP_AVEPOOL);

  logic                       c_credit, m_credit, a_credit;
  logic                       c_done, m_done, a_done;
  logic                       c_out_valid, m_out_valid, a_out_valid;
  fp16_pkg::fp16_t            c_out_data;
  logic [BURST_LEN-1:0][15:0] m_out_data, a_out_data;
  logic                       ser_ready;
  logic [15:0]                c_bias_addr;

  conv_unit #(.BURST_LEN(BURST_LEN), .MAX_O_SIDE(MAX_O_SIDE), .BIAS_AW(16)) u_conv (
    .clk, .rst, .start(start && layer.op_type == OP_CONV),
    .ks(cfg_ks), .groups(cfg_grp), .positions(cfg_pos), .channels(cfg_chn),
    .in_valid(rd_q && cmac_enable), .data(data_rdata), .weight(weight_rdata),
    .credit(c_credit), .bias_raddr(c_bias_addr), .bias_rdata(bias_rdata[15:0]),
    .out_valid(c_out_valid), .out_data(c_out_data), .out_ready(ser_ready && cmac_enable),
    .done(c_done)
  );
  assign bias_raddr = BIAS_AW'(c_bias_addr);

  maxpool_unit #(.BURST_LEN(BURST_LEN)) u_maxpool (
    .clk, .rst, .start(start && layer.op_type == OP_MAXPOOL),
    .ks(cfg_ks), .groups(cfg_grp), .positions(cfg_pos),
    .in_valid(rd_q && maxpool_enable), .data(data_rdata), .credit(m_credit),
    .out_valid(m_out_valid), .out_data(m_out_data), .out_ready(ser_ready && maxpool_enable),
    .done(m_done)
  );

  avepool_unit #(.BURST_LEN(BURST_LEN)) u_avepool (
    .clk, .rst, .start(start && layer.op_type == OP_AVEPOOL),
    .ks(cfg_ks), .groups(cfg_grp), .positions(cfg_pos),
    .in_valid(rd_q && avepool_enable), .data(data_rdata), .credit(a_credit),
    .out_valid(a_out_valid), .out_data(a_out_data), .out_ready(ser_ready && avepool_enable),
    .done(a_done)
  );

  always_comb begin
    unique case (op)
      OP_CONV:    begin credit = c_credit; unit_done = c_done; end
      OP_MAXPOOL: begin credit = m_credit; unit_done = m_done; end
      OP_AVEPOOL: begin credit = a_credit; unit_done = a_done; end
      default:    begin credit = 1'b0;     unit_done = 1'b1;   end
    endcase
  end

  // ---------------- result serializer ----------------
  logic [BURST_LEN-1:0][15:0]   ser_buf;
  logic [$clog2(BURST_LEN):0]   ser_left;
  logic [$clog2(BURST_LEN)-1:0] ser_idx;
  logic                         in_res_valid;
  logic [BURST_LEN-1:0][15:0]   in_res_data;
  logic [$clog2(BURST_LEN):0]   in_res_lanes;

  always_comb begin
    in_res_valid = 1'b0;
    in_res_data  = '0;
    in_res_lanes = ($clog2(BURST_LEN)+1)'(BURST_LEN);
    unique case (op)
      OP_CONV: begin
        in_res_valid   = c_out_valid;
        in_res_data[0] = c_out_data;
        in_res_lanes   = 1;
      end
      OP_MAXPOOL: begin in_res_valid = m_out_valid; in_res_data = m_out_data; end
      OP_AVEPOOL: begin in_res_valid = a_out_valid; in_res_data = a_out_data; end
      default: ;
    endcase
  end

  assign ser_idle  = (ser_left == 0);
  assign ser_ready = ser_idle;
  assign res_wr_en = !ser_idle && !res_full;
  assign res_din   = {16'd0, ser_buf[ser_idx]};

  always_ff @(posedge clk) begin
    if (rst) begin
      ser_left <= '0;
      ser_idx  <= '0;
    end else if (ser_idle) begin
      if (in_res_valid) begin
        ser_buf  <= in_res_data;
        ser_left <= in_res_lanes;
        ser_idx  <= '0;
      end
    end else if (!res_full) begin
      ser_left <= ser_left - 1'b1;
      ser_idx  <= ser_idx + 1'b1;
    end
  end

  assert property (@(posedge clk) disable iff (rst)
                   start && layer.op_type == OP_CONV |-> layer.kernel_size <= 8'(MAX_KERNEL_SIZE))
    else $error("engine: convolution kernel larger than MAX_KERNEL_SIZE");
  assert property (@(posedge clk) disable iff (rst)
                   start |-> 32'(cfg_grp) * 32'(cfg_pos) * 32'(cfg_ks) <= 32'(1 << DATA_AW))
    else $error("engine: run needs more words than the data cache holds");
endmodule
