// pipe_serdes: packs the 16-bit FP16 values arriving on a 32-bit USB pipe
// into 128-bit cache words.
//
// The host sends one FP16 value per 32-bit pipe word, in the low 16 bits.
// Each write shifts the value into the top of a BURST_LEN x 16-bit shift
// register, so after BURST_LEN writes the first value sits in lane 0 (bits
// [15:0]) and the last in lane BURST_LEN-1. On the cycle after the
// BURST_LEN-th write, wr_en is high for one cycle with the packed word on
// wr_data and the cache address on wr_addr; the address then advances.
// This follows the paper's listing, with one change of this design's: the
// write strobe is cleared on any cycle without a pipe write, so a pause in
// the pipe cannot repeat a cache write. clear (synchronous) restarts both
// the lane count and the address at 0.
module pipe_serdes #(
  parameter int BURST_LEN = 8,
  parameter int AW        = 10
) (
  input  logic                      clk,
  input  logic                      rst,
  input  logic                      clear,
  input  logic                      ep_write,
  input  logic [31:0]               ep_dataout,
  output logic                      wr_en,
  output logic [AW-1:0]             wr_addr,
  output logic [16*BURST_LEN-1:0]   wr_data
);
  logic [$clog2(BURST_LEN)-1:0] count;

  always_ff @(posedge clk) begin
    if (rst || clear) begin
      count   <= '0;
      wr_en   <= 1'b0;
      wr_addr <= '0;
    end else begin
      if (wr_en) wr_addr <= wr_addr + 1'b1;
      if (ep_write) begin
        if (count == ($clog2(BURST_LEN))'(BURST_LEN - 1)) begin
          count <= '0;
          wr_en <= 1'b1;
        end else begin
          count <= count + 1'b1;
          wr_en <= 1'b0;
        end
      end else begin
        wr_en <= 1'b0;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (ep_write) wr_data <= {ep_dataout[15:0], wr_data[16*BURST_LEN-1:16]};
  end
endmodule
