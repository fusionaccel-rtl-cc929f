// bram_sdp: simple dual-port block RAM with separate write and read clocks.
//
// Used for the three caches of the accelerator: the data cache (128 bits x
// 1024), the weight cache (128 bits x 8192) and the bias cache (128 bits x
// 1024). Widths and depths are the paper's; the host writes through the
// write port in the USB clock domain and the engine reads through the read
// port in the engine clock domain. The read is synchronous: rdata holds the
// word at raddr one cycle after the clock edge that samples raddr, and the
// read port reads on every cycle. Contents are not reset.
module bram_sdp #(
  parameter int WIDTH = 128,
  parameter int DEPTH = 1024
) (
  input  logic                     wr_clk,
  input  logic                     we,
  input  logic [$clog2(DEPTH)-1:0] waddr,
  input  logic [WIDTH-1:0]         wdata,
  input  logic                     rd_clk,
  input  logic [$clog2(DEPTH)-1:0] raddr,
  output logic [WIDTH-1:0]         rdata
);
  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge wr_clk) begin
    if (we) mem[waddr] <= wdata;
  end

  always_ff @(posedge rd_clk) begin
    rdata <= mem[raddr];
  end
endmodule
