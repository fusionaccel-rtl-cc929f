// async_fifo: FIFO with independent write and read clocks and a handshake on
// both sides.
//
// The accelerator uses this FIFO everywhere: as the command FIFO (host clock
// in, engine clock out), as the result FIFO (engine clock in, host clock out)
// and, with both clocks tied to the engine clock, as the speed-matching FIFOs
// between the floating-point stages. The paper states that all its FIFOs are
// asynchronous FIFOs with handshake and shows the vendor core's ports; the
// insides here are this design's own: a dual-port array with binary and Gray
// pointers, each Gray pointer passed to the other domain through two flops.
//
// Write side (wr_clk): wr_en/din; full blocks writes; prog_full is high when
// at least PROG_FULL words are held; wr_count is the occupancy as the write
// side sees it (it may over-state by the synchroniser delay).
// Read side (rd_clk): standard (not first-word-fall-through) read: dout and
// valid are registered and follow rd_en by one cycle; empty; rd_count.
// rst is asynchronous, active high, and clears both sides.
// DEPTH must be a power of two.
//
// Lint note: verilator reports SYNCASYNCNET on rst because the handshake
// assertions name rst in their "disable iff" while the pointer flops use it
// as an asynchronous reset. The assertions are not hardware; the reset is
// asynchronous by intent, so the warning is left standing.
module async_fifo #(
  parameter int WIDTH     = 32,
  parameter int DEPTH     = 1024,
  parameter int PROG_FULL = DEPTH - 16
) (
  input  logic                      rst,
  // write domain
  input  logic                      wr_clk,
  input  logic                      wr_en,
  input  logic [WIDTH-1:0]          din,
  output logic                      full,
  output logic                      prog_full,
  output logic [$clog2(DEPTH):0]    wr_count,
  // read domain
  input  logic                      rd_clk,
  input  logic                      rd_en,
  output logic [WIDTH-1:0]          dout,
  output logic                      valid,
  output logic                      empty,
  output logic [$clog2(DEPTH):0]    rd_count
);
  localparam int AW = $clog2(DEPTH);
  typedef logic [AW:0] ptr_t;

  logic [WIDTH-1:0] mem [DEPTH];

  ptr_t wbin, wgray, rbin, rgray;
  ptr_t rgray_w1, rgray_w2;   // read pointer in the write domain
  ptr_t wgray_r1, wgray_r2;   // write pointer in the read domain

  function automatic ptr_t bin2gray(input ptr_t bv);
    return bv ^ (bv >> 1);
  endfunction

  function automatic ptr_t gray2bin(input ptr_t gv);
    ptr_t bn;
    bn[AW] = gv[AW];
    for (int i = AW - 1; i >= 0; i--) bn[i] = bn[i+1] ^ gv[i];
    return bn;
  endfunction

  // ---------------- write domain ----------------
  logic do_write;
  assign full      = (wgray == {~rgray_w2[AW:AW-1], rgray_w2[AW-2:0]});
  assign do_write  = wr_en && !full;
  assign wr_count  = wbin - gray2bin(rgray_w2);
  assign prog_full = (wr_count >= ($clog2(DEPTH)+1)'(PROG_FULL));

  always_ff @(posedge wr_clk) begin
    if (do_write) mem[wbin[AW-1:0]] <= din;
  end

  always_ff @(posedge wr_clk or posedge rst) begin
    if (rst) begin
      wbin     <= '0;
      wgray    <= '0;
      rgray_w1 <= '0;
      rgray_w2 <= '0;
    end else begin
      rgray_w1 <= rgray;
      rgray_w2 <= rgray_w1;
      if (do_write) begin
        wbin  <= wbin + 1'b1;
        wgray <= bin2gray(wbin + 1'b1);
      end
    end
  end

  // ---------------- read domain ----------------
  logic do_read;
  assign empty    = (rgray == wgray_r2);
  assign do_read  = rd_en && !empty;
  assign rd_count = gray2bin(wgray_r2) - rbin;

  always_ff @(posedge rd_clk) begin
    if (do_read) dout <= mem[rbin[AW-1:0]];
  end

  always_ff @(posedge rd_clk or posedge rst) begin
    if (rst) begin
      rbin     <= '0;
      rgray    <= '0;
      wgray_r1 <= '0;
      wgray_r2 <= '0;
      valid    <= 1'b0;
    end else begin
      wgray_r1 <= wgray;
      wgray_r2 <= wgray_r1;
      valid    <= do_read;
      if (do_read) begin
        rbin  <= rbin + 1'b1;
        rgray <= bin2gray(rbin + 1'b1);
      end
    end
  end

  // Handshake rules: never write a full FIFO, never read an empty one.
  assert property (@(posedge wr_clk) disable iff (rst) !(wr_en && full))
    else $error("async_fifo: write while full");
  assert property (@(posedge rd_clk) disable iff (rst) !(rd_en && empty))
    else $error("async_fifo: read while empty");

  initial assert (DEPTH >= 4 && (DEPTH & (DEPTH - 1)) == 0)
    else $fatal(1, "async_fifo: DEPTH must be a power of two >= 4");
endmodule
