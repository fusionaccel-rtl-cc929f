// csb: control signal block. It turns the host's control strobes into engine
// runs and loads the layer register from the command FIFO.
//
// op_en (rising edge): pop CMD_BURST_LEN 32-bit words from the command FIFO
// into the layer register (word 0 first, see fa_pkg for the field layout),
// then pulse engine_valid.
// restart (rising edge): pulse engine_valid again with the layer register
// unchanged, for the next piece of the same layer.
// engine_ready goes low when a run is started and high again when the engine
// reports the run done; the host waits for it (the interrupt of the paper's
// flow) before it reads the results.
// op_en and restart come from the host clock domain and pass through two
// flip-flops before their edges are detected. Strobes that arrive while a
// run is in progress are ignored.
//
// The command-word handshake and the op_en / engine_valid / engine_ready
// sequence follow the paper's operation flow; the separate restart strobe
// is this design's form of the paper's "restart engine" step.
module csb #(
  parameter int CMD_BURST_LEN = fa_pkg::CMD_BURST_LEN
) (
  input  logic           clk,
  input  logic           rst,
  input  logic           op_en,
  input  logic           restart,
  // command FIFO read side (standard read: dout/valid one cycle after rd_en)
  output logic           cmd_rd_en,
  input  logic [31:0]    cmd_dout,
  input  logic           cmd_valid,
  input  logic           cmd_empty,
  // engine
  output fa_pkg::layer_t layer,
  output logic           engine_valid,
  input  logic           engine_done,
  output logic           engine_ready
);
  import fa_pkg::*;

  logic [2:0] op_en_s, restart_s;
  logic       op_en_rise, restart_rise;

  always_ff @(posedge clk) begin
    if (rst) begin
      op_en_s   <= '0;
      restart_s <= '0;
    end else begin
      op_en_s   <= {op_en_s[1:0], op_en};
      restart_s <= {restart_s[1:0], restart};
    end
  end
  assign op_en_rise   = op_en_s[1] && !op_en_s[2];
  assign restart_rise = restart_s[1] && !restart_s[2];

  typedef enum logic [1:0] {S_IDLE, S_READ, S_VALID, S_RUN} state_t;
  state_t                           state;
  logic [$clog2(CMD_BURST_LEN+1)-1:0] requested, received;
  logic [CMD_BURST_LEN-1:0][31:0]   words;

  assign cmd_rd_en = (state == S_READ) && !cmd_empty &&
                     (requested != ($clog2(CMD_BURST_LEN+1))'(CMD_BURST_LEN));

  always_ff @(posedge clk) begin
    if (rst) begin
      state        <= S_IDLE;
      requested    <= '0;
      received     <= '0;
      words        <= '0;
      engine_valid <= 1'b0;
      engine_ready <= 1'b1;
    end else begin
      engine_valid <= 1'b0;
      unique case (state)
        S_IDLE: begin
          if (op_en_rise) begin
            requested    <= '0;
            received     <= '0;
            engine_ready <= 1'b0;
            state        <= S_READ;
          end else if (restart_rise) begin
            engine_ready <= 1'b0;
            state        <= S_VALID;
          end
        end
        S_READ: begin
          if (cmd_rd_en) requested <= requested + 1'b1;
          if (cmd_valid) begin
            words[received] <= cmd_dout;
            received        <= received + 1'b1;
            if (received == ($clog2(CMD_BURST_LEN+1))'(CMD_BURST_LEN - 1)) state <= S_VALID;
          end
        end
        S_VALID: begin
          engine_valid <= 1'b1;
          state        <= S_RUN;
        end
        S_RUN: if (engine_done) begin
          engine_ready <= 1'b1;
          state        <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign layer = layer_t'(words);
endmodule
