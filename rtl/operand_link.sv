// operand_link: the bypassable, pipelined input link of one precision-scalable
// CSM (8 wires per operand).
//
// The link keeps every wire busy whatever the element width. With 8-bit
// elements one byte per operand is a whole operand: it bypasses the register
// and the word is ready in the same cycle. With 4-bit elements a CSM needs 16
// bits per operand (four nibbles), so they arrive as two beats: the first is
// held in the link register and the word {beat1, beat0} is released with the
// second. A phase flag tracks which beat is expected; it is cleared in the
// 8-bit modes and by reset. The paper gives the 8-wire width and the
// multi-cycle delivery; the beat order is this design's choice.
//
// Timing: word_valid is combinational from in_valid (same cycle as the beat
// that completes the word).
module operand_link (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        wide,        // 8-bit elements
  input  logic        in_valid,
  input  logic [7:0]  x_byte,
  input  logic [7:0]  w_byte,
  output logic        word_valid,
  output logic [15:0] x_word,
  output logic [15:0] w_word,
  output logic        held         // first beat of a 4-bit word is stored
);
  logic       phase_q;
  logic [7:0] x_q, w_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      phase_q <= 1'b0;
      x_q     <= '0;
      w_q     <= '0;
    end else if (wide) begin
      phase_q <= 1'b0;
    end else if (in_valid) begin
      phase_q <= ~phase_q;
      if (!phase_q) begin
        x_q <= x_byte;
        w_q <= w_byte;
      end
    end
  end

  always_comb begin
    held = phase_q;
    if (wide) begin
      word_valid = in_valid;
      x_word     = {8'h00, x_byte};
      w_word     = {8'h00, w_byte};
    end else begin
      word_valid = in_valid && phase_q;
      x_word     = {x_byte, x_q};
      w_word     = {w_byte, w_q};
    end
  end
endmodule
