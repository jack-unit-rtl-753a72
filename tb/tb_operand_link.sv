// tb_operand_link: drives random beat streams, with gaps and mode changes,
// and checks that 8-bit beats are passed through in the same cycle and that
// 4-bit words are released on every second beat as {second, first}.
module tb_operand_link;
  logic clk = 0, rst_n = 0;
  logic wide, in_valid;
  logic [7:0] x_byte, w_byte;
  logic word_valid, held;
  logic [15:0] x_word, w_word;
  int checks = 0, failures = 0;
  int words_wide = 0, words_narrow = 0;

  operand_link dut (.clk, .rst_n, .wide, .in_valid, .x_byte, .w_byte, .word_valid, .x_word, .w_word, .held);

  always #5 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic have_first;
    logic [7:0] fx, fw;
    wide = 1; in_valid = 0; x_byte = 0; w_byte = 0;
    have_first = 0; fx = 0; fw = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 2000; t++) begin
      @(negedge clk);
      if (t % 100 == 0) begin
        wide = $urandom_range(0, 1);
        have_first = 0;
      end
      in_valid = ($urandom_range(0, 3) != 0);
      x_byte = 8'($urandom); w_byte = 8'($urandom);
      #1;
      checks++;
      if (wide) begin
        if (word_valid != in_valid) failures++;
        else if (in_valid && (x_word != {8'h00, x_byte} || w_word != {8'h00, w_byte})) failures++;
        if (in_valid) words_wide++;
      end else begin
        if (held != have_first) failures++;
        if (word_valid != (in_valid && have_first)) failures++;
        else if (word_valid && (x_word != {x_byte, fx} || w_word != {w_byte, fw})) failures++;
        if (in_valid) begin
          if (!have_first) begin fx = x_byte; fw = w_byte; end
          else words_narrow++;
          have_first = !have_first;
        end
      end
    end
    checks++;
    if (words_wide == 0 || words_narrow == 0) failures++;
    $display("words: 8-bit %0d, 4-bit %0d", words_wide, words_narrow);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
