// tb_nt_encoder: drives every byte value into every character position of
// the encoder and compares with a table written out here: A/a -> 00,
// C/c -> 01, T/t/U/u -> 10, G/g -> 11, anything else -> 00. Also checks
// four-character words built from random letters.
module tb_nt_encoder;
  logic [31:0] word;
  logic [7:0]  codes;
  int checks = 0, failures = 0;

  nt_encoder dut (.word, .codes);

  function automatic logic [1:0] expect_code(input byte unsigned c);
    if (c == "C" || c == "c") return 2'b01;
    if (c == "T" || c == "t" || c == "U" || c == "u") return 2'b10;
    if (c == "G" || c == "g") return 2'b11;
    return 2'b00;
  endfunction

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int pos = 0; pos < 4; pos++) begin
      for (int c = 0; c < 256; c++) begin
        word = 32'h4141_4141;                 // "AAAA"
        word[8*pos +: 8] = 8'(c);
        #1;
        checks++;
        for (int k = 0; k < 4; k++) begin
          automatic logic [1:0] e = (k == pos) ? expect_code(byte'(c)) : 2'b00;
          if (codes[2*k +: 2] != e) begin
            failures++;
            $display("FAIL pos=%0d char=%02h k=%0d got=%b exp=%b", pos, c, k, codes[2*k +: 2], e);
          end
        end
      end
    end
    for (int r = 0; r < 200; r++) begin
      byte unsigned letters [8] = '{"A", "C", "G", "T", "a", "c", "g", "t"};
      logic [7:0] e;
      for (int k = 0; k < 4; k++) begin
        word[8*k +: 8] = letters[$urandom_range(7)];
        e[2*k +: 2] = expect_code(word[8*k +: 8]);
      end
      #1;
      checks++;
      if (codes != e) begin failures++; $display("FAIL word %h got %b exp %b", word, codes, e); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
