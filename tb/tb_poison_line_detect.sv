// tb_poison_line_detect: checks the per-word and whole-line poison flags on
// lines built from poison capabilities, tagged non-poison words and untagged
// words whose POISON bit position happens to be set.
module tb_poison_line_detect;
  import poisoncap_pkg::*;
  int checks = 0, failures = 0;
  cline_t line; logic [3:0] wp; logic all_p;
  poison_line_detect dut (.line, .word_poison(wp), .all_poison(all_p));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [3:0] kind, exp;
    for (int it = 0; it < 2000; it++) begin
      for (int i = 0; i < 4; i++) begin
        int k;
        k = (it < 16) ? ((it >> i) & 1) * 2 : int'($urandom % 4);
        // 0: data, 1: untagged with bit127, 2: poison, 3: tagged non-poison cap
        line[i].data = {$urandom, $urandom, $urandom, $urandom};
        case (k)
          0: begin line[i].tag = 0; line[i].data[127] = 0; end
          1: begin line[i].tag = 0; line[i].data[127] = 1; end
          2: begin line[i].tag = 1; line[i].data[127] = 1; end
          default: begin line[i].tag = 1; line[i].data[127] = 0; end
        endcase
        exp[i] = (k == 2);
      end
      #1;
      checks++;
      if (wp !== exp || all_p !== (exp == 4'hF)) begin
        failures++;
        $display("FAIL it=%0d wp=%b exp=%b all=%b", it, wp, exp, all_p);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
