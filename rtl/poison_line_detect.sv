// poison_line_detect: marks a cache line that holds only poison capabilities.
//
// Combinational. For each 16-byte word of the line it looks at two bits, the
// CHERI tag and the POISON bit, and reports the per-word poison vector and
// whether every word of the line is poisoned. The caches keep the result as
// one extra state bit per line, which steers replacement toward lines of
// freed memory. Reading only the tag and the POISON bit, and the "exclusively
// poison" rule, follow the paper.
module poison_line_detect
  import poisoncap_pkg::*;
(
  input  cline_t         line,
  output logic [WPL-1:0] word_poison,
  output logic           all_poison
);
  always_comb begin
    for (int i = 0; i < WPL; i++) word_poison[i] = is_poison(line[i]);
    all_poison = &word_poison;
  end
endmodule
