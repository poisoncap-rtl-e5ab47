// poison_victim_sel: poison-aware replacement choice for one cache set.
//
// Combinational. Picks the way to evict on a miss, in this order:
//   1. the lowest-numbered invalid way;
//   2. a valid way whose line is marked fully poisoned, searching from the
//      set's round-robin pointer upward (wrapping);
//   3. the way under the round-robin pointer.
// kind tells which rule chose the way. Preferring poisoned lines is the
// paper's change to the replacement policy; the paper does not describe the
// underlying policy, so a per-set round-robin pointer is this design's
// stand-in for it.
module poison_victim_sel #(
  parameter int unsigned WAYS = 4,
  localparam int unsigned WW  = (WAYS > 1) ? $clog2(WAYS) : 1
) (
  input  logic [WAYS-1:0] valid,
  input  logic [WAYS-1:0] poisoned,
  input  logic [WW-1:0]   rr_ptr,
  output logic [WW-1:0]   victim,
  output logic [1:0]      kind      // 0 invalid, 1 poisoned, 2 round robin
);
  logic found;
  logic [WW-1:0] w;

  always_comb begin
    victim = rr_ptr;
    kind   = 2'd2;
    found  = 1'b0;
    for (int i = 0; i < WAYS; i++) begin
      if (!found && !valid[i]) begin
        victim = WW'(i);
        kind   = 2'd0;
        found  = 1'b1;
      end
    end
    for (int i = 0; i < WAYS; i++) begin
      w = WW'((32'(rr_ptr) + 32'(i)) % WAYS);
      if (!found && valid[w] && poisoned[w]) begin
        victim = w;
        kind   = 2'd1;
        found  = 1'b1;
      end
    end
  end
endmodule
