// poison_store_check: poison detection on the store path.
//
// Combinational. Given the word currently in the cache and a store (or a
// poison store) made through a decoded capability, it produces the word to
// write back and whether the write may happen at all.
//
//  * target not poisoned: an ordinary store merges its bytes into the old
//    word; the tag survives only for a full 16-byte store carrying a tag. A
//    poison store writes a poison capability holding the bounds and version
//    of the capability used.
//  * target poisoned: the write is allowed when the capability holds
//    perm_poison, has strictly broader bounds, or has a different version
//    from the poison (a fresh allocation initialising its memory). An allowed
//    ordinary store "detoxes" the whole word: bytes it does not write become
//    zero and the tag is cleared unless a full tagged word is written.
//    Otherwise the store is cancelled silently (no exception), which keeps
//    stores from waiting for a trap decision.
//
// Cancelling instead of trapping, the version and bounds rules and the
// zeroing of the unwritten part of a narrow write are the paper's. Applying
// the same zeroing to privileged narrow writes, and letting a poison store to
// unpoisoned memory through any capability, are this design's choices.
module poison_store_check
  import poisoncap_pkg::*;
(
  input  cap_t                  cap,
  input  logic                  is_poison_op, // poison store instead of ordinary store
  input  cword_t                old_word,
  input  cword_t                wdata,
  input  logic [WORD_BYTES-1:0] bmask,
  output logic                  we,        // write new_word
  output cword_t                new_word,
  output logic                  cancelled, // store dropped: same layer, same version
  output logic                  detox      // a poisoned word is overwritten
);
  logic poisoned, privileged, allowed, full;
  logic [WORD_BITS-1:0] base;

  always_comb begin
    poisoned   = is_poison(old_word);
    privileged = cap.perm_poison || bounds_broader(cap, old_word);
    allowed    = !poisoned || privileged || (cap.version != poison_version(old_word));
    full       = &bmask;
    base       = poisoned ? '0 : old_word.data;
    if (is_poison_op) begin
      new_word = make_poison(cap);
    end else begin
      new_word.data = merge_bytes(base, wdata.data, bmask);
      new_word.tag  = full & wdata.tag;
    end
    we        = allowed;
    cancelled = !allowed;
    detox     = allowed && poisoned && !is_poison_op;
  end
endmodule
