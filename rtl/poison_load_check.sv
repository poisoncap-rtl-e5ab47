// poison_load_check: poison detection on the load path.
//
// Combinational. Given the tagged word read from the data cache, the decoded
// capability the load was made through, and the poison policy, it decides
// what the load returns and whether it raises a precise exception.
//
//  * word not poisoned (tag and POISON bit not both set): the word is
//    returned unchanged;
//  * poisoned, but the capability holds perm_poison or its bounds strictly
//    contain the poison bounds (an upstream allocator or the kernel): the
//    word is returned unchanged, poison capability included;
//  * poisoned, same layer, same version (use after free): trap with EXC_UAF,
//    or in silent mode return zero without a trap;
//  * poisoned, same layer, other version (read before write of a fresh
//    allocation): return zero (auto-zero), or trap with EXC_UNINIT when
//    initialisation-safety trapping is enabled.
// For a CGetPoison probe (probe=1) it never traps and returns zero data; the
// poisoned output carries the answer.
//
// The four cases and the two modes follow the paper. Treating a capability
// whose bounds only partly overlap the poison bounds like one of the same
// layer (denied), and returning zero data on a trap, are this design's choices.
module poison_load_check
  import poisoncap_pkg::*;
(
  input  cap_t        cap,        // capability the access is made through
  input  poison_cfg_t cfg,
  input  logic        probe,      // CGetPoison: report only
  input  cword_t      mem_word,   // word read from the cache
  output cword_t      rdata,
  output exc_e        exc,
  output logic        poisoned,   // word holds a poison capability
  output logic        privileged, // poisoned and access authorised by bounds or perm_poison
  output logic        zeroed      // poisoned word read back as zero without a trap
);
  logic same_ver;

  always_comb begin
    poisoned   = is_poison(mem_word);
    privileged = poisoned && (cap.perm_poison || bounds_broader(cap, mem_word));
    same_ver   = (cap.version == poison_version(mem_word));
    rdata      = mem_word;
    exc        = EXC_NONE;
    zeroed     = 1'b0;
    if (probe) begin
      rdata = '0;
    end else if (poisoned && !privileged) begin
      rdata = '0;
      if (same_ver) begin
        if (cfg.silent) zeroed = 1'b1;
        else            exc    = EXC_UAF;
      end else begin
        if (cfg.init_trap) exc    = EXC_UNINIT;
        else               zeroed = 1'b1;
      end
    end
  end
endmodule
