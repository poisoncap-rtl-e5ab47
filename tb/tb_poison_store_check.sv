// tb_poison_store_check: directed and random checks of the store-path poison
// rules against a reference written here: stores to poison are allowed for
// perm_poison, strictly broader bounds or a different version, and then zero
// the unwritten bytes; otherwise they are cancelled. Poison stores write a
// tagged poison capability with the capability's bounds and version.
module tb_poison_store_check;
  import poisoncap_pkg::*;
  int checks = 0, failures = 0;

  cap_t cap; logic is_poison_op; cword_t old_word, wdata; logic [15:0] bmask;
  logic we, cancelled, detox; cword_t new_word;

  poison_store_check dut (.cap, .is_poison_op, .old_word, .wdata, .bmask, .we, .new_word, .cancelled, .detox);

  function automatic cword_t pw(logic [63:0] b, logic [63:0] l, logic v);
    cword_t r;
    r.tag = 1'b1;
    r.data = {1'b1, v, l[61:0], b};
    return r;
  endfunction

  task automatic expect_out(logic e_we, cword_t e_w, string what);
    #1;
    checks++;
    if (we !== e_we || cancelled !== !e_we || (e_we && new_word !== e_w)) begin
      failures++;
      $display("FAIL %s: we=%b new=%h exp we=%b new=%h", what, we, new_word, e_we, e_w);
    end
  endtask

  task automatic ref_model(output logic e_we, output cword_t e_w);
    logic p, broad; logic [63:0] pb, pl; logic [64:0] ct, pt;
    p  = old_word.tag && old_word.data[127];
    pb = old_word.data[63:0]; pl = {2'b00, old_word.data[125:64]};
    ct = cap.base + 65'(cap.length); pt = pb + 65'(pl);
    broad = (cap.base <= pb) && (ct >= pt) && !((cap.base == pb) && (ct == pt));
    e_we = !p || cap.perm_poison || broad || (cap.version != old_word.data[126]);
    if (is_poison_op) e_w = pw(cap.base, cap.length, cap.version);
    else begin
      for (int i = 0; i < 16; i++)
        e_w.data[i*8 +: 8] = bmask[i] ? wdata.data[i*8 +: 8] : (p ? 8'h00 : old_word.data[i*8 +: 8]);
      e_w.tag = (bmask == 16'hFFFF) && wdata.tag;
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic e_we; cword_t e_w;
    cap = '{tag:1, perm_poison:0, version:0, base:64'h2000, length:64'h80};
    is_poison_op = 0;
    wdata = '{tag:0, data:128'h1111_2222_3333_4444_5555_6666_7777_8888};
    // narrow store to plain data keeps other bytes
    old_word = '{tag:1, data:128'h5555_5555_5555_5555_5555_5555_5555_5555};
    bmask = 16'h000F;
    expect_out(1, '{tag:0, data:128'h5555_5555_5555_5555_5555_5555_7777_8888}, "narrow store to data");
    // poison store paints the capability's bounds and version
    is_poison_op = 1; old_word = '0;
    expect_out(1, pw(64'h2000, 64'h80, 0), "poison store");
    is_poison_op = 0;
    // store through the freed (same version) capability is cancelled
    old_word = pw(64'h2000, 64'h80, 0);
    expect_out(0, '0, "UAF store cancelled");
    checks++; if (detox) begin failures++; $display("FAIL detox on cancel"); end
    // new allocation (other version) narrow write: detox and auto-zero
    cap.version = 1;
    expect_out(1, '{tag:0, data:128'h0000_0000_0000_0000_0000_0000_7777_8888}, "new version narrow write zero-fills");
    checks++; if (!detox) begin failures++; $display("FAIL detox flag"); end
    cap.version = 0;
    // upstream allocator (broader bounds) may write
    cap.base = 64'h0; cap.length = 64'h10000; bmask = 16'hFFFF;
    expect_out(1, '{tag:0, data:wdata.data}, "broader bounds write");
    // double poison with the same capability is cancelled
    cap.base = 64'h2000; cap.length = 64'h80; is_poison_op = 1;
    expect_out(0, '0, "double poison cancelled");
    // kernel with perm_poison
    cap.perm_poison = 1; is_poison_op = 0; bmask = 16'h00F0;
    expect_out(1, '{tag:0, data:128'h0000_0000_0000_0000_5555_6666_0000_0000}, "perm_poison narrow write");
    cap.perm_poison = 0;
    // tagged full store keeps tag
    old_word = '0; wdata.tag = 1; bmask = 16'hFFFF;
    expect_out(1, '{tag:1, data:wdata.data}, "capability store");
    repeat (3000) begin
      cap.tag = 1; cap.perm_poison = ($urandom % 8) == 0; cap.version = $urandom;
      cap.base = 64'($urandom % 256) << 4; cap.length = 64'($urandom % 64) << 4;
      is_poison_op = ($urandom % 5) == 0;
      bmask = ($urandom % 3 == 0) ? 16'hFFFF : 16'($urandom);
      wdata = '{tag:$urandom, data:{$urandom,$urandom,$urandom,$urandom}};
      if ($urandom % 3 == 0) old_word = '{tag:$urandom, data:{$urandom,$urandom,$urandom,$urandom}};
      else old_word = pw(64'($urandom % 256) << 4, 64'($urandom % 64) << 4, $urandom);
      #1; ref_model(e_we, e_w);
      expect_out(e_we, e_w, "random");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
