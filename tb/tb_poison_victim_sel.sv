// tb_poison_victim_sel: exhaustive check, for 4 and 16 ways, that the victim
// is the first invalid way, else the first fully poisoned way at or after the
// round-robin pointer, else the way under the pointer.
module tb_poison_victim_sel;
  int checks = 0, failures = 0;
  logic [3:0] v4, p4; logic [1:0] r4, vic4; logic [1:0] k4;
  logic [15:0] v16, p16; logic [3:0] r16, vic16; logic [1:0] k16;
  poison_victim_sel #(.WAYS(4))  d4  (.valid(v4),  .poisoned(p4),  .rr_ptr(r4),  .victim(vic4),  .kind(k4));
  poison_victim_sel #(.WAYS(16)) d16 (.valid(v16), .poisoned(p16), .rr_ptr(r16), .victim(vic16), .kind(k16));

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic void expect_v(int n, logic [15:0] v, logic [15:0] p, int r, output int ev, output int ek);
    ev = -1;
    for (int i = 0; i < n; i++) if (ev < 0 && !v[i]) begin ev = i; ek = 0; end
    for (int i = 0; i < n; i++) begin
      int w; w = (r + i) % n;
      if (ev < 0 && v[w] && p[w]) begin ev = w; ek = 1; end
    end
    if (ev < 0) begin ev = r; ek = 2; end
  endfunction

  initial begin
    int ev, ek;
    for (int v = 0; v < 16; v++) for (int p = 0; p < 16; p++) for (int r = 0; r < 4; r++) begin
      v4 = 4'(v); p4 = 4'(p); r4 = 2'(r); #1;
      expect_v(4, 16'(v), 16'(p), r, ev, ek);
      checks++;
      if (vic4 !== 2'(ev) || k4 !== 2'(ek)) begin
        failures++; $display("FAIL4 v=%b p=%b r=%0d got %0d/%0d exp %0d/%0d", v4, p4, r, vic4, k4, ev, ek);
      end
    end
    repeat (5000) begin
      v16 = ($urandom % 2) ? 16'hFFFF : 16'($urandom | $urandom);
      p16 = 16'($urandom & $urandom & $urandom); r16 = 4'($urandom); #1;
      expect_v(16, v16, p16, int'(r16), ev, ek);
      checks++;
      if (vic16 !== 4'(ev) || k16 !== 2'(ek)) begin
        failures++; $display("FAIL16 v=%h p=%h r=%0d got %0d/%0d exp %0d/%0d", v16, p16, r16, vic16, k16, ev, ek);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
