// semiring_alu_tb: random and corner vectors against a reference model of
// min(a, b+c) / max(a, b, c+d) with saturation and the Int5 clamp.
module semiring_alu_tb;
  import gendram_pkg::*;
  localparam int L = 4;
  semiring_e mode; prec_e prec;
  logic signed [L-1:0][ELEM_W-1:0] a, b, c, d, y;
  int checks = 0, failures = 0;

  semiring_alu #(.LANES(L)) dut (.*);

  function automatic longint clamp(longint v, prec_e p);
    if (p == PREC_INT5) return v > 15 ? 15 : (v < -16 ? -16 : v);
    return v > longint'(POS_INF) ? longint'(POS_INF) : (v < longint'(NEG_INF) ? longint'(NEG_INF) : v);
  endfunction

  function automatic int rnd(int sm);
    if (sm != 0) return int'($urandom_range(0, 31)) - 16;
    return int'($urandom_range(0, 2000)) - 1000;
  endfunction

  initial begin
    for (int t = 0; t < 400; t++) begin
      mode = semiring_e'(t % 2);
      prec = prec_e'((t / 2) % 2);
      for (int l = 0; l < L; l++) begin
        a[l] = rnd(int'(prec)); b[l] = rnd(int'(prec)); c[l] = rnd(int'(prec)); d[l] = rnd(int'(prec));
        if (t % 7 == 0) c[l] = POS_INF;       // infinite distance
      end
      #1;
      for (int l = 0; l < L; l++) begin
        longint ev, av, bv, cv, dv;
        av = $signed(a[l]); bv = $signed(b[l]); cv = $signed(c[l]); dv = $signed(d[l]);
        if (mode == SR_MINPLUS) begin
          ev = clamp(bv + cv, prec);
          if (av < ev) ev = av;
        end else begin
          ev = clamp(cv + dv, prec);
          if (av > ev) ev = av;
          if (bv > ev) ev = bv;
        end
        checks++;
        if (longint'($signed(y[l])) != ev) begin
          failures++;
          $display("mismatch t=%0d lane=%0d mode=%0d y=%0d ev=%0d", t, l, mode, $signed(y[l]), ev);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
