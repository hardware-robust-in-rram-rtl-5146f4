// tmcsa_tb: self-checking test of the sense amplifier model. Two instances
// are driven with the same summed currents (1/32-cell units): one ideal
// (NONIDEAL = 0), one with the macro's sensing limits, and a third with the
// required margin raised by 2 cells (MARGIN_ADD = 2). The reference evaluates the published nonlinearity
// fit in floating point, the 35..300 uA window and the required margin, and
// skips only cases within 1 % of a window edge. Directed cases come from the
// published worked example (60 vs 65 LRS cells, 82.2 uA vs 86.45 uA).
// Checks also that unresolved outputs are not stuck, and that outputs change
// only on sa_en.
module tmcsa_tb;
  localparam int CW = 21;

  logic          clk = 0, rst_n = 0, sa_en = 0;
  logic [CW-1:0] cp = '0, cn = '0;
  logic          o_id, r_id, o_ni, r_ni, o_m2, r_m2;
  int checks = 0, failures = 0, unresolved = 0, ones_unres = 0;

  tmcsa #(.CUR_W(CW), .NONIDEAL(1'b0)) u_id (.clk, .rst_n, .sa_en, .cur_pos(cp), .cur_neg(cn), .out(o_id), .resolved(r_id));
  tmcsa #(.CUR_W(CW), .NONIDEAL(1'b1)) u_ni (.clk, .rst_n, .sa_en, .cur_pos(cp), .cur_neg(cn), .out(o_ni), .resolved(r_ni));

  tmcsa #(.CUR_W(CW), .NONIDEAL(1'b1), .MARGIN_ADD(2)) u_m2 (.clk, .rst_n, .sa_en, .cur_pos(cp), .cur_neg(cn), .out(o_m2), .resolved(r_m2));

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real ref_ratio(input real p);
    real q;
    q = (p > 540.0) ? 540.0 : p;
    if (q <= 140.0)
      return 1.0286e-8*q**4 - 3.79e-6*q**3 + 5.3e-4*q**2 - 3.92e-2*q + 2.5;
    return 1.8063e-11*q**4 - 3.204e-8*q**3 + 2.2495e-5*q**2 - 8.057e-3*q + 1.707;
  endfunction

  function automatic real ref_margin(input real n);
    real xs [5] = '{40.0, 60.0, 80.0, 100.0, 120.0};
    real ys [5] = '{0.8, 1.2, 1.9, 3.0, 4.0};
    if (n <= xs[0]) return ys[0];
    for (int i = 1; i < 5; i++)
      if (n <= xs[i]) return ys[i-1] + (ys[i] - ys[i-1]) * (n - xs[i-1]) / (xs[i] - xs[i-1]);
    return ys[4] + (ys[4] - ys[3]) * (n - xs[4]) / (xs[4] - xs[3]);
  endfunction

  // qp, qn: summed currents in 1/32 of a nominal LRS cell.
  task automatic apply(input int qp, input int qn, input int force_exp = -1);
    real ip, in_, imax, m, d;
    bit  ok, near, ok2, near2;
    @(negedge clk);
    cp = CW'(qp); cn = CW'(qn); sa_en = 1'b1;
    @(negedge clk);
    sa_en = 1'b0;
    ip  = qp / 32.0 * ref_ratio(real'((qp + 16) / 32));
    in_ = qn / 32.0 * ref_ratio(real'((qn + 16) / 32));
    imax = (ip > in_) ? ip : in_;
    d = ((qp > qn) ? qp - qn : qn - qp) / 32.0;
    m = $ceil(ref_margin(real'(((qp > qn) ? qp : qn) / 32)) * 10.0 - 1e-6) / 10.0;  // rounded up to 0.1 cell
    ok = (imax >= 35.0) && (imax <= 300.0) && (d >= m);
    near = (imax > 34.6 && imax < 35.4) || (imax > 297.0 && imax < 303.0) || (d > 0.99*m && d < 1.01*m);
    ok2 = (imax >= 35.0) && (imax <= 300.0) && (d >= m + 2.0);
    near2 = (imax > 34.6 && imax < 35.4) || (imax > 297.0 && imax < 303.0) || (d > 0.99*(m+2.0) && d < 1.01*(m+2.0));
    if (!near2) begin
      checks++;
      if (r_m2 !== ok2 || (ok2 && o_m2 !== (qp > qn))) begin
        failures++;
        $display("FAIL margin+2 qp=%0d qn=%0d out=%b res=%b exp_res=%b", qp, qn, o_m2, r_m2, ok2);
      end
    end
    checks++;
    if (o_id !== (qp > qn) || r_id !== 1'b1) begin
      failures++; $display("FAIL ideal qp=%0d qn=%0d out=%b", qp, qn, o_id);
    end
    if (!near) begin
      checks++;
      if (r_ni !== ok || (ok && o_ni !== (qp > qn))) begin
        failures++;
        $display("FAIL nonideal qp=%0d qn=%0d I=%f/%f out=%b res=%b exp_res=%b", qp, qn, ip, in_, o_ni, r_ni, ok);
      end
    end
    if (force_exp >= 0) begin
      checks++;
      if (r_ni !== 1'b1 || o_ni !== force_exp[0]) begin
        failures++; $display("FAIL directed qp=%0d qn=%0d", qp, qn);
      end
    end
    if (!r_ni) begin unresolved++; if (o_ni) ones_unres++; end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    // Worked example of a single accumulation: 60 vs 65 cells -> A < B.
    apply(60 * 32, 65 * 32, 0);
    apply(65 * 32, 60 * 32, 1);
    // Tiny currents are not sensible; equal lines are never resolved.
    apply(10 * 32, 0);
    apply(0, 0);
    apply(100 * 32, 100 * 32);
    apply(100 * 32, 101 * 32);
    apply(200 * 32, 190 * 32);
    for (int t = 0; t < 4000; t++) begin
      int p, n;
      p = $urandom_range(0, 600 * 32);
      n = (t % 2) ? $urandom_range(0, 600 * 32) : p + $urandom_range(0, 12 * 32) - 6 * 32;
      if (n < 0) n = 0;
      apply(p, n);
    end
    // Outputs hold without sa_en.
    begin
      logic ho, hr;
      ho = o_ni; hr = r_ni;
      @(negedge clk); cp = CW'(300 * 32); cn = '0;
      @(negedge clk); @(negedge clk);
      checks++;
      if (o_ni !== ho || r_ni !== hr) begin failures++; $display("FAIL output changed without sa_en"); end
    end
    // Unresolved outputs must take both values (not a stuck-at).
    checks++;
    if (unresolved < 20 || ones_unres == 0 || ones_unres == unresolved) begin
      failures++; $display("FAIL unresolved=%0d ones=%0d", unresolved, ones_unres);
    end
    $display("unresolved=%0d (ones %0d)", unresolved, ones_unres);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
