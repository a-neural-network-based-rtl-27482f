// tb_train_module: self-checking testbench of train_module (N_IN = 16, N_HID = 8).
// The testbench models the parameter and input buffers as plain arrays with
// same-cycle reads. It runs three training steps and compares the new P and beta
// element by element with (a) a bit-exact Q10.22 reference written here as a direct
// transcription of the ONLAD update equations, and (b) the same update in
// double-precision reals, within a small tolerance. It also checks the cycle count of
// each step and the epsilon stop (Success = 1, P and beta unchanged).
module tb_train_module;
  import onlad_pkg::*;

  localparam int NI = 16;
  localparam int NH = 8;
  localparam int WATCHDOG = 200000;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic ff_we, start, busy, done, success;
  fx_t  ff_value;
  mem_req_t x_req, alpha_req, b_req, beta_req, p_req;
  mem_rsp_t x_rsp, alpha_rsp, b_rsp, beta_rsp, p_rsp;

  fx_t xm [NI], am [NI*NH], bm [NH], betam [NH*NI], pm [NH*NH];

  train_module #(.N_IN(NI), .N_HID(NH)) dut (
    .clk(clk), .rst_n(rst_n), .ff_we(ff_we), .ff_value(ff_value),
    .start(start), .busy(busy), .done(done), .success(success),
    .x_req(x_req), .x_rsp(x_rsp), .alpha_req(alpha_req), .alpha_rsp(alpha_rsp),
    .b_req(b_req), .b_rsp(b_rsp), .beta_req(beta_req), .beta_rsp(beta_rsp),
    .p_req(p_req), .p_rsp(p_rsp)
  );

  // memory models
  always_comb begin
    for (int l = 0; l < LANES; l++) begin
      x_rsp.rdata[l]     = (x_req.raddr[l] < NI)        ? xm[x_req.raddr[l]]        : '0;
      alpha_rsp.rdata[l] = (alpha_req.raddr[l] < NI*NH) ? am[alpha_req.raddr[l]]    : '0;
      b_rsp.rdata[l]     = (b_req.raddr[l] < NH)        ? bm[b_req.raddr[l]]        : '0;
      beta_rsp.rdata[l]  = (beta_req.raddr[l] < NH*NI)  ? betam[beta_req.raddr[l]]  : '0;
      p_rsp.rdata[l]     = (p_req.raddr[l] < NH*NH)     ? pm[p_req.raddr[l]]        : '0;
    end
  end
  always @(posedge clk) begin
    for (int l = 0; l < LANES; l++) begin
      if (beta_req.we[l]) betam[beta_req.waddr[l]] <= beta_req.wdata[l];
      if (p_req.we[l])    pm[p_req.waddr[l]]       <= p_req.wdata[l];
      if (x_req.we[l] || alpha_req.we[l] || b_req.we[l]) begin
        $display("ERROR: train module wrote a read-only array");
        failures++;
      end
    end
  end

  int checks = 0, failures = 0;

  // ---------------- reference model ----------------
  typedef logic signed [127:0] wide_t;
  localparam wide_t WMAX = wide_t'(32'sh7fffffff);
  localparam wide_t WMIN = -wide_t'(64'sd2147483648);

  function automatic fx_t rsat(wide_t v);
    if (v > WMAX) return fx_t'(WMAX);
    if (v < WMIN) return fx_t'(WMIN);
    return fx_t'(v);
  endfunction
  function automatic wide_t w(fx_t a); return wide_t'(a); endfunction
  function automatic fx_t rmul(fx_t a, fx_t b); return rsat((w(a) * w(b)) >>> 22); endfunction
  function automatic fx_t radd(fx_t a, fx_t b); return rsat(w(a) + w(b)); endfunction
  function automatic fx_t rsub(fx_t a, fx_t b); return rsat(w(a) - w(b)); endfunction
  function automatic wide_t rrecip(fx_t d);
    wide_t q;
    q = (wide_t'(1) <<< 44) / w(d);
    return q;
  endfunction
  function automatic fx_t rmulr(fx_t a, wide_t r); return rsat((w(a) * r) >>> 22); endfunction
  function automatic real tor(fx_t a); return real'(a) / 4194304.0; endfunction

  fx_t ff_ref;

  // one reference step; returns success and updates rp/rbeta
  task automatic ref_step(input fx_t x [NI], input fx_t a [NI*NH], input fx_t b [NH],
                          ref fx_t beta [NH*NI], ref fx_t p [NH*NH], output logic succ);
    fx_t h [NH], o1 [NH*NH], o2 [NH], o4 [NH], o5 [NH*NH], o6 [NH], o7 [NI], o8 [NI], o3;
    wide_t s, inv_a2, inv_o3;
    for (int j = 0; j < NH; j++) begin
      s = 0;
      for (int i = 0; i < NI; i++) s += w(x[i]) * w(a[i*NH + j]);
      h[j] = radd(rsat(s >>> 22), b[j]);
    end
    inv_a2 = rrecip(rmul(ff_ref, ff_ref));
    for (int e = 0; e < NH*NH; e++) o1[e] = rmulr(p[e], inv_a2);
    for (int r = 0; r < NH; r++) begin
      s = 0;
      for (int c = 0; c < NH; c++) s += w(o1[r*NH + c]) * w(h[c]);
      o2[r] = rsat(s >>> 22);
    end
    s = 0;
    for (int r = 0; r < NH; r++) s += w(h[r]) * w(o2[r]);
    o3 = radd(FX_ONE, rsat(s >>> 22));
    if (o3 < FX_EPS) begin
      succ = 1'b1;
      return;
    end
    succ = 1'b0;
    for (int c = 0; c < NH; c++) begin
      s = 0;
      for (int r = 0; r < NH; r++) s += w(h[r]) * w(o1[r*NH + c]);
      o4[c] = rsat(s >>> 22);
    end
    for (int r = 0; r < NH; r++)
      for (int c = 0; c < NH; c++) o5[r*NH + c] = rmul(o2[r], o4[c]);
    inv_o3 = rrecip(o3);
    for (int e = 0; e < NH*NH; e++) p[e] = rsub(o1[e], rmulr(o5[e], inv_o3));
    for (int r = 0; r < NH; r++) begin
      s = 0;
      for (int c = 0; c < NH; c++) s += w(p[r*NH + c]) * w(h[c]);
      o6[r] = rsat(s >>> 22);
    end
    for (int c = 0; c < NI; c++) begin
      s = 0;
      for (int r = 0; r < NH; r++) s += w(h[r]) * w(beta[r*NI + c]);
      o7[c] = rsat(s >>> 22);
    end
    for (int c = 0; c < NI; c++) o8[c] = rsub(x[c], o7[c]);
    for (int r = 0; r < NH; r++)
      for (int c = 0; c < NI; c++) beta[r*NI + c] = radd(beta[r*NI + c], rmul(o6[r], o8[c]));
  endtask

  // same step in reals (the ONLAD equations, no rounding)
  task automatic real_step(input fx_t x [NI], input fx_t a [NI*NH], input fx_t b [NH],
                           input fx_t beta0 [NH*NI], input fx_t p0 [NH*NH],
                           output real beta [NH*NI], output real p [NH*NH]);
    real h [NH], q [NH*NH], qh [NH], den, ph [NH], e [NI], af;
    af = tor(ff_ref);
    for (int j = 0; j < NH; j++) begin
      h[j] = tor(b[j]);
      for (int i = 0; i < NI; i++) h[j] += tor(x[i]) * tor(a[i*NH + j]);
    end
    for (int i = 0; i < NH*NH; i++) q[i] = tor(p0[i]) / (af * af);
    den = 1.0;
    for (int r = 0; r < NH; r++) begin
      qh[r] = 0.0;
      for (int c = 0; c < NH; c++) qh[r] += q[r*NH + c] * h[c];
      den += h[r] * qh[r];
    end
    // q symmetric: h*Q = (Q*h^T)^T
    for (int r = 0; r < NH; r++)
      for (int c = 0; c < NH; c++) p[r*NH + c] = q[r*NH + c] - qh[r] * qh[c] / den;
    for (int r = 0; r < NH; r++) begin
      ph[r] = 0.0;
      for (int c = 0; c < NH; c++) ph[r] += p[r*NH + c] * h[c];
    end
    for (int c = 0; c < NI; c++) begin
      e[c] = tor(x[c]);
      for (int r = 0; r < NH; r++) e[c] -= h[r] * tor(beta0[r*NI + c]);
    end
    for (int r = 0; r < NH; r++)
      for (int c = 0; c < NI; c++) beta[r*NI + c] = tor(beta0[r*NI + c]) + ph[r] * e[c];
  endtask

  function automatic fx_t rnd01();  // uniform [0,1)
    return fx_t'($urandom_range(0, (1 << 22) - 1));
  endfunction
  function automatic fx_t rndpm(int scale_bits);  // uniform [-2^-s, 2^-s)
    return fx_t'(int'($urandom_range(0, (1 << (23 - scale_bits)) - 1)) - (1 << (22 - scale_bits)));
  endfunction

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  int cyc = 0;
  always @(posedge clk) cyc++;

  task automatic run_step(input fx_t ff, input bit expect_stop, input string tag);
    fx_t rbeta [NH*NI], rp [NH*NH], beta0 [NH*NI], p0 [NH*NH];
    real fbeta [NH*NI], fp [NH*NH];
    logic rsucc;
    int t0, t1, exp_cycles, mism;
    real err, tol;
    ff_ref = ff;
    // update the forgetting factor
    @(negedge clk); ff_we = 1; ff_value = ff;
    @(negedge clk); ff_we = 0;
    rbeta = betam; rp = pm; beta0 = betam; p0 = pm;
    ref_step(xm, am, bm, rbeta, rp, rsucc);
    real_step(xm, am, bm, beta0, p0, fbeta, fp);
    @(negedge clk); start = 1; t0 = cyc;
    @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    t1 = cyc;
    $display("%s: %0d cycles at %0t", tag, t1 - t0, $time);
    check(success == rsucc, $sformatf("%s: success %0b, reference %0b", tag, success, rsucc));
    check(success == expect_stop, $sformatf("%s: success %0b, expected %0b", tag, success, expect_stop));
    if (expect_stop) exp_cycles = 47 + NI*NH/2 + NH*NH + NH/2 + 1;
    else             exp_cycles = 47 + 3*NI*NH/2 + 3*NH*NH + NH/2 + NI/2 + 3;
    check(t1 - t0 == exp_cycles, $sformatf("%s: %0d cycles, expected %0d", tag, t1 - t0, exp_cycles));
    @(negedge clk);
    mism = 0;
    for (int e = 0; e < NH*NH; e++) if (pm[e] !== rp[e]) mism++;
    for (int e = 0; e < NH*NI; e++) if (betam[e] !== rbeta[e]) mism++;
    check(mism == 0, $sformatf("%s: %0d P/beta words differ from the fixed-point reference", tag, mism));
    if (!expect_stop) begin
      mism = 0;
      for (int e = 0; e < NH*NH; e++) begin
        err = tor(pm[e]) - fp[e]; if (err < 0) err = -err;
        tol = 2e-4 + 1e-3 * (fp[e] < 0 ? -fp[e] : fp[e]);
        if (err > tol) mism++;
      end
      for (int e = 0; e < NH*NI; e++) begin
        err = tor(betam[e]) - fbeta[e]; if (err < 0) err = -err;
        tol = 2e-4 + 1e-3 * (fbeta[e] < 0 ? -fbeta[e] : fbeta[e]);
        if (err > tol) mism++;
      end
      check(mism == 0, $sformatf("%s: %0d P/beta words off the real-valued update", tag, mism));
    end else begin
      mism = 0;
      for (int e = 0; e < NH*NH; e++) if (pm[e] !== p0[e]) mism++;
      for (int e = 0; e < NH*NI; e++) if (betam[e] !== beta0[e]) mism++;
      check(mism == 0, $sformatf("%s: %0d words changed although training stopped", tag, mism));
    end
  endtask

  initial begin
    ff_we = 0; ff_value = '0; start = 0;
    for (int i = 0; i < NI; i++) xm[i] = rnd01();
    for (int i = 0; i < NI*NH; i++) am[i] = rnd01();
    for (int i = 0; i < NH; i++) bm[i] = rnd01();
    for (int i = 0; i < NH*NI; i++) betam[i] = rndpm(2);
    // P symmetric positive definite: 0.05*I plus a small symmetric part
    for (int r = 0; r < NH; r++)
      for (int c = r; c < NH; c++) begin
        fx_t v;
        v = (r == c) ? fx_t'(209715) : fx_t'(int'($urandom_range(0, 2000)) - 1000);
        pm[r*NH + c] = v;
        pm[c*NH + r] = v;
      end
    repeat (3) @(negedge clk);
    rst_n = 1;
    repeat (2) @(negedge clk);
    run_step(fx_t'(4110418), 1'b0, "step 1 alpha=0.98");
    for (int i = 0; i < NI; i++) xm[i] = rnd01();
    run_step(fx_t'(4194304), 1'b0, "step 2 alpha=1.00");
    for (int i = 0; i < NI; i++) xm[i] = rnd01();
    run_step(fx_t'(3984589), 1'b0, "step 3 alpha=0.95");
    // negative definite P drives O3 below epsilon
    for (int e = 0; e < NH*NH; e++) pm[e] = (e % (NH + 1) == 0) ? -fx_t'(4194304) : '0;
    run_step(fx_t'(4194304), 1'b1, "step 4 singular");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
