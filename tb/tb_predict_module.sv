// tb_predict_module: self-checking testbench of predict_module (N_IN = 16,
// N_HID = 8). Parameter and input buffers are modelled as arrays with same-cycle
// reads. For several random models and inputs it compares the anomaly score with a
// bit-exact Q10.22 reference of score = mean((x - (x*alpha + b)*beta)^2) and with
// the same score in reals, and checks the cycle count of each prediction.
module tb_predict_module;
  import onlad_pkg::*;

  localparam int NI = 16;
  localparam int NH = 8;
  localparam int WATCHDOG = 100000;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start, busy, done;
  fx_t  score;
  mem_req_t x_req, alpha_req, b_req, beta_req;
  mem_rsp_t x_rsp, alpha_rsp, b_rsp, beta_rsp;
  fx_t xm [NI], am [NI*NH], bm [NH], betam [NH*NI];

  predict_module #(.N_IN(NI), .N_HID(NH)) dut (
    .clk(clk), .rst_n(rst_n), .start(start), .busy(busy), .done(done), .score(score),
    .x_req(x_req), .x_rsp(x_rsp), .alpha_req(alpha_req), .alpha_rsp(alpha_rsp),
    .b_req(b_req), .b_rsp(b_rsp), .beta_req(beta_req), .beta_rsp(beta_rsp)
  );

  always_comb begin
    for (int l = 0; l < LANES; l++) begin
      x_rsp.rdata[l]     = (x_req.raddr[l] < NI)        ? xm[x_req.raddr[l]]       : '0;
      alpha_rsp.rdata[l] = (alpha_req.raddr[l] < NI*NH) ? am[alpha_req.raddr[l]]   : '0;
      b_rsp.rdata[l]     = (b_req.raddr[l] < NH)        ? bm[b_req.raddr[l]]       : '0;
      beta_rsp.rdata[l]  = (beta_req.raddr[l] < NH*NI)  ? betam[beta_req.raddr[l]] : '0;
    end
  end

  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) begin
    cyc++;
    if (|{x_req.we, alpha_req.we, b_req.we, beta_req.we}) begin
      $display("FAIL: predict module wrote an array");
      failures++;
    end
  end

  typedef logic signed [127:0] wide_t;
  function automatic fx_t rsat(wide_t v);
    if (v > wide_t'(32'sh7fffffff)) return 32'sh7fffffff;
    if (v < -wide_t'(64'sd2147483648)) return 32'sh80000000;
    return fx_t'(v);
  endfunction
  function automatic real tor(fx_t a); return real'(a) / 4194304.0; endfunction

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic one_case(input string tag);
    fx_t h [NH], y [NI], d, ref_score;
    wide_t s;
    real hr [NH], yr, sr, got;
    int t0, t1;
    for (int j = 0; j < NH; j++) begin
      s = 0; hr[j] = tor(bm[j]);
      for (int i = 0; i < NI; i++) begin
        s += wide_t'(xm[i]) * wide_t'(am[i*NH + j]);
        hr[j] += tor(xm[i]) * tor(am[i*NH + j]);
      end
      h[j] = rsat(wide_t'(rsat(s >>> 22)) + wide_t'(bm[j]));
    end
    s = 0; sr = 0.0;
    for (int c = 0; c < NI; c++) begin
      wide_t t; t = 0; yr = 0.0;
      for (int r = 0; r < NH; r++) begin
        t += wide_t'(h[r]) * wide_t'(betam[r*NI + c]);
        yr += hr[r] * tor(betam[r*NI + c]);
      end
      y[c] = rsat(t >>> 22);
      d = rsat(wide_t'(xm[c]) - wide_t'(y[c]));
      s += wide_t'(d) * wide_t'(d);
      sr += (tor(xm[c]) - yr) * (tor(xm[c]) - yr);
    end
    ref_score = rsat((s / NI) >>> 22);
    sr = sr / NI;
    @(negedge clk); start = 1; t0 = cyc;
    @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    t1 = cyc;
    got = tor(score);
    check(score == ref_score, $sformatf("%s: score %0d, reference %0d", tag, score, ref_score));
    check((got - sr) < 1e-4 + 1e-3 * sr && (sr - got) < 1e-4 + 1e-3 * sr,
          $sformatf("%s: score %f, real-valued %f", tag, got, sr));
    check(t1 - t0 == NI*NH + NI/2 + 2, $sformatf("%s: %0d cycles, expected %0d", tag, t1 - t0, NI*NH + NI/2 + 2));
  endtask

  initial begin
    start = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 5; n++) begin
      for (int i = 0; i < NI; i++) xm[i] = fx_t'($urandom_range(0, (1 << 22) - 1));
      for (int i = 0; i < NI*NH; i++) am[i] = fx_t'($urandom_range(0, (1 << 22) - 1));
      for (int i = 0; i < NH; i++) bm[i] = fx_t'($urandom_range(0, (1 << 22) - 1));
      for (int i = 0; i < NH*NI; i++) betam[i] = fx_t'(int'($urandom_range(0, (1 << 20) - 1)) - (1 << 19)) >>> (n % 3);
      one_case($sformatf("case %0d", n));
    end
    // perfect reconstruction gives score 0: beta = 0 and x = 0
    for (int i = 0; i < NI; i++) xm[i] = '0;
    for (int i = 0; i < NH*NI; i++) betam[i] = '0;
    one_case("zero");
    check(score == 0, "zero input with zero beta must score 0");
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
