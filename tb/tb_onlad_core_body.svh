// tb_onlad_core_body.svh: end-to-end test of onlad_core, shared by tb_onlad_core
// (reduced sizes) and tb_onlad_core_full (the core at its default sizes). The
// including module declares NI, NH, N_NORMAL (training samples per concept) and
// instantiates the core as "dut" on the signals declared here.
//
// The testbench plays the DMA engine: it sends 64-bit packets with random gaps in
// TVALID and accepts 32-bit output packets with random TREADY back-pressure. A
// bit-exact Q10.22 reference of the whole core (parameter writes, training step,
// prediction) predicts every output packet, which is compared in order.
//
// Scenario (an online anomaly-detection run with one concept drift):
//   1. load alpha, b (random), P = I and beta = 0 with update_params;
//   2. concept A: for each sample, predict then train (alpha_i = 1.0);
//   3. check that an A sample now scores lower than a B sample (anomaly);
//   4. drift to concept B with forgetting (alpha_i = 0.95): predict then train;
//   5. check that B's score fell after the drift;
//   6. load a negative-definite P and train once: Success must be 1.
// It counts each mechanism (every packet type, the epsilon stop, input stall,
// output back-pressure, TLAST) and fails on one that never happened.

  localparam int WATCHDOG = 40 * (NI * NH * 4 + 4000) * (2 * N_NORMAL + 8);

  logic        clk = 0, rst_n = 0;
  logic [63:0] s_axis_tdata;
  logic        s_axis_tvalid, s_axis_tlast, s_axis_tready;
  logic [31:0] m_axis_tdata;
  logic        m_axis_tvalid, m_axis_tlast, m_axis_tready;

  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  // ---------------- reference model of the core ----------------
  typedef logic signed [127:0] wide_t;
  function automatic fx_t rsat(wide_t v);
    if (v > wide_t'(32'sh7fffffff)) return 32'sh7fffffff;
    if (v < -wide_t'(64'sd2147483648)) return 32'sh80000000;
    return fx_t'(v);
  endfunction
  function automatic wide_t w(fx_t a); return wide_t'(a); endfunction
  function automatic fx_t rmul(fx_t a, fx_t b); return rsat((w(a) * w(b)) >>> 22); endfunction
  function automatic fx_t radd(fx_t a, fx_t b); return rsat(w(a) + w(b)); endfunction
  function automatic fx_t rsub(fx_t a, fx_t b); return rsat(w(a) - w(b)); endfunction
  function automatic fx_t rmulr(fx_t a, wide_t r); return rsat((w(a) * r) >>> 22); endfunction
  function automatic wide_t rrecip(fx_t d); return (wide_t'(1) <<< 44) / w(d); endfunction
  function automatic real tor(fx_t a); return real'(a) / 4194304.0; endfunction

  fx_t ra [NI*NH], rb [NH], rbeta [NH*NI], rp [NH*NH], rx [NI], rff;
  fx_t th [NH], to1 [NH*NH], to2 [NH], to4 [NH], to6 [NH], to7 [NI], to8 [NI];

  function automatic void ref_hidden();
    wide_t s;
    for (int j = 0; j < NH; j++) begin
      s = 0;
      for (int i = 0; i < NI; i++) s += w(rx[i]) * w(ra[i*NH + j]);
      th[j] = radd(rsat(s >>> 22), rb[j]);
    end
  endfunction

  function automatic logic ref_train();
    wide_t s, inv;
    fx_t o3;
    ref_hidden();
    inv = rrecip(rmul(rff, rff));
    for (int e = 0; e < NH*NH; e++) to1[e] = rmulr(rp[e], inv);
    s = 0;
    for (int r = 0; r < NH; r++) begin
      wide_t t; t = 0;
      for (int c = 0; c < NH; c++) t += w(to1[r*NH + c]) * w(th[c]);
      to2[r] = rsat(t >>> 22);
      s += w(th[r]) * w(to2[r]);
    end
    o3 = radd(FX_ONE, rsat(s >>> 22));
    if (o3 < FX_EPS) return 1'b1;
    for (int c = 0; c < NH; c++) begin
      s = 0;
      for (int r = 0; r < NH; r++) s += w(th[r]) * w(to1[r*NH + c]);
      to4[c] = rsat(s >>> 22);
    end
    inv = rrecip(o3);
    for (int r = 0; r < NH; r++)
      for (int c = 0; c < NH; c++)
        rp[r*NH + c] = rsub(to1[r*NH + c], rmulr(rmul(to2[r], to4[c]), inv));
    for (int r = 0; r < NH; r++) begin
      s = 0;
      for (int c = 0; c < NH; c++) s += w(rp[r*NH + c]) * w(th[c]);
      to6[r] = rsat(s >>> 22);
    end
    for (int c = 0; c < NI; c++) begin
      s = 0;
      for (int r = 0; r < NH; r++) s += w(th[r]) * w(rbeta[r*NI + c]);
      to7[c] = rsat(s >>> 22);
      to8[c] = rsub(rx[c], to7[c]);
    end
    for (int r = 0; r < NH; r++)
      for (int c = 0; c < NI; c++) rbeta[r*NI + c] = radd(rbeta[r*NI + c], rmul(to6[r], to8[c]));
    return 1'b0;
  endfunction

  function automatic fx_t ref_predict();
    wide_t s, t;
    fx_t d;
    ref_hidden();
    s = 0;
    for (int c = 0; c < NI; c++) begin
      t = 0;
      for (int r = 0; r < NH; r++) t += w(th[r]) * w(rbeta[r*NI + c]);
      d = rsub(rx[c], rsat(t >>> 22));
      s += w(d) * w(d);
    end
    return rsat((s / NI) >>> 22);
  endfunction

  // ---------------- packet queues ----------------
  logic [64:0] tx_q [$];   // {tlast, packet}
  logic [32:0] exp_q [$];  // {tlast, data}
  int n_sent = 0, n_recv = 0;
  int n_mode [8];
  int n_train_ok = 0, n_train_stop = 0, n_stall = 0, n_backpressure = 0, n_tlast = 0;
  fx_t last_score;

  // push one instruction; the reference predicts its output packet
  task automatic push(input mode_e mode, input int unsigned index, input fx_t value, input bit last);
    logic [31:0] exp_data;
    exp_data = '0;
    unique case (mode)
      MODE_ALPHA:   if (index < NI*NH) ra[index] = value;
      MODE_BETA:    if (index < NH*NI) rbeta[index] = value;
      MODE_P:       if (index < NH*NH) rp[index] = value;
      MODE_B:       if (index < NH) rb[index] = value;
      MODE_INPUT:   if (index < NI) rx[index] = value;
      MODE_FF:      rff = value;
      MODE_TRAIN:   begin
        exp_data = {31'b0, ref_train()};
        if (exp_data[0]) n_train_stop++; else n_train_ok++;
      end
      MODE_PREDICT: exp_data = ref_predict();
      default: ;
    endcase
    n_mode[mode]++;
    tx_q.push_back({last, mode, idx_t'(index), value});
    exp_q.push_back({last, exp_data});
  endtask

  task automatic wait_drained();
    while (exp_q.size() != 0 || tx_q.size() != 0) @(negedge clk);
  endtask

  logic s_axis_tready_seen = 1'b0;

  // sender: random TVALID gaps
  always @(negedge clk) begin
    if (!rst_n) begin
      s_axis_tvalid <= 1'b0;
    end else if (!s_axis_tvalid || s_axis_tready_seen) begin
      if (tx_q.size() != 0 && ($urandom_range(0, 3) != 0)) begin
        {s_axis_tlast, s_axis_tdata} <= tx_q.pop_front();
        s_axis_tvalid <= 1'b1;
      end else begin
        s_axis_tvalid <= 1'b0;
      end
    end
  end

  // an accepted input packet, seen at the rising edge
  always @(posedge clk) begin
    s_axis_tready_seen <= s_axis_tvalid && s_axis_tready;
    if (s_axis_tvalid && s_axis_tready) n_sent++;
    if (s_axis_tvalid && !s_axis_tready && (dut.u_train.busy || dut.u_predict.busy)) n_stall++;
    if (m_axis_tvalid && !m_axis_tready) n_backpressure++;
  end

  // receiver: random TREADY, compare with the reference
  always @(negedge clk) m_axis_tready <= rst_n && ($urandom_range(0, 2) != 0);
  always @(posedge clk) begin
    if (rst_n && m_axis_tvalid && m_axis_tready) begin
      logic [32:0] e;
      n_recv++;
      if (exp_q.size() == 0) begin
        check(1'b0, "output packet with no instruction pending");
      end else begin
        e = exp_q.pop_front();
        check(m_axis_tdata == e[31:0],
              $sformatf("output %0d: data %08h, expected %08h", n_recv, m_axis_tdata, e[31:0]));
        check(m_axis_tlast == e[32], $sformatf("output %0d: tlast %0b, expected %0b", n_recv, m_axis_tlast, e[32]));
        if (m_axis_tlast) n_tlast++;
        last_score = fx_t'(m_axis_tdata);
      end
    end
  end

  // ---------------- scenario ----------------
  fx_t proto_a [NI], proto_b [NI];

  task automatic load_sample(input fx_t proto [NI]);
    for (int i = 0; i < NI; i++) begin
      int v;
      v = int'(proto[i]) + int'($urandom_range(0, 419430)) - 209715;  // +-0.05 noise
      if (v < 0) v = 0;
      push(MODE_INPUT, i, fx_t'(v), 1'b0);
    end
  endtask

  task automatic predict_score(input fx_t proto [NI], output fx_t s);
    load_sample(proto);
    push(MODE_PREDICT, 0, '0, 1'b1);
    wait_drained();
    s = last_score;
  endtask

  fx_t s_a, s_b, s_b_before, s_b_after;

  initial begin
    s_axis_tvalid = 0; s_axis_tdata = '0; s_axis_tlast = 0;
    foreach (n_mode[i]) n_mode[i] = 0;
    rff = FX_ONE;
    for (int i = 0; i < NI; i++) begin
      proto_a[i] = fx_t'($urandom_range(0, (1 << 22) - 1));
      proto_b[i] = fx_t'($urandom_range(0, (1 << 22) - 1));
    end
    repeat (4) @(negedge clk);
    rst_n = 1;
    // 1. model parameters: alpha ~ U[0, 2/NI), b ~ U[0,1), P = I, beta = 0
    for (int i = 0; i < NI*NH; i++) push(MODE_ALPHA, i, fx_t'($urandom_range(0, (1 << 23) / NI - 1)), 1'b0);
    for (int i = 0; i < NH; i++) push(MODE_B, i, fx_t'($urandom_range(0, (1 << 22) - 1)), 1'b0);
    for (int i = 0; i < NH*NH; i++) push(MODE_P, i, (i % (NH + 1) == 0) ? FX_ONE : fx_t'(0), 1'b0);
    for (int i = 0; i < NH*NI; i++) push(MODE_BETA, i, '0, i == NH*NI - 1);
    push(MODE_FF, 0, FX_ONE, 1'b1);
    wait_drained();
    // 2. concept A: predict, then train on each sample
    for (int n = 0; n < N_NORMAL; n++) begin
      load_sample(proto_a);
      push(MODE_PREDICT, 0, '0, 1'b0);
      push(MODE_TRAIN, 0, '0, 1'b1);
      wait_drained();
    end
    // 3. A is normal now, B is an anomaly
    predict_score(proto_a, s_a);
    predict_score(proto_b, s_b_before);
    $display("after concept A: score(A) = %f, score(B) = %f", tor(s_a), tor(s_b_before));
    check(s_a < s_b_before, "a sample of the learned concept must score below an anomaly");
    // 4. drift to B with forgetting
    push(MODE_FF, 0, fx_t'(3984589), 1'b1);  // alpha_i = 0.95
    for (int n = 0; n < N_NORMAL; n++) begin
      load_sample(proto_b);
      push(MODE_PREDICT, 0, '0, 1'b0);
      push(MODE_TRAIN, 0, '0, 1'b1);
      wait_drained();
    end
    predict_score(proto_b, s_b_after);
    $display("after concept B: score(B) = %f", tor(s_b_after));
    check(s_b_after < s_b_before, "after the drift the new concept must score lower");
    // 5. out-of-range index is ignored; negative-definite P stops training
    push(MODE_B, NH + 3, FX_ONE, 1'b0);
    for (int i = 0; i < NH*NH; i++) push(MODE_P, i, (i % (NH + 1) == 0) ? -fx_t'(4 * FX_ONE) : fx_t'(0), 1'b0);
    load_sample(proto_a);
    push(MODE_TRAIN, 0, '0, 1'b1);
    wait_drained();
    repeat (5) @(negedge clk);

    // every mechanism must have happened
    for (int m = 0; m < 8; m++) check(n_mode[m] > 0, $sformatf("mode %0d never sent", m));
    check(n_train_ok > 0,     "no completed training step");
    check(n_train_stop > 0,   "epsilon stop never happened");
    check(n_stall > 0,        "input stream never stalled by a running instruction");
    check(n_backpressure > 0, "output back-pressure never happened");
    check(n_tlast > 0,        "no output packet carried TLAST");
    check(n_recv == n_sent,   $sformatf("%0d packets in, %0d out", n_sent, n_recv));
    $display("packets %0d, trainings %0d (+%0d stopped), predictions %0d, stall cycles %0d, backpressure cycles %0d",
             n_sent, n_train_ok, n_train_stop, n_mode[MODE_PREDICT], n_stall, n_backpressure);
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
