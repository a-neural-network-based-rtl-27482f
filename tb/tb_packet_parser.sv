// tb_packet_parser: self-checking testbench of packet_parser. It sends random
// packets of all eight modes, answers do_training/do_prediction with done after a
// random delay, and holds out_ready low at random. It checks, per accepted packet:
// the decoded write (target, index, value), the update_ff strobe, the start pulses,
// the bus owner while a unit runs, that no packet is accepted while a unit runs or
// while the output register is full, and the kind and TLAST of each emitted packet.
module tb_packet_parser;
  import onlad_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [63:0] s_tdata;
  logic s_tvalid, s_tlast, s_tready;
  host_wr_t host_wr;
  logic ff_we, train_start, train_done, predict_start, predict_done;
  fx_t ff_value;
  owner_e owner;
  logic emit, emit_last, out_ready;
  out_kind_e emit_kind;

  packet_parser dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  // unit models: done after a random delay
  int tr_cnt = -1, pr_cnt = -1;
  logic running;
  out_kind_e pend_kind;
  logic pend_last;
  int n_emit = 0, n_stall = 0, n_full = 0, n_hold = 0;
  logic waiting = 0;
  int n_mode [8];

  always @(posedge clk) begin
    if (train_start)   tr_cnt <= $urandom_range(1, 6);
    else if (tr_cnt > 0) tr_cnt <= tr_cnt - 1;
    else if (tr_cnt == 0) tr_cnt <= -1;
    if (predict_start) pr_cnt <= $urandom_range(1, 6);
    else if (pr_cnt > 0) pr_cnt <= pr_cnt - 1;
    else if (pr_cnt == 0) pr_cnt <= -1;
  end
  assign train_done   = (tr_cnt == 0);
  assign predict_done = (pr_cnt == 0);
  assign running      = (tr_cnt >= 0) || (pr_cnt >= 0);

  always @(negedge clk) out_ready <= ($urandom_range(0, 3) != 0);

  // stimulus
  always @(negedge clk) begin
    if (!rst_n) s_tvalid <= 0;
    else if (!s_tvalid || acc_seen) begin
      s_tvalid <= ($urandom_range(0, 2) != 0);
      s_tdata  <= {$urandom, $urandom};
      s_tlast  <= 1'($urandom);
    end
  end
  logic acc_seen = 0;

  // checker at every rising edge
  always @(posedge clk) begin
    in_pkt_t p;
    p = in_pkt_t'(s_tdata);
    acc_seen <= s_tvalid && s_tready;
    if (rst_n) begin
      if (s_tvalid && !s_tready && running) n_stall++;
      if (s_tvalid && !s_tready && !running && !out_ready) n_full++;
      check(!(s_tready && (running || !out_ready)), "accepted while busy or output full");
      if (tr_cnt >= 0 && !train_start) check(owner == OWN_TRAIN, "owner during training");
      if (pr_cnt >= 0 && !predict_start) check(owner == OWN_PREDICT, "owner during prediction");
      if (s_tvalid && s_tready) begin
        n_mode[p.mode]++;
        check(host_wr.valid == (p.mode <= MODE_INPUT), "host write strobe");
        if (p.mode <= MODE_INPUT)
          check(host_wr.target == p.mode && host_wr.index == p.index && host_wr.value == p.value, "host write fields");
        check(ff_we == (p.mode == MODE_FF) && (p.mode != MODE_FF || ff_value == p.value), "update_ff");
        check(train_start == (p.mode == MODE_TRAIN), "train start");
        check(predict_start == (p.mode == MODE_PREDICT), "predict start");
        if (p.mode inside {MODE_TRAIN, MODE_PREDICT}) begin
          check(!emit, "no output at the start of an instruction");
          pend_kind = (p.mode == MODE_TRAIN) ? OUT_SUCCESS : OUT_UNUSED;
          if (p.mode == MODE_PREDICT) pend_kind = OUT_SCORE;
          pend_last = s_tlast;
        end else begin
          check(emit && emit_kind == OUT_UNUSED && emit_last == s_tlast, "update returns an unused packet");
        end
      end else begin
        check(!host_wr.valid && !ff_we && !train_start && !predict_start, "strobe without a packet");
        if (train_done || predict_done || waiting) begin
          if (out_ready) check(emit && emit_kind == pend_kind && emit_last == pend_last, "result packet kind/last");
          else           check(!emit, "emit into a full output register");
          waiting <= !out_ready;
          if (!out_ready) n_hold++;
        end else
          check(!emit, "emit without a cause");
      end
      if (emit) n_emit++;
    end
  end

  initial begin
    foreach (n_mode[i]) n_mode[i] = 0;
    s_tvalid = 0; s_tdata = '0; s_tlast = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    repeat (5000) @(negedge clk);
    for (int m = 0; m < 8; m++) check(n_mode[m] > 0, $sformatf("mode %0d never accepted", m));
    check(n_stall > 0, "never stalled by a running unit");
    check(n_full > 0, "never stalled by a full output register");
    check(n_hold > 0, "a result never had to wait for the output register");
    $display("packets by mode %p, emitted %0d, stall cycles %0d/%0d", n_mode, n_emit, n_stall, n_full);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
