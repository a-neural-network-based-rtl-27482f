// tb_packet_serializer: self-checking testbench of packet_serializer. It emits
// packets of the three kinds with random success/score values whenever ready is
// high, applies random m_tready back-pressure, and checks that the stream carries
// each packet exactly once, in order, with the right data (0, {31'b0, success} or
// the score) and TLAST, and that data stay stable while stalled.
module tb_packet_serializer;
  import onlad_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic emit, last, success, ready, m_tvalid, m_tlast, m_tready;
  out_kind_e kind;
  fx_t score;
  logic [31:0] m_tdata;

  packet_serializer dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  logic [32:0] exp_q [$];
  int n_stall = 0, n_sent = 0;
  logic [31:0] prev_data;
  logic prev_stall = 0;

  always @(negedge clk) begin
    m_tready <= ($urandom_range(0, 2) != 0);
    emit <= 0;
    if (rst_n && n_sent < 300 && $urandom_range(0, 1)) begin
      emit    <= 1;
      kind    <= out_kind_e'($urandom_range(0, 2));
      success <= 1'($urandom);
      score   <= fx_t'($urandom);
      last    <= 1'($urandom);
    end
  end

  always @(posedge clk) begin
    if (rst_n) begin
      if (emit && ready) begin
        logic [31:0] d;
        unique case (kind)
          OUT_SUCCESS: d = {31'b0, success};
          OUT_SCORE:   d = score;
          default:     d = '0;
        endcase
        exp_q.push_back({last, d});
        n_sent++;
      end
      if (prev_stall) check(m_tvalid && m_tdata == prev_data, "data changed while stalled");
      prev_stall <= m_tvalid && !m_tready;
      prev_data  <= m_tdata;
      if (m_tvalid && !m_tready) n_stall++;
      if (m_tvalid && m_tready) begin
        logic [32:0] e;
        if (exp_q.size() == 0) check(0, "packet with nothing emitted");
        else begin
          e = exp_q.pop_front();
          check(m_tdata == e[31:0] && m_tlast == e[32], $sformatf("data %08h/%0b expected %08h/%0b", m_tdata, m_tlast, e[31:0], e[32]));
        end
      end
    end
  end

  initial begin
    emit = 0; kind = OUT_UNUSED; success = 0; score = '0; last = 0; m_tready = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    while (n_sent < 300) @(negedge clk);
    repeat (20) @(negedge clk);
    check(exp_q.size() == 0, "packets left undelivered");
    check(n_stall > 0, "no back-pressure seen");
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
