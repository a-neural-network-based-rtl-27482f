// tb_input_buffer: self-checking testbench of input_buffer (N_IN = 16). It writes
// an input vector one element per cycle through lane 0 (as update_input packets do),
// overwrites some elements through both lanes, and reads everything back in pairs.
module tb_input_buffer;
  import onlad_pkg::*;

  localparam int NI = 16;

  logic clk = 0;
  always #5 clk = ~clk;

  mem_req_t req;
  mem_rsp_t rsp;
  fx_t shadow [NI];
  int checks = 0, failures = 0;

  input_buffer #(.N_IN(NI)) dut (.clk(clk), .x_req(req), .x_rsp(rsp));

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    req = MEM_REQ_IDLE;
    @(negedge clk);
    for (int i = 0; i < NI; i++) begin
      req = MEM_REQ_IDLE;
      req.we[0] = 1'b1; req.waddr[0] = idx_t'(i); req.wdata[0] = fx_t'($urandom);
      shadow[i] = req.wdata[0];
      @(negedge clk);
    end
    req = MEM_REQ_IDLE;
    req.we = 2'b11; req.waddr[0] = 3; req.waddr[1] = 10;
    req.wdata[0] = 32'h0040_0000; req.wdata[1] = 32'hffc0_0000;
    shadow[3] = 32'h0040_0000; shadow[10] = 32'hffc0_0000;
    @(negedge clk);
    req = MEM_REQ_IDLE;
    for (int i = 0; i < NI; i += 2) begin
      req.raddr[0] = idx_t'(i); req.raddr[1] = idx_t'(i + 1);
      #1;
      check(rsp.rdata[0] == shadow[i], $sformatf("x[%0d]", i));
      check(rsp.rdata[1] == shadow[i + 1], $sformatf("x[%0d]", i + 1));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
