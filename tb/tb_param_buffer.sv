// tb_param_buffer: self-checking testbench of param_buffer (N_IN = 8, N_HID = 4).
// It writes random words into all four arrays through both write lanes, then reads
// every element back through both read lanes and compares with a shadow copy. It
// also checks that arrays are independent, that an out-of-range write is dropped
// and that an out-of-range read returns 0.
module tb_param_buffer;
  import onlad_pkg::*;

  localparam int NI = 8, NH = 4;
  localparam int DEP [4] = '{NI*NH, NH*NI, NH*NH, NH};

  logic clk = 0;
  always #5 clk = ~clk;

  mem_req_t req [4];
  mem_rsp_t rsp [4];
  fx_t shadow [4][NI*NH];
  int checks = 0, failures = 0;

  param_buffer #(.N_IN(NI), .N_HID(NH)) dut (
    .clk(clk),
    .alpha_req(req[0]), .alpha_rsp(rsp[0]),
    .beta_req (req[1]), .beta_rsp (rsp[1]),
    .p_req    (req[2]), .p_rsp    (rsp[2]),
    .b_req    (req[3]), .b_rsp    (rsp[3])
  );

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    for (int a = 0; a < 4; a++) req[a] = MEM_REQ_IDLE;
    @(negedge clk);
    // fill: lane 0 even, lane 1 odd addresses
    for (int a = 0; a < 4; a++)
      for (int e = 0; e < DEP[a]; e += 2) begin
        for (int l = 0; l < LANES; l++) begin
          req[a].we[l]    = 1'b1;
          req[a].waddr[l] = idx_t'(e + l);
          req[a].wdata[l] = fx_t'($urandom);
          shadow[a][e + l] = req[a].wdata[l];
        end
        @(negedge clk);
        req[a] = MEM_REQ_IDLE;
      end
    // out-of-range write must not alias onto element 0
    req[3].we[0] = 1'b1; req[3].waddr[0] = idx_t'(NH); req[3].wdata[0] = 32'h12345678;
    @(negedge clk);
    req[3] = MEM_REQ_IDLE;
    // read back through both lanes
    for (int a = 0; a < 4; a++)
      for (int e = 0; e < DEP[a]; e++) begin
        req[a].raddr[0] = idx_t'(e);
        req[a].raddr[1] = idx_t'(DEP[a] - 1 - e);
        #1;
        check(rsp[a].rdata[0] == shadow[a][e], $sformatf("array %0d lane 0 addr %0d", a, e));
        check(rsp[a].rdata[1] == shadow[a][DEP[a] - 1 - e], $sformatf("array %0d lane 1 addr %0d", a, DEP[a] - 1 - e));
      end
    req[2].raddr[0] = idx_t'(NH*NH + 5);
    #1;
    check(rsp[2].rdata[0] == 0, "out-of-range read returns 0");
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
