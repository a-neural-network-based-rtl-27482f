// tb_onlad_bus: self-checking testbench of onlad_bus. For each owner it drives
// random requests from the train and predict modules and a random host write, and
// checks that each array receives exactly the owner's request: the host write only
// reaches the array its mode selects, the predict module never reaches P.
module tb_onlad_bus;
  import onlad_pkg::*;

  owner_e   owner;
  host_wr_t host_wr;
  mem_req_t tr [5];   // x, alpha, b, beta, p
  mem_req_t pr [4];   // x, alpha, b, beta
  mem_req_t o  [5];
  int checks = 0, failures = 0;

  onlad_bus dut (
    .owner(owner), .host_wr(host_wr),
    .tr_x_req(tr[0]), .tr_alpha_req(tr[1]), .tr_b_req(tr[2]), .tr_beta_req(tr[3]), .tr_p_req(tr[4]),
    .pr_x_req(pr[0]), .pr_alpha_req(pr[1]), .pr_b_req(pr[2]), .pr_beta_req(pr[3]),
    .x_req(o[0]), .alpha_req(o[1]), .b_req(o[2]), .beta_req(o[3]), .p_req(o[4])
  );

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic mem_req_t rnd_req();
    mem_req_t r;
    r.we = 2'($urandom);
    for (int l = 0; l < LANES; l++) begin
      r.waddr[l] = idx_t'($urandom); r.wdata[l] = fx_t'($urandom); r.raddr[l] = idx_t'($urandom);
    end
    return r;
  endfunction

  // array i is written by the host for mode MODE_OF[i]
  localparam mode_e MODE_OF [5] = '{MODE_INPUT, MODE_ALPHA, MODE_B, MODE_BETA, MODE_P};

  initial begin
    for (int n = 0; n < 200; n++) begin
      for (int i = 0; i < 5; i++) tr[i] = rnd_req();
      for (int i = 0; i < 4; i++) pr[i] = rnd_req();
      host_wr.valid  = 1'($urandom);
      host_wr.target = mode_e'($urandom_range(0, 7));
      host_wr.index  = idx_t'($urandom);
      host_wr.value  = fx_t'($urandom);
      owner = owner_e'(n % 3);
      #1;
      for (int i = 0; i < 5; i++) begin
        mem_req_t e;
        case (owner)
          OWN_TRAIN:   e = tr[i];
          OWN_PREDICT: e = (i == 4) ? MEM_REQ_IDLE : pr[i];
          default: begin
            e = MEM_REQ_IDLE;
            e.we[0] = host_wr.valid && host_wr.target == MODE_OF[i];
            e.waddr[0] = host_wr.index;
            e.wdata[0] = host_wr.value;
          end
        endcase
        check(o[i] == e, $sformatf("iteration %0d owner %0d array %0d", n, owner, i));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
