// onlad_bus: the control and data buses of the ONLAD core. It routes the request
// ports of the five on-chip arrays (alpha, beta, P, b and the input vector x) from
// whichever unit currently owns them:
//   OWN_HOST     single writes decoded from update_params / update_input packets
//                (target array chosen by the packet's mode field, lane 0 only)
//   OWN_TRAIN    the train module (reads alpha, b, x; reads and writes beta, P)
//   OWN_PREDICT  the predict module (reads alpha, b, beta, x)
// Read data need no routing: every array's response goes to all units.
//
// The owner comes from the packet parser, which only switches it while no unit is
// running, so a unit that does not own the buses cannot disturb the arrays. The
// paper's block diagram shows the two buses but not their structure; this
// multiplexer is this design's own way of building them. Purely combinational.
module onlad_bus
  import onlad_pkg::*;
(
  input  owner_e   owner,
  input  host_wr_t host_wr,
  // train module
  input  mem_req_t tr_x_req,
  input  mem_req_t tr_alpha_req,
  input  mem_req_t tr_b_req,
  input  mem_req_t tr_beta_req,
  input  mem_req_t tr_p_req,
  // predict module
  input  mem_req_t pr_x_req,
  input  mem_req_t pr_alpha_req,
  input  mem_req_t pr_b_req,
  input  mem_req_t pr_beta_req,
  // to the arrays
  output mem_req_t x_req,
  output mem_req_t alpha_req,
  output mem_req_t b_req,
  output mem_req_t beta_req,
  output mem_req_t p_req
);

  function automatic mem_req_t host_req(input host_wr_t w, input mode_e target);
    mem_req_t r;
    r          = MEM_REQ_IDLE;
    r.we[0]    = w.valid && (w.target == target);
    r.waddr[0] = w.index;
    r.wdata[0] = w.value;
    return r;
  endfunction

  always_comb begin
    unique case (owner)
      OWN_TRAIN: begin
        x_req     = tr_x_req;
        alpha_req = tr_alpha_req;
        b_req     = tr_b_req;
        beta_req  = tr_beta_req;
        p_req     = tr_p_req;
      end
      OWN_PREDICT: begin
        x_req     = pr_x_req;
        alpha_req = pr_alpha_req;
        b_req     = pr_b_req;
        beta_req  = pr_beta_req;
        p_req     = MEM_REQ_IDLE;
      end
      default: begin
        x_req     = host_req(host_wr, MODE_INPUT);
        alpha_req = host_req(host_wr, MODE_ALPHA);
        b_req     = host_req(host_wr, MODE_B);
        beta_req  = host_req(host_wr, MODE_BETA);
        p_req     = host_req(host_wr, MODE_P);
      end
    endcase
  end

endmodule
