// param_buffer: the ONLAD core's Parameter Buffer. It holds the four model
// parameters as row-major flattened arrays of Q10.22 words, as the paper does:
//   alpha  input weight,  N_IN  x N_HID   (random, loaded once)
//   beta   output weight, N_HID x N_IN    (updated by every training step)
//   P      N_HID x N_HID                  (updated by every training step)
//   b      hidden bias,   N_HID           (random, loaded once)
// S_parameter = N_HID^2 + (2*N_IN + 1)*N_HID words in all, the paper's count.
//
// Each array is an onlad_ram with two read and two write lanes and same-cycle read
// data; which unit drives the request ports (host writes, train or predict module)
// is chosen outside, in onlad_bus. Nothing is reset: the host loads every parameter
// with update_params packets before the first training or prediction.
module param_buffer
  import onlad_pkg::*;
#(
  parameter int N_IN  = 512,
  parameter int N_HID = 64
) (
  input  logic     clk,
  input  mem_req_t alpha_req,
  output mem_rsp_t alpha_rsp,
  input  mem_req_t beta_req,
  output mem_rsp_t beta_rsp,
  input  mem_req_t p_req,
  output mem_rsp_t p_rsp,
  input  mem_req_t b_req,
  output mem_rsp_t b_rsp
);

  onlad_ram #(.DEPTH(N_IN * N_HID))  u_alpha (.clk(clk), .req(alpha_req), .rsp(alpha_rsp));
  onlad_ram #(.DEPTH(N_HID * N_IN))  u_beta  (.clk(clk), .req(beta_req),  .rsp(beta_rsp));
  onlad_ram #(.DEPTH(N_HID * N_HID)) u_p     (.clk(clk), .req(p_req),     .rsp(p_rsp));
  onlad_ram #(.DEPTH(N_HID))         u_b     (.clk(clk), .req(b_req),     .rsp(b_rsp));

endmodule
