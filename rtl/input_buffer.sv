// input_buffer: the ONLAD core's Input Buffer, one input vector x of N_IN Q10.22
// words (S_input = n in the paper). The host fills it element by element with
// update_input packets; the train and predict modules then read it, two elements per
// cycle. It is an onlad_ram with same-cycle read data; the port owner is chosen in
// onlad_bus. Nothing is reset.
module input_buffer
  import onlad_pkg::*;
#(
  parameter int N_IN = 512
) (
  input  logic     clk,
  input  mem_req_t x_req,
  output mem_rsp_t x_rsp
);

  onlad_ram #(.DEPTH(N_IN)) u_x (.clk(clk), .req(x_req), .rsp(x_rsp));

endmodule
