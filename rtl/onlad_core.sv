// onlad_core: top level of the ONLAD core, an on-device learning anomaly detector.
// It holds an OS-ELM autoencoder (N_IN inputs, N_HID hidden nodes, N_IN outputs)
// and, driven by 64-bit instruction packets, either scores an input vector by its
// reconstruction error or learns it with one recursive-least-squares step that also
// forgets old data through the forgetting factor alpha_i.
//
// Blocks: packet_parser (decodes packets, runs instructions, owns the buses),
// onlad_bus (control/data buses), param_buffer (alpha, beta, P, b), input_buffer (x),
// train_module, predict_module, packet_serializer (32-bit output packets).
//
// Ports: one AXI4-Stream slave for input packets (s_axis_*, 64 bits) and one AXI4-
// Stream master for output packets (m_axis_*, 32 bits), as in the paper's board-level
// design where a DMA engine moves packets between DRAM and the core. clk is the core
// clock (100 MHz in the paper); rst_n is an asynchronous active-low reset.
//
// Latency at the defaults (N_IN = 512, N_HID = 64): about 61,780 cycles for
// do_training (0.62 ms at 100 MHz) and about 33,030 cycles for do_prediction; update
// packets take one cycle each.
module onlad_core
  import onlad_pkg::*;
#(
  parameter int N_IN  = 512,
  parameter int N_HID = 64
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [63:0] s_axis_tdata,
  input  logic        s_axis_tvalid,
  input  logic        s_axis_tlast,
  output logic        s_axis_tready,
  output logic [31:0] m_axis_tdata,
  output logic        m_axis_tvalid,
  output logic        m_axis_tlast,
  input  logic        m_axis_tready
);

  host_wr_t  host_wr;
  logic      ff_we;
  fx_t       ff_value;
  logic      train_start, train_done, train_busy, train_success;
  logic      predict_start, predict_done, predict_busy;
  fx_t       predict_score;
  owner_e    owner;
  logic      emit, emit_last, out_ready;
  out_kind_e emit_kind;

  mem_req_t tr_x_req, tr_alpha_req, tr_b_req, tr_beta_req, tr_p_req;
  mem_req_t pr_x_req, pr_alpha_req, pr_b_req, pr_beta_req;
  mem_req_t x_req, alpha_req, b_req, beta_req, p_req;
  mem_rsp_t x_rsp, alpha_rsp, b_rsp, beta_rsp, p_rsp;

  packet_parser u_parser (
    .clk          (clk),
    .rst_n        (rst_n),
    .s_tdata      (s_axis_tdata),
    .s_tvalid     (s_axis_tvalid),
    .s_tlast      (s_axis_tlast),
    .s_tready     (s_axis_tready),
    .host_wr      (host_wr),
    .ff_we        (ff_we),
    .ff_value     (ff_value),
    .train_start  (train_start),
    .train_done   (train_done),
    .predict_start(predict_start),
    .predict_done (predict_done),
    .owner        (owner),
    .emit         (emit),
    .emit_kind    (emit_kind),
    .emit_last    (emit_last),
    .out_ready    (out_ready)
  );

  onlad_bus u_bus (
    .owner       (owner),
    .host_wr     (host_wr),
    .tr_x_req    (tr_x_req),
    .tr_alpha_req(tr_alpha_req),
    .tr_b_req    (tr_b_req),
    .tr_beta_req (tr_beta_req),
    .tr_p_req    (tr_p_req),
    .pr_x_req    (pr_x_req),
    .pr_alpha_req(pr_alpha_req),
    .pr_b_req    (pr_b_req),
    .pr_beta_req (pr_beta_req),
    .x_req       (x_req),
    .alpha_req   (alpha_req),
    .b_req       (b_req),
    .beta_req    (beta_req),
    .p_req       (p_req)
  );

  param_buffer #(.N_IN(N_IN), .N_HID(N_HID)) u_params (
    .clk      (clk),
    .alpha_req(alpha_req),
    .alpha_rsp(alpha_rsp),
    .beta_req (beta_req),
    .beta_rsp (beta_rsp),
    .p_req    (p_req),
    .p_rsp    (p_rsp),
    .b_req    (b_req),
    .b_rsp    (b_rsp)
  );

  input_buffer #(.N_IN(N_IN)) u_input (
    .clk  (clk),
    .x_req(x_req),
    .x_rsp(x_rsp)
  );

  train_module #(.N_IN(N_IN), .N_HID(N_HID)) u_train (
    .clk      (clk),
    .rst_n    (rst_n),
    .ff_we    (ff_we),
    .ff_value (ff_value),
    .start    (train_start),
    .busy     (train_busy),
    .done     (train_done),
    .success  (train_success),
    .x_req    (tr_x_req),
    .x_rsp    (x_rsp),
    .alpha_req(tr_alpha_req),
    .alpha_rsp(alpha_rsp),
    .b_req    (tr_b_req),
    .b_rsp    (b_rsp),
    .beta_req (tr_beta_req),
    .beta_rsp (beta_rsp),
    .p_req    (tr_p_req),
    .p_rsp    (p_rsp)
  );

  predict_module #(.N_IN(N_IN), .N_HID(N_HID)) u_predict (
    .clk      (clk),
    .rst_n    (rst_n),
    .start    (predict_start),
    .busy     (predict_busy),
    .done     (predict_done),
    .score    (predict_score),
    .x_req    (pr_x_req),
    .x_rsp    (x_rsp),
    .alpha_req(pr_alpha_req),
    .alpha_rsp(alpha_rsp),
    .b_req    (pr_b_req),
    .b_rsp    (b_rsp),
    .beta_req (pr_beta_req),
    .beta_rsp (beta_rsp)
  );

  packet_serializer u_serializer (
    .clk     (clk),
    .rst_n   (rst_n),
    .emit    (emit),
    .kind    (emit_kind),
    .last    (emit_last),
    .success (train_success),
    .score   (predict_score),
    .ready   (out_ready),
    .m_tdata (m_axis_tdata),
    .m_tvalid(m_axis_tvalid),
    .m_tlast (m_axis_tlast),
    .m_tready(m_axis_tready)
  );

  // Only one unit runs at a time, and only while it owns the buses
  assert property (@(posedge clk) disable iff (!rst_n) !(train_busy && predict_busy));
  assert property (@(posedge clk) disable iff (!rst_n) train_busy |-> owner == OWN_TRAIN);
  assert property (@(posedge clk) disable iff (!rst_n) predict_busy |-> owner == OWN_PREDICT);

endmodule
