// tb_onlad_core: end-to-end test of onlad_core at reduced sizes (N_IN = 16, N_HID = 8).
// The scenario and checks are in tb_onlad_core_body.svh.
module tb_onlad_core;
  import onlad_pkg::*;

  localparam int NI = 16;
  localparam int NH = 8;
  localparam int N_NORMAL = 24;

  `include "tb_onlad_core_body.svh"

  onlad_core #(.N_IN(NI), .N_HID(NH)) dut (
    .clk(clk), .rst_n(rst_n),
    .s_axis_tdata(s_axis_tdata), .s_axis_tvalid(s_axis_tvalid),
    .s_axis_tlast(s_axis_tlast), .s_axis_tready(s_axis_tready),
    .m_axis_tdata(m_axis_tdata), .m_axis_tvalid(m_axis_tvalid),
    .m_axis_tlast(m_axis_tlast), .m_axis_tready(m_axis_tready)
  );

endmodule
