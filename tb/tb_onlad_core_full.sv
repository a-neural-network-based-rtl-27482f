// tb_onlad_core_full: end-to-end test of onlad_core at the core's default sizes (N_IN = 512, N_HID = 64), parameters untouched.
// The scenario and checks are in tb_onlad_core_body.svh.
module tb_onlad_core_full;
  import onlad_pkg::*;

  localparam int NI = 512;   // the core's default N_IN
  localparam int NH = 64;    // the core's default N_HID
  localparam int N_NORMAL = 4;

  `include "tb_onlad_core_body.svh"

  onlad_core dut (
    .clk(clk), .rst_n(rst_n),
    .s_axis_tdata(s_axis_tdata), .s_axis_tvalid(s_axis_tvalid),
    .s_axis_tlast(s_axis_tlast), .s_axis_tready(s_axis_tready),
    .m_axis_tdata(m_axis_tdata), .m_axis_tvalid(m_axis_tvalid),
    .m_axis_tlast(m_axis_tlast), .m_axis_tready(m_axis_tready)
  );

endmodule
