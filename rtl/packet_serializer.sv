// packet_serializer: forms the ONLAD core's 32-bit output packets and drives the
// AXI4-Stream master port. When the packet parser signals emit, it registers one
// packet whose contents depend on the instruction that produced it:
//   OUT_UNUSED   32'b0                     (update_params, update_input, update_ff)
//   OUT_SUCCESS  32'b1 or 32'b0            (do_training, from the train module)
//   OUT_SCORE    the Q10.22 anomaly score  (do_prediction, from the predict module)
// The packet is held on m_tdata with m_tvalid high until m_tready; ready tells the
// parser that the one-entry output register is free. m_tlast copies the TLAST of the
// input packet that produced the output (this design's choice, so that a DMA transfer
// of packets gets one output transfer of equal length).
//
// The contents per instruction follow the packet-format figure; that every
// instruction returns one output packet is read from that figure, where each row has
// an output packet, "Unused" for the update instructions.
module packet_serializer
  import onlad_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        emit,
  input  out_kind_e   kind,
  input  logic        last,
  input  logic        success,
  input  fx_t         score,
  output logic        ready,
  output logic [31:0] m_tdata,
  output logic        m_tvalid,
  output logic        m_tlast,
  input  logic        m_tready
);

  assign ready = !m_tvalid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      m_tvalid <= 1'b0;
      m_tdata  <= '0;
      m_tlast  <= 1'b0;
    end else begin
      if (m_tvalid && m_tready) m_tvalid <= 1'b0;
      if (emit && ready) begin
        m_tvalid <= 1'b1;
        m_tlast  <= last;
        unique case (kind)
          OUT_SUCCESS: m_tdata <= {31'b0, success};
          OUT_SCORE:   m_tdata <= score;
          default:     m_tdata <= '0;
        endcase
      end
    end
  end

  // AXI4-Stream rule: data stays stable while valid is high and not accepted
  property p_hold;
    @(posedge clk) disable iff (!rst_n) (m_tvalid && !m_tready) |=> (m_tvalid && $stable(m_tdata));
  endproperty
  assert property (p_hold);

endmodule
