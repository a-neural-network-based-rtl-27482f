// packet_parser: receives the ONLAD core's 64-bit input packets on an AXI4-Stream
// slave port and runs the instruction each one carries. Packet layout (from the
// paper's packet-format figure): mode[63:61], index[60:32] (29-bit unsigned),
// value[31:0] (Q10.22).
//   3'b000..3'b011 update_params  alpha/beta/P/b[index] <= value   (1 cycle)
//   3'b100         update_input   x[index] <= value                (1 cycle)
//   3'b101         update_ff      alpha_i <= value                 (1 cycle)
//   3'b110         do_training    start the train module, wait for done
//   3'b111         do_prediction  start the predict module, wait for done
// Every instruction returns one output packet through packet_serializer: 0 for the
// update instructions, Success for do_training, Score for do_prediction.
//
// Timing and flow control: a packet is accepted (s_tready high) only while no
// instruction is running and the output register is free, so update packets go at
// one per cycle and a do_training/do_prediction packet stalls the input stream until
// its result has been handed to the serializer (if the output register is still
// full when the unit finishes, the result waits in P_HOLD). The parser also owns the bus
// selection (onlad_bus): the host while idle, the running unit otherwise.
//
// The instruction set and codes are the paper's; the single-outstanding-instruction
// flow control and the bus ownership scheme are this design's own.
module packet_parser
  import onlad_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  // AXI4-Stream slave
  input  logic [63:0] s_tdata,
  input  logic        s_tvalid,
  input  logic        s_tlast,
  output logic        s_tready,
  // control bus
  output host_wr_t    host_wr,
  output logic        ff_we,
  output fx_t         ff_value,
  output logic        train_start,
  input  logic        train_done,
  output logic        predict_start,
  input  logic        predict_done,
  output owner_e      owner,
  // output packets
  output logic        emit,
  output out_kind_e   emit_kind,
  output logic        emit_last,
  input  logic        out_ready
);

  typedef enum logic [1:0] { P_IDLE, P_TRAIN, P_PREDICT, P_HOLD } pstate_e;

  pstate_e state;
  in_pkt_t pkt;
  logic    accept;
  logic    last_q;
  out_kind_e kind_q;   // result waiting for a free output register (P_HOLD)

  assign pkt      = in_pkt_t'(s_tdata);
  assign s_tready = (state == P_IDLE) && out_ready;
  assign accept   = s_tvalid && s_tready;

  always_comb begin
    host_wr.valid  = accept && (pkt.mode inside {MODE_ALPHA, MODE_BETA, MODE_P, MODE_B, MODE_INPUT});
    host_wr.target = pkt.mode;
    host_wr.index  = pkt.index;
    host_wr.value  = pkt.value;
    ff_we          = accept && (pkt.mode == MODE_FF);
    ff_value       = pkt.value;
    train_start    = accept && (pkt.mode == MODE_TRAIN);
    predict_start  = accept && (pkt.mode == MODE_PREDICT);

    emit      = 1'b0;
    emit_kind = OUT_UNUSED;
    emit_last = s_tlast;
    unique case (state)
      P_IDLE: begin
        emit = accept && !(pkt.mode inside {MODE_TRAIN, MODE_PREDICT});
      end
      P_TRAIN: begin
        emit      = train_done && out_ready;
        emit_kind = OUT_SUCCESS;
        emit_last = last_q;
      end
      P_PREDICT: begin
        emit      = predict_done && out_ready;
        emit_kind = OUT_SCORE;
        emit_last = last_q;
      end
      P_HOLD: begin
        emit      = out_ready;
        emit_kind = kind_q;
        emit_last = last_q;
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= P_IDLE;
      owner  <= OWN_HOST;
      last_q <= 1'b0;
      kind_q <= OUT_UNUSED;
    end else begin
      unique case (state)
        P_IDLE: if (train_start) begin
          state  <= P_TRAIN;
          owner  <= OWN_TRAIN;
          last_q <= s_tlast;
        end else if (predict_start) begin
          state  <= P_PREDICT;
          owner  <= OWN_PREDICT;
          last_q <= s_tlast;
        end
        P_TRAIN: if (train_done) begin
          state  <= out_ready ? P_IDLE : P_HOLD;
          kind_q <= OUT_SUCCESS;
          owner  <= OWN_HOST;
        end
        P_PREDICT: if (predict_done) begin
          state  <= out_ready ? P_IDLE : P_HOLD;
          kind_q <= OUT_SCORE;
          owner  <= OWN_HOST;
        end
        P_HOLD: if (out_ready) state <= P_IDLE;
        default: state <= P_IDLE;
      endcase
    end
  end

  // An output packet is only handed over when the serializer can take it
  assert property (@(posedge clk) disable iff (!rst_n) emit |-> out_ready);
  // A packet is only accepted while idle
  assert property (@(posedge clk) disable iff (!rst_n) s_tvalid && s_tready |-> state == P_IDLE);

endmodule
