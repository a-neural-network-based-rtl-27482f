// predict_module: anomaly score of the vector in the input buffer, following the
// paper's three-step Predict Module flow:
//
//   h     = G(x*alpha + b)        (G = identity)
//   O1    = h * beta              (the reconstruction of x)
//   score = L(x, O1) = (1/n) * sum_c (x[c] - O1[c])^2   (mean squared error)
//
// Like the train module it runs each step as a loop nest on LANES (2) multipliers,
// with a wide accumulator per dot product. A prediction takes
//   cycles = N_IN*N_HID/2 (h) + N_IN*N_HID/2 (O1) + N_IN/2 (loss) + 2
// i.e. the paper's iteration count 2*n*N divided by two lanes, plus the loss.
// The local stores h (N_HID words) and O1 (N_IN words) are the paper's
// S_predict = N + n.
//
// Interface: pulse start; busy is high until done pulses for one cycle; score then
// holds the result (Q10.22). It reads alpha, b and beta from the parameter buffer and
// x from the input buffer through mem_req_t/mem_rsp_t ports with same-cycle data.
//
// Own choices: the mean divides the wide squared-error sum by N_IN before the one
// final rounding; the activation is the identity as in the paper's hardware results.
module predict_module
  import onlad_pkg::*;
#(
  parameter int N_IN  = 512,
  parameter int N_HID = 64
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     start,
  output logic     busy,
  output logic     done,
  output fx_t      score,
  output mem_req_t x_req,
  input  mem_rsp_t x_rsp,
  output mem_req_t alpha_req,
  input  mem_rsp_t alpha_rsp,
  output mem_req_t b_req,
  input  mem_rsp_t b_rsp,
  output mem_req_t beta_req,
  input  mem_rsp_t beta_rsp
);

  localparam int NI  = N_IN;
  localparam int NH  = N_HID;
  localparam int CW  = $clog2(N_IN * N_HID + 2);

  typedef logic [CW-1:0] cnt_t;

  typedef enum logic [2:0] { S_IDLE, S_H, S_O1, S_L, S_FIN } state_e;

  state_e state;
  cnt_t   o, k, outer_len, inner_len;
  logic   last_k, last_o;
  acc_t   acc, acc_next;
  acc_t   prod [LANES];
  fx_t    diff [LANES];

  fx_t h  [NH];
  fx_t o1 [NI];

  always_comb begin
    outer_len = cnt_t'(1);
    inner_len = cnt_t'(LANES);
    unique case (state)
      S_H:  begin outer_len = cnt_t'(NH); inner_len = cnt_t'(NI); end
      S_O1: begin outer_len = cnt_t'(NI); inner_len = cnt_t'(NH); end
      S_L:  begin outer_len = cnt_t'(1);  inner_len = cnt_t'(NI); end
      default: ;
    endcase
    last_k = (k == inner_len - cnt_t'(LANES));
    last_o = (o == outer_len - cnt_t'(1));
  end

  always_comb begin
    x_req     = MEM_REQ_IDLE;
    alpha_req = MEM_REQ_IDLE;
    b_req     = MEM_REQ_IDLE;
    beta_req  = MEM_REQ_IDLE;
    for (int l = 0; l < LANES; l++) begin
      prod[l] = '0;
      diff[l] = '0;
    end
    unique case (state)
      S_H: begin   // h[o] = sum_k x[k] * alpha[k][o] + b[o]
        for (int l = 0; l < LANES; l++) begin
          x_req.raddr[l]     = idx_t'(k + cnt_t'(l));
          alpha_req.raddr[l] = idx_t'((k + cnt_t'(l)) * cnt_t'(NH) + o);
          prod[l]            = fx_prod(x_rsp.rdata[l], alpha_rsp.rdata[l]);
        end
        b_req.raddr[0] = idx_t'(o);
      end
      S_O1: begin  // O1[o] = sum_k h[k] * beta[k][o]
        for (int l = 0; l < LANES; l++) begin
          beta_req.raddr[l] = idx_t'((k + cnt_t'(l)) * cnt_t'(NI) + o);
          prod[l]           = fx_prod(h[k + cnt_t'(l)], beta_rsp.rdata[l]);
        end
      end
      S_L: begin   // sum of (x - O1)^2
        for (int l = 0; l < LANES; l++) begin
          x_req.raddr[l] = idx_t'(k + cnt_t'(l));
          diff[l]        = fx_sub(x_rsp.rdata[l], o1[k + cnt_t'(l)]);
          prod[l]        = fx_prod(diff[l], diff[l]);
        end
      end
      default: ;
    endcase
    acc_next = acc;
    for (int l = 0; l < LANES; l++) acc_next = acc_next + prod[l];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      o     <= '0;
      k     <= '0;
      acc   <= '0;
      busy  <= 1'b0;
      done  <= 1'b0;
      score <= '0;
    end else begin
      done <= 1'b0;
      if (state inside {S_H, S_O1, S_L}) begin
        if (last_k) begin
          k   <= '0;
          acc <= '0;
          if (last_o) o <= '0;
          else        o <= o + cnt_t'(1);
        end else begin
          k   <= k + cnt_t'(LANES);
          acc <= acc_next;
        end
      end
      unique case (state)
        S_IDLE: if (start) begin
          busy  <= 1'b1;
          state <= S_H;
        end
        S_H: if (last_k) begin
          h[o] <= fx_add(fx_from_acc(acc_next), b_rsp.rdata[0]);
          if (last_o) state <= S_O1;
        end
        S_O1: if (last_k) begin
          o1[o] <= fx_from_acc(acc_next);
          if (last_o) state <= S_L;
        end
        S_L: if (last_k) begin
          score <= fx_from_acc(acc_next / acc_t'(NI));
          state <= S_FIN;
        end
        S_FIN: begin
          busy  <= 1'b0;
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  initial begin
    assert (N_IN % LANES == 0 && N_HID % LANES == 0)
      else $error("predict_module: N_IN and N_HID must be multiples of %0d", LANES);
  end

endmodule
