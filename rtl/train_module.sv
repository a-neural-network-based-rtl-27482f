// train_module: one sequential-learning step of ONLAD (OS-ELM autoencoder, batch
// size 1, with the forgetting factor alpha_i), as the ten-step processing flow of the
// paper's Train Module:
//
//   h  = G(x*alpha + b)           (G = identity)
//   O1 = P / alpha_i^2            O2 = O1 * h^T        O3 = 1 + h * O2
//   if O3 < epsilon: stop, Success = 1 (P and beta are left unchanged)
//   O4 = h * O1                   O5 = O2 * O4         P  = O1 - O5 / O3
//   O6 = P * h^T                  O7 = h * beta        O8 = x - O7
//   beta = beta + O6 * O8         Success = 0
//
// Each step is one loop nest run in order. Every matrix operation uses LANES (2)
// multipliers, so a step over K elements or K multiply-accumulates takes K/2 cycles;
// a dot product keeps its partial sum in a wide accumulator and rounds once at the
// end. A whole step takes
//   cycles = 3*N_IN*N_HID/2 + 6*N_HID^2/2 + N_HID/2 + N_IN/2 + RECIP_CYCLES + small
// which is the paper's iteration count 4*N^2 + (3n+1)*N divided by two lanes, plus the
// reciprocal. The intermediate results h, O1..O8 live in local arrays (the paper
// sizes them at 2*N_HID^2 + 4*N_HID + 2*N_IN + 1 words).
//
// Interface: pulse start; busy stays high until done pulses for one cycle; success
// then holds the result of the epsilon test (1 = training interrupted). alpha/b/beta/P
// are row-major arrays in the parameter buffer (alpha is N_IN x N_HID, beta is
// N_HID x N_IN, P is N_HID x N_HID) and x is the input buffer, all reached through
// mem_req_t/mem_rsp_t ports with same-cycle read data. The forgetting factor alpha_i
// is held here (the paper keeps it in the Train Module) and is written by ff_we; it
// resets to 1.0.
//
// Own choices (the paper is silent): the divisions by alpha_i^2 and by O3 are made by
// one reciprocal each (fx_recip) followed by multiplications; rounding is truncation
// and all results saturate; the activation is the identity, the setting the paper
// uses for all hardware results.
module train_module
  import onlad_pkg::*;
#(
  parameter int N_IN  = 512,   // input nodes n
  parameter int N_HID = 64     // hidden nodes N~
) (
  input  logic     clk,
  input  logic     rst_n,
  // forgetting factor update (update_ff)
  input  logic     ff_we,
  input  fx_t      ff_value,
  // control
  input  logic     start,
  output logic     busy,
  output logic     done,
  output logic     success,
  // memories
  output mem_req_t x_req,
  input  mem_rsp_t x_rsp,
  output mem_req_t alpha_req,
  input  mem_rsp_t alpha_rsp,
  output mem_req_t b_req,
  input  mem_rsp_t b_rsp,
  output mem_req_t beta_req,
  input  mem_rsp_t beta_rsp,
  output mem_req_t p_req,
  input  mem_rsp_t p_rsp
);

  localparam int NI  = N_IN;
  localparam int NH  = N_HID;
  localparam int NHH = N_HID * N_HID;
  localparam int NIH = N_IN * N_HID;
  localparam int CW  = $clog2(NIH + 2);   // loop counter width

  typedef logic [CW-1:0] cnt_t;

  typedef enum logic [3:0] {
    S_IDLE, S_INVA, S_H, S_O1, S_O2, S_O3, S_CHK, S_O4, S_O5, S_WRCP,
    S_P, S_O6, S_O7, S_O8, S_BETA, S_FIN
  } state_e;

  state_e state;
  cnt_t   o, k;             // outer index, inner index (steps of LANES)
  cnt_t   outer_len, inner_len;
  acc_t   acc, acc_next;
  acc_t   prod [LANES];
  logic   last_k, last_o;

  fx_t    ff;               // alpha_i
  recip_t inv_a2;           // 1 / alpha_i^2
  recip_t inv_o3;           // 1 / O3
  fx_t    o3;

  fx_t h  [NH];
  fx_t o1 [NHH];
  fx_t o2 [NH];
  fx_t o4 [NH];
  fx_t o5 [NHH];
  fx_t o6 [NH];
  fx_t o7 [NI];
  fx_t o8 [NI];

  // reciprocal unit, shared by 1/alpha^2 and 1/O3
  logic   rcp_start, rcp_busy, rcp_done;
  fx_t    rcp_d;
  recip_t rcp_q;

  fx_recip u_recip (
    .clk  (clk),
    .rst_n(rst_n),
    .start(rcp_start),
    .d    (rcp_d),
    .busy (rcp_busy),
    .done (rcp_done),
    .q    (rcp_q)
  );

  // loop bounds per step
  always_comb begin
    outer_len = cnt_t'(1);
    inner_len = cnt_t'(LANES);
    unique case (state)
      S_H:    begin outer_len = cnt_t'(NH); inner_len = cnt_t'(NI);  end
      S_O1:   begin outer_len = cnt_t'(1);  inner_len = cnt_t'(NHH); end
      S_O2:   begin outer_len = cnt_t'(NH); inner_len = cnt_t'(NH);  end
      S_O3:   begin outer_len = cnt_t'(1);  inner_len = cnt_t'(NH);  end
      S_O4:   begin outer_len = cnt_t'(NH); inner_len = cnt_t'(NH);  end
      S_O5:   begin outer_len = cnt_t'(1);  inner_len = cnt_t'(NHH); end
      S_P:    begin outer_len = cnt_t'(1);  inner_len = cnt_t'(NHH); end
      S_O6:   begin outer_len = cnt_t'(NH); inner_len = cnt_t'(NH);  end
      S_O7:   begin outer_len = cnt_t'(NI); inner_len = cnt_t'(NH);  end
      S_O8:   begin outer_len = cnt_t'(1);  inner_len = cnt_t'(NI);  end
      S_BETA: begin outer_len = cnt_t'(1);  inner_len = cnt_t'(NIH); end
      default: ;
    endcase
    last_k = (k == inner_len - cnt_t'(LANES));
    last_o = (o == outer_len - cnt_t'(1));
  end

  // addresses and lane products
  always_comb begin
    x_req     = MEM_REQ_IDLE;
    alpha_req = MEM_REQ_IDLE;
    b_req     = MEM_REQ_IDLE;
    beta_req  = MEM_REQ_IDLE;
    p_req     = MEM_REQ_IDLE;
    for (int l = 0; l < LANES; l++) prod[l] = '0;
    unique case (state)
      S_H: begin  // h[o] = sum_k x[k] * alpha[k][o] + b[o]
        for (int l = 0; l < LANES; l++) begin
          x_req.raddr[l]     = idx_t'(k + cnt_t'(l));
          alpha_req.raddr[l] = idx_t'((k + cnt_t'(l)) * cnt_t'(NH) + o);
          prod[l]            = fx_prod(x_rsp.rdata[l], alpha_rsp.rdata[l]);
        end
        b_req.raddr[0] = idx_t'(o);
      end
      S_O1: begin  // O1 = P / alpha^2, read P
        for (int l = 0; l < LANES; l++) p_req.raddr[l] = idx_t'(k + cnt_t'(l));
      end
      S_O2: begin  // O2[o] = sum_k O1[o][k] * h[k]
        for (int l = 0; l < LANES; l++)
          prod[l] = fx_prod(o1[o * cnt_t'(NH) + k + cnt_t'(l)], h[k + cnt_t'(l)]);
      end
      S_O3: begin  // h . O2
        for (int l = 0; l < LANES; l++)
          prod[l] = fx_prod(h[k + cnt_t'(l)], o2[k + cnt_t'(l)]);
      end
      S_O4: begin  // O4[o] = sum_k h[k] * O1[k][o]
        for (int l = 0; l < LANES; l++)
          prod[l] = fx_prod(h[k + cnt_t'(l)], o1[(k + cnt_t'(l)) * cnt_t'(NH) + o]);
      end
      S_P: begin   // P = O1 - O5 / O3, written back
        for (int l = 0; l < LANES; l++) begin
          p_req.we[l]    = 1'b1;
          p_req.waddr[l] = idx_t'(k + cnt_t'(l));
          p_req.wdata[l] = fx_sub(o1[k + cnt_t'(l)], fx_mul_recip(o5[k + cnt_t'(l)], inv_o3));
        end
      end
      S_O6: begin  // O6[o] = sum_k P[o][k] * h[k]
        for (int l = 0; l < LANES; l++) begin
          p_req.raddr[l] = idx_t'(o * cnt_t'(NH) + k + cnt_t'(l));
          prod[l]        = fx_prod(p_rsp.rdata[l], h[k + cnt_t'(l)]);
        end
      end
      S_O7: begin  // O7[o] = sum_k h[k] * beta[k][o]
        for (int l = 0; l < LANES; l++) begin
          beta_req.raddr[l] = idx_t'((k + cnt_t'(l)) * cnt_t'(NI) + o);
          prod[l]           = fx_prod(h[k + cnt_t'(l)], beta_rsp.rdata[l]);
        end
      end
      S_O8: begin  // O8 = x - O7, read x
        for (int l = 0; l < LANES; l++) x_req.raddr[l] = idx_t'(k + cnt_t'(l));
      end
      S_BETA: begin  // beta[r][c] += O6[r] * O8[c], element e = r*NI + c
        for (int l = 0; l < LANES; l++) begin
          beta_req.raddr[l] = idx_t'(k + cnt_t'(l));
          beta_req.we[l]    = 1'b1;
          beta_req.waddr[l] = idx_t'(k + cnt_t'(l));
          beta_req.wdata[l] = fx_add(beta_rsp.rdata[l],
                                     fx_mul(o6[(k + cnt_t'(l)) / cnt_t'(NI)],
                                            o8[(k + cnt_t'(l)) % cnt_t'(NI)]));
        end
      end
      default: ;
    endcase
    acc_next = acc;
    for (int l = 0; l < LANES; l++) acc_next = acc_next + prod[l];
  end

  always_comb begin
    rcp_start = 1'b0;
    rcp_d     = FX_ONE;
    if (state == S_IDLE && start) begin
      rcp_start = 1'b1;
      rcp_d     = fx_mul(ff, ff);
    end else if (state == S_CHK && o3 >= FX_EPS) begin
      rcp_start = 1'b1;
      rcp_d     = o3;
    end
  end

  // the forgetting factor register
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     ff <= FX_ONE;
    else if (ff_we) ff <= ff_value;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      o       <= '0;
      k       <= '0;
      acc     <= '0;
      busy    <= 1'b0;
      done    <= 1'b0;
      success <= 1'b0;
      inv_a2  <= '0;
      inv_o3  <= '0;
      o3      <= '0;
    end else begin
      done <= 1'b0;
      // generic loop advance for the loop-nest steps
      if (state inside {S_H, S_O1, S_O2, S_O3, S_O4, S_O5, S_P, S_O6, S_O7, S_O8, S_BETA}) begin
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
          state <= S_INVA;
        end
        S_INVA: if (rcp_done) begin
          inv_a2 <= rcp_q;
          state  <= S_H;
        end
        S_H: begin
          if (last_k) begin
            h[o] <= fx_add(fx_from_acc(acc_next), b_rsp.rdata[0]);
            if (last_o) state <= S_O1;
          end
        end
        S_O1: begin
          for (int l = 0; l < LANES; l++)
            o1[k + cnt_t'(l)] <= fx_mul_recip(p_rsp.rdata[l], inv_a2);
          if (last_k) state <= S_O2;
        end
        S_O2: if (last_k) begin
          o2[o] <= fx_from_acc(acc_next);
          if (last_o) state <= S_O3;
        end
        S_O3: if (last_k) begin
          o3    <= fx_add(FX_ONE, fx_from_acc(acc_next));
          state <= S_CHK;
        end
        S_CHK: begin
          if (o3 < FX_EPS) begin
            success <= 1'b1;
            busy    <= 1'b0;
            done    <= 1'b1;
            state   <= S_IDLE;
          end else begin
            state <= S_O4;
          end
        end
        S_O4: if (last_k) begin
          o4[o] <= fx_from_acc(acc_next);
          if (last_o) state <= S_O5;
        end
        S_O5: begin  // outer product, element e = r*NH + c
          for (int l = 0; l < LANES; l++)
            o5[k + cnt_t'(l)] <= fx_mul(o2[(k + cnt_t'(l)) / cnt_t'(NH)],
                                        o4[(k + cnt_t'(l)) % cnt_t'(NH)]);
          if (last_k) state <= S_WRCP;
        end
        S_WRCP: if (!rcp_busy) begin
          inv_o3 <= rcp_q;
          state  <= S_P;
        end
        S_P: if (last_k) state <= S_O6;
        S_O6: if (last_k) begin
          o6[o] <= fx_from_acc(acc_next);
          if (last_o) state <= S_O7;
        end
        S_O7: if (last_k) begin
          o7[o] <= fx_from_acc(acc_next);
          if (last_o) state <= S_O8;
        end
        S_O8: begin
          for (int l = 0; l < LANES; l++)
            o8[k + cnt_t'(l)] <= fx_sub(x_rsp.rdata[l], o7[k + cnt_t'(l)]);
          if (last_k) state <= S_BETA;
        end
        S_BETA: if (last_k) state <= S_FIN;
        S_FIN: begin
          success <= 1'b0;
          busy    <= 1'b0;
          done    <= 1'b1;
          state   <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // Both matrix dimensions must split evenly over the lanes
  initial begin
    assert (N_IN % LANES == 0 && N_HID % LANES == 0)
      else $error("train_module: N_IN and N_HID must be multiples of %0d", LANES);
  end

endmodule
