// fx_recip: sequential reciprocal unit. For a positive Q10.22 divisor d it returns
// q = floor(2^44 / d), i.e. 1/d as a Q26.22 number (RECIP_W bits), by restoring
// long division, one quotient bit per clock (45 cycles from start to done).
//
// Interface: pulse start for one cycle with d stable; done pulses for one cycle when
// q is valid, and q holds until the next start. A divisor <= 0 returns the largest
// positive value (the train module only divides by alpha^2 > 0 and by O3 >= epsilon).
//
// The train module uses it twice per training step, for 1/alpha^2 and for 1/O3; the
// paper does not describe how the division is built, so this unit is this design's own.
module fx_recip
  import onlad_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  input  logic   start,
  input  fx_t    d,
  output logic   busy,
  output logic   done,
  output recip_t q
);

  localparam int NUM_BITS = 2 * FX_FRAC + 1;          // 2^44 has 45 bits
  localparam logic [NUM_BITS-1:0] NUMER = {1'b1, {(NUM_BITS-1){1'b0}}};

  logic [FX_W:0]            rem;      // one bit wider than the divisor
  logic [FX_W-1:0]          dv;
  logic [RECIP_W-1:0]       quo;
  logic [$clog2(NUM_BITS+1)-1:0] bitn;
  logic [FX_W:0]            shifted;

  always_comb shifted = {rem[FX_W-1:0], NUMER[bitn]};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0;
      done <= 1'b0;
      rem  <= '0;
      dv   <= '0;
      quo  <= '0;
      bitn <= '0;
      q    <= '0;
    end else begin
      done <= 1'b0;
      if (start) begin
        if (d <= 0) begin
          q    <= {1'b0, {(RECIP_W-1){1'b1}}};
          done <= 1'b1;
          busy <= 1'b0;
        end else begin
          busy <= 1'b1;
          rem  <= '0;
          dv   <= d;
          quo  <= '0;
          bitn <= ($bits(bitn))'(NUM_BITS - 1);
        end
      end else if (busy) begin
        if (shifted >= {1'b0, dv}) begin
          rem <= shifted - {1'b0, dv};
          quo <= {quo[RECIP_W-2:0], 1'b1};
        end else begin
          rem <= shifted;
          quo <= {quo[RECIP_W-2:0], 1'b0};
        end
        if (bitn == '0) begin
          busy <= 1'b0;
          done <= 1'b1;
          q    <= (shifted >= {1'b0, dv}) ? {quo[RECIP_W-2:0], 1'b1} : {quo[RECIP_W-2:0], 1'b0};
        end else begin
          bitn <= bitn - 1'b1;
        end
      end
    end
  end

endmodule
