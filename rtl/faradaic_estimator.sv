// Faradaic current estimator: i_f = (p*ip - n*in) / M, Eq. (1) of the paper.
//
// p and n are the active-period counts of the two output streams over a
// window of M clock periods, ip and in the output-stage currents expressed
// as integer codes in any unit (the result comes out in the same unit; one
// pulse of one period is the paper's LSB, ip/M). The paper does this
// arithmetic in software; this block is this design's logic for it.
//
// How it works: on start the signed numerator p*ip - n*in is formed and its
// magnitude is divided by M with a restoring divider, one quotient bit per
// clock, NUM_W = W + CW + 1 bits in all. The sign is then applied, so the
// result is truncated toward zero. valid pulses for one cycle NUM_W clock
// edges after the start edge, with if_code held until the next result.
// start while busy is ignored. M = 0 gives an all-ones magnitude.
module faradaic_estimator
  import digota_pkg::*;
#(
  parameter int unsigned W  = CNT_W,   // count width
  parameter int unsigned CW = CUR_W,   // current-code width
  localparam int unsigned NUM_W = W + CW + 1
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    start,
  input  logic [W-1:0]            p_count,
  input  logic [W-1:0]            n_count,
  input  logic [W-1:0]            m_count,
  input  logic [CW-1:0]           ip_code,   // pull-up current code
  input  logic [CW-1:0]           in_code,   // pull-down current code
  output logic                    busy,
  output logic                    valid,     // one-cycle result strobe
  output logic signed [NUM_W-1:0] if_code    // estimated faradaic current
);

  typedef logic [$clog2(NUM_W)-1:0] step_t;

  logic signed [NUM_W-1:0] num;
  logic        [NUM_W-1:0] quo;
  logic        [W-1:0]     rem;   // always below den
  logic        [W-1:0]     den;
  logic                    neg;
  step_t                   step;

  // Numerator in full width: both products fit in W + CW bits.
  always_comb begin
    num = signed'(NUM_W'(p_count) * NUM_W'(ip_code))
        - signed'(NUM_W'(n_count) * NUM_W'(in_code));
  end

  // One restoring-division step.
  logic [W:0]       rem_sh;
  logic [NUM_W-1:0] quo_sh;
  logic             fits;
  always_comb begin
    rem_sh = {rem, quo[NUM_W-1]};
    quo_sh = {quo[NUM_W-2:0], 1'b0};
    fits   = (rem_sh >= {1'b0, den});
    if (fits) begin
      rem_sh    = rem_sh - {1'b0, den};
      quo_sh[0] = 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy    <= 1'b0;
      valid   <= 1'b0;
      quo     <= '0;
      rem     <= '0;
      den     <= '0;
      neg     <= 1'b0;
      step    <= '0;
      if_code <= '0;
    end else begin
      valid <= 1'b0;
      if (!busy) begin
        if (start) begin
          busy <= 1'b1;
          neg  <= num[NUM_W-1];
          quo  <= num[NUM_W-1] ? NUM_W'(-num) : NUM_W'(num);
          rem  <= '0;
          den  <= m_count;
          step <= '0;
        end
      end else begin
        quo  <= quo_sh;
        rem  <= rem_sh[W-1:0];
        step <= step + step_t'(1);
        if (step == step_t'(NUM_W - 1)) begin
          busy    <= 1'b0;
          valid   <= 1'b1;
          if_code <= neg ? -signed'(quo_sh) : signed'(quo_sh);
        end
      end
    end
  end

endmodule
