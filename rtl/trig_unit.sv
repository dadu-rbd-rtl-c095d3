// trig_unit: Global Trigonometric Module. Computes sin(q_i) and cos(q_i) for
// all NB joint angles of a task at once, so that no submodule downstream has
// to evaluate a trigonometric function.
//
// How it works: each joint has its own lane. Stage 0 folds the angle into
// [-pi/2, pi/2] (sin(pi - x) = sin x, cos(pi - x) = -cos x) and squares it.
// Stages 1..6 evaluate the truncated Taylor series of sin and cos by Horner's
// rule, one nested factor per stage,
//     sin x = x (1 - x^2/(2*3) (1 - x^2/(4*5) (1 - ... )))
//     cos x =    1 - x^2/(1*2) (1 - x^2/(3*4) (1 - ... ))
// up to the x^13 and x^12 terms; stage 7 applies the final x and the sign.
// Inside the lanes values are Q3.29 for precision; results are Q16.16.
// The paper specifies a Taylor expansion with loop unrolling and full
// pipelining; the folding, the number of terms and the internal format are
// choices of this design.
//
// Interface: in_valid/in_ready with q[NB] and a payload of type T that is
// carried alongside; out_valid/out_ready with q, sin, cos and the payload.
// Throughput one task per cycle, latency LAT = 8 cycles. The pipeline stalls
// as a whole when out_ready is low. Input angles must lie in [-pi, pi].
module trig_unit
  import rbd_pkg::*;
#(
  parameter int  NB = 7,
  parameter type T  = logic
) (
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  output logic in_ready,
  input  fx_t  in_q [NB],
  input  T     in_tag,
  output logic out_valid,
  input  logic out_ready,
  output fx_t  out_q   [NB],
  output fx_t  out_sin [NB],
  output fx_t  out_cos [NB],
  output T     out_tag
);
  localparam int LAT = 8;
  localparam int IF  = 29;                       // internal fraction bits
  typedef logic signed [31:0] ix_t;
  localparam ix_t ONE_I = ix_t'(32'sd1 <<< IF);
  localparam fx_t PI_FX = fx_t'(32'sd205887);    // pi in Q16.16
  localparam fx_t HPI_FX = fx_t'(32'sd102944);   // pi/2 in Q16.16

  // Horner coefficients 1/((2k)(2k+1)) for sin and 1/((2k-1)(2k)) for cos,
  // innermost first, Q3.29
  function automatic ix_t coef(bit is_sin, int stage);   // stage 1..6
    int k;
    longint den;
    k = 7 - stage;                                       // 6 .. 1
    den = is_sin ? longint'((2*k) * (2*k+1)) : longint'((2*k-1) * (2*k));
    return ix_t'((64'sd1 <<< IF) / den);
  endfunction

  function automatic ix_t imul(ix_t a, ix_t b);
    logic signed [63:0] p;
    p = a * b;
    return ix_t'(p >>> IF);
  endfunction

  typedef struct packed {
    fx_t q;
    ix_t x, x2, ts, tc;
    logic neg_cos;
  } lane_t;

  lane_t st    [LAT][NB];
  T      tag_q [LAT];
  logic  vld   [LAT];

  wire advance = !vld[LAT-1] || out_ready;
  assign in_ready = advance;

  // stage 0: fold and square
  lane_t s0 [NB];
  always_comb begin
    for (int l = 0; l < NB; l++) begin
      fx_t xr;
      logic nc;
      if (in_q[l] > HPI_FX)       begin xr = PI_FX - in_q[l];  nc = 1'b1; end
      else if (in_q[l] < -HPI_FX) begin xr = -PI_FX - in_q[l]; nc = 1'b1; end
      else                        begin xr = in_q[l];          nc = 1'b0; end
      s0[l].q       = in_q[l];
      s0[l].x       = ix_t'(xr) <<< (IF - FRAC);
      s0[l].x2      = imul(ix_t'(xr) <<< (IF - FRAC), ix_t'(xr) <<< (IF - FRAC));
      s0[l].ts      = ONE_I;
      s0[l].tc      = ONE_I;
      s0[l].neg_cos = nc;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < LAT; s++) vld[s] <= 1'b0;
    end else if (advance) begin
      vld[0] <= in_valid;
      for (int s = 1; s < LAT; s++) vld[s] <= vld[s-1];
    end
  end

  always_ff @(posedge clk) begin
    if (advance) begin
      st[0]    <= s0;
      tag_q[0] <= in_tag;
      for (int s = 1; s < LAT; s++) begin
        tag_q[s] <= tag_q[s-1];
        for (int l = 0; l < NB; l++) begin
          st[s][l] <= st[s-1][l];
          if (s <= 6) begin
            // one Horner step: t = 1 - x^2 * coef * t
            st[s][l].ts <= ONE_I - imul(imul(st[s-1][l].x2, coef(1'b1, s)), st[s-1][l].ts);
            st[s][l].tc <= ONE_I - imul(imul(st[s-1][l].x2, coef(1'b0, s)), st[s-1][l].tc);
          end else begin
            st[s][l].ts <= imul(st[s-1][l].x, st[s-1][l].ts);
            st[s][l].tc <= st[s-1][l].neg_cos ? -st[s-1][l].tc : st[s-1][l].tc;
          end
        end
      end
    end
  end

  assign out_valid = vld[LAT-1];
  assign out_tag   = tag_q[LAT-1];
  always_comb begin
    for (int l = 0; l < NB; l++) begin
      out_q[l]   = st[LAT-1][l].q;
      out_sin[l] = fx_t'(st[LAT-1][l].ts >>> (IF - FRAC));
      out_cos[l] = fx_t'(st[LAT-1][l].tc >>> (IF - FRAC));
    end
  end
endmodule
