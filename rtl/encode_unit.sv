// encode_unit: Encode Module. Serialises one result record into the 32-bit
// output word stream, one word per cycle, and flags the last word of each
// result. Word order (row-major throughout):
//   ID, FD          tau or qdd                      NB words
//   M, Minv         M or M^-1                       NB*NB words
//   Delta-ID        d tau/dq | d tau/dqd  rows      2*NB*NB words
//   Delta-iFD       d qdd/dq | d qdd/dqd  rows      2*NB*NB words
//   Delta-FD        d qdd/d[q;qd] rows, then M^-1   3*NB*NB words
// Timing: the record is taken when the previous one has been sent; a result
// of W words occupies the output for W cycles when out_ready stays high.
// The word format and order are this design's choices; the paper only says
// the module "packs the result into the output stream".
module encode_unit
  import rbd_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  output logic        in_ready,
  input  result_t     in_res,
  output logic        out_valid,
  input  logic        out_ready,
  output logic [31:0] out_word,
  output logic        out_last
);
  result_t     r_q;
  logic        busy;
  int unsigned idx, nw;

  assign in_ready  = !busy;
  assign out_valid = busy;
  assign out_last  = busy && (idx == nw - 1);

  // word idx of the current record
  always_comb begin
    int unsigned i, j;
    i = 0; j = 0;
    out_word = '0;
    case (r_q.fn)
      F_ID, F_FD: out_word = r_q.vec[idx % NR];
      F_M, F_MINV: begin
        i = idx / NR; j = idx % NR;
        out_word = r_q.mat[i][j];
      end
      default: begin
        if (idx < 2 * NR * NR) begin
          i = idx / (2 * NR); j = idx % (2 * NR);
          out_word = r_q.dmat[i][j];
        end else begin
          i = (idx - 2 * NR * NR) / NR; j = (idx - 2 * NR * NR) % NR;
          out_word = r_q.mat[i][j];
        end
      end
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0;
      idx  <= 0;
      nw   <= 0;
      r_q  <= '0;
    end else if (!busy) begin
      if (in_valid) begin
        r_q  <= in_res;
        nw   <= result_words(in_res.fn);
        idx  <= 0;
        busy <= 1'b1;
      end
    end else if (out_ready) begin
      if (idx == nw - 1) busy <= 1'b0;
      idx <= idx + 1;
    end
  end
endmodule
