// schedule_unit: Schedule Module. Collects the results of the two pipelines
// for the task at the head of the descriptor queue, finishes the functions
// that need a final matrix product, and routes the result to the encode
// module or, for the first stage of Delta-FD, to the feedback module.
//
// The final products of FD, Delta-FD and Delta-iFD all have the unified form
// A (x - y) of the paper (Fig. 12c), done by one shared unit that produces
// one NB-entry column per cycle with NB*NB multipliers:
//   FD, Delta-FD stage 0 : qdd      = M^-1 (tau - C)     1 column
//   Delta-iFD            : d qdd/du = M^-1 (0 - d tau/du) 2*NB columns
//   Delta-FD stage 1     : d qdd/du = M^-1 (0 - d tau/du) 2*NB columns
// M^-1 comes from the MMinvGen pipeline (FD, Delta-FD stage 0), from the
// task input (Delta-iFD) or from the feedback path (Delta-FD stage 1).
// Matrices from MMinvGen arrive as upper-triangle rows and are mirrored.
//
// FSM: S_WAIT (head descriptor and the results it needs) -> S_MUL (one
// column per cycle, if any) -> S_OUT (hand to encode) or S_FBK (hand to
// feedback). Latency 2 cycles plus one per product column. The FSM and
// the single shared A(x - y) unit are this design's choices.
module schedule_unit
  import rbd_pkg::*;
(
  input  logic           clk,
  input  logic           rst_n,
  input  logic           desc_valid,
  output logic           desc_ready,
  input  desc_t          desc,
  input  logic           fb_valid,
  output logic           fb_ready,
  input  fx_t            fb_tau  [NB_ROBOT],
  input  drow_t          fb_dtau [NB_ROBOT],
  input  logic           bf_valid,
  output logic           bf_ready,
  input  vecn_t          bf_row  [NB_ROBOT],
  output logic           res_valid,
  input  logic           res_ready,
  output result_t        res,
  output logic           fbk_valid,
  input  logic           fbk_ready,
  output ttask_t         fbk_task,
  // activity counters for observation
  output logic [15:0]    n_products
);
  typedef enum logic [1:0] { S_WAIT, S_MUL, S_OUT, S_FBK } st_e;
  st_e    st;
  desc_t  d_q;
  matn_t  a_q;                 // A of A(x - y)
  vecn_t  y_q;                 // y (C for FD, else 0)
  dmat_t  x_q;                 // x column (u), or the y columns (d tau/du)
  logic   neg;                 // 1: the columns of x_q are y, x = 0
  int unsigned col, ncol;
  result_t r_q;

  wire head_ok = desc_valid &&
                 (!desc.needs_fb || fb_valid) && (!desc.needs_bf || bf_valid);
  wire take = (st == S_WAIT) && head_ok;
  assign desc_ready = take;
  assign fb_ready   = take && desc.needs_fb;
  assign bf_ready   = take && desc.needs_bf;

  // shared A (x - y) unit, one column
  vecn_t prod;
  always_comb begin
    for (int i = 0; i < NR; i++) begin
      prod[i] = '0;
      for (int k = 0; k < NR; k++)
        prod[i] = prod[i] + fx_mul(a_q[i][k], neg ? -x_q[k][col] : x_q[k][col] - y_q[k]);
    end
  end

  function automatic matn_t mirror(vecn_t rows [NB_ROBOT]);
    matn_t m;
    for (int i = 0; i < NR; i++)
      for (int j = 0; j < NR; j++) m[i][j] = (j >= i) ? rows[i][j] : rows[j][i];
    return m;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st         <= S_WAIT;
      col        <= 0;
      ncol       <= 0;
      n_products <= '0;
      d_q        <= '0;
      r_q        <= '0;
      a_q        <= '0;
      x_q        <= '0;
      y_q        <= '0;
      neg        <= 1'b0;
    end else begin
      case (st)
        S_WAIT: if (take) begin
          d_q    <= desc;
          r_q    <= '0;
          r_q.fn <= desc.tt.tk.fn;
          col    <= 0;
          y_q    <= '0;
          x_q    <= '0;
          neg    <= desc.tt.tk.fn == F_DIFD || (desc.tt.tk.fn == F_DFD && desc.stage);
          st     <= S_OUT;
          case (desc.tt.tk.fn)
            F_ID:  for (int i = 0; i < NR; i++) r_q.vec[i] <= fb_tau[i];
            F_DID: for (int i = 0; i < NR; i++) r_q.dmat[i] <= fb_dtau[i];
            F_M, F_MINV: r_q.mat <= mirror(bf_row);
            F_FD: begin
              a_q  <= mirror(bf_row);
              for (int i = 0; i < NR; i++) begin
                x_q[i][0] <= desc.tt.tk.u[i];
                y_q[i]    <= fb_tau[i];
              end
              ncol <= 1;
              st   <= S_MUL;
            end
            F_DIFD: begin
              a_q  <= desc.tt.tk.minv;
              for (int i = 0; i < NR; i++) x_q[i] <= fb_dtau[i];
              ncol <= 2 * NR;
              st   <= S_MUL;
            end
            default: begin            // F_DFD
              if (!desc.stage) begin
                a_q   <= mirror(bf_row);
                r_q.mat <= mirror(bf_row);
                for (int i = 0; i < NR; i++) begin
                  x_q[i][0] <= desc.tt.tk.u[i];
                  y_q[i]    <= fb_tau[i];
                end
                ncol <= 1;
              end else begin
                a_q     <= desc.tt.tk.minv;
                r_q.mat <= desc.tt.tk.minv;
                for (int i = 0; i < NR; i++) x_q[i] <= fb_dtau[i];
                ncol <= 2 * NR;
              end
              st <= S_MUL;
            end
          endcase
        end
        S_MUL: begin
          n_products <= n_products + 1'b1;
          for (int i = 0; i < NR; i++) begin
            if (ncol == 1) r_q.vec[i] <= prod[i];
            else           r_q.dmat[i][col] <= prod[i];
          end
          col <= col + 1;
          if (col == ncol - 1)
            st <= (d_q.tt.tk.fn == F_DFD && !d_q.stage) ? S_FBK : S_OUT;
        end
        S_OUT: if (res_ready) st <= S_WAIT;
        default: if (fbk_ready) st <= S_WAIT;     // S_FBK
      endcase
    end
  end

  assign res_valid = (st == S_OUT);
  assign res       = r_q;
  assign fbk_valid = (st == S_FBK);
  always_comb begin
    fbk_task         = d_q.tt;
    fbk_task.tk.u    = r_q.vec;      // qdd of the first stage
    fbk_task.tk.minv = r_q.mat;      // M^-1 kept for the last product
  end
endmodule
