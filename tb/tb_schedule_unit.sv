// tb_schedule_unit: gives the schedule module a stream of descriptors of
// every function type (and both Delta-FD stages) together with random
// pipeline results arriving with random delays, and checks each result:
// tau and d tau/du passed through, M / M^-1 mirrored from upper-triangle
// rows, qdd = M^-1 (tau - C), d qdd/du = -M^-1 d tau/du, and for the first
// Delta-FD stage the task handed to feedback carrying qdd and M^-1.
// Also checks the cycle count of each job, 2 + number of product columns.
module tb_schedule_unit;
  import rbd_pkg::*;
  import rbd_ref_pkg::fx2r;
  import rbd_ref_pkg::r2fx;
  import rbd_ref_pkg::close;
  localparam int NJ = 80;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic    desc_valid, desc_ready, fb_valid, fb_ready, bf_valid, bf_ready;
  logic    res_valid, res_ready, fbk_valid, fbk_ready;
  desc_t   desc;
  fx_t     fb_tau [NR];
  drow_t   fb_dtau [NR];
  vecn_t   bf_row [NR];
  result_t res;
  ttask_t  fbk_task;
  logic [15:0] n_products;

  schedule_unit dut (.*);

  int checks = 0, failures = 0, cyc = 0;
  desc_t ds [NJ];
  fx_t   tau [NJ][NR];
  drow_t dt [NJ][NR];
  vecn_t rows [NJ][NR];

  function automatic real rnd(real lo, real hi);
    return lo + (hi - lo) * real'($urandom_range(0, 1000000)) / 1000000.0;
  endfunction

  initial
    for (int j = 0; j < NJ; j++) begin
      desc_t d;
      d = '0;
      d.tt.tk.fn = func_e'(j % 7);
      d.stage    = (d.tt.tk.fn == F_DFD) && j[3];
      d.needs_fb = !(d.tt.tk.fn inside {F_M, F_MINV});
      d.needs_bf = (d.tt.tk.fn inside {F_FD, F_M, F_MINV}) || (d.tt.tk.fn == F_DFD && !d.stage);
      for (int i = 0; i < NR; i++) begin
        d.tt.tk.u[i] = r2fx(rnd(-3.0, 3.0));
        d.tt.tk.q[i] = $urandom;
        for (int k = 0; k < NR; k++) begin
          d.tt.tk.minv[i][k] = r2fx(rnd(-1.0, 1.0));
          rows[j][i][k] = (k >= i) ? r2fx(rnd(-1.0, 1.0)) : fx_t'($urandom);  // lower part unused
        end
        tau[j][i] = r2fx(rnd(-3.0, 3.0));
        for (int k = 0; k < 2 * NR; k++) dt[j][i][k] = r2fx(rnd(-3.0, 3.0));
      end
      ds[j] = d;
    end

  function automatic real sym(int j, int r, int c);
    return (c >= r) ? fx2r(rows[j][r][c]) : fx2r(rows[j][c][r]);
  endfunction

  // drivers: descriptors in order, pipeline results with random gaps
  int dsent = 0, fsent = 0, bsent = 0, done = 0, phase = 0;
  int fb_j [$], bf_j [$];
  initial for (int j = 0; j < NJ; j++) begin
    if (ds[j].needs_fb) fb_j.push_back(j);
    if (ds[j].needs_bf) bf_j.push_back(j);
  end
  always @(negedge clk) begin
    desc_valid = rst_n && dsent < NJ;
    desc       = ds[dsent % NJ];
    fb_valid   = rst_n && fsent < fb_j.size() && (phase == 0 || $urandom_range(0, 2) != 0);
    bf_valid   = rst_n && bsent < bf_j.size() && (phase == 0 || $urandom_range(0, 2) != 0);
    for (int i = 0; i < NR; i++) begin
      fb_tau[i]  = tau[fb_j[fsent % fb_j.size()]][i];
      fb_dtau[i] = dt[fb_j[fsent % fb_j.size()]][i];
      bf_row[i]  = rows[bf_j[bsent % bf_j.size()]][i];
    end
    res_ready = (phase == 0) || ($urandom_range(0, 2) != 0);
    fbk_ready = (phase == 0) || ($urandom_range(0, 2) != 0);
  end

  function automatic void check(int j, result_t r, ttask_t ft, bit to_fbk);
    desc_t d;
    real   A [NR][NR];
    real   e;
    d = ds[j];
    checks++;
    if (to_fbk != (d.tt.tk.fn == F_DFD && !d.stage)) begin
      failures++; $display("ERROR: job %0d routed wrongly", j); return;
    end
    for (int i = 0; i < NR; i++)
      for (int k = 0; k < NR; k++)
        A[i][k] = (d.tt.tk.fn == F_DIFD || (d.tt.tk.fn == F_DFD && d.stage))
                  ? fx2r(d.tt.tk.minv[i][k]) : sym(j, i, k);
    if (to_fbk) begin
      checks++;
      if (ft.tk.q != d.tt.tk.q || ft.tk.fn != F_DFD) failures++;
    end else begin
      checks++;
      if (r.fn != d.tt.tk.fn) failures++;
    end
    for (int i = 0; i < NR; i++) begin
      case (d.tt.tk.fn)
        F_ID: begin checks++; if (r.vec[i] != tau[j][i]) failures++; end
        F_DID: begin checks++; if (r.dmat[i] != dt[j][i]) failures++; end
        F_M, F_MINV: for (int k = 0; k < NR; k++) begin
          checks++; if (fx2r(r.mat[i][k]) != A[i][k]) failures++;
        end
        F_FD: begin
          e = 0.0;
          for (int k = 0; k < NR; k++) e += A[i][k] * (fx2r(d.tt.tk.u[k]) - fx2r(tau[j][k]));
          checks++;
          if (!close(fx2r(r.vec[i]), e, 0.0, 1.0e-3)) begin
            failures++; $display("ERROR: job %0d qdd[%0d] %f vs %f", j, i, fx2r(r.vec[i]), e);
          end
        end
        default: if (to_fbk) begin
          e = 0.0;
          for (int k = 0; k < NR; k++) e += A[i][k] * (fx2r(d.tt.tk.u[k]) - fx2r(tau[j][k]));
          checks += 1 + NR;
          if (!close(fx2r(ft.tk.u[i]), e, 0.0, 1.0e-3)) failures++;
          for (int k = 0; k < NR; k++) if (fx2r(ft.tk.minv[i][k]) != A[i][k]) failures++;
        end else
          for (int c = 0; c < 2 * NR; c++) begin
            e = 0.0;
            for (int k = 0; k < NR; k++) e -= A[i][k] * fx2r(dt[j][k][c]);
            checks++;
            if (!close(fx2r(r.dmat[i][c]), e, 0.0, 1.0e-3)) begin
              failures++; $display("ERROR: job %0d d[%0d][%0d] %f vs %f", j, i, c, fx2r(r.dmat[i][c]), e);
            end
            if (d.tt.tk.fn == F_DFD) begin
              checks++;
              if (c < NR && fx2r(r.mat[i][c]) != A[i][c]) failures++;
            end
          end
      endcase
    end
  endfunction

  int t_take = 0, cyc_fail = 0;
  always @(posedge clk) if (rst_n) begin
    cyc++;
    if (desc_valid && desc_ready) begin dsent++; t_take = cyc; end
    if (fb_valid && fb_ready) fsent++;
    if (bf_valid && bf_ready) bsent++;
    if ((res_valid && res_ready) || (fbk_valid && fbk_ready)) begin
      int nc;
      nc = (ds[done].tt.tk.fn inside {F_FD}) || (ds[done].tt.tk.fn == F_DFD && !ds[done].stage) ? 1 :
           (ds[done].tt.tk.fn == F_DIFD || ds[done].tt.tk.fn == F_DFD) ? 2 * NR : 0;
      if (phase == 0) begin
        checks++;
        if (cyc - t_take != nc + 1) begin
          failures++; $display("ERROR: job %0d took %0d cycles, expected %0d", done, cyc - t_take + 1, nc + 2);
        end
      end
      check(done, res, fbk_task, fbk_valid);
      done++;
    end
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    wait (done == NJ / 2);
    phase = 1;
    wait (done == NJ);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("ERROR: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
