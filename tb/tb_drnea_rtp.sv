// tb_drnea_rtp: feeds the Delta-RNEA pipeline with per-link v, a, f and tau
// taken from the double-precision reference RNEA, back to back, and compares
// every entry of d tau / d[q; qd] with central finite differences of the
// reference RNEA. Every fourth task is sent in pass mode and must return
// tau unchanged and zero derivatives. Also checks one task per cycle.
module tb_drnea_rtp;
  import rbd_pkg::*;
  import rbd_ref_pkg::*;
  localparam int NB = 7;
  localparam int NT = 12;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic           in_valid, in_ready, out_valid, out_ready;
  rnea_out_t      in_data  [NB];
  fx_t            out_tau  [NB];
  fx_t [2*NB-1:0] out_dtau [NB];

  drnea_rtp #(.NB(NB)) dut (.*);

  int checks = 0, failures = 0;
  rvn_t q [NT], qd [NT], qdd [NT];
  rfx_t fe [NT];

  function automatic real rnd(real lo, real hi);
    return lo + (hi - lo) * real'($urandom_range(0, 1000000)) / 1000000.0;
  endfunction

  initial begin
    for (int t = 0; t < NT; t++)
      for (int i = 0; i < MAXN; i++) begin
        q[t][i] = rnd(-3.0, 3.0); qd[t][i] = rnd(-1.5, 1.5); qdd[t][i] = rnd(-2.0, 2.0);
        for (int r = 0; r < 6; r++) fe[t][i][r] = 0.0;
      end
  end

  int sent = 0, got = 0, t_first = -1, t_last = 0, cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;
  always_comb begin
    rvn_t tau;
    rfx_t v, a, f;
    int   t;
    t = (sent < NT) ? sent : 0;
    rnea(NB, q[t], qd[t], qdd[t], fe[t], 1'b1, tau, v, a, f);
    in_valid = rst_n && (sent < NT);
    for (int i = 0; i < NB; i++) begin
      in_data[i].dmode = (t % 4 != 3);
      in_data[i].q   = r2fx(q[t][i]);
      in_data[i].s   = r2fx($sin(q[t][i]));
      in_data[i].c   = r2fx($cos(q[t][i]));
      in_data[i].qd  = r2fx(qd[t][i]);
      in_data[i].tau = r2fx(tau[i]);
      for (int r = 0; r < 6; r++) begin
        in_data[i].v[r] = r2fx(v[i][r]);
        in_data[i].a[r] = r2fx(a[i][r]);
        in_data[i].f[r] = r2fx(f[i][r]);
      end
    end
  end
  assign out_ready = 1'b1;

  always @(posedge clk) begin
    if (in_valid && in_ready) begin
      if (t_first < 0) t_first = cyc;
      sent <= sent + 1;
    end
    if (rst_n && out_valid && out_ready) begin
      rvn_t tau;
      tau = id(NB, q[got], qd[got], qdd[got], fe[got], 1'b1);
      for (int i = 0; i < NB; i++) begin
        checks++;
        if (!close(fx2r(out_tau[i]), tau[i], 0.01, 0.02)) failures++;
        for (int j = 0; j < 2 * NB; j++) begin
          real e;
          e = (got % 4 != 3) ? did(NB, q[got], qd[got], qdd[got], fe[got], i, j) : 0.0;
          checks++;
          if (!close(fx2r(out_dtau[i][j]), e, 0.02, 0.05)) begin
            failures++;
            if (failures < 20)
              $display("task %0d dtau[%0d][%0d] got %f exp %f", got, i, j, fx2r(out_dtau[i][j]), e);
          end
        end
      end
      got++;
      t_last = cyc;
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (got == NT);
    @(posedge clk);
    checks++;
    if (t_last - t_first > NT + 2 * NB + 8) begin
      failures++;
      $display("throughput: %0d cycles for %0d tasks", t_last - t_first, NT);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
