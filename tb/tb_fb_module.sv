// tb_fb_module: feeds the Forward-Backward module (RNEA followed by
// Delta-RNEA) with random q, qd, qdd and external forces, back to back, and
// compares tau with the double-precision reference RNEA and every entry of
// d tau / d[q; qd] with central finite differences. Every fourth task is
// sent in pass mode (plain RNEA) and must return zero derivatives. Checks
// one task per cycle and random output back-pressure.
module tb_fb_module;
  import rbd_pkg::*;
  import rbd_ref_pkg::*;
  localparam int NB = 7;
  localparam int NT = 12;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic           in_valid, in_ready, out_valid, out_ready;
  rnea_in_t       in_data  [NB];
  fx_t            out_tau  [NB];
  fx_t [2*NB-1:0] out_dtau [NB];

  fb_module #(.NB(NB)) dut (.*);

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
        for (int r = 0; r < 6; r++) fe[t][i][r] = t[0] ? rnd(-1.0, 1.0) : 0.0;
      end
  end

  int sent = 0, got = 0, t_first = -1, t_last = 0, cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;
  always_comb begin
    int   t;
    t = (sent < NT) ? sent : 0;
    in_valid = rst_n && (sent < NT);
    for (int i = 0; i < NB; i++) begin
      in_data[i].dmode = (t % 4 != 3);
      in_data[i].q   = r2fx(q[t][i]);
      in_data[i].s   = r2fx($sin(q[t][i]));
      in_data[i].c   = r2fx($cos(q[t][i]));
      in_data[i].qd  = r2fx(qd[t][i]);
      in_data[i].qdd = r2fx(qdd[t][i]);
      for (int r = 0; r < 6; r++) in_data[i].fext[r] = r2fx(fe[t][i][r]);
    end
  end
  int phase = 0;
  always @(negedge clk) out_ready = (phase == 0) || ($urandom_range(0, 2) != 0);

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
    if (t_last - t_first > NT + 4 * NB + 16) begin
      failures++;
      $display("throughput: %0d cycles for %0d tasks", t_last - t_first, NT);
    end
    // second round with random back-pressure
    phase = 1; sent = 0; got = 0;
    wait (got == NT);
    @(posedge clk);
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
