// tb_rnea_rtp: drives the RNEA round-trip pipeline with NT random tasks
// back to back (one per cycle, output always ready) and compares tau and
// the total link forces with the double-precision reference RNEA. It also
// checks the pipeline throughput: all NT results must arrive within
// NT + 2*NB + 8 cycles of the first input, i.e. one task per cycle.
module tb_rnea_rtp;
  import rbd_pkg::*;
  import rbd_ref_pkg::*;
  localparam int NB = 7;
  localparam int NT = 24;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic      in_valid, in_ready, out_valid, out_ready;
  rnea_in_t  in_data  [NB];
  rnea_out_t out_data [NB];

  rnea_rtp #(.NB(NB)) dut (.*);

  int checks = 0, failures = 0;
  rvn_t q [NT], qd [NT], qdd [NT];
  rfx_t fe [NT];

  function automatic real rnd(real lo, real hi);
    return lo + (hi - lo) * real'($urandom_range(0, 1000000)) / 1000000.0;
  endfunction

  initial begin
    for (int t = 0; t < NT; t++)
      for (int i = 0; i < MAXN; i++) begin
        q[t][i] = rnd(-3.1, 3.1); qd[t][i] = rnd(-2.0, 2.0); qdd[t][i] = rnd(-3.0, 3.0);
        for (int r = 0; r < 6; r++) fe[t][i][r] = (t % 3 == 0) ? rnd(-1.0, 1.0) : 0.0;
      end
  end

  // driver
  int sent = 0, got = 0, t_first = -1, t_last = 0, cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;
  always_comb begin
    in_valid = rst_n && (sent < NT);
    for (int i = 0; i < NB; i++) begin
      int t;
      t = (sent < NT) ? sent : 0;
      in_data[i].dmode = 1'b0;
      in_data[i].q   = r2fx(q[t][i]);
      in_data[i].s   = r2fx($sin(q[t][i]));
      in_data[i].c   = r2fx($cos(q[t][i]));
      in_data[i].qd  = r2fx(qd[t][i]);
      in_data[i].qdd = r2fx(qdd[t][i]);
      for (int r = 0; r < 6; r++) in_data[i].fext[r] = r2fx(fe[t][i][r]);
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
      rfx_t v, a, f;
      rnea(NB, q[got], qd[got], qdd[got], fe[got], 1'b1, tau, v, a, f);
      for (int i = 0; i < NB; i++) begin
        checks++;
        if (!close(fx2r(out_data[i].tau), tau[i], 0.01, 0.02)) begin
          failures++;
          $display("task %0d link %0d tau got %f exp %f", got, i, fx2r(out_data[i].tau), tau[i]);
        end
        for (int r = 0; r < 6; r++) begin
          checks++;
          if (!close(fx2r(out_data[i].f[r]), f[i][r], 0.01, 0.03)) failures++;
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
    $display("RNEA RTP: %0d tasks, first in at %0d, last out at %0d", NT, t_first, t_last);
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
