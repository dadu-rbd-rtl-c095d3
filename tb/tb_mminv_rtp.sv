// tb_mminv_rtp: sends NT random configurations back to back to the MMinvGen
// pipeline, alternating out_M and out_Minv, and compares the upper triangle
// of each result with M from the reference RNEA (column by column) or with
// its Gauss-Jordan inverse. Also checks one task per cycle.
module tb_mminv_rtp;
  import rbd_pkg::*;
  import rbd_ref_pkg::*;
  localparam int NB = 7;
  localparam int NT = 16;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic         in_valid, in_ready, out_valid, out_ready, in_inv, out_inv;
  fx_t          in_s [NB], in_c [NB];
  fx_t [NB-1:0] out_row [NB];

  mminv_rtp #(.NB(NB)) dut (.*);

  int checks = 0, failures = 0;
  rvn_t q [NT];

  function automatic real rnd(real lo, real hi);
    return lo + (hi - lo) * real'($urandom_range(0, 1000000)) / 1000000.0;
  endfunction
  initial for (int t = 0; t < NT; t++) for (int i = 0; i < MAXN; i++) q[t][i] = rnd(-3.0, 3.0);

  int sent = 0, got = 0, t_first = -1, t_last = 0, cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;
  always_comb begin
    int t;
    t = (sent < NT) ? sent : 0;
    in_valid = rst_n && (sent < NT);
    in_inv   = t[0];
    for (int i = 0; i < NB; i++) begin
      in_s[i] = r2fx($sin(q[t][i]));
      in_c[i] = r2fx($cos(q[t][i]));
    end
  end
  assign out_ready = 1'b1;

  always @(posedge clk) begin
    if (in_valid && in_ready) begin
      if (t_first < 0) t_first = cyc;
      sent <= sent + 1;
    end
    if (rst_n && out_valid && out_ready) begin
      rmn_t M, E;
      M = mass(NB, q[got]);
      E = got[0] ? inv(NB, M) : M;
      checks++;
      if (out_inv != got[0]) failures++;
      for (int i = 0; i < NB; i++)
        for (int j = i; j < NB; j++) begin
          checks++;
          if (!close(fx2r(out_row[i][j]), E[i][j], 0.02, 0.02)) begin
            failures++;
            if (failures < 20)
              $display("task %0d inv=%0d [%0d][%0d] got %f exp %f", got, got[0], i, j,
                       fx2r(out_row[i][j]), E[i][j]);
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
