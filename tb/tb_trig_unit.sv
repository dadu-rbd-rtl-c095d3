// tb_trig_unit: sends random angle vectors in [-pi, pi] (plus the end
// points) with a tag, compares sin and cos with the real-valued functions,
// checks that q and the tag travel with the result, that the latency is
// LAT = 8 cycles at full rate, and that results survive random stalls.
module tb_trig_unit;
  import rbd_pkg::*;
  import rbd_ref_pkg::fx2r;
  import rbd_ref_pkg::r2fx;
  import rbd_ref_pkg::close;
  localparam int NB = 7;
  localparam int NT = 200;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid, in_ready, out_valid, out_ready;
  fx_t  in_q [NB], out_q [NB], out_sin [NB], out_cos [NB];
  logic [15:0] in_tag, out_tag;

  trig_unit #(.NB(NB), .T(logic [15:0])) dut (.*);

  int checks = 0, failures = 0, cyc = 0;
  real ang [NT][NB];
  initial
    for (int t = 0; t < NT; t++)
      for (int i = 0; i < NB; i++)
        ang[t][i] = (t == 0) ? 3.14159 : (t == 1) ? -3.14159 :
                    -3.14159 + 6.28318 * real'($urandom_range(0, 100000)) / 100000.0;

  int sent = 0, got = 0, phase = 0, t_in0 = -1, t_out0 = -1;
  always @(negedge clk) begin
    in_valid  = rst_n && sent < NT && (phase == 0 || $urandom_range(0, 1) == 1);
    for (int i = 0; i < NB; i++) in_q[i] = r2fx(ang[sent % NT][i]);
    in_tag    = 16'(sent);
    out_ready = (phase == 0) || ($urandom_range(0, 2) != 0);
  end
  always @(posedge clk) if (rst_n) begin
    cyc++;
    if (in_valid && in_ready) begin if (t_in0 < 0) t_in0 = cyc; sent++; end
    if (out_valid && out_ready) begin
      if (t_out0 < 0) t_out0 = cyc;
      checks++;
      if (out_tag != 16'(got)) begin failures++; $display("ERROR: tag %0d for %0d", out_tag, got); end
      for (int i = 0; i < NB; i++) begin
        real qq;
        qq = fx2r(r2fx(ang[got][i]));
        checks += 3;
        if (out_q[i] != r2fx(ang[got][i])) failures++;
        if (!close(fx2r(out_sin[i]), $sin(qq), 0.0, 2.0e-4)) begin
          failures++; $display("ERROR: sin(%f) = %f", qq, fx2r(out_sin[i]));
        end
        if (!close(fx2r(out_cos[i]), $cos(qq), 0.0, 2.0e-4)) begin
          failures++; $display("ERROR: cos(%f) = %f", qq, fx2r(out_cos[i]));
        end
      end
      got++;
    end
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    wait (got == 50);
    checks++;
    if (t_out0 - t_in0 != 8) begin failures++; $display("ERROR: latency %0d", t_out0 - t_in0); end
    phase = 1;
    wait (got == NT);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("ERROR: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
