// tb_encode_unit: hands random result records of every function type to
// the encode module and checks the word stream: the length of each result,
// row-major order of vectors, matrices and derivative matrices (Delta-FD:
// derivatives then M^-1), out_last on the final word only, and one word per
// cycle when the output is always ready; then repeats under random stalls.
module tb_encode_unit;
  import rbd_pkg::*;
  localparam int NT = 42;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        in_valid, in_ready, out_valid, out_ready, out_last;
  result_t     in_res;
  logic [31:0] out_word;

  encode_unit dut (.*);

  int checks = 0, failures = 0, cyc = 0;
  result_t rs [NT];
  logic [31:0] ew [$];
  logic        el [$];
  initial
    for (int t = 0; t < NT; t++) begin
      result_t r;
      r = '0;
      r.fn = func_e'(t % 7);
      for (int i = 0; i < NR; i++) begin
        r.vec[i] = $urandom;
        for (int j = 0; j < NR; j++) r.mat[i][j] = $urandom;
        for (int j = 0; j < 2 * NR; j++) r.dmat[i][j] = $urandom;
      end
      rs[t] = r;
      case (r.fn)
        F_ID, F_FD: for (int i = 0; i < NR; i++) ew.push_back(r.vec[i]);
        F_M, F_MINV: for (int i = 0; i < NR; i++) for (int j = 0; j < NR; j++) ew.push_back(r.mat[i][j]);
        default: begin
          for (int i = 0; i < NR; i++) for (int j = 0; j < 2 * NR; j++) ew.push_back(r.dmat[i][j]);
          if (r.fn == F_DFD)
            for (int i = 0; i < NR; i++) for (int j = 0; j < NR; j++) ew.push_back(r.mat[i][j]);
        end
      endcase
      for (int k = 0; k < result_words(r.fn); k++) el.push_back(k == result_words(r.fn) - 1);
    end

  int sent = 0, gw = 0, phase = 0, half_w = 0, t_half = 0;
  always @(negedge clk) begin
    in_valid  = rst_n && sent < NT;
    in_res    = rs[sent % NT];
    out_ready = (phase == 0) || ($urandom_range(0, 2) != 0);
  end
  always @(posedge clk) if (rst_n) begin
    cyc++;
    if (in_valid && in_ready) sent++;
    if (out_valid && out_ready) begin
      checks++;
      if (out_word != ew[gw] || out_last != el[gw]) begin
        failures++;
        if (failures < 10) $display("ERROR: word %0d got %h/%0d exp %h/%0d", gw, out_word, out_last, ew[gw], el[gw]);
      end
      gw++;
    end
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < NT / 2; t++) half_w += result_words(rs[t].fn) + 1;
    wait (sent == NT / 2 + 1);
    t_half = cyc;
    checks++;
    if (t_half > half_w + 2) begin failures++; $display("ERROR: %0d cycles for %0d", t_half, half_w); end
    phase = 1;
    wait (gw == ew.size());
    repeat (5) @(posedge clk);
    checks++;
    if (out_valid) begin failures++; $display("ERROR: extra words"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (40000) @(posedge clk);
    failures++; $display("ERROR: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
