// decode_unit: Decode Module. Deserialises the accelerator's input word
// stream into one task record.
//
// Stream format (one 32-bit word per transfer, valid/ready): word 0 holds
// the function type in bits [2:0] (0 ID, 1 FD, 2 M, 3 Minv, 4 Delta-ID,
// 5 Delta-FD, 6 Delta-iFD); then NB words q, NB words qd, NB words u (qdd
// for ID, Delta-ID and Delta-iFD, tau for FD and Delta-FD), 6*NB words fext
// (link by link, moment then force), and for Delta-iFD NB*NB words of M^-1,
// row by row. All values are Q16.16. Every field is sent for every type,
// which keeps one format for all functions, as the paper describes; fields a
// function does not use are ignored. The exact word order is this design's
// choice.
//
// Timing: one word per cycle; the task is presented on out_* the cycle
// after its last word and the input stalls until it has been taken.
module decode_unit
  import rbd_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  output logic        in_ready,
  input  logic [31:0] in_word,
  output logic        out_valid,
  input  logic        out_ready,
  output task_t       out_task
);
  typedef enum logic [1:0] { D_TYPE, D_BODY, D_DONE } st_e;
  st_e  st;
  int unsigned idx;
  task_t tk;

  assign in_ready  = (st != D_DONE);
  assign out_valid = (st == D_DONE);
  assign out_task  = tk;

  // field store for word number idx of the body
  function automatic task_t put(task_t t, int unsigned k, logic [31:0] w);
    task_t o;
    o = t;
    if (k < NR)                  o.q[k]                        = fx_t'(w);
    else if (k < 2 * NR)         o.qd[k - NR]                  = fx_t'(w);
    else if (k < 3 * NR)         o.u[k - 2 * NR]               = fx_t'(w);
    else if (k < 9 * NR)         o.fext[(k - 3 * NR) / 6][(k - 3 * NR) % 6] = fx_t'(w);
    else                         o.minv[(k - 9 * NR) / NR][(k - 9 * NR) % NR] = fx_t'(w);
    return o;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st  <= D_TYPE;
      idx <= 0;
      tk  <= '0;
    end else begin
      case (st)
        D_TYPE: if (in_valid) begin
          tk      <= '0;
          tk.fn   <= func_e'(in_word[2:0]);
          idx     <= 0;
          st      <= D_BODY;
        end
        D_BODY: if (in_valid) begin
          tk  <= put(tk, idx, in_word);
          idx <= idx + 1;
          if (idx == unsigned'(task_words(tk.fn) - 1)) st <= D_DONE;
        end
        default: if (out_ready) st <= D_TYPE;
      endcase
    end
  end
endmodule
