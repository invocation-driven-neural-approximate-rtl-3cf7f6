// mcma_controller -- decision logic between the classifier and approximator tiles.
//
// Reads the N_CLASS outputs of the multiclass classifier for one sample from
// the classifier tile's output FIFO (one word per cycle, the last word marked).
// Output c < N_APPROX is the confidence that approximator A(c+1) computes the
// sample within the error bound; output N_APPROX is the confidence that no
// approximator does. The largest output wins (ties to the lower index). The
// controller then issues one command to the approximator tile: run
// approximator c, or, for the last class, drop the sample and send it to the
// CPU. Commands are issued in sample order, one per sample, so results leave
// the approximator tile in input order. Counters report how many samples were
// sent to each approximator and to the CPU.
//
// The paper gives the function (highest confidence selects the approximator,
// otherwise the CPU); the argmax circuit, the command handshake and the class
// order are this design's choices.
module mcma_controller
  import mcma_pkg::*;
#(
  parameter int unsigned CNT_W = 32
) (
  input  logic                   clk,
  input  logic                   rst_n,
  // classifier output FIFO head
  input  logic                   cls_valid,
  input  out_word_t              cls_word,
  output logic                   cls_pop,
  // command to the approximator tile
  output logic                   cmd_valid,
  output apx_cmd_t               cmd,
  input  logic                   cmd_ready,
  // statistics
  output logic [CNT_W-1:0]       n_invoked [N_APPROX],
  output logic [CNT_W-1:0]       n_cpu
);
  logic    have_cmd_q;
  class_t  idx_q, best_q;
  word_t   best_val_q;

  // take classifier words while no decision is waiting
  assign cls_pop   = cls_valid && !have_cmd_q;
  assign cmd_valid = have_cmd_q;
  assign cmd.to_cpu = (best_q == CLASS_CPU);
  assign cmd.sel    = best_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      have_cmd_q  <= 1'b0;
      idx_q       <= '0;
      best_q      <= '0;
      best_val_q  <= '0;
      n_cpu       <= '0;
      for (int i = 0; i < N_APPROX; i++) n_invoked[i] <= '0;
    end else begin
      if (cls_pop) begin
        if (idx_q == '0 || cls_word.data > best_val_q) begin
          best_q     <= idx_q;
          best_val_q <= cls_word.data;
        end
        if (cls_word.last) begin
          idx_q      <= '0;
          have_cmd_q <= 1'b1;
        end else begin
          idx_q <= idx_q + 1'b1;
        end
      end
      if (have_cmd_q && cmd_ready) begin
        have_cmd_q <= 1'b0;
        if (best_q == CLASS_CPU) n_cpu <= n_cpu + 1'b1;
        else n_invoked[best_q] <= n_invoked[best_q] + 1'b1;
      end
    end
  end

  // the classifier must deliver exactly N_CLASS words per sample
  a_class_count: assert property (@(posedge clk) disable iff (!rst_n)
    (cls_pop && cls_word.last) |-> (idx_q == CLASS_CPU));
endmodule
