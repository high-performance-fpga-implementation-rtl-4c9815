// minibatch_ctrl: sample and mini-batch bookkeeping for SMBGD.
//
// p is the index of the next sample inside the current mini-batch and k the
// index of the mini-batch. Every advance pulse (one gradient accumulated)
// increments p; when p would reach the mini-batch size P it returns to zero
// and k is incremented. first_sample (p == 0) selects the momentum branch of
// the SMBGD rule, first_batch (held in its own register so that k may wrap)
// makes the momentum coefficient zero during the first mini-batch, as the
// method prescribes. restart returns to p = 0, k = 0, first batch; it wins
// over advance. P is a run-time input; P = 0 is treated as P = 1. Counter
// widths and the run-time P are this design's choices.
module minibatch_ctrl
  import easi_pkg::*;
#(
  parameter int unsigned PW = BATCH_W,
  parameter int unsigned KW = 32
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          restart,
  input  logic          advance,
  input  logic [PW-1:0] batch_size,
  output logic [PW-1:0] p,
  output logic [KW-1:0] k,
  output logic          first_sample,
  output logic          first_batch
);

  logic [PW-1:0] p_q;
  logic [KW-1:0] k_q;
  logic          fb_q;
  logic          last;

  // p + 1 == P, with P = 0 read as P = 1
  assign last = ({1'b0, p_q} + 1'b1 >= {1'b0, batch_size});

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      p_q  <= '0;
      k_q  <= '0;
      fb_q <= 1'b1;
    end else if (restart) begin
      p_q  <= '0;
      k_q  <= '0;
      fb_q <= 1'b1;
    end else if (advance) begin
      if (last) begin
        p_q  <= '0;
        k_q  <= k_q + 1'b1;
        fb_q <= 1'b0;
      end else begin
        p_q  <= p_q + 1'b1;
      end
    end

  assign p            = p_q;
  assign k            = k_q;
  assign first_sample = (p_q == '0);
  assign first_batch  = fb_q;

endmodule
