// oeb_top -- optimal energy beamformer (OEB): finds the energy beamforming
// vector of an N-antenna transmitter from indirect feedback.
//
// The transmitter never sees the channel h.  It only learns, for each
// beamforming vector w it transmits, |h^H w|, recovered by an external
// feedback unit from the time the energy harvester needs to recharge
// before its next information transmission.  The OEB
//   1. transmits the N columns of a circulant unitary basis Q one by one
//      (Block-1, output w) and collects tau_i = |h^H Q(:,i)|;
//   2. then, N-1 times, combines the current optimal vector with the next
//      basis column: it transmits two trial combinations w1, w2 (Block-2,
//      output w12), and from their measured tau_tilde computes the relative
//      phase that maximises |h^H w| and the new optimal vector.
// That is 3N-2 probing slots.  The result w_opt equals h/||h|| up to a
// common phase factor (and 8-bit quantisation).
//
// This module holds Block-1, Block-2, the controller and the two feedback
// registers that close the loop (new optimal vector and its dot product),
// wired as in the design's system-level architecture.  Reset is synchronous,
// active low; the feedback registers reset to zero (a choice).
//
// Handshake: while w_req (or w12_req) is high, w (or w12) is the vector on
// air; the feedback unit answers with a one-cycle ack_sig together with the
// 8-bit measurement on tau_i (or tau_tilde).  done rises when w_opt is
// final and stays high until the next start.
module oeb_top
  import oeb_pkg::*;
#(
  parameter int N = N_DEF
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  cplx_t [N-1:0] q_row,     // first row of the circulant basis Q
  input  logic          ack_sig,   // measurement of the vector on air ready
  input  tau_t          tau_i,     // measurement of a basis column
  input  tau_t          tau_tilde, // measurement of w1 / w2
  output cplx_t [N-1:0] w,         // basis column on air
  output cplx_t [N-1:0] w12,       // trial combination on air
  output cplx_t [N-1:0] w_opt,     // optimal beamforming vector
  output logic          w_req,
  output logic          w12_req,
  output logic          done,
  output logic          pick_theta2 // maximiser is theta_2 (status)
);
  localparam int SW1 = (N > 1) ? $clog2(N) : 1;
  localparam int SW2 = (N > 2) ? $clog2(N - 1) : 1;

  logic           ld_rb1, ld_rb2, ld_w, ld_rb3, ld_tt, ld_th, ld_ej, ld_fb;
  logic [SW1-1:0] selm1, seld1;
  logic [SW2-1:0] selm4, selm5;
  logic           selm2, selm3, selm6, selm7, selm8, seld2, seld3, seld4;

  cplx_t [N-1:0][N-1:0] q_col;
  tau_t  [N-1:0]        tau;
  cplx_t [N-1:0]        w_optf1, w_optf2;
  fx_t                  dp_fb, dp_reg;

  oeb_controller #(.N(N)) u_ctrl (
    .clk, .rst_n, .start, .ack_sig,
    .ld_rb1, .ld_rb2, .selm1, .ld_w, .seld1, .ld_rb3,
    .selm2, .selm3, .selm4, .selm5, .selm6, .selm7, .selm8,
    .seld2, .ld_tt, .seld3, .ld_th, .seld4, .ld_ej, .ld_fb,
    .w_req, .w12_req, .done
  );

  oeb_block1 #(.N(N)) u_block1 (
    .clk, .rst_n, .q_row, .ld_rb1, .ld_rb2, .selm1, .ld_w,
    .tau_i, .seld1, .ld_rb3, .q_col, .w, .tau
  );

  oeb_block2 #(.N(N)) u_block2 (
    .clk, .rst_n, .tau_tilde, .q_col, .tau,
    .w_optf2, .dot_prod_wopt(dp_reg),
    .selm2, .selm3, .selm4, .selm5, .selm6, .selm7, .selm8,
    .seld2, .ld_tt, .seld3, .ld_th, .seld4, .ld_ej,
    .w_opt, .w12, .w_optf1, .dot_prod_woptfb(dp_fb), .pick_theta2
  );

  // Feedback registers between Block-2's outputs and its MUX2 / MUX3 inputs.
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      w_optf2 <= '0;
      dp_reg  <= '0;
    end else if (ld_fb) begin
      w_optf2 <= w_optf1;
      dp_reg  <= dp_fb;
    end
  end
endmodule
