// oeb_controller -- sequencer of the optimal energy beamformer.
//
// Generates the multiplexer selects selm1..selm8, the demultiplexer
// selects seld1..seld4 and the register load enables, and steps the
// datapath through the beamforming algorithm.  Progress through a probing
// slot waits on Ack_Sig, the handshake by which the external feedback unit
// reports that the time-to-recharge of the transmitted vector has been
// measured and its tau is on the tau_i / tau_tilde input.
//
// Sequence (state names in brackets):
//   [IDLE]     start: RB-1 loads the first row of Q.
//   [RB2]      RB-2 loads the N columns.
//   for i = 0..N-1
//     [TAU_SET]  MUX-1 selects column i, the W register loads it.
//     [TAU_WAIT] w_req high; on ack_sig DeMUX1 writes tau_i into RB-3[i].
//   for k = 0..N-2 (the relative-angle loop; selm2/selm3 = (k != 0),
//   selm4 = selm5 = k are held throughout)
//     [W1]  w12_req high with w1 (selm6 = 0); on ack tau_tilde -> tt1.
//     [W2]  w12_req high with w2 (selm6 = 1); on ack tau_tilde -> tt2.
//     [TH1] [TH2]  angle CORDIC result -> theta_1, theta_2 (selm7, seld3).
//     [EJ1] [EJ2]  sin/cos CORDIC result -> e^{j theta_1}, e^{j theta_2}.
//     [UPD] ld_fb: the feedback registers take the new w_opt and dot product.
//   [OUT]  MUX2 selects the fed-back vector, the w_opt register loads it.
//   [DONE] done high; w_opt valid; a new start restarts.
// The controller's role and the named selects follow the design; the state
// sequence, the start/done/w_req/w12_req signals, the load enables and the
// one-cycle steps of TH1..UPD are this design's choices.
//
// Timing: with ack_sig answered in the first cycle of each request, a run
// takes 1 + 2N + 7(N-1) + 1 cycles from the cycle after start to the first
// cycle with done high; each cycle of delay of an ack adds one cycle.
module oeb_controller
  import oeb_pkg::*;
#(
  parameter int N   = N_DEF,
  parameter int SW1 = (N > 1) ? $clog2(N) : 1,
  parameter int SW2 = (N > 2) ? $clog2(N - 1) : 1
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           start,
  input  logic           ack_sig,
  // Block-1
  output logic           ld_rb1,
  output logic           ld_rb2,
  output logic [SW1-1:0] selm1,
  output logic           ld_w,
  output logic [SW1-1:0] seld1,
  output logic           ld_rb3,
  // Block-2
  output logic           selm2,
  output logic           selm3,
  output logic [SW2-1:0] selm4,
  output logic [SW2-1:0] selm5,
  output logic           selm6,
  output logic           selm7,
  output logic           selm8,
  output logic           seld2,
  output logic           ld_tt,
  output logic           seld3,
  output logic           ld_th,
  output logic           seld4,
  output logic           ld_ej,
  // feedback registers
  output logic           ld_fb,
  // status
  output logic           w_req,     // Block-1 vector w on air, tau awaited
  output logic           w12_req,   // Block-2 vector w1/w2 on air, tau_tilde awaited
  output logic           done
);
  typedef enum logic [3:0] {
    S_IDLE, S_RB2, S_TAU_SET, S_TAU_WAIT, S_W1, S_W2,
    S_TH1, S_TH2, S_EJ1, S_EJ2, S_UPD, S_OUT, S_DONE
  } state_t;

  state_t         state;
  logic [SW1-1:0] idx;     // basis column being probed
  logic [SW2-1:0] k;       // relative-angle loop count

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state <= S_IDLE;
      idx   <= '0;
      k     <= '0;
    end else begin
      unique case (state)
        S_IDLE:     if (start) state <= S_RB2;
        S_RB2:      begin idx <= '0; state <= S_TAU_SET; end
        S_TAU_SET:  state <= S_TAU_WAIT;
        S_TAU_WAIT: if (ack_sig) begin
                      if (32'(idx) == N - 1) begin
                        k     <= '0;
                        state <= S_W1;
                      end else begin
                        idx   <= idx + 1'b1;
                        state <= S_TAU_SET;
                      end
                    end
        S_W1:       if (ack_sig) state <= S_W2;
        S_W2:       if (ack_sig) state <= S_TH1;
        S_TH1:      state <= S_TH2;
        S_TH2:      state <= S_EJ1;
        S_EJ1:      state <= S_EJ2;
        S_EJ2:      state <= S_UPD;
        S_UPD:      if (32'(k) == N - 2) state <= S_OUT;
                    else begin
                      k     <= k + 1'b1;
                      state <= S_W1;
                    end
        S_OUT:      state <= S_DONE;
        S_DONE:     if (start) state <= S_RB2;
        default:    state <= S_IDLE;
      endcase
    end
  end

  always_comb begin
    ld_rb1  = (state == S_IDLE || state == S_DONE) && start;
    ld_rb2  = (state == S_RB2);
    selm1   = idx;
    ld_w    = (state == S_TAU_SET);
    seld1   = idx;
    w_req   = (state == S_TAU_WAIT);
    ld_rb3  = w_req && ack_sig;
    selm2   = (k != '0) || state == S_OUT || state == S_DONE;
    selm3   = (k != '0);
    selm4   = k;
    selm5   = k;
    selm6   = (state == S_W2);
    w12_req = (state == S_W1) || (state == S_W2);
    seld2   = (state == S_W2);
    ld_tt   = w12_req && ack_sig;
    selm7   = (state == S_TH2);
    seld3   = selm7;
    ld_th   = (state == S_TH1) || (state == S_TH2);
    selm8   = (state == S_EJ2);
    seld4   = selm8;
    ld_ej   = (state == S_EJ1) || (state == S_EJ2);
    ld_fb   = (state == S_UPD);
    done    = (state == S_DONE);
  end

  // Ack_Sig is only meaningful while a measurement is awaited.
  a_ack_when_req : assert property (@(posedge clk) disable iff (!rst_n)
                                    ack_sig |-> (w_req || w12_req));
endmodule
