// oeb_block1 -- Block-1 of the optimal energy beamformer: basis-vector
// generation and collection of the measured tau values.
//
// The basis Q is an N x N circulant matrix, so it is fully described by its
// first row (a, b, c, d, e for N = 5).  Block-1:
//   * RB-1 buffers the first row, all N elements in one clock cycle
//     (ld_rb1);
//   * the columns are formed by plain rewiring (concatenation) of RB-1:
//     row r of column j is element (j - r) mod N of the first row, so
//     Q(:,1) = [a e d c b], Q(:,2) = [b a e d c], ...; RB-2 stores the N
//     columns (ld_rb2) and presents them in parallel to Block-2;
//   * MUX-1 (select selm1) picks one column, which is registered (ld_w) and
//     transmitted as the beamforming vector w of one probing slot;
//   * the tau value measured for that slot enters on tau_i and DeMUX1
//     (select seld1) writes it into register seld1 of RB-3 (ld_rb3); RB-3
//     presents all N tau values in parallel to Block-2.
// Register banks, multiplexers, the column wiring and the 16-bit element /
// 8-bit tau widths follow the design.  The load enables next to the
// selects, the synchronous active-low reset to zero, and the packing of a
// column with row 0 at array index 0 are this design's choices.
//
// Timing: every register loads at the rising clock edge where its enable is
// high; outputs are register outputs, so w follows one cycle after ld_w,
// and q_col two cycles after ld_rb1 (ld_rb1, then ld_rb2).
module oeb_block1
  import oeb_pkg::*;
#(
  parameter int N  = N_DEF,
  parameter int SW = (N > 1) ? $clog2(N) : 1
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  cplx_t [N-1:0]          q_row,   // first row of Q (a, b, c, ...)
  input  logic                   ld_rb1,
  input  logic                   ld_rb2,
  input  logic [SW-1:0]          selm1,   // column to transmit
  input  logic                   ld_w,
  input  tau_t                   tau_i,   // measured tau of the current slot
  input  logic [SW-1:0]          seld1,   // RB-3 register to write
  input  logic                   ld_rb3,
  output cplx_t [N-1:0][N-1:0]   q_col,   // q_col[j][r] = Q(r, j)
  output cplx_t [N-1:0]          w,       // transmitted beamforming vector
  output tau_t  [N-1:0]          tau      // RB-3 contents
);
  cplx_t [N-1:0]        rb1;
  cplx_t [N-1:0][N-1:0] cols;

  // Column formation: pure wiring of RB-1.
  always_comb begin
    for (int j = 0; j < N; j++)
      for (int r = 0; r < N; r++)
        cols[j][r] = rb1[(j - r + N) % N];
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      rb1   <= '0;
      q_col <= '0;
      w     <= '0;
      tau   <= '0;
    end else begin
      if (ld_rb1) rb1   <= q_row;
      if (ld_rb2) q_col <= cols;
      if (ld_w)   w     <= q_col[selm1];
      if (ld_rb3) tau[seld1] <= tau_i;
    end
  end

  // The selects must address an existing column / register.
  a_selm1_range : assert property (@(posedge clk) disable iff (!rst_n)
                                   ld_w |-> 32'(selm1) < N);
  a_seld1_range : assert property (@(posedge clk) disable iff (!rst_n)
                                   ld_rb3 |-> 32'(seld1) < N);
endmodule
