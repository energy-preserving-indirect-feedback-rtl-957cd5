// tb_oeb_block1 -- checks Block-1: RB-1/RB-2 column formation, MUX-1 and
// the W register, DeMUX1 and RB-3.
//
// With N = 5 the expected columns are taken from the printed circulant
// pattern Q(:,1) = [a e d c b], Q(:,2) = [b a e d c], Q(:,3) = [c b a e d],
// Q(:,4) = [d c b a e], Q(:,5) = [e d c b a].  Random rows are loaded; every
// column is checked on q_col and, after selecting it through MUX-1, on w
// one cycle after ld_w.  Random tau values are written through DeMUX1 and
// read back; writes with ld_rb3 low and row loads without ld_rb2 must not
// change the outputs.
module tb_oeb_block1;
  import oeb_pkg::*;
  localparam int N = 5;

  logic clk = 1'b0, rst_n;
  cplx_t [N-1:0] q_row;
  logic ld_rb1, ld_rb2, ld_w, ld_rb3;
  logic [2:0] selm1, seld1;
  tau_t tau_i;
  cplx_t [N-1:0][N-1:0] q_col;
  cplx_t [N-1:0] w;
  tau_t [N-1:0] tau;
  int checks = 0, failures = 0;

  oeb_block1 #(.N(N)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Printed pattern: letter index (a=0 .. e=4) of row r in column j.
  string pattern [N] = '{"aedcb", "baedc", "cbaed", "dcbae", "edcba"};

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin
    cplx_t [N-1:0] row;
    tau_t exp_tau [N];
    rst_n = 1'b0;
    {ld_rb1, ld_rb2, ld_w, ld_rb3} = '0;
    selm1 = '0;
    seld1 = '0;
    tau_i = '0;
    q_row = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;

    for (int t = 0; t < 20; t++) begin
      for (int k = 0; k < N; k++) row[k] = cplx_t'($urandom);
      q_row = row;
      ld_rb1 = 1'b1;
      @(posedge clk);
      #1 ld_rb1 = 1'b0;
      q_row = ~row;                    // must be ignored from now on
      ld_rb2 = 1'b1;
      @(posedge clk);
      #1 ld_rb2 = 1'b0;
      for (int j = 0; j < N; j++)
        for (int r = 0; r < N; r++)
          check(q_col[j][r] == row[pattern[j][r] - "a"],
                $sformatf("Q(%0d,%0d)", r + 1, j + 1));
      for (int j = N - 1; j >= 0; j--) begin
        selm1 = 3'(j);
        ld_w = 1'b1;
        @(posedge clk);
        #1 ld_w = 1'b0;
        selm1 = 3'((j + 1) % N);       // w must hold without ld_w
        @(posedge clk);
        #1;
        for (int r = 0; r < N; r++)
          check(w[r] == row[pattern[j][r] - "a"], $sformatf("w = Q(:,%0d) row %0d", j + 1, r));
      end
      for (int i = 0; i < N; i++) begin
        exp_tau[i] = tau_t'($urandom);
        seld1 = 3'(i);
        tau_i = exp_tau[i];
        ld_rb3 = 1'b1;
        @(posedge clk);
        #1 ld_rb3 = 1'b0;
        tau_i = ~exp_tau[i];           // not written: ld_rb3 low
        @(posedge clk);
        #1;
      end
      for (int i = 0; i < N; i++)
        check(tau[i] == exp_tau[i], $sformatf("tau_%0d", i + 1));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
