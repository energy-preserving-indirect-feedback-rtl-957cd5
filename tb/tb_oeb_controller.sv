// tb_oeb_controller -- checks the sequence of selects and enables.
//
// Answers each request (w_req, w12_req) after a random 0..3 cycle delay and
// checks, independently of the controller's code, the order of events the
// algorithm needs: N basis slots with selm1 = seld1 = slot index and a
// ld_w pulse just before each; then for each loop pass k = 0..N-2: two
// trial slots (selm6 = 0 then 1, seld2 likewise) with selm4 = selm5 = k and
// selm2 = selm3 = (k != 0); two ld_th pulses (seld3 = selm7 = 0 then 1);
// two ld_ej pulses (seld4 = selm8 = 0 then 1); one ld_fb; then done, with
// selm2 = 1 so that w_opt shows the fed-back vector.  The cycle count from
// start to done is checked against 1 + 2N + 7(N-1) + 1 + delays.
module tb_oeb_controller;
  import oeb_pkg::*;
  localparam int N = 5;

  logic clk = 1'b0, rst_n, start, ack_sig;
  logic ld_rb1, ld_rb2, ld_w, ld_rb3;
  logic [2:0] selm1, seld1;
  logic selm2, selm3, selm6, selm7, selm8, seld2, seld3, seld4;
  logic [1:0] selm4, selm5;
  logic ld_tt, ld_th, ld_ej, ld_fb, w_req, w12_req, done;
  int checks = 0, failures = 0;

  oeb_controller #(.N(N)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // Event log built at each clock edge: one letter per event.
  string log_s;
  int    cyc;
  always @(posedge clk) if (rst_n) begin
    cyc++;
    if (ld_rb1) log_s = {log_s, "L"};
    if (ld_rb2) log_s = {log_s, "C"};
    if (ld_w)   log_s = {log_s, $sformatf("W%0d", selm1)};
    if (ld_rb3) log_s = {log_s, $sformatf("T%0d", seld1)};
    if (ld_tt)  log_s = {log_s, $sformatf("t%0d%0d%0d%0d%0d%0d", seld2, selm6, selm4, selm5, selm2, selm3)};
    if (ld_th)  log_s = {log_s, $sformatf("a%0d%0d", seld3, selm7)};
    if (ld_ej)  log_s = {log_s, $sformatf("e%0d%0d", seld4, selm8)};
    if (ld_fb)  log_s = {log_s, "F"};
  end

  initial begin
    string expected;
    int start_cyc, delays, d;
    rst_n = 1'b0;
    start = 1'b0;
    ack_sig = 1'b0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    for (int run = 0; run < 6; run++) begin
      log_s = "";
      delays = 0;
      expected = "L";
      expected = {expected, "C"};
      for (int i = 0; i < N; i++) expected = {expected, $sformatf("W%0dT%0d", i, i)};
      for (int k = 0; k < N - 1; k++)
        expected = {expected,
                    $sformatf("t00%0d%0d%0d%0d", k, k, k != 0, k != 0),
                    $sformatf("t11%0d%0d%0d%0d", k, k, k != 0, k != 0),
                    "a00a11e00e11F"};
      @(posedge clk);
      #1 start = 1'b1;
      @(posedge clk);
      #1 start = 1'b0;
      start_cyc = cyc;                 // the edge that sampled start
      while (!done) begin
        if (w_req || w12_req) begin
          d = $urandom_range(0, 3);
          delays += d;
          repeat (d) @(posedge clk);
          #1 ack_sig = 1'b1;
          @(posedge clk);
          #1 ack_sig = 1'b0;
        end else begin
          @(posedge clk);
          #1;
        end
      end
      check(log_s == expected, $sformatf("run %0d sequence\n got %s\n exp %s", run, log_s, expected));
      check(cyc - start_cyc == 1 + 2 * N + 7 * (N - 1) + 1 + delays,
            $sformatf("run %0d: %0d cycles to done, expected %0d", run, cyc - start_cyc,
                      1 + 2 * N + 7 * (N - 1) + 1 + delays));
      check(selm2 == 1'b1, "selm2 at done");
      repeat ($urandom_range(0, 4)) @(posedge clk);
      #1 check(done == 1'b1, "done holds");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
