// tb_serios_sizes -- SerIOS at the circuit sizes of the scalability study:
// 4x4 Spanke switch (5 nodes), 4x4 Benes switch (6), 4x4 multiplier (12),
// 4x4 neural-network processor (10), 6x6 Benes switch (12), 9x9 Clements mesh
// (36) and 12x12 Benes switch (28). Each size is one serios_sized_run with
// one baseline pattern per input; all run side by side, and every size must
// finish its session (initialisation, key read-back, application drive and
// four detection rounds) with no failed check. The node counts and I/O
// counts are the study's; the circuit behind them is the behavioural model.
module tb_serios_sizes;
  localparam int K = 7;
  localparam int SZ_N  [K] = '{5, 6, 12, 10, 12, 36, 28};
  localparam int SZ_IO [K] = '{4, 4, 4, 4, 6, 9, 12};

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic done [K];
  int   chk [K], fl [K];

  for (genvar g = 0; g < K; g++) begin : g_size
    serios_sized_run #(.N(SZ_N[g]), .IO(SZ_IO[g]), .P(SZ_IO[g]), .SEED(17 + g)) u_run (
      .clk, .rst_n, .done(done[g]), .checks(chk[g]), .failures(fl[g]));
  end

  int checks, failures;

  initial begin
    #2ms;
    checks = 0; failures = 1;
    for (int g = 0; g < K; g++) begin checks += chk[g]; failures += fl[g]; end
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit all;
    #22 rst_n = 1;
    do begin
      @(posedge clk);
      all = 1;
      for (int g = 0; g < K; g++) all &= done[g];
    end while (!all);
    checks = 0; failures = 0;
    for (int g = 0; g < K; g++) begin
      checks += chk[g];
      failures += fl[g];
      // every size must have run its whole session
      checks++;
      if (chk[g] != SZ_N[g] + SZ_IO[g] + 14) begin
        failures++;
        $display("FAIL: size %0d ran only %0d checks", g, chk[g]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
