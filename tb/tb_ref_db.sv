// tb_ref_db -- self-checking testbench of the Reference database. Writes
// random tuning and golden values (some with out-of-range indices, which
// must be ignored), checks the parallel tuning outputs against a shadow
// copy, and checks that a golden-value read issued in cycle t returns the
// right value with rd_valid exactly REF_LAT cycles later, for back-to-back
// and isolated reads.
module tb_ref_db;
  import serios_pkg::*;
  localparam int N = NODES, P = PATTERNS;
  logic clk = 0, rst_n = 0;
  always #2 clk = ~clk;
  logic tune_we = 0, gold_we = 0, rd_req = 0;
  logic [7:0] tune_idx = 0, gold_idx = 0, rd_idx = 0;
  code_t tune_wdata = 0;
  pwr_t  gold_wdata = 0;
  code_t tune [N];
  logic  rd_valid;
  pwr_t  rd_data;
  code_t s_tune [N];
  pwr_t  s_gold [P];
  int checks = 0, failures = 0;
  int cyc = 0;
  int req_cyc [$];
  int req_val [$];

  ref_db dut (.*);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  always @(posedge clk) begin
    cyc++;
    if (rst_n) begin
      if (rd_valid) begin
        if (req_cyc.size() == 0) check(0, "unexpected rd_valid");
        else begin
          int c, v;
          c = req_cyc.pop_front();
          v = req_val.pop_front();
          check(cyc - c == REF_LAT, $sformatf("read latency %0d", cyc - c));
          check(int'(rd_data) == v, $sformatf("read data %0d expected %0d", rd_data, v));
        end
      end
      if (rd_req) begin
        req_cyc.push_back(cyc);
        req_val.push_back(int'(rd_idx) < P ? int'(s_gold[rd_idx]) : 0);
      end
    end
  end

  initial begin
    #100000; failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int n = 0; n < N; n++) s_tune[n] = '0;
    for (int p = 0; p < P; p++) s_gold[p] = '0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int k = 0; k < 100; k++) begin
      automatic int ti = $urandom_range(0, N + 1);
      automatic int gi = $urandom_range(0, P + 1);
      automatic code_t tv = code_t'($urandom);
      automatic pwr_t  gv = pwr_t'($urandom);
      tune_we <= 1; tune_idx <= 8'(ti); tune_wdata <= tv;
      gold_we <= 1; gold_idx <= 8'(gi); gold_wdata <= gv;
      @(posedge clk);
      tune_we <= 0; gold_we <= 0;
      if (ti < N) s_tune[ti] = tv;
      if (gi < P) s_gold[gi] = gv;
      #1;
      for (int n = 0; n < N; n++) check(tune[n] == s_tune[n], $sformatf("tune %0d", n));
      // a burst of reads, then a pause
      repeat ($urandom_range(1, 4)) begin
        rd_req <= 1; rd_idx <= 8'($urandom_range(0, P));
        @(posedge clk);
      end
      rd_req <= 0;
      repeat ($urandom_range(0, 3)) @(posedge clk);
    end
    repeat (REF_LAT + 2) @(posedge clk);
    check(req_cyc.size() == 0, "all reads answered");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
