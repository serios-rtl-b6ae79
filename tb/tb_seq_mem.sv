// tb_seq_mem -- self-checking testbench of the Input Sequence memory.
// Writes random tuning-sequence entries, pattern ports and configuration
// codes, including writes with out-of-range indices that must be ignored,
// and compares every output with a shadow copy kept here. Also checks that
// reset clears the contents.
module tb_seq_mem;
  import serios_pkg::*;
  localparam int N = NODES, P = PATTERNS;
  logic clk = 0, rst_n = 0;
  always #2 clk = ~clk;
  logic wr_en = 0;
  wr_kind_e wr_kind = WR_SEQ;
  logic [7:0] wr_idx = 0, wr_node = 0;
  logic [$bits(seq_entry_t)-1:0] wr_data = 0;
  seq_entry_t seq [N];
  pattern_t   pat [P];
  code_t      cfg [P][N];
  seq_entry_t s_seq [N];
  pattern_t   s_pat [P];
  code_t      s_cfg [P][N];
  int checks = 0, failures = 0;

  seq_mem dut (.*);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic wr(wr_kind_e k, int idx, int node, logic [$bits(seq_entry_t)-1:0] d);
    wr_en <= 1; wr_kind <= k; wr_idx <= 8'(idx); wr_node <= 8'(node); wr_data <= d;
    @(posedge clk);
    wr_en <= 0;
  endtask

  task automatic compare(string tag);
    for (int i = 0; i < N; i++) check(seq[i] == s_seq[i], $sformatf("%s seq %0d", tag, i));
    for (int p = 0; p < P; p++) begin
      check(pat[p] == s_pat[p], $sformatf("%s pat %0d", tag, p));
      for (int n = 0; n < N; n++) check(cfg[p][n] == s_cfg[p][n], $sformatf("%s cfg %0d %0d", tag, p, n));
    end
  endtask

  initial begin
    #100000; failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int i = 0; i < N; i++) s_seq[i] = '0;
    for (int p = 0; p < P; p++) begin s_pat[p] = '0; for (int n = 0; n < N; n++) s_cfg[p][n] = '0; end
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    compare("reset");
    for (int k = 0; k < 200; k++) begin
      automatic int kind = $urandom_range(0, 2);
      automatic int idx  = $urandom_range(0, N + 2);
      automatic int node = $urandom_range(0, N + 2);
      automatic logic [$bits(seq_entry_t)-1:0] d = {$urandom, $urandom};
      wr(wr_kind_e'(kind), idx, node, d);
      if (kind == 0 && idx < N) s_seq[idx] = seq_entry_t'(d);
      if (kind == 1 && idx < P) s_pat[idx] = pattern_t'(d[$bits(pattern_t)-1:0]);
      if (kind == 2 && idx < P && node < N) s_cfg[idx][node] = d[TUNE_W-1:0];
      #1;
      if (k % 20 == 19) compare("write");
    end
    compare("final");
    rst_n <= 0;
    @(posedge clk); #1;
    for (int i = 0; i < N; i++) s_seq[i] = '0;
    for (int p = 0; p < P; p++) begin s_pat[p] = '0; for (int n = 0; n < N; n++) s_cfg[p][n] = '0; end
    compare("reset2");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
