// tb_key_gen -- self-checking testbench of the key generator. For random
// tuning values, node-output associations and pattern outputs it computes
// every key here: the seed from the nodes tied to the pattern's output,
// folded to KEY_W bits, rotated by 13*p, then the mixing function written
// in its simplified form (where b_i != b_{i+1} the OR term is always 1, so
// key bit i+1 takes b_i XOR b_{i-1}). Checked: the keys, their order, one
// key per cycle with no gaps, and that different patterns get different keys.
module tb_key_gen;
  import serios_pkg::*;
  localparam int N = NODES, P = PATTERNS, KW = KEY_W;
  logic clk = 0, rst_n = 0, start = 0;
  always #5 clk = ~clk;
  seq_entry_t seq [N];
  pattern_t   pat [P];
  code_t      tune [N];
  logic       busy, done, key_we;
  logic [7:0] key_idx;
  logic [KW-1:0] key_data;
  logic [KW-1:0] exp_key [P];
  int checks = 0, failures = 0, nk = 0, we_cycles = 0;

  key_gen dut (.*);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic logic [KW-1:0] model_key(int p);
    logic [KW-1:0] s = '0, x, k = '0;
    int port = pat[p].out_port;
    for (int j = 0; j < N; j++)
      if (seq[j].valid && seq[j].out_port == port)
        for (int b = 0; b < TUNE_W; b++)
          s[(seq[j].node * TUNE_W + b) % KW] ^= tune[seq[j].node][b];
    for (int i = 0; i < KW; i++) x[(i + 13 * p) % KW] = s[i];
    for (int i = 0; i < KW; i++)
      if (x[i] != x[(i + 1) % KW]) k[(i + 1) % KW] |= x[i] ^ x[(i + KW - 1) % KW];
    return k;
  endfunction

  always @(posedge clk) if (rst_n && key_we) begin
    check(int'(key_idx) == nk, $sformatf("key %0d index %0d", nk, key_idx));
    check(key_data == exp_key[key_idx], $sformatf("key %0d value", key_idx));
    nk++;
  end

  initial begin
    #100000; failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int round = 0; round < 20; round++) begin
      for (int j = 0; j < N; j++) begin
        seq[j] = '0;
        seq[j].valid = ($urandom_range(0, 5) != 0);   // some entries unused
        seq[j].node = 8'((j * 5 + round) % N);      // a permutation of the nodes
        seq[j].out_port = 4'($urandom_range(0, IOS - 1));
        tune[j] = code_t'($urandom_range(0, 628));
      end
      for (int p = 0; p < P; p++) begin
        pat[p].in_port = 4'(p);
        pat[p].out_port = 4'(p % IOS);
      end
      for (int p = 0; p < P; p++) exp_key[p] = model_key(p);
      nk = 0;
      @(posedge clk);
      start <= 1;
      @(posedge clk);
      start <= 0;
      for (int c = 0; c < P; c++) begin
        #1;
        check(key_we, $sformatf("key write in cycle %0d", c));
        @(posedge clk);
      end
      #1;
      check(!key_we && done, "done after the last key");
      @(posedge clk);
      check(nk == P, $sformatf("%0d keys", nk));
      for (int p = 1; p < P; p++)
        if (exp_key[p] != '0) check(exp_key[p] != exp_key[0], "keys differ");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
