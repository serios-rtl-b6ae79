// serios_sized_run -- one complete SerIOS session at a given circuit size,
// used by tb_serios_sizes to run the switch and accelerator sizes of the
// scalability study (4 to 12 I/Os, 5 to 36 nodes).
//
// It builds a serios_top with N_NODES/N_IOS/N_PAT, connects the behavioural
// photonic model at the same size and then:
//   1. loads an order-finder result: nodes tuned from the last to the first,
//      node n feeding output n mod N_IOS and excited from input n mod N_IOS;
//      one baseline pattern per input, input p -> output N_IOS-1-p, with
//      random configuration codes;
//   2. initialises, checking the cycle count
//        BCM + N_PAT*(STAB+CONV) + N_PAT + 6,
//      every key read back and the compensated application drive;
//   3. runs triggered detection rounds: clean, one output raised by three
//      thresholds, one output blanked, and a drift below threshold, checking
//      fail_mask, alarm and the round length N_PAT*(REF_LAT+STAB+CONV).
// Expected values are computed from siph_ref_pkg, not from the RTL. The
// process-variation offsets come from SEED. done rises at the end with the
// check and failure counts on its outputs.
module serios_sized_run
  import serios_pkg::*;
#(
  parameter int N    = 12,
  parameter int IO   = 4,
  parameter int P    = 4,
  parameter int SEED = 1
) (
  input  logic clk,
  input  logic rst_n,
  output logic done,
  output int   checks,
  output int   failures
);
  localparam int MEAS = STAB_CYCLES + CONV_CYCLES, KW = KEY_W;

  logic       seq_wr_en = 0;
  wr_kind_e   seq_wr_kind = WR_SEQ;
  logic [7:0] seq_wr_idx = 0, seq_wr_node = 0;
  logic [$bits(seq_entry_t)-1:0] seq_wr_data = '0;
  logic       init_start = 0, key_regen = 0, init_busy, init_done;
  logic       det_enable = 0, det_continuous = 0, det_trigger = 0, alarm_clr = 0;
  logic       alarm, det_done;
  pwr_t       threshold = 16'd50;
  logic [P-1:0] fail_mask, key_ok;
  logic       key_rd_en = 0, key_rd_valid;
  logic [7:0] key_rd_idx = 0;
  key_t       key_rd_data;
  code_t      app_node_code [N];
  logic [IO-1:0] app_laser_en = '0;
  code_t      node_code [N];
  logic [IO-1:0] laser_en;
  logic       oe_conv;
  pwr_t       pd_reading [IO];
  int         opt [N], assoc [N], dlt [IO];
  logic       blank [IO];

  serios_top #(.N_NODES(N), .N_IOS(IO), .N_PAT(P)) dut (.*);
  siph_model #(.N_NODES(N), .N_IOS(IO)) u_model (
    .node_code, .laser_en, .opt, .assoc, .atk_delta(dlt), .atk_blank(blank), .pd_reading);

  seq_entry_t seq [N];
  pattern_t   pat [P];
  code_t      cfg [P][N];
  int         exp_tv [N], gold [P], bcm_cycles;
  key_t       exp_key [P];

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL (%0d nodes, %0d I/Os): %s", N, IO, what);
    end
  endtask

  task automatic wr(wr_kind_e k, int idx, int node, logic [$bits(seq_entry_t)-1:0] d);
    @(posedge clk); #1;
    seq_wr_en = 1; seq_wr_kind = k; seq_wr_idx = 8'(idx); seq_wr_node = 8'(node); seq_wr_data = d;
    @(posedge clk); #1;
    seq_wr_en = 0;
  endtask

  function automatic int pwr(int o, int inp, int codes[]);
    int a [] = new[N];
    int q [] = new[N];
    for (int n = 0; n < N; n++) begin a[n] = assoc[n]; q[n] = opt[n]; end
    return siph_ref_pkg::out_pwr(o, inp, 1, codes, a, q, 0, 0);
  endfunction

  // the listing's loop, the golden values and the keys, worked out from the model
  task automatic expect_init();
    int tv [] = new[N];
    int c [] = new[N];
    int r, nd;
    bcm_cycles = 0;
    for (int n = 0; n < N; n++) tv[n] = 0;
    for (int j = 0; j < N; j++) begin
      nd = seq[j].node;
      r  = pwr(seq[j].out_port, seq[j].in_port, tv);
      tv[nd]++;
      bcm_cycles += 2 * MEAS;
      while (r < pwr(seq[j].out_port, seq[j].in_port, tv) && tv[nd] < STEPS - 1) begin
        tv[nd]++;
        bcm_cycles += MEAS;
      end
      exp_tv[nd] = tv[nd];
    end
    for (int p = 0; p < P; p++) begin
      for (int n = 0; n < N; n++) c[n] = int'(code_t'(cfg[p][n] + code_t'(exp_tv[n])));
      gold[p] = pwr(pat[p].out_port, pat[p].in_port, c);
    end
    for (int p = 0; p < P; p++) begin
      key_t s = '0, x, k = '0;
      for (int j = 0; j < N; j++)
        if (seq[j].out_port == pat[p].out_port)
          for (int b = 0; b < TUNE_W; b++)
            s[(seq[j].node * TUNE_W + b) % KW] ^= ((exp_tv[seq[j].node] >> b) & 1) != 0;
      for (int i = 0; i < KW; i++) x[(i + 13 * p) % KW] = s[i];
      for (int i = 0; i < KW; i++)
        if (x[i] != x[(i + 1) % KW]) k[(i + 1) % KW] |= x[i] ^ x[(i + KW - 1) % KW];
      exp_key[p] = k;
    end
  endtask

  function automatic logic [P-1:0] exp_mask();
    logic [P-1:0] m = '0;
    for (int p = 0; p < P; p++) begin
      int o = pat[p].out_port;
      int shifted = blank[o] ? 0 : gold[p] + dlt[o];
      int d = (shifted > gold[p]) ? shifted - gold[p] : gold[p] - shifted;
      m[p] = d > int'(threshold);
    end
    return m;
  endfunction

  task automatic det_round(string name);
    logic [P-1:0] m = exp_mask();
    int cyc = 0;
    @(posedge clk); #1; det_trigger = 1;
    @(posedge clk); #1; det_trigger = 0;
    while (!det_done) begin @(posedge clk); #1; cyc++; end
    check(fail_mask == m, $sformatf("%s: fail_mask %b expected %b", name, fail_mask, m));
    check(alarm == (m != '0), $sformatf("%s: alarm %0d", name, alarm));
    check(cyc == P * (REF_LAT + MEAS), $sformatf("%s: detection %0d cycles", name, cyc));
    alarm_clr = 1;
    @(posedge clk); #1; alarm_clr = 0;
    for (int o = 0; o < IO; o++) begin dlt[o] = 0; blank[o] = 0; end
  endtask

  initial begin
    int cyc = 0, o1, o2;
    done = 0; checks = 0; failures = 0;
    void'($urandom(SEED));
    for (int n = 0; n < N; n++) begin
      app_node_code[n] = '0;
      opt[n]   = 10 + int'($urandom_range(0, 290));
      assoc[n] = n % IO;
      seq[N-1-n] = '{valid: 1'b1, node: 8'(n), in_port: 4'(n % IO), out_port: 4'(n % IO),
                     use_target: 1'b0, target: '0};
    end
    for (int o = 0; o < IO; o++) begin dlt[o] = 0; blank[o] = 0; end
    for (int p = 0; p < P; p++) begin
      pat[p] = '{in_port: 4'(p % IO), out_port: 4'(IO - 1 - (p % IO))};
      for (int n = 0; n < N; n++) cfg[p][n] = code_t'($urandom_range(0, 40));
    end
    wait (rst_n);
    for (int j = 0; j < N; j++) wr(WR_SEQ, j, 0, seq[j]);
    for (int p = 0; p < P; p++) begin
      wr(WR_PAT, p, 0, $bits(seq_entry_t)'(pat[p]));
      for (int n = 0; n < N; n++) wr(WR_CFG, p, n, $bits(seq_entry_t)'(cfg[p][n]));
    end

    // initialisation
    expect_init();
    @(posedge clk); #1; init_start = 1;
    @(posedge clk); #1; init_start = 0;
    while (!init_done) begin @(posedge clk); #1; cyc++; end
    check(cyc == bcm_cycles + P * MEAS + P + 6,
          $sformatf("initialisation %0d cycles, expected %0d", cyc, bcm_cycles + P * MEAS + P + 6));
    check(key_ok == '1, "all keys valid");
    for (int p = 0; p < P; p++) begin
      key_rd_en = 1; key_rd_idx = 8'(p);
      @(posedge clk); #1;
      key_rd_en = 0;
      check(key_rd_valid && key_rd_data == exp_key[p], $sformatf("key %0d", p));
    end
    for (int n = 0; n < N; n++) app_node_code[n] = code_t'($urandom);
    #1;
    for (int n = 0; n < N; n++)
      check(node_code[n] == code_t'(app_node_code[n] + code_t'(exp_tv[n])),
            $sformatf("application drive node %0d", n));

    // detection rounds
    o1 = int'($urandom_range(0, IO - 1));
    o2 = (o1 + 1) % IO;
    det_round("clean");
    dlt[o1] = 3 * int'(threshold);
    det_round("raised output");
    blank[o2] = 1;
    det_round("blanked output");
    dlt[o2] = -int'(threshold) / 2;
    det_round("drift below threshold");
    $display("%0d nodes, %0d I/Os, %0d patterns: initialisation %0d cycles, round %0d cycles",
             N, IO, P, cyc, P * (REF_LAT + MEAS));
    done = 1;
  end
endmodule
