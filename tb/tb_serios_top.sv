// tb_serios_top -- end-to-end testbench of SerIOS at its default sizes
// (12 nodes, 4 I/Os, 4 patterns, 629 tuning steps, 2500-cycle detection
// interval) on the behavioural photonic model of the 12-MZI multiplier.
//
// 1. The order finder's results are loaded through the write port: nodes
//    tuned right to left (12..1), inputs A-D = 0-3, outputs E-H = 0-3, and
//    the four baseline patterns A->E, B->G, C->F, D->H.
// 2. Initialisation runs; the expected tuning values, golden values and keys
//    are computed here from the model. The keys are read back and compared,
//    and the initialisation time is checked against
//    BCM + PATTERNS*(STAB+CONV) + PATTERNS cycles + 6 hand-over cycles.
// 3. Runtime: a clean detection round, then the five attack kinds with the
//    output shifts of the paper's attack table (black-hole at node 4,
//    sink-hole at node 5, flooding at node 1, rerouting at node 9 and a
//    heating IP), each expected to be flagged on exactly the outputs whose
//    shift exceeds the threshold; periodic and continuous rounds; the
//    application's node settings passed on with the tuning values added;
//    keys made again at runtime; a re-calibration.
// Every mechanism is counted and one that never happened is a failure.
module tb_serios_top;
  import serios_pkg::*;
  localparam int N = NODES, P = PATTERNS, MEAS = STAB_CYCLES + CONV_CYCLES, KW = KEY_W;
  localparam int IVL = 2500;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic       seq_wr_en = 0;
  wr_kind_e   seq_wr_kind = WR_SEQ;
  logic [7:0] seq_wr_idx = 0, seq_wr_node = 0;
  logic [$bits(seq_entry_t)-1:0] seq_wr_data = '0;
  logic       init_start = 0, key_regen = 0, init_busy, init_done;
  logic       det_continuous = 0;
  code_t      app_node_code [N];
  logic [IOS-1:0] app_laser_en = 4'b0101;
  logic       det_enable = 0, det_trigger = 0, alarm_clr = 0, alarm, det_done;
  pwr_t       threshold = 16'd50;
  logic [P-1:0] fail_mask, key_ok;
  logic       key_rd_en = 0, key_rd_valid;
  logic [7:0] key_rd_idx = 0;
  key_t       key_rd_data;
  code_t      node_code [N];
  logic [IOS-1:0] laser_en;
  logic       oe_conv;
  pwr_t       pd_reading [IOS];
  int         opt [N], assoc [N], dlt [IOS];
  logic       blank [IOS];

  serios_top dut (.*);
  siph_model u_model (.node_code, .laser_en, .opt, .assoc, .atk_delta(dlt),
                      .atk_blank(blank), .pd_reading);

  int checks = 0, failures = 0;
  seq_entry_t seq [N];
  pattern_t   pat [P];
  code_t      cfg [P][N];
  int         exp_tv [N], gold [P], bcm_cycles;
  key_t       exp_key [P];
  // mechanism counters
  int n_ref_stop = 0, n_target_stop = 0, n_bound_stop = 0, n_init = 0, n_recal = 0;
  int n_clean = 0, n_alarm = 0, n_periodic = 0, n_key_read = 0, n_below = 0;
  int n_app = 0, n_regen = 0, n_cont = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic wr(wr_kind_e k, int idx, int node, logic [$bits(seq_entry_t)-1:0] d);
    @(posedge clk); #1;
    seq_wr_en = 1; seq_wr_kind = k; seq_wr_idx = 8'(idx); seq_wr_node = 8'(node); seq_wr_data = d;
    @(posedge clk); #1;
    seq_wr_en = 0;
  endtask

  // ---- expected values, from the model ----
  function automatic int pwr(int o, int inp, int codes[]);
    int a [] = new[N];
    int q [] = new[N];
    for (int n = 0; n < N; n++) begin a[n] = assoc[n]; q[n] = opt[n]; end
    return siph_ref_pkg::out_pwr(o, inp, 1, codes, a, q, 0, 0);
  endfunction

  task automatic expect_init();
    int tv [] = new[N];
    int c [] = new[N];
    int r, nd;
    bcm_cycles = 0;
    for (int n = 0; n < N; n++) tv[n] = 0;
    for (int j = 0; j < N; j++) begin
      nd = seq[j].node;
      r  = seq[j].use_target ? int'(seq[j].target) : pwr(seq[j].out_port, seq[j].in_port, tv);
      tv[nd]++;
      bcm_cycles += 2 * MEAS;
      while (r < pwr(seq[j].out_port, seq[j].in_port, tv) && tv[nd] < STEPS - 1) begin
        tv[nd]++;
        bcm_cycles += MEAS;
      end
      if (tv[nd] == STEPS - 1) n_bound_stop++;
      else if (seq[j].use_target) n_target_stop++;
      else n_ref_stop++;
      exp_tv[nd] = tv[nd];
    end
    for (int p = 0; p < P; p++) begin
      for (int n = 0; n < N; n++) c[n] = int'(code_t'(cfg[p][n] + code_t'(exp_tv[n])));
      gold[p] = pwr(pat[p].out_port, pat[p].in_port, c);
    end
    for (int p = 0; p < P; p++) begin
      key_t s = '0, x, k = '0;
      for (int j = 0; j < N; j++)
        if (seq[j].valid && seq[j].out_port == pat[p].out_port)
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

  task automatic run_init(bit recal);
    int cyc = 0;
    expect_init();
    @(posedge clk); #1; init_start = 1;
    @(posedge clk); #1; init_start = 0;
    while (!init_done) begin @(posedge clk); #1; cyc++; end
    check(cyc == bcm_cycles + P * MEAS + P + 6,
          $sformatf("initialisation %0d cycles, expected %0d", cyc, bcm_cycles + P * MEAS + P + 6));
    $display("initialisation: %0d cycles (%0d ns), BCM part %0d cycles", cyc, cyc * 4, bcm_cycles);
    if (recal) n_recal++; else n_init++;
    check(key_ok == '1, "all keys valid");
    read_keys();
    check_app_drive();
  endtask

  task automatic det_round(string name);
    logic [P-1:0] m = exp_mask();
    int cyc = 0;
    @(posedge clk); #1; det_trigger = 1;
    @(posedge clk); #1; det_trigger = 0;
    while (!det_done) begin @(posedge clk); #1; cyc++; end
    check(fail_mask == m, $sformatf("%s: fail_mask %b expected %b", name, fail_mask, m));
    check(alarm == (m != '0), $sformatf("%s: alarm %0d", name, alarm));
    check(cyc == P * (REF_LAT + MEAS), $sformatf("%s: detection %0d cycles", name, cyc));
    if (m == '0) n_clean++; else n_alarm++;
    $display("%-22s fail_mask=%b alarm=%0d", name, fail_mask, alarm);
    alarm_clr = 1;
    @(posedge clk); #1; alarm_clr = 0;
  endtask

  task automatic attack(string name, int e, int f, int g, int h, bit blank_e);
    dlt[0] = e; dlt[1] = f; dlt[2] = g; dlt[3] = h; blank[0] = blank_e;
    det_round(name);
    for (int o = 0; o < IOS; o++) begin dlt[o] = 0; blank[o] = 0; end
  endtask

  initial begin
    #20ms; failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // the application's drive reaches the nodes, compensated, whenever SerIOS
  // is not measuring
  task automatic check_app_drive();
    for (int n = 0; n < N; n++) app_node_code[n] = code_t'($urandom);
    app_laser_en = IOS'($urandom);
    #1;
    for (int n = 0; n < N; n++)
      check(node_code[n] == code_t'(app_node_code[n] + code_t'(exp_tv[n])), $sformatf("app drive node %0d", n));
    check(laser_en == app_laser_en, "app laser enables");
    n_app++;
  endtask

  task automatic read_keys();
    for (int p = 0; p < P; p++) begin
      key_rd_en = 1; key_rd_idx = 8'(p);
      @(posedge clk); #1;
      key_rd_en = 0;
      check(key_rd_valid && key_rd_data == exp_key[p], $sformatf("key %0d", p));
      n_key_read++;
    end
  endtask

  initial begin
    for (int n = 0; n < N; n++) app_node_code[n] = '0;
    for (int o = 0; o < IOS; o++) begin dlt[o] = 0; blank[o] = 0; end
    // process variation of this die; each node feeds one output
    for (int n = 0; n < N; n++) begin
      opt[n] = 10 + int'($urandom_range(0, 290));
      assoc[n] = (n < 8) ? n % IOS : n - 8;      // nodes 9-12 feed E-H
    end
    opt[0] = 500;                                // node 1 runs into the step bound
    // tuning sequence: right to left
    for (int j = 0; j < N; j++) begin
      seq[j] = '0;
      seq[j].valid = 1'b1;
      seq[j].node = 8'(N - 1 - j);
      seq[j].in_port = 4'(j % IOS);
      seq[j].out_port = 4'(assoc[N - 1 - j]);
    end
    seq[2].use_target = 1'b1;                    // one node stops at a target level
    seq[2].target = 16'(siph_ref_pkg::BASE + 64 * 2 + 3 * siph_ref_pkg::PEAK);  // above any reading
    // baseline patterns A->E, B->G, C->F, D->H
    pat[0] = '{in_port: 4'd0, out_port: 4'd0};
    pat[1] = '{in_port: 4'd1, out_port: 4'd2};
    pat[2] = '{in_port: 4'd2, out_port: 4'd1};
    pat[3] = '{in_port: 4'd3, out_port: 4'd3};
    for (int p = 0; p < P; p++) for (int n = 0; n < N; n++) cfg[p][n] = code_t'($urandom_range(0, 300));

    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int j = 0; j < N; j++) wr(WR_SEQ, j, 0, seq[j]);
    for (int p = 0; p < P; p++) begin
      wr(WR_PAT, p, 0, $bits(seq_entry_t)'(pat[p]));
      for (int n = 0; n < N; n++) wr(WR_CFG, p, n, $bits(seq_entry_t)'(cfg[p][n]));
    end
    check(!init_done && !alarm, "idle after reset");

    run_init(0);
    det_round("no attack");
    // output shifts (0.01 dB) of the paper's attack table
    attack("black-hole (node 4)", -279,  127,  242,    0, 0);
    attack("sink-hole (node 5)",  -392, -284, -524,  452, 0);
    attack("flooding (node 1)",    -27,  103,   -1,  -57, 0);
    attack("rerouting (node 9)",     0,    0,    0,    0, 1);
    attack("IP hijacking",          71,   11, -173,   10, 0);
    attack("drift below threshold", 20,  -30,   45,  -50, 0);
    if (!alarm && fail_mask == '0) n_below++;
    det_round("attack over");

    // periodic detection
    det_enable = 1;
    begin
      int rounds = 0;
      for (int c = 0; c < 4 * IVL; c++) begin
        @(posedge clk); #1;
        if (det_done) rounds++;
      end
      check(rounds == 4 || rounds == 3, $sformatf("%0d periodic rounds in %0d cycles", rounds, 4 * IVL));
      n_periodic += rounds;
    end
    check(!alarm, "no alarm in clean periodic rounds");
    det_enable = 0;
    repeat (30) @(posedge clk);

    // continuous detection: rounds back to back
    det_enable = 1; det_continuous = 1;
    begin
      int rounds = 0;
      for (int c = 0; c < 21 * 10; c++) begin
        @(posedge clk); #1;
        if (det_done) rounds++;
      end
      check(rounds == 10 || rounds == 9, $sformatf("%0d continuous rounds in 210 cycles", rounds));
      n_cont += rounds;
    end
    det_enable = 0; det_continuous = 0;
    repeat (30) @(posedge clk);
    check_app_drive();

    // keys made again at runtime: same die, same keys
    begin
      int cyc = 0;
      @(posedge clk); #1; key_regen = 1;
      @(posedge clk); #1; key_regen = 0;
      while (!init_done) begin @(posedge clk); #1; cyc++; end
      check(cyc == P + 2, $sformatf("key regeneration %0d cycles", cyc));
      read_keys();
      n_regen++;
    end

    // re-calibration after the die warmed up: offsets move
    for (int n = 0; n < N; n++) opt[n] = opt[n] + 7;
    run_init(1);
    det_round("after re-calibration");
    attack("sink-hole again",     -392, -284, -524,  452, 0);

    check(n_init > 0,        "mechanism: initialisation");
    check(n_recal > 0,       "mechanism: re-calibration");
    check(n_ref_stop > 0,    "mechanism: BCM stop at reference");
    check(n_target_stop > 0, "mechanism: BCM stop at target");
    check(n_bound_stop > 0,  "mechanism: BCM step bound");
    check(n_clean > 0,       "mechanism: clean detection round");
    check(n_alarm >= 6,      "mechanism: alarm on attack");
    check(n_below > 0,       "mechanism: drift below threshold ignored");
    check(n_periodic > 0,    "mechanism: periodic detection");
    check(n_key_read > 0,    "mechanism: key read-out");
    check(n_app > 0,         "mechanism: compensated application drive");
    check(n_regen > 0,       "mechanism: runtime key regeneration");
    check(n_cont > 0,        "mechanism: continuous detection");
    $display("mechanisms: app=%0d regen=%0d continuous=%0d", n_app, n_regen, n_cont);
    $display("mechanisms: init=%0d recal=%0d ref_stop=%0d target_stop=%0d bound=%0d clean=%0d alarm=%0d below=%0d periodic=%0d keys=%0d",
             n_init, n_recal, n_ref_stop, n_target_stop, n_bound_stop, n_clean, n_alarm, n_below, n_periodic, n_key_read);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
