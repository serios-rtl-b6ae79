// tb_online_detector -- self-checking testbench of the runtime detector,
// together with the Reference database (golden values) and the O-E probe on
// the photonic model. Golden values are computed here from the model and
// written into the database. Attacks are injected per output: blanking
// (black-hole, rerouting), raised power (sink-hole, flooding) and lowered
// power (a heating neighbour), each either above or below the threshold.
// The expected fail mask of every round is worked out here from the model.
// Checked: fail_mask, the sticky alarm and its clear, the round length
// PATTERNS*(REF_LAT+STAB+CONV) and, with enable held, one round start every
// INTERVAL cycles, and in continuous mode a round every
// P*(REF_LAT+STAB+CONV)+1 cycles.
module tb_online_detector;
  import serios_pkg::*;
  localparam int N = NODES, P = PATTERNS, MEAS = STAB_CYCLES + CONV_CYCLES;
  localparam int IVL = 60;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  pattern_t pat [P];
  code_t    cfg [P][N];
  code_t    tune [N];
  probe_req_t creq [3];
  code_t    ccodes [3][N];
  logic     cack [3];
  pwr_t     reading;
  code_t    node_code [N];
  logic [IOS-1:0] laser_en;
  logic     conv;
  pwr_t     pd [IOS];
  int       opt [N], assoc [N], dlt [IOS];
  logic     blank [IOS];
  logic     enable = 0, continuous = 0, trigger = 0, alarm_clr = 0;
  pwr_t     threshold;
  logic     busy, done, alarm;
  logic [P-1:0] fail_mask;
  logic     rd_req, rd_valid;
  logic [7:0] rd_idx;
  pwr_t     rd_data;
  logic     gold_we = 0;
  logic [7:0] gold_idx = 0;
  pwr_t     gold_wdata = 0;
  code_t    tune_arr [N];
  int checks = 0, failures = 0, busy_cycles = 0;
  int gold [P];

  online_detector #(.INTERVAL(IVL)) dut (
    .clk, .rst_n, .enable, .continuous, .trigger, .threshold, .alarm_clr, .busy, .done, .alarm,
    .fail_mask, .pat, .cfg, .tune, .rd_req, .rd_idx, .rd_valid, .rd_data,
    .preq(creq[2]), .pcodes(ccodes[2]), .pack(cack[2]), .preading(reading));
  ref_db u_db (.clk, .rst_n, .tune_we(1'b0), .tune_idx(8'd0), .tune_wdata('0), .tune(tune_arr),
               .gold_we, .gold_idx, .gold_wdata, .rd_req, .rd_idx, .rd_valid, .rd_data);
  siph_probe u_probe (.clk, .rst_n, .creq, .ccodes, .cack, .reading, .dflt_codes(ccodes[0]), .dflt_laser('0),
                      .node_code, .laser_en, .conv, .pd_reading(pd));
  siph_model u_model (.node_code, .laser_en, .opt, .assoc, .atk_delta(dlt),
                      .atk_blank(blank), .pd_reading(pd));
  assign creq[0] = '0;
  assign creq[1] = '0;
  always_comb for (int n = 0; n < N; n++) begin ccodes[0][n] = '0; ccodes[1][n] = '0; end
  always @(posedge clk) if (rst_n && busy) busy_cycles++;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic int pat_pwr(int p, bit attacked);
    int c [] = new[N];
    int a [] = new[N];
    int q [] = new[N];
    for (int n = 0; n < N; n++) begin
      c[n] = int'(code_t'(cfg[p][n] + tune[n])); a[n] = assoc[n]; q[n] = opt[n];
    end
    return siph_ref_pkg::out_pwr(pat[p].out_port, pat[p].in_port, 1, c, a, q,
                                 attacked ? dlt[pat[p].out_port] : 0,
                                 attacked ? blank[pat[p].out_port] : 0);
  endfunction

  function automatic logic [P-1:0] exp_mask();
    logic [P-1:0] m = '0;
    for (int p = 0; p < P; p++) begin
      int r = pat_pwr(p, 1);
      int d = (r > gold[p]) ? r - gold[p] : gold[p] - r;
      m[p] = d > int'(threshold);
    end
    return m;
  endfunction

  task automatic one_round(string name);
    logic [P-1:0] m = exp_mask();
    busy_cycles = 0;
    @(posedge clk); #1; trigger = 1;
    @(posedge clk); #1; trigger = 0;
    wait (done);
    @(posedge clk); #1;
    check(fail_mask == m, $sformatf("%s: fail_mask %b expected %b", name, fail_mask, m));
    check(alarm == (m != '0), $sformatf("%s: alarm", name));
    check(busy_cycles == P * (REF_LAT + MEAS), $sformatf("%s: round %0d cycles", name, busy_cycles));
    alarm_clr = 1;
    @(posedge clk); #1; alarm_clr = 0;
    check(!alarm, "alarm cleared");
  endtask

  initial begin
    #400000; failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int starts [$];
    threshold = 16'd100;
    for (int o = 0; o < IOS; o++) begin dlt[o] = 0; blank[o] = 0; end
    for (int n = 0; n < N; n++) begin
      opt[n] = $urandom_range(0, 600); assoc[n] = n % IOS; tune[n] = code_t'($urandom_range(0, 628));
    end
    for (int p = 0; p < P; p++) begin
      pat[p].in_port = 4'(p); pat[p].out_port = 4'((p + 1) % IOS);
      for (int n = 0; n < N; n++) cfg[p][n] = code_t'($urandom);
      gold[p] = pat_pwr(p, 0);
    end
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int p = 0; p < P; p++) begin
      @(posedge clk); #1; gold_we = 1; gold_idx = 8'(p); gold_wdata = pwr_t'(gold[p]);
    end
    @(posedge clk); #1; gold_we = 0;
    one_round("no attack");
    blank[2] = 1;               one_round("black-hole");   blank[2] = 0;
    dlt[1] = 450;               one_round("sink-hole");    dlt[1] = 0;
    dlt[3] = 60;                one_round("flooding below threshold");
    dlt[3] = 101;               one_round("flooding above threshold"); dlt[3] = 0;
    blank[0] = 1;               one_round("rerouting");    blank[0] = 0;
    dlt[0] = -173; dlt[2] = -20; one_round("hot neighbour"); dlt[0] = 0; dlt[2] = 0;
    one_round("attack over");
    // periodic rounds
    enable = 1;
    for (int c = 0; c < 5 * IVL + 5; c++) begin
      automatic logic was_busy = busy;
      @(posedge clk); #1;
      if (busy && !was_busy) starts.push_back(c);
    end
    check(starts.size() >= 4, $sformatf("%0d periodic rounds", starts.size()));
    for (int i = 1; i < starts.size(); i++)
      check(starts[i] - starts[i-1] == IVL, $sformatf("round spacing %0d", starts[i] - starts[i-1]));
    check(!alarm, "no alarm in periodic rounds without attack");
    // continuous rounds: a new one the cycle after each done
    starts.delete();
    continuous = 1;
    dlt[2] = 300;
    for (int c = 0; c < 200; c++) begin
      automatic logic was_busy = busy;
      @(posedge clk); #1;
      if (busy && !was_busy) starts.push_back(c);
    end
    enable = 0; continuous = 0;
    wait (!busy);
    check(starts.size() >= 8, $sformatf("%0d continuous rounds", starts.size()));
    for (int i = 1; i < starts.size(); i++)
      check(starts[i] - starts[i-1] == P * (REF_LAT + MEAS) + 1,
            $sformatf("continuous spacing %0d", starts[i] - starts[i-1]));
    check(alarm && fail_mask == exp_mask(), "attack seen in continuous mode");
    dlt[2] = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
