// tb_bcm -- self-checking testbench of the bias-control unit at full size
// (12 nodes, 629 steps). The unit drives the behavioural photonic model
// through the O-E probe. Every node gets a random process-variation offset;
// the expected tuning value of each node is worked out here by replaying
// the tuning loop on the model's formula. Covered: the reference taken from
// the first reading, a node that runs into the 629-step bound and an entry
// that uses a stored target, and an unused entry that must be skipped. Checked: every stored value and index, the
// order of the stores and the number of busy cycles, which must equal
// sum over nodes of (k+1)*(STAB+CONV), plus one cycle per skipped entry.
module tb_bcm;
  import serios_pkg::*;
  localparam int N = NODES;
  localparam int MEAS = STAB_CYCLES + CONV_CYCLES;

  logic clk = 0, rst_n = 0, start = 0;
  always #2 clk = ~clk;

  seq_entry_t seq [N];
  probe_req_t creq [3];
  code_t      ccodes [3][N];
  logic       cack [3];
  pwr_t       reading;
  code_t      node_code [N];
  logic [IOS-1:0] laser_en;
  logic       conv;
  pwr_t       pd [IOS];
  int         opt [N], assoc [N], dlt [IOS];
  logic       blank [IOS];
  logic       busy, done, tune_we;
  logic [7:0] tune_idx;
  code_t      tune_wdata;

  bcm dut (.clk, .rst_n, .start, .busy, .done, .seq,
           .preq(creq[0]), .pcodes(ccodes[0]), .pack(cack[0]), .preading(reading),
           .tune_we, .tune_idx, .tune_wdata);
  siph_probe u_probe (.clk, .rst_n, .creq, .ccodes, .cack, .reading, .dflt_codes(ccodes[1]), .dflt_laser('0),
                      .node_code, .laser_en, .conv, .pd_reading(pd));
  siph_model u_model (.node_code, .laser_en, .opt, .assoc, .atk_delta(dlt),
                      .atk_blank(blank), .pd_reading(pd));

  int checks = 0, failures = 0;
  int order [N];
  int exp_tv [N];
  int exp_cycles, busy_cycles, nstore;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // expected result: the tuning loop replayed on the model's formula
  task automatic expect_run();
    int tv [] = new[N];
    int a [] = new[N];
    int q [] = new[N];
    int r, rd, nd;
    exp_cycles = 0;
    for (int n = 0; n < N; n++) begin tv[n] = 0; a[n] = assoc[n]; q[n] = opt[n]; end
    for (int j = 0; j < N; j++) begin
      if (!seq[j].valid) begin
        exp_cycles += 1;                         // skipped in one cycle
        continue;
      end
      nd = seq[j].node;
      rd = siph_ref_pkg::out_pwr(seq[j].out_port, seq[j].in_port, 1, tv, a, q, 0, 0);
      r  = seq[j].use_target ? int'(seq[j].target) : rd;
      tv[nd]++;
      exp_cycles += 2 * MEAS;
      while (r < siph_ref_pkg::out_pwr(seq[j].out_port, seq[j].in_port, 1, tv, a, q, 0, 0)
             && tv[nd] < STEPS - 1) begin
        tv[nd]++;
        exp_cycles += MEAS;
      end
      exp_tv[nd] = tv[nd];
    end
  endtask

  // the other two probe clients stay idle
  assign creq[1] = '0;
  assign creq[2] = '0;
  always_comb for (int n = 0; n < N; n++) begin ccodes[1][n] = '0; ccodes[2][n] = '0; end

  always @(posedge clk) if (rst_n) begin
    if (busy) busy_cycles++;
    if (tune_we) begin
      check(int'(tune_idx) == order[nstore], $sformatf("store %0d index %0d", nstore, tune_idx));
      check(int'(tune_wdata) == exp_tv[tune_idx],
            $sformatf("node %0d tuning %0d expected %0d", tune_idx, tune_wdata, exp_tv[tune_idx]));
      nstore++;
    end
  end

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int perm [N];
    for (int o = 0; o < IOS; o++) begin dlt[o] = 0; blank[o] = 0; end
    for (int n = 0; n < N; n++) begin
      perm[n] = N - 1 - n;                      // rightmost node first
      opt[n]  = 3 + int'($urandom_range(0, 250));
      assoc[n] = n % IOS;
    end
    opt[4] = 400;                                // runs into the step bound
    for (int j = 0; j < N; j++) begin
      seq[j] = '0;
      seq[j].valid = 1'b1;
      seq[j].node     = 8'(perm[j]);
      seq[j].in_port  = 4'(j % IOS);
      seq[j].out_port = 4'(assoc[perm[j]]);
      order[j] = perm[j];
    end
    // one entry is unused: its node is neither measured nor stored
    seq[5].valid = 1'b0;
    for (int j = 6; j < N; j++) order[j-1] = order[j];
    // one entry stops at a stored target instead of the first reading
    seq[3].use_target = 1'b1;
    seq[3].target     = pwr_t'(siph_ref_pkg::BASE + 2000);
    expect_run();
    check(exp_tv[4] == STEPS - 1, "bound case set up");
    busy_cycles = 0; nstore = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    start <= 1;
    @(posedge clk);
    start <= 0;
    wait (done);
    repeat (2) @(posedge clk);
    check(nstore == N - 1, $sformatf("%0d stores", nstore));
    check(busy_cycles == exp_cycles, $sformatf("busy %0d cycles, expected %0d", busy_cycles, exp_cycles));
    $display("BCM run: %0d cycles (%0d ns at 4 ns)", busy_cycles, busy_cycles * 4);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
