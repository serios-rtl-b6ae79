// tb_ref_finder -- self-checking testbench of the Reference Finder. With
// random pattern configurations, tuning values and process offsets, it runs
// the finder against the photonic model through the O-E probe and checks
// that each golden value written is the model's power for that pattern's
// input, output and drive codes (configuration + tuning), that the writes
// come in pattern order, and that the finder is busy for exactly
// PATTERNS*(STAB+CONV) cycles.
module tb_ref_finder;
  import serios_pkg::*;
  localparam int N = NODES, P = PATTERNS, MEAS = STAB_CYCLES + CONV_CYCLES;
  logic clk = 0, rst_n = 0, start = 0;
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
  logic     busy, done, gold_we;
  logic [7:0] gold_idx;
  pwr_t     gold_wdata;
  int checks = 0, failures = 0, nw = 0, busy_cycles = 0;
  int exp_gold [P];

  ref_finder dut (.clk, .rst_n, .start, .busy, .done, .pat, .cfg, .tune,
                  .preq(creq[1]), .pcodes(ccodes[1]), .pack(cack[1]), .preading(reading),
                  .gold_we, .gold_idx, .gold_wdata);
  siph_probe u_probe (.clk, .rst_n, .creq, .ccodes, .cack, .reading, .dflt_codes(ccodes[0]), .dflt_laser('0),
                      .node_code, .laser_en, .conv, .pd_reading(pd));
  siph_model u_model (.node_code, .laser_en, .opt, .assoc, .atk_delta(dlt),
                      .atk_blank(blank), .pd_reading(pd));
  assign creq[0] = '0;
  assign creq[2] = '0;
  always_comb for (int n = 0; n < N; n++) begin ccodes[0][n] = '0; ccodes[2][n] = '0; end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  always @(posedge clk) if (rst_n) begin
    if (busy) busy_cycles++;
    if (gold_we) begin
      check(int'(gold_idx) == nw, $sformatf("write %0d index %0d", nw, gold_idx));
      check(int'(gold_wdata) == exp_gold[gold_idx],
            $sformatf("gold %0d = %0d expected %0d", gold_idx, gold_wdata, exp_gold[gold_idx]));
      nw++;
    end
  end

  initial begin
    #100000; failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int round = 0; round < 3; round++) begin
      automatic int c [] = new[N];
      automatic int a [] = new[N];
      automatic int q [] = new[N];
      for (int o = 0; o < IOS; o++) begin dlt[o] = 0; blank[o] = 0; end
      for (int n = 0; n < N; n++) begin
        opt[n] = $urandom_range(0, 600); assoc[n] = $urandom_range(0, IOS - 1);
        tune[n] = code_t'($urandom_range(0, 628));
        a[n] = assoc[n]; q[n] = opt[n];
      end
      for (int p = 0; p < P; p++) begin
        pat[p].in_port = 4'(p); pat[p].out_port = 4'($urandom_range(0, IOS - 1));
        for (int n = 0; n < N; n++) begin
          cfg[p][n] = code_t'($urandom);
          c[n] = int'(code_t'(cfg[p][n] + tune[n]));
        end
        exp_gold[p] = siph_ref_pkg::out_pwr(pat[p].out_port, p, 1, c, a, q, 0, 0);
      end
      nw = 0; busy_cycles = 0;
      repeat (3) @(posedge clk);
      rst_n <= 1;
      @(posedge clk);
      start <= 1;
      @(posedge clk);
      start <= 0;
      wait (done);
      repeat (2) @(posedge clk);
      check(nw == P, $sformatf("%0d golden writes", nw));
      check(busy_cycles == P * MEAS, $sformatf("busy %0d cycles", busy_cycles));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
