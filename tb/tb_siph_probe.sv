// tb_siph_probe -- self-checking testbench of the shared O-E probe.
// Client requests with random codes and ports are served one at a time; the
// photodetector values are driven here. Checked: node codes and the one-hot
// laser enable follow the requesting client, ack comes to that client alone
// every STAB+CONV cycles while req is held, conv is high for exactly CONV
// cycles before each ack, the reading is the selected output's value, and
// while no client requests the default (application) drive is passed on.
module tb_siph_probe;
  import serios_pkg::*;
  localparam int N = NODES, MEAS = STAB_CYCLES + CONV_CYCLES;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  probe_req_t creq [3];
  code_t      ccodes [3][N];
  logic       cack [3];
  pwr_t       reading;
  code_t      node_code [N];
  logic [IOS-1:0] laser_en;
  logic       conv;
  pwr_t       pd_reading [IOS];
  code_t      dflt_codes [N];
  logic [IOS-1:0] dflt_laser;
  int checks = 0, failures = 0;

  siph_probe dut (.*);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #200000; failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int c = 0; c < 3; c++) begin
      creq[c] = '0;
      for (int n = 0; n < N; n++) ccodes[c][n] = '0;
    end
    for (int o = 0; o < IOS; o++) pd_reading[o] = '0;
    for (int n = 0; n < N; n++) dflt_codes[n] = code_t'($urandom);
    dflt_laser = 4'b1010;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    #1;
    check(laser_en == dflt_laser && !conv && !cack[0] && !cack[1] && !cack[2], "idle outputs");
    for (int n = 0; n < N; n++) check(node_code[n] == dflt_codes[n], "idle node code");
    for (int r = 0; r < 40; r++) begin
      automatic int c = $urandom_range(0, 2);
      automatic int reps = $urandom_range(1, 4);
      automatic int inp = $urandom_range(0, IOS - 1);
      automatic int outp = $urandom_range(0, IOS - 1);
      #1;  // change inputs away from the clock edge
      for (int n = 0; n < N; n++) ccodes[c][n] = code_t'($urandom);
      for (int o = 0; o < IOS; o++) pd_reading[o] = pwr_t'($urandom);
      creq[c].req = 1; creq[c].in_port = 4'(inp); creq[c].out_port = 4'(outp);
      for (int m = 0; m < reps; m++) begin
        for (int k = 0; k < MEAS; k++) begin
          #1;
          for (int n = 0; n < N; n++)
            check(node_code[n] == ccodes[c][n], $sformatf("node %0d code", n));
          check(laser_en == IOS'(1) << inp, "laser enable");
          check(conv == (k >= STAB_CYCLES), $sformatf("conv window k=%0d", k));
          for (int j = 0; j < 3; j++)
            check(cack[j] == (k == MEAS - 1 && j == c), $sformatf("ack %0d at k=%0d", j, k));
          if (k == MEAS - 1) check(reading == pd_reading[outp], "reading");
          @(posedge clk);
        end
        // new codes on the ack edge, as a client does
        for (int n = 0; n < N; n++) ccodes[c][n] = code_t'($urandom);
      end
      #1;
      creq[c].req = 0;
      #1;
      check(laser_en == dflt_laser && !conv, "quiet after release");
      for (int n = 0; n < N; n++) check(node_code[n] == dflt_codes[n], "default codes after release");
      for (int n = 0; n < N; n++) dflt_codes[n] = code_t'($urandom);
      dflt_laser = IOS'($urandom);
      repeat ($urandom_range(0, 2)) @(posedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
