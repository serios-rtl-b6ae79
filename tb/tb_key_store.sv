// tb_key_store -- self-checking testbench of the key storage. Random writes
// (some to indices past the last key, which must be ignored) and reads are
// checked against a shadow copy: read data and valid one cycle after rd_en,
// zero for keys never written, the per-key valid flags, and reset clearing.
module tb_key_store;
  import serios_pkg::*;
  localparam int K = PATTERNS, KW = KEY_W;
  logic clk = 0, rst_n = 0, we = 0, rd_en = 0;
  always #5 clk = ~clk;
  logic [7:0] widx = 0, rd_idx = 0;
  logic [KW-1:0] wdata = '0, rd_data;
  logic rd_valid;
  logic [K-1:0] key_ok;
  logic [KW-1:0] s_mem [K];
  logic [K-1:0] s_ok;
  int checks = 0, failures = 0;

  key_store dut (.*);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #100000; failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    s_ok = '0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int it = 0; it < 300; it++) begin
      automatic int wi = $urandom_range(0, K + 1);
      automatic int ri = $urandom_range(0, K + 1);
      automatic logic [KW-1:0] d = {$urandom, $urandom, $urandom, $urandom};
      automatic bit dw = ($urandom_range(0, 3) == 0);
      automatic bit dr = ($urandom_range(0, 1) == 0);
      automatic bit exp_v = dr && ri < K && s_ok[ri];
      automatic logic [KW-1:0] exp_d = exp_v ? s_mem[ri] : '0;
      #1;
      we <= dw; widx <= 8'(wi); wdata <= d;
      rd_en <= dr; rd_idx <= 8'(ri);
      @(posedge clk);
      #1;
      check(rd_valid == exp_v, $sformatf("rd_valid key %0d", ri));
      check(rd_data == exp_d, $sformatf("rd_data key %0d", ri));
      if (dw && wi < K) begin s_mem[wi] = d; s_ok[wi] = 1'b1; end
      check(key_ok == s_ok, "key_ok flags");
      we <= 0; rd_en <= 0;
    end
    rst_n <= 0;
    @(posedge clk); #1;
    check(key_ok == '0 && !rd_valid, "reset clears");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
