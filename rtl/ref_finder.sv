// ref_finder -- Reference Finder of SerIOS: captures the golden values.
//
// At initialisation, right after the bias-control unit has compensated the
// nodes and while no other IP is using the photonic circuit, each baseline
// communication pattern is played once: the pattern's configuration is
// applied to the nodes, its input is lit and its output is read. That
// reading is the pattern's golden value, the behaviour of an unattacked
// circuit, and is written to the Reference database.
//
// The node drive of a pattern is the pattern's configuration code plus the
// node's tuning value (modulo 2^TUNE_W), so golden values and later runtime
// readings are both taken on the compensated circuit. Adding the two is this
// design's choice; the paper says tuning values are used by the online
// blocks but not how they combine with a configuration.
//
// Timing: one probe measurement (STAB+CONV cycles) per pattern, back to
// back; done pulses with the last golden-value write.
module ref_finder
  import serios_pkg::*;
#(
  parameter int unsigned N_NODES = NODES,
  parameter int unsigned N_PAT   = PATTERNS
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       start,
  output logic       busy,
  output logic       done,
  input  pattern_t   pat  [N_PAT],
  input  code_t      cfg  [N_PAT][N_NODES],
  input  code_t      tune [N_NODES],
  // probe client
  output probe_req_t preq,
  output code_t      pcodes [N_NODES],
  input  logic       pack,
  input  pwr_t       preading,
  // Reference database golden write port
  output logic       gold_we,
  output logic [7:0] gold_idx,
  output pwr_t       gold_wdata
);

  logic       run;
  logic [7:0] p;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run        <= 1'b0;
      p          <= '0;
      done       <= 1'b0;
      gold_we    <= 1'b0;
      gold_idx   <= '0;
      gold_wdata <= '0;
    end else begin
      done    <= 1'b0;
      gold_we <= 1'b0;
      if (!run) begin
        if (start) begin
          run <= 1'b1;
          p   <= '0;
        end
      end else if (pack) begin
        gold_we    <= 1'b1;
        gold_idx   <= p;
        gold_wdata <= preading;
        if (int'(p) == int'(N_PAT) - 1) begin
          run  <= 1'b0;
          done <= 1'b1;
        end else begin
          p <= p + 1'b1;
        end
      end
    end
  end

  assign busy          = run;
  assign preq.req      = run;
  assign preq.in_port  = pat[p].in_port;
  assign preq.out_port = pat[p].out_port;
  always_comb for (int n = 0; n < int'(N_NODES); n++) pcodes[n] = cfg[p][n] + tune[n];

endmodule
