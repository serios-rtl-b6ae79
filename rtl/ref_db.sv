// ref_db -- the Reference database of SerIOS.
//
// Holds what initialisation learns about this particular photonic die:
//   * one tuning value per node, found by the bias-control unit, that cancels
//     the node's fabrication-process deviation; these also seed the keys;
//   * one golden value per baseline pattern, the output power the Reference
//     Finder read while the circuit was known to be unattacked.
// Both are small, so they are kept in registers. The tuning values are
// visible in parallel (the node drive and the key generator use all of them).
// Golden values are read through a pipelined port with a latency of LAT
// cycles, the golden-value access time (iota) of the detection latency:
// rd_req with rd_idx in cycle t gives rd_valid and rd_data in cycle t+LAT.
// Writes take effect on the next cycle; reset clears everything.
// Register storage is what the paper suggests ("a few registers"); the port
// structure and the pipelined read are this design's choices.
module ref_db
  import serios_pkg::*;
#(
  parameter int unsigned N_NODES = NODES,
  parameter int unsigned N_PAT   = PATTERNS,
  parameter int unsigned LAT     = REF_LAT
) (
  input  logic       clk,
  input  logic       rst_n,
  // tuning values (written by the bias-control unit)
  input  logic       tune_we,
  input  logic [7:0] tune_idx,
  input  code_t      tune_wdata,
  output code_t      tune [N_NODES],
  // golden values (written by the Reference Finder)
  input  logic       gold_we,
  input  logic [7:0] gold_idx,
  input  pwr_t       gold_wdata,
  // golden-value read port (Online Detector)
  input  logic       rd_req,
  input  logic [7:0] rd_idx,
  output logic       rd_valid,
  output pwr_t       rd_data
);

  pwr_t gold [N_PAT];
  logic pv   [LAT];
  pwr_t pd   [LAT];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int n = 0; n < int'(N_NODES); n++) tune[n] <= '0;
      for (int p = 0; p < int'(N_PAT); p++)   gold[p] <= '0;
      for (int k = 0; k < int'(LAT); k++) begin
        pv[k] <= 1'b0;
        pd[k] <= '0;
      end
    end else begin
      if (tune_we && int'(tune_idx) < int'(N_NODES)) tune[tune_idx] <= tune_wdata;
      if (gold_we && int'(gold_idx) < int'(N_PAT))   gold[gold_idx] <= gold_wdata;
      pv[0] <= rd_req;
      pd[0] <= (int'(rd_idx) < int'(N_PAT)) ? gold[rd_idx] : '0;
      for (int k = 1; k < int'(LAT); k++) begin
        pv[k] <= pv[k-1];
        pd[k] <= pd[k-1];
      end
    end
  end

  assign rd_valid = pv[LAT-1];
  assign rd_data  = pd[LAT-1];

endmodule
