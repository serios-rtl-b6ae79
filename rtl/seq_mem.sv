// seq_mem -- the Input Sequence memory of SerIOS.
//
// The offline order finder analyses the photonic circuit at design time and
// produces two lists, loaded here by a host before initialisation:
//   * the tuning sequence: one entry per node in the order the nodes must be
//     tuned, each naming the node, the input that excites it and the output
//     at which its effect is read (the node-output association);
//   * the baseline communication patterns: for each pattern the input it
//     drives, the output it reads and one configuration code per node.
// The tuning sequence feeds the bias-control unit and the key generator; the
// patterns feed the Reference Finder and the Online Detector.
//
// Interface: a single write port (wr_en, wr_kind, wr_idx, wr_node, wr_data)
// and the whole contents as parallel outputs, since every consumer steps
// through the lists and the lists are small. A write is visible on the
// outputs the cycle after wr_en. Reset clears every entry. Holding the
// contents in flip-flops and the write format are this design's choices;
// the paper only says the results are kept in a secure memory.
module seq_mem
  import serios_pkg::*;
#(
  parameter int unsigned N_NODES = NODES,
  parameter int unsigned N_PAT   = PATTERNS
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     wr_en,
  input  wr_kind_e                 wr_kind,
  input  logic [7:0]               wr_idx,   // sequence slot or pattern
  input  logic [7:0]               wr_node,  // node, for WR_CFG
  input  logic [$bits(seq_entry_t)-1:0] wr_data,
  output seq_entry_t               seq [N_NODES],
  output pattern_t                 pat [N_PAT],
  output code_t                    cfg [N_PAT][N_NODES]
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < int'(N_NODES); i++) seq[i] <= '0;
      for (int p = 0; p < int'(N_PAT); p++) begin
        pat[p] <= '0;
        for (int n = 0; n < int'(N_NODES); n++) cfg[p][n] <= '0;
      end
    end else if (wr_en) begin
      unique case (wr_kind)
        WR_SEQ: if (int'(wr_idx) < int'(N_NODES)) seq[wr_idx] <= seq_entry_t'(wr_data);
        WR_PAT: if (int'(wr_idx) < int'(N_PAT))   pat[wr_idx] <= pattern_t'(wr_data[$bits(pattern_t)-1:0]);
        WR_CFG: if (int'(wr_idx) < int'(N_PAT) && int'(wr_node) < int'(N_NODES))
                  cfg[wr_idx][wr_node] <= wr_data[TUNE_W-1:0];
        default: ;
      endcase
    end
  end

endmodule
