// key_gen -- unique key generation of SerIOS.
//
// The tuning values the bias-control unit found are a fingerprint of the
// die: they compensate random fabrication deviations that differ from node
// to node and from chip to chip. They serve as seeds, and shift-and-logic
// mixing functions turn each seed into a key, one key per communicating
// pair (baseline pattern), written into the key storage.
//
// Seed of pattern p: the tuning values of the nodes whose (valid) tuning-
// sequence entry is associated with p's output port, each placed at bit
// node*TUNE_W of a NODES*TUNE_W-bit word (other nodes contribute zero),
// folded to KEY_W bits by XOR. Mixing function of pattern p: rotate the
// seed left by ROT*p bits, then apply the paper's example function
//   h(x): for every bit i with b_i != b_{i+1},
//         XOR(b_i, b_{i-1}) is shifted left by OR(b_i, b_{i+1}),
// read here as: key bit (i + OR(b_i,b_{i+1})) mod KEY_W is set when
// b_i != b_{i+1} and b_i XOR b_{i-1} is 1 (indices wrap). h and the use of
// one function per pair follow the paper; the seed layout, the fold, the
// rotation that makes the functions differ, and reading h this way are
// this design's choices.
//
// Timing: after start, one key per clock cycle (the paper's one cycle per
// function), key_we/key_idx/key_data for pattern 0..N_PAT-1 in consecutive
// cycles; done pulses the cycle after the last key.
module key_gen
  import serios_pkg::*;
#(
  parameter int unsigned N_NODES = NODES,
  parameter int unsigned N_PAT   = PATTERNS,
  parameter int unsigned KW      = KEY_W,
  parameter int unsigned ROT     = 13
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       start,
  output logic       busy,
  output logic       done,
  input  seq_entry_t seq  [N_NODES],
  input  pattern_t   pat  [N_PAT],
  input  code_t      tune [N_NODES],
  output logic       key_we,
  output logic [7:0] key_idx,
  output logic [KW-1:0] key_data
);

  localparam int unsigned SW = N_NODES * TUNE_W;

  logic          run;
  logic [7:0]    p;
  logic [SW-1:0] wide;
  logic [KW-1:0] seed, x, k;

  // seed of the current pattern
  always_comb begin
    wide = '0;
    for (int j = 0; j < int'(N_NODES); j++)
      if (seq[j].valid && int'(seq[j].node) < int'(N_NODES) && seq[j].out_port == pat[p].out_port)
        wide[seq[j].node * TUNE_W +: TUNE_W] = tune[seq[j].node];
    seed = '0;
    for (int b = 0; b < int'(SW); b++)
      seed[b % KW] = seed[b % KW] ^ wide[b];
  end

  // mixing function of the current pattern
  always_comb begin
    x = (seed << ((ROT * p) % KW)) | (seed >> ((KW - (ROT * p) % KW) % KW));
    k = '0;
    for (int i = 0; i < int'(KW); i++) begin
      automatic logic bi = x[i];
      automatic logic bn = x[(i + 1) % KW];
      automatic logic bp = x[(i + KW - 1) % KW];
      if (bi != bn)
        k[(i + ((bi | bn) ? 1 : 0)) % KW] = k[(i + ((bi | bn) ? 1 : 0)) % KW] | (bi ^ bp);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run  <= 1'b0;
      p    <= '0;
      done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (!run) begin
        if (start) begin
          run <= 1'b1;
          p   <= '0;
        end
      end else if (int'(p) == int'(N_PAT) - 1) begin
        run  <= 1'b0;
        done <= 1'b1;
      end else begin
        p <= p + 1'b1;
      end
    end
  end

  assign busy     = run;
  assign key_we   = run;
  assign key_idx  = p;
  assign key_data = k;

endmodule
