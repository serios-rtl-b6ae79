// bcm -- Bias Control and Mitigation unit of SerIOS.
//
// Fabrication-process variation shifts every MZI's phase response a little,
// and because light passes through several nodes in a row the errors add up
// along a path. The unit therefore tunes the nodes one at a time, in the
// order the offline analysis put in the Input Sequence, and only ever looks
// at output photodetectors, never at a node directly.
//
// For each sequence entry (node i, input, affected output):
//   1. measure the output with the current codes: this is the reference
//      (or, if the entry's use_target bit is set, the stored target is);
//   2. raise node i's tuning value by one step and measure again;
//   3. repeat 2 while the reference is below the reading;
//   4. store the node's tuning value in the Reference database.
// Steps 1-3 are the paper's loop. The loop is bounded at S_MAX-1 (628 for the
// 629 phase values between -pi and pi), a bound the paper implies by counting
// 629 values per node but does not state as a stop rule. Tuning values of
// nodes already done stay applied while later nodes are tuned, and all start
// at zero; both are this design's choices.
//
// Timing: every measurement goes through the O-E probe and lasts STAB+CONV
// cycles; decisions are made on the probe's ack edge, so a node that ends at
// tuning value k takes (k+1)*(STAB+CONV) cycles and the whole run takes the
// sum of that over the nodes; an entry whose valid bit is clear is skipped
// in one cycle. done pulses in the cycle of the last store.
module bcm
  import serios_pkg::*;
#(
  parameter int unsigned N_NODES = NODES,
  parameter int unsigned S_MAX   = STEPS
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       start,
  output logic       busy,
  output logic       done,
  input  seq_entry_t seq [N_NODES],
  // probe client
  output probe_req_t preq,
  output code_t      pcodes [N_NODES],
  input  logic       pack,
  input  pwr_t       preading,
  // Reference database tuning write port
  output logic       tune_we,
  output logic [7:0] tune_idx,
  output code_t      tune_wdata
);

  typedef enum logic [1:0] {IDLE, REF, STEP} state_e;
  state_e      state;
  code_t       tv [N_NODES];
  pwr_t        ref_lvl;
  logic [7:0]  i;
  seq_entry_t  e;
  logic [7:0]  nd;
  logic        cont;

  assign e  = seq[i];
  assign nd = (int'(e.node) < int'(N_NODES)) ? e.node : 8'd0;
  // keep stepping while the reading is above the reference, up to the bound
  assign cont = (ref_lvl < preading) && (int'(tv[nd]) < int'(S_MAX) - 1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= IDLE;
      i          <= '0;
      ref_lvl    <= '0;
      done       <= 1'b0;
      tune_we    <= 1'b0;
      tune_idx   <= '0;
      tune_wdata <= '0;
      for (int n = 0; n < int'(N_NODES); n++) tv[n] <= '0;
    end else begin
      done    <= 1'b0;
      tune_we <= 1'b0;
      unique case (state)
        IDLE: if (start) begin
          for (int n = 0; n < int'(N_NODES); n++) tv[n] <= '0;
          i     <= '0;
          state <= REF;
        end
        REF: if (!e.valid) begin
          if (int'(i) == int'(N_NODES) - 1) begin
            state <= IDLE;
            done  <= 1'b1;
          end else begin
            i <= i + 1'b1;
          end
        end else if (pack) begin
          ref_lvl <= e.use_target ? e.target : preading;
          tv[nd]  <= tv[nd] + 1'b1;
          state   <= STEP;
        end
        STEP: if (pack) begin
          if (cont) begin
            tv[nd] <= tv[nd] + 1'b1;
          end else begin
            tune_we    <= 1'b1;
            tune_idx   <= nd;
            tune_wdata <= tv[nd];
            if (int'(i) == int'(N_NODES) - 1) begin
              state <= IDLE;
              done  <= 1'b1;
            end else begin
              i     <= i + 1'b1;
              state <= REF;
            end
          end
        end
        default: state <= IDLE;
      endcase
    end
  end

  assign busy          = (state != IDLE);
  assign preq.req      = (state != IDLE) && e.valid;
  assign preq.in_port  = e.in_port;
  assign preq.out_port = e.out_port;
  always_comb for (int n = 0; n < int'(N_NODES); n++) pcodes[n] = tv[n];

endmodule
