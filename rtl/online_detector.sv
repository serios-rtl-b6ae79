// online_detector -- runtime attack detector of SerIOS.
//
// A trojan or a hostile neighbour (heating, rerouting, dropping or flooding
// light) changes the optical power that reaches the outputs. The detector
// replays, at fixed intervals, every baseline pattern whose golden value was
// captured at initialisation: it fetches the golden value, applies the same
// configuration and input, reads the same output and compares. A pattern
// whose reading differs from its golden value by more than the threshold is
// reported (its bit in fail_mask) and raises the alarm. The detector says
// that the circuit is disturbed, not which node is.
//
// Rounds start every INTERVAL cycles while enable is high, back to back
// while enable and continuous are both high (a new round starts the cycle
// after done), or at once on trigger. Per pattern a round spends REF_LAT
// cycles on the golden-value read (iota) and STAB+CONV cycles on the
// measurement (upsilon + varsigma); the probe request is raised in the cycle
// the golden value arrives, so a round of P patterns takes
// P*(REF_LAT+STAB+CONV) cycles, after which done pulses and fail_mask holds
// the round's result. alarm stays set until alarm_clr. STAB+CONV must be at
// least 2.
// The compare, the per-pattern loop and the two modes (at intervals or
// continuously) follow the paper; the single global threshold, the interval
// length and the sticky alarm are this design's choices.
module online_detector
  import serios_pkg::*;
#(
  parameter int unsigned N_NODES  = NODES,
  parameter int unsigned N_PAT    = PATTERNS,
  parameter int unsigned INTERVAL = 2500   // 10 us at 4 ns
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       enable,
  input  logic       continuous,
  input  logic       trigger,
  input  pwr_t       threshold,
  input  logic       alarm_clr,
  output logic       busy,
  output logic       done,
  output logic       alarm,
  output logic [N_PAT-1:0] fail_mask,
  input  pattern_t   pat  [N_PAT],
  input  code_t      cfg  [N_PAT][N_NODES],
  input  code_t      tune [N_NODES],
  // golden-value read port
  output logic       rd_req,
  output logic [7:0] rd_idx,
  input  logic       rd_valid,
  input  pwr_t       rd_data,
  // probe client
  output probe_req_t preq,
  output code_t      pcodes [N_NODES],
  input  logic       pack,
  input  pwr_t       preading
);

  typedef enum logic [1:0] {IDLE, RD, WAIT, MEAS} state_e;
  state_e state;
  logic [7:0] p;
  pwr_t       gold;
  pwr_t       diff;
  logic [N_PAT-1:0] fails;
  logic [$clog2(INTERVAL + 1)-1:0] tmr;
  logic       tick;

  assign tick = enable && (int'(tmr) == int'(INTERVAL) - 1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tmr <= '0;
    end else if (!enable || tick) begin
      tmr <= '0;
    end else begin
      tmr <= tmr + 1'b1;
    end
  end

  assign diff = (preading > gold) ? preading - gold : gold - preading;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= IDLE;
      p         <= '0;
      gold      <= '0;
      fails     <= '0;
      fail_mask <= '0;
      alarm     <= 1'b0;
      done      <= 1'b0;
    end else begin
      done <= 1'b0;
      if (alarm_clr) alarm <= 1'b0;
      unique case (state)
        IDLE: if (trigger || tick || (enable && continuous)) begin
          p     <= '0;
          fails <= '0;
          state <= RD;
        end
        RD:   state <= WAIT;
        WAIT: if (rd_valid) begin
          gold  <= rd_data;
          state <= MEAS;
        end
        MEAS: if (pack) begin
          if (diff > threshold) begin
            fails[p] <= 1'b1;
            alarm    <= 1'b1;
          end
          if (int'(p) == int'(N_PAT) - 1) begin
            fail_mask <= fails | ((diff > threshold) ? (N_PAT'(1) << p) : '0);
            done      <= 1'b1;
            state     <= IDLE;
          end else begin
            p     <= p + 1'b1;
            state <= RD;
          end
        end
        default: state <= IDLE;
      endcase
    end
  end

  assign busy          = (state != IDLE);
  assign rd_req        = (state == RD);
  assign rd_idx        = p;
  assign preq.req      = (state == MEAS) || (state == WAIT && rd_valid);
  assign preq.in_port  = pat[p].in_port;
  assign preq.out_port = pat[p].out_port;
  always_comb for (int n = 0; n < int'(N_NODES); n++) pcodes[n] = cfg[p][n] + tune[n];

endmodule
