// serios_top -- SerIOS: a security unit for an electronic-photonic system.
//
// SerIOS sits beside the electronic controller of a silicon-photonic
// sub-system and talks to it only through the node phase drives, the laser
// inputs and the output photodetectors. It works in two phases:
//
//   initialisation (once, or again on init_start for re-calibration)
//     1. bcm        finds per-node tuning values that cancel the die's
//                   fabrication deviations;
//     2. ref_finder plays every baseline pattern and stores its output power
//                   as the golden value;
//     3. key_gen    turns the tuning values into one key per pattern and
//                   stores them in key_store;
//   runtime
//     4. online_detector replays the patterns at fixed intervals (or on
//                   det_trigger) and raises alarm when an output drifts from
//                   its golden value by more than threshold.
//
// The offline order finder's results (tuning order, node-output
// associations, patterns and their configurations) are loaded beforehand
// through the seq_* write port into seq_mem. All photonic measurements go
// through one shared siph_probe (client 0: bcm, 1: ref_finder,
// 2: online_detector); the sequencer here lets only one unit run at a time.
//
// Photonic interface: node_code (one phase code per node), laser_en (one bit
// per optical input), oe_conv (high while the converter should sample) and
// pd_reading (one converted power per output). While SerIOS is not
// measuring, node_code carries the application controller's settings
// (app_node_code) with each node's tuning value added, so the process-
// variation compensation also serves normal traffic, and laser_en follows
// app_laser_en. Keys leave only through the key_rd_* port; key_regen makes
// the keys again at runtime (between detection rounds). init_done is high
// once all three initialisation steps have finished; the detector runs only
// then, at intervals (det_enable) or back to back (det_continuous too).
// The block split follows the paper; the sequencer, the shared probe, the
// compensation of the application's codes and every port format are this
// design's.
module serios_top
  import serios_pkg::*;
#(
  parameter int unsigned N_NODES  = NODES,
  parameter int unsigned N_IOS    = IOS,
  parameter int unsigned N_PAT    = PATTERNS,
  parameter int unsigned S_MAX    = STEPS,
  parameter int unsigned INTERVAL = 2500
) (
  input  logic       clk,
  input  logic       rst_n,
  // Input Sequence load
  input  logic       seq_wr_en,
  input  wr_kind_e   seq_wr_kind,
  input  logic [7:0] seq_wr_idx,
  input  logic [7:0] seq_wr_node,
  input  logic [$bits(seq_entry_t)-1:0] seq_wr_data,
  // initialisation
  input  logic       init_start,
  input  logic       key_regen,
  output logic       init_busy,
  output logic       init_done,
  // online detection
  input  logic       det_enable,
  input  logic       det_continuous,
  input  logic       det_trigger,
  input  pwr_t       threshold,
  input  logic       alarm_clr,
  output logic       alarm,
  output logic [N_PAT-1:0] fail_mask,
  output logic       det_done,
  // key read-out
  input  logic       key_rd_en,
  input  logic [7:0] key_rd_idx,
  output logic       key_rd_valid,
  output key_t       key_rd_data,
  output logic [N_PAT-1:0] key_ok,
  // the application's own node settings and inputs (electronic controller)
  input  code_t      app_node_code [N_NODES],
  input  logic [N_IOS-1:0] app_laser_en,
  // photonic sub-system
  output code_t      node_code [N_NODES],
  output logic [N_IOS-1:0] laser_en,
  output logic       oe_conv,
  input  pwr_t       pd_reading [N_IOS]
);

  // ---------------- Input Sequence ----------------
  seq_entry_t seq [N_NODES];
  pattern_t   pat [N_PAT];
  code_t      cfg [N_PAT][N_NODES];

  seq_mem #(.N_NODES(N_NODES), .N_PAT(N_PAT)) u_seq (
    .clk, .rst_n, .wr_en(seq_wr_en), .wr_kind(seq_wr_kind), .wr_idx(seq_wr_idx),
    .wr_node(seq_wr_node), .wr_data(seq_wr_data), .seq, .pat, .cfg);

  // ---------------- sequencer ----------------
  typedef enum logic [2:0] {S_IDLE, S_BCM, S_REF, S_KEY, S_RUN} phase_e;
  phase_e phase;
  logic bcm_start, ref_start, key_start;
  logic bcm_busy, bcm_done, ref_busy, ref_done, key_busy, key_done;
  logic det_busy, det_en;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      phase     <= S_IDLE;
      bcm_start <= 1'b0;
      ref_start <= 1'b0;
      key_start <= 1'b0;
    end else begin
      bcm_start <= 1'b0;
      ref_start <= 1'b0;
      key_start <= 1'b0;
      unique case (phase)
        S_IDLE: if (init_start) begin
          phase     <= S_BCM;
          bcm_start <= 1'b1;
        end
        S_RUN: if (init_start && !det_busy) begin
          phase     <= S_BCM;
          bcm_start <= 1'b1;
        end else if (key_regen && !det_busy) begin
          phase     <= S_KEY;
          key_start <= 1'b1;
        end
        S_BCM: if (bcm_done) begin
          phase     <= S_REF;
          ref_start <= 1'b1;
        end
        S_REF: if (ref_done) begin
          phase     <= S_KEY;
          key_start <= 1'b1;
        end
        S_KEY: if (key_done) phase <= S_RUN;
        default: phase <= S_IDLE;
      endcase
    end
  end

  assign init_busy = (phase == S_BCM) || (phase == S_REF) || (phase == S_KEY);
  assign init_done = (phase == S_RUN);
  assign det_en    = (phase == S_RUN);

  // ---------------- O-E probe ----------------
  probe_req_t preq   [3];
  code_t      app_comp [N_NODES];
  code_t      pcodes [3][N_NODES];
  logic       pack   [3];
  pwr_t       preading;

  siph_probe #(.N_NODES(N_NODES), .N_IOS(N_IOS), .N_CLIENTS(3)) u_probe (
    .clk, .rst_n, .creq(preq), .ccodes(pcodes), .cack(pack), .reading(preading),
    .dflt_codes(app_comp), .dflt_laser(app_laser_en),
    .node_code, .laser_en, .conv(oe_conv), .pd_reading);

  // ---------------- Reference database ----------------
  logic       tune_we, gold_we, rd_req, rd_valid;
  logic [7:0] tune_idx, gold_idx, rd_idx;
  code_t      tune_wdata;
  pwr_t       gold_wdata, rd_data;
  code_t      tune [N_NODES];

  ref_db #(.N_NODES(N_NODES), .N_PAT(N_PAT)) u_ref (
    .clk, .rst_n, .tune_we, .tune_idx, .tune_wdata, .tune,
    .gold_we, .gold_idx, .gold_wdata, .rd_req, .rd_idx, .rd_valid, .rd_data);

  // the application's settings reach the nodes with the tuning values added
  always_comb for (int n = 0; n < int'(N_NODES); n++) app_comp[n] = app_node_code[n] + tune[n];

  // ---------------- initialisation units ----------------
  bcm #(.N_NODES(N_NODES), .S_MAX(S_MAX)) u_bcm (
    .clk, .rst_n, .start(bcm_start), .busy(bcm_busy), .done(bcm_done), .seq,
    .preq(preq[0]), .pcodes(pcodes[0]), .pack(pack[0]), .preading,
    .tune_we, .tune_idx, .tune_wdata);

  ref_finder #(.N_NODES(N_NODES), .N_PAT(N_PAT)) u_rf (
    .clk, .rst_n, .start(ref_start), .busy(ref_busy), .done(ref_done), .pat, .cfg, .tune,
    .preq(preq[1]), .pcodes(pcodes[1]), .pack(pack[1]), .preading,
    .gold_we, .gold_idx, .gold_wdata);

  logic       key_we;
  logic [7:0] key_idx;
  key_t       key_data;

  key_gen #(.N_NODES(N_NODES), .N_PAT(N_PAT)) u_kg (
    .clk, .rst_n, .start(key_start), .busy(key_busy), .done(key_done), .seq, .pat, .tune,
    .key_we, .key_idx, .key_data);

  key_store #(.N_KEYS(N_PAT)) u_ks (
    .clk, .rst_n, .we(key_we), .widx(key_idx), .wdata(key_data),
    .rd_en(key_rd_en), .rd_idx(key_rd_idx), .rd_valid(key_rd_valid), .rd_data(key_rd_data),
    .key_ok);

  // ---------------- runtime ----------------
  online_detector #(.N_NODES(N_NODES), .N_PAT(N_PAT), .INTERVAL(INTERVAL)) u_det (
    .clk, .rst_n, .enable(det_en && det_enable), .continuous(det_continuous), .trigger(det_en && det_trigger),
    .threshold, .alarm_clr, .busy(det_busy), .done(det_done), .alarm, .fail_mask,
    .pat, .cfg, .tune, .rd_req, .rd_idx, .rd_valid, .rd_data,
    .preq(preq[2]), .pcodes(pcodes[2]), .pack(pack[2]), .preading);

  // the sequencer runs one unit at a time
  a_one_unit: assert property (@(posedge clk) disable iff (!rst_n)
    (int'(bcm_busy) + int'(ref_busy) + int'(key_busy) + int'(det_busy)) <= 1)
    else $error("serios_top: two units active at once");

endmodule
