// siph_probe -- opto-electrical measurement engine shared by the SerIOS units.
//
// Every SerIOS step that looks at the photonic circuit is the same action:
// drive a code into every node's phase shifter, light one optical input,
// wait for the nodes to settle (upsilon, STAB cycles), let the photodetector
// and converter produce a value (varsigma, CONV cycles) and read the power at
// one output. The bias-control unit, the Reference Finder and the Online
// Detector all do this, so the action lives here once and the three units
// are its clients (client 0 has priority over 1, 1 over 2; in operation only
// one of them requests at a time, which an assertion checks).
//
// Timing: a client raises req with its codes and ports. The probe drives
// those codes straight onto node_code and counts STAB+CONV cycles; on the
// last one it raises ack for that client with the photodetector value on
// reading. If the client keeps req high the next measurement starts on the
// next cycle, so a client that updates its codes on the ack edge gets one
// reading every STAB+CONV cycles with no gap: the control logic runs in the
// shadow of the settle and conversion time. conv is high in the conversion
// window and tells the converter when to sample. Dropping req aborts.
// While no client requests, the node codes and lasers follow dflt_codes and
// dflt_laser, which the top feeds with the application's settings.
// The split into a shared engine and the fixed priority are this design's
// choices; the settle and conversion delays are the paper's.
module siph_probe
  import serios_pkg::*;
#(
  parameter int unsigned N_NODES   = NODES,
  parameter int unsigned N_IOS     = IOS,
  parameter int unsigned N_CLIENTS = 3,
  parameter int unsigned STAB      = STAB_CYCLES,
  parameter int unsigned CONV      = CONV_CYCLES
) (
  input  logic       clk,
  input  logic       rst_n,
  // clients
  input  probe_req_t creq   [N_CLIENTS],
  input  code_t      ccodes [N_CLIENTS][N_NODES],
  output logic       cack   [N_CLIENTS],
  output pwr_t       reading,
  // drive used while no client measures (the application's own settings)
  input  code_t      dflt_codes [N_NODES],
  input  logic [N_IOS-1:0] dflt_laser,
  // photonic side
  output code_t      node_code [N_NODES],
  output logic [N_IOS-1:0] laser_en,
  output logic       conv,
  input  pwr_t       pd_reading [N_IOS]
);

  localparam int unsigned MEAS = STAB + CONV;
  localparam int unsigned CW   = $clog2(MEAS + 1);
  localparam int unsigned SW   = $clog2(N_CLIENTS + 1);

  logic          active;
  logic [SW-1:0] sel;
  int unsigned   n_req;
  logic [CW-1:0] cnt;
  logic          last;

  always_comb begin
    active = 1'b0;
    sel    = '0;
    for (int c = N_CLIENTS - 1; c >= 0; c--)
      if (creq[c].req) begin
        active = 1'b1;
        sel    = SW'(c);
      end
  end

  assign last = active && (cnt == CW'(MEAS - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt <= '0;
    end else begin
      if (!active || last) cnt <= '0;
      else                                 cnt <= cnt + 1'b1;
    end
  end

  always_comb begin
    for (int n = 0; n < int'(N_NODES); n++)
      node_code[n] = active ? ccodes[sel][n] : dflt_codes[n];
    laser_en = active ? '0 : dflt_laser;
    if (active && int'(creq[sel].in_port) < int'(N_IOS))
      laser_en[creq[sel].in_port] = 1'b1;
    conv = active && (cnt >= CW'(STAB));
    reading = (int'(creq[sel].out_port) < int'(N_IOS)) ? pd_reading[creq[sel].out_port] : '0;
    for (int c = 0; c < int'(N_CLIENTS); c++)
      cack[c] = last && (sel == SW'(c));
  end

  // The units take turns: never two requests at once.
  always_comb begin
    n_req = 0;
    for (int c = 0; c < int'(N_CLIENTS); c++) n_req += int'(creq[c].req);
  end
  a_one_client: assert property (@(posedge clk) disable iff (!rst_n) n_req <= 1)
    else $error("siph_probe: more than one client requests");

endmodule
