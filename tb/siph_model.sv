// siph_model -- behavioural model of the photonic sub-system (MZI mesh,
// laser inputs, photodetectors and converters) for simulation only; it is not
// synthesizable logic and stands for the optical hardware around SerIOS.
// The power at each output is computed combinationally from the node codes
// with siph_ref_pkg::out_pwr; the converter is idealised (its time is the
// probe's CONV window). atk_delta / atk_blank inject attacks per output.
module siph_model
  import serios_pkg::*;
#(
  parameter int unsigned N_NODES = NODES,
  parameter int unsigned N_IOS   = IOS
) (
  input  code_t            node_code [N_NODES],
  input  logic [N_IOS-1:0] laser_en,
  input  int               opt       [N_NODES],
  input  int               assoc     [N_NODES],
  input  int               atk_delta [N_IOS],
  input  logic             atk_blank [N_IOS],
  output pwr_t             pd_reading [N_IOS]
);
  always_comb begin
    automatic int c [] = new[N_NODES];
    automatic int a [] = new[N_NODES];
    automatic int q [] = new[N_NODES];
    automatic int inp = 0;
    for (int i = 0; i < int'(N_IOS); i++) if (laser_en[i]) inp = i;
    for (int n = 0; n < int'(N_NODES); n++) begin
      c[n] = int'(node_code[n]);
      a[n] = assoc[n];
      q[n] = opt[n];
    end
    for (int o = 0; o < int'(N_IOS); o++)
      pd_reading[o] = pwr_t'(siph_ref_pkg::out_pwr(o, inp, |laser_en, c, a, q,
                                                   atk_delta[o], atk_blank[o]));
  end
endmodule
