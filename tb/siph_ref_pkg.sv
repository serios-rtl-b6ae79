// siph_ref_pkg -- behavioural description of the photonic sub-system used by
// the testbenches, shared by the model module and by the expected-value code.
//
// Each node has a phase response with one peak: its contribution to the
// power at its associated output is PEAK - SLOPE*|code - opt| (not below
// zero), where opt is the node's process-variation offset. The power at an
// output is BASE + 64*input + the sum of its nodes' contributions when a
// laser is on, and zero otherwise; an attack adds a signed offset to an
// output or blanks it. Power units are 0.01 dBm-like integer steps.
package siph_ref_pkg;
  parameter int PEAK  = 3000;
  parameter int SLOPE = 4;
  parameter int BASE  = 500;

  function automatic int node_pwr(int code, int opt);
    int d = (code > opt) ? code - opt : opt - code;
    int v = PEAK - SLOPE * d;
    return (v < 0) ? 0 : v;
  endfunction

  // power at output o; codes/assoc/opt are per node
  function automatic int out_pwr(int o, int in_port, bit laser,
                                 int codes[], int assoc[], int opt[],
                                 int delta, bit blank);
    int s;
    if (!laser || blank) return 0;
    s = BASE + 64 * in_port + delta;
    foreach (codes[n]) if (assoc[n] == o) s += node_pwr(codes[n], opt[n]);
    if (s < 0) s = 0;
    if (s > 65535) s = 65535;
    return s;
  endfunction
endpackage
