// snn_ref_pkg: integer reference model of the Bi-SNN for the testbenches.
//
// layer_step runs one time step of one layer: optional leak
// v -= v >>> shift, then the inputs in ascending index order, each adding
// (+1 input) or subtracting (-1 input) the weight of its row with saturation
// to 16 bits, then, for firing layers, bipolar firing at +/-vth with reset to
// zero. It is written from the neuron description, not from the RTL.
package snn_ref_pkg;
  localparam int VMAX = 32767;
  localparam int VMIN = -32768;

  function automatic int sat16(input int v);
    if (v > VMAX) return VMAX;
    if (v < VMIN) return VMIN;
    return v;
  endfunction

  // w is indexed [input * n_out + output]
  function automatic void layer_step(input int n_in, input int n_out, input int in_t[],
                                     input int w[], inout int v[], inout int s[],
                                     input int shift, input bit leak_en, input int vth,
                                     input bit fire);
    for (int j = 0; j < n_out; j++) begin
      if (leak_en) v[j] = v[j] - (v[j] >>> shift);
    end
    for (int i = 0; i < n_in; i++) begin
      if (in_t[i] == 0) continue;
      for (int j = 0; j < n_out; j++)
        v[j] = sat16(v[j] + in_t[i] * w[i * n_out + j]);
    end
    for (int j = 0; j < n_out; j++) begin
      if (!fire) begin
        s[j] = 0;
      end else if (v[j] >= vth) begin
        s[j] = 1;  v[j] = 0;
      end else if (v[j] <= -vth) begin
        s[j] = -1; v[j] = 0;
      end else begin
        s[j] = 0;
      end
    end
  endfunction
endpackage
