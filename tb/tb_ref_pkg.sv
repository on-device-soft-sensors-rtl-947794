// tb_ref_pkg -- reference model for the soft-sensor testbenches, written
// independently of the RTL with plain integer arithmetic.
//
// ref_word() recomputes the placeholder ROM contents with 64-bit arithmetic
// masked to 32 bits; ref_neuron() is the integer definition of one Q4.4
// neuron (exact sum of products, plus 16*bias, floor divide by 16, clamp to
// -128..127, optional ReLU); ref_mlp() chains two layers with the seeds the
// engine uses (hidden weights 1, hidden biases 2, output weights 3, output
// biases 4; weight of neuron o, input i at index o*IN + i).
package tb_ref_pkg;

  function automatic longint mask32(longint v);
    return v & 64'h0000_0000_FFFF_FFFF;
  endfunction

  function automatic int ref_word(int seed, int idx);
    longint h;
    h = mask32(longint'(seed) * 64'h9E37_79B1) ^ mask32(longint'(idx) + 64'h7F4A_7C15);
    h = h ^ (h >> 15);
    h = mask32(h * 64'h2C1B_3C6D);
    h = h ^ (h >> 12);
    h = mask32(h * 64'h297A_2D39);
    h = h ^ (h >> 15);
    h = h % 16;
    return (h >= 8) ? int'(h) - 16 : int'(h);
  endfunction

  function automatic int floor_div16(longint v);
    longint q;
    q = v / 16;
    if ((v % 16) != 0 && v < 0) q = q - 1;
    return int'(q);
  endfunction

  // Returns the neuron output; sat_hi/sat_lo/relu_hit report what happened.
  function automatic int ref_neuron(int xs[], int ws[], int bias, bit relu,
                                    output bit sat_hi, output bit sat_lo,
                                    output bit relu_hit);
    longint sum;
    int v;
    sum = 0;
    foreach (xs[i]) sum += longint'(xs[i]) * longint'(ws[i]);
    sum += longint'(bias) * 16;
    v = floor_div16(sum);
    sat_hi = (v > 127);
    sat_lo = (v < -128);
    if (v > 127)  v = 127;
    if (v < -128) v = -128;
    relu_hit = relu && (v < 0);
    if (relu && v < 0) v = 0;
    return v;
  endfunction

  class ref_mlp;
    int n, h, k;
    int hid[];
    int y[];
    int relu_hits, sat_events;

    function new(int n_in, int n_hid, int n_out);
      n = n_in; h = n_hid; k = n_out;
      hid = new[h];
      y   = new[k];
    endfunction

    function void run(int x[]);
      int xs[], ws[];
      bit shi, slo, rh;
      relu_hits  = 0;
      sat_events = 0;
      xs = new[n];
      ws = new[n];
      for (int o = 0; o < h; o++) begin
        for (int i = 0; i < n; i++) begin xs[i] = x[i]; ws[i] = ref_word(1, o*n + i); end
        hid[o] = ref_neuron(xs, ws, ref_word(2, o), 1'b1, shi, slo, rh);
        relu_hits  += int'(rh);
        sat_events += int'(shi) + int'(slo);
      end
      xs = new[h];
      ws = new[h];
      for (int o = 0; o < k; o++) begin
        for (int i = 0; i < h; i++) begin xs[i] = hid[i]; ws[i] = ref_word(3, o*h + i); end
        y[o] = ref_neuron(xs, ws, ref_word(4, o), 1'b0, shi, slo, rh);
        sat_events += int'(shi) + int'(slo);
      end
    endfunction
  endclass

endpackage
