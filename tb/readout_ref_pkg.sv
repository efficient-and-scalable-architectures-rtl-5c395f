// readout_ref_pkg: reference arithmetic for the readout testbenches.
//
// Written independently of the RTL: the local oscillator comes from $sin in
// double precision rounded to Q1.15, and every step uses plain 64-bit
// integers with the number formats stated in the RTL headers (demodulated
// samples and features saturated to 16 bits, arithmetic right shifts).
package readout_ref_pkg;

  localparam real PI = 3.14159265358979323846;

  // Q1.15 sine of table entry idx of a 1024-entry period.
  function automatic longint ref_sin(input int idx);
    real x;
    x = 32767.0 * $sin(2.0 * PI * real'(idx % 1024) / 1024.0);
    if (x >= 0.0) return longint'($rtoi(x + 0.5));
    else          return -longint'($rtoi(-x + 0.5));
  endfunction

  function automatic longint sat16(input longint v);
    if (v > 32767)  return 32767;
    if (v < -32768) return -32768;
    return v;
  endfunction

  // Demodulate one sample at 32-bit phase ph.
  function automatic void ref_demod(input longint i, input longint q,
                                    input longint unsigned ph,
                                    output longint oi, output longint oq);
    int     idx;
    longint s, c;
    idx = int'((ph >> 22) & 1023);
    s   = ref_sin(idx);
    c   = ref_sin(idx + 256);
    oi  = sat16((i * c + q * s) >>> 15);
    oq  = sat16((q * c - i * s) >>> 15);
  endfunction

  // One neuron: sum x*w + (b << 10), >>> 10, optional ReLU, saturate.
  function automatic longint ref_neuron(input longint acc_in, input bit relu);
    longint v;
    v = acc_in >>> 10;
    if (relu && v < 0) v = 0;
    return sat16(v);
  endfunction

endpackage
