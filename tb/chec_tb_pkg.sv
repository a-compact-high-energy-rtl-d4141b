// chec_tb_pkg: helpers shared by the testbenches.
//
// sample_val gives the 12-bit value the sampling-ASIC model stores for a
// channel at a given absolute time: a fixed hash of module, channel and time,
// so a testbench can predict every sample without the model.
package chec_tb_pkg;
  function automatic logic [11:0] sample_val(int unsigned mod, int unsigned ch,
                                             longint unsigned t);
    longint unsigned h;
    h = t * 64'd2654435761 + 64'(mod) * 64'd40503 + 64'(ch) * 64'd104729;
    h = h ^ (h >> 13);
    return h[11:0];
  endfunction
endpackage
