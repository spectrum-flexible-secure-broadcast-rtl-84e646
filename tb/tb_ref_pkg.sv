// tb_ref_pkg - reference models shared by the testbenches.
//
// ref_up_sample gives sample n of an upsampled BPSK burst, written directly
// from the definition of the transmit waveform (linear interpolation between
// symbols, last symbol ramping to zero) and independently of the RTL:
//   m = n / U, j = n % U, a_m = bit_m ? +1 : -1, a_L = 0,
//   y_n = AMP * ((U - j) * a_m + j * a_{m+1}) / U.
package tb_ref_pkg;

  localparam int MAXL = 512;

  function automatic int ref_up_sample(logic [MAXL-1:0] bits, int len, int u,
                                       int n, int amp);
    int m, j, a0, a1;
    m  = n / u;
    j  = n % u;
    a0 = bits[m] ? 1 : -1;
    a1 = (m + 1 < len) ? (bits[m+1] ? 1 : -1) : 0;
    return (amp * ((u - j) * a0 + j * a1)) / u;
  endfunction

  // Uniform noise in [-a, a].
  function automatic int noise(int a);
    if (a == 0) return 0;
    return int'($urandom_range(2 * a)) - a;
  endfunction

endpackage
