// tb_util_pkg: helpers shared by the testbenches: encoding of small
// integers into FP64/FP32/FP16 bit patterns (exact for the value ranges the
// testbenches use) and packing of matrix rows into 256-bit memory words.
package tb_util_pkg;
  import maco_pkg::*;
  function automatic logic [63:0] enc(int v, int ew, int mw);
    logic [63:0] r; int m, e;
    r = '0;
    if (v == 0) return r;
    m = v < 0 ? -v : v; e = 0;
    while ((m >> e) > 1) e++;
    r[mw +: 16] = 16'(e + (1 << (ew-1)) - 1);
    for (int i = 0; i < mw; i++) r[i] = (i - mw + e >= 0) ? m[i-mw+e] : 1'b0;
    for (int i = ew+mw; i < 64; i++) r[i] = 1'b0;
    r[ew+mw] = v < 0;
    return r;
  endfunction
  function automatic int ebits(fp_mode_e md);
    return md == MODE_FP64 ? 64 : md == MODE_FP32X2 ? 32 : 16;
  endfunction
  function automatic logic [63:0] enc_m(int v, fp_mode_e md);
    case (md)
      MODE_FP32X2: return enc(v, 8, 23) & 64'hffff_ffff;
      MODE_FP16X4: return enc(v, 5, 10) & 64'hffff;
      default:     return enc(v, 11, 52);
    endcase
  endfunction
endpackage
