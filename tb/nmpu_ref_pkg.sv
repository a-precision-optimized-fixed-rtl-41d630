// nmpu_ref_pkg: integer reference model of the NMPU datapath for the
// testbenches. It works on plain integers scaled by powers of two (the value
// of each step in units of its LSB) instead of bit slices, so it is written
// independently of the RTL. Default formats only.
package nmpu_ref_pkg;

  typedef struct {
    int  br_p;        // branch result, units of 2^-2, positive branch (>= 0)
    int  br_n;        // branch result, units of 2^-2, negative branch (>= 0, subtracted)
    int  out;
    bit  ovf_shift;   // first overflow check saturated (either branch)
    bit  ovf_round;   // second overflow check saturated (either branch)
    bit  sat_sum;
    bit  sat_round;
    bit  relu_zero;
  } ref_t;

  // first cut/round stage on a value in units of 2^-5, result in units of 2^-2
  function automatic int ref_round1(int v, int method);
    int q    = v / 8;          // v >= 0
    int rem  = v % 8;          // removed bits: 4 = 2^-3, 2 = 2^-4, 1 = 2^-5
    bit g    = (q % 2) == 1;
    bit up;
    case (method)
      1: up = rem >= 4;
      2: up = !g && rem >= 2;
      3: up = !g && rem >= 4;
      4: up = !g && rem >= 1;
      default: up = 0;
    endcase
    return q + int'(up);
  endfunction

  // one branch: din (integer code), scale in units of 2^-7, shift 0..3
  // returns magnitude in units of 2^-2 and the two overflow flags
  function automatic int ref_branch(int din, int scale, int shift, int method,
                                    output bit ovf_shift, output bit ovf_round);
    int x = (din * scale) / (1 << shift);  // units of 2^-7, floor (all >= 0)
    int v;
    int r;
    ovf_shift = x >= 256 * 128;            // integer part beyond 8 bits
    v = ovf_shift ? 256 * 32 - 1 : x / 4;  // units of 2^-5, saturated to 255.96875
    r = ref_round1(v, method);
    ovf_round = r > 1023;                  // beyond 255.75
    if (ovf_round) r = 1023;
    return r;
  endfunction

  function automatic int floor_div4(int s);
    return (s >= 0) ? s / 4 : -((-s + 3) / 4);
  endfunction

  // whole NMPU for one column; offset in units of 2^-1 (signed)
  function automatic ref_t ref_nmpu(int dp, int dn, int sc_p, int sh_p, int sc_n, int sh_n,
                                    int offset, bit relu_en, int m1, int m2);
    ref_t r;
    bit o1, o2, o3, o4;
    int s, y;
    r.br_p = ref_branch(dp, sc_p, sh_p, m1, o1, o2);
    r.br_n = ref_branch(dn, sc_n, sh_n, m1, o3, o4);
    r.ovf_shift = o1 || o3;
    r.ovf_round = o2 || o4;
    s = r.br_p - r.br_n + 2 * offset;      // units of 2^-2
    r.sat_sum = (s > 511) || (s < -512);   // (8,2) two's complement range
    if (s > 511)  s = 511;
    if (s < -512) s = -512;
    case (m2)
      2: y = (s >= 0) ? floor_div4(s + 2) : floor_div4(s);
      3: y = floor_div4(s + 2);
      default: y = floor_div4(s);
    endcase
    r.sat_round = y > 127;
    if (y > 127) y = 127;
    r.relu_zero = relu_en && y < 0;
    r.out = r.relu_zero ? 0 : y;
    return r;
  endfunction

endpackage
