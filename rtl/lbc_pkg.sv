// lbc_pkg: constants, types and elaboration-time helpers shared by the
// integral sampler / NTT polynomial multiplier.
//
// The default parameter set is the BLISS-style ring: q = 12289, n = 512,
// Gaussian sigma ~ 215 (largest sample 1935 = 9*sigma), so every coefficient
// is W = 14 bits wide and the NTT pipeline has log2(n) = 9 butterfly units.
// PSI is a primitive 2n-th root of unity mod q (11^12 mod 12289), needed by
// the negative wrapped convolution; it is this design's choice, the
// published text does not list a root.
package lbc_pkg;

  localparam int unsigned Q_DEF   = 12289;
  localparam int unsigned N_DEF   = 512;
  localparam int unsigned W_DEF   = 14;
  localparam int unsigned PSI_DEF = 10302;

  // Configuration of one reconfigurable butterfly unit (Fig. "PE" variants).
  typedef enum logic [1:0] {
    PE_ORD = 2'd0,   // ordinary Gentleman-Sande butterfly, modular arithmetic
    PE_MUL = 2'd1,   // lower path only: general multiplier
    PE_ADD = 2'd2    // upper path only: general adder with carry in/out
  } pe_mode_t;

  // What the whole butterfly array is doing.
  typedef enum logic [1:0] {
    ARR_NTT  = 2'd0, // streaming NTT / inverse NTT
    ARR_ADD  = 2'd1, // wide two's-complement addition (Knuth-Yao d update)
    ARR_MUL  = 2'd2  // wide multiplication k * dx (Ziggurat sLine)
  } arr_mode_t;

  // Which sampling control owns the array while sampling.
  typedef enum logic {
    SAMP_KY  = 1'b0,
    SAMP_ZIG = 1'b1
  } samp_sel_t;

  // a^e mod m, evaluated at elaboration / initialisation time only.
  function automatic int unsigned modpow(int unsigned a, int unsigned e,
                                         int unsigned m);
    longint unsigned r, b, mm;
    int unsigned x;
    mm = 64'(m); r = 1; b = 64'(a) % mm; x = e;
    while (x != 0) begin
      if (x[0]) r = (r * b) % mm;
      b = (b * b) % mm;
      x = x >> 1;
    end
    return 32'(r);
  endfunction

  // Bit reversal of the low `bits` bits of v.
  function automatic int unsigned bitrev(int unsigned v, int unsigned bits);
    int unsigned r;
    r = 0;
    for (int unsigned k = 0; k < bits; k++) r = (r << 1) | ((v >> k) & 1);
    return r;
  endfunction

endpackage
