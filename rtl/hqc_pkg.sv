// hqc_pkg -- constants and helper functions shared by the HQC-128 sampler
// and ring-arithmetic RTL.
//
// HQC-128 works in R = F2[X]/(X^n - 1) with n = 17669. Key generation samples
// two sparse polynomials x and y of Hamming weight omega = 66 and one dense
// polynomial h. Dense polynomials are kept in explicit form (one bit per
// coefficient) in memories of MW-bit words; sparse y is additionally kept in
// support form (a list of omega coordinates).
//
// The word width MW = 64 and the SHAKE256 rate of 17 lanes are choices of this
// design (the squeeze works on 64-bit lanes); n and omega are HQC-128's.
//
// barrett_r(m) is the Barrett factor floor(2^32 / m). make_rlut() derives the
// one-bit table of the R recurrence R_{i-1} = R_i - 14 + LUT[i], where R_i is
// the factor for modulus n - i; rlut_ok() reports whether every step of the
// chosen (n, omega) really is 13 or 14, which is what makes the table one bit
// wide.
package hqc_pkg;

  localparam int unsigned N          = 17669;          // code length n
  localparam int unsigned OMEGA      = 66;             // weight of x and y (KeyGen)
  localparam int unsigned MW         = 64;             // memory word width
  localparam int unsigned NWORDS     = (N + MW - 1) / MW;  // 277 words per polynomial
  localparam int unsigned AW         = $clog2(NWORDS); // word address width
  localparam int unsigned CW         = $clog2(N);      // coordinate width
  localparam int unsigned IW         = 7;              // loop index width (omega <= 127)
  localparam int unsigned RW         = 18;             // Barrett factor width
  localparam int unsigned RATE_LANES = 17;             // SHAKE256 rate, 64-bit lanes
  localparam int unsigned LUT_MAX    = 128;            // capacity of the R table

  function automatic longint unsigned barrett_r(input longint unsigned m);
    return (64'd1 << 32) / m;
  endfunction

  // LUT[i] = 1 when R_{i-1} = R_i - 13, LUT[i] = 0 when R_{i-1} = R_i - 14.
  function automatic logic [LUT_MAX-1:0] make_rlut(input longint unsigned n, input longint unsigned omega);
    logic [LUT_MAX-1:0] l;
    l = '0;
    for (longint unsigned k = 1; k < omega; k++)
      l[int'(k)] = ((barrett_r(n - k) - barrett_r(n - k + 1)) == 64'd13);
    return l;
  endfunction

  function automatic bit rlut_ok(input longint unsigned n, input longint unsigned omega);
    longint unsigned d;
    for (longint unsigned k = 1; k < omega; k++) begin
      d = barrett_r(n - k) - barrett_r(n - k + 1);
      if (d != 64'd13 && d != 64'd14) return 1'b0;
    end
    return 1'b1;
  endfunction

endpackage
