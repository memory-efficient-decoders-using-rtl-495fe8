// qc_sc_ldpc_pkg -- code constants and the reuse-3 shift table shared by the
// address-generation hardware of a quasi-cyclic spatially coupled LDPC code.
//
// The code is a (dl, dr, L) = (4, 8, 129) coupled chain of protographs with
// nb = 2 bit nodes and nc = 1 check node per protograph, lifted by M = 400
// (N = nb*M*L = 103,200 bits, rate 0.488). These numbers are the ones the
// paper's 100K evaluation code uses. The parity-check matrix is a staircase of
// M x M circulant permutation matrices I(p): row r of I(p) has its one in
// column (r + p) mod M.
//
// Block column c (0 .. nb*L-1) belongs to protograph t = c / nb and holds dl
// circulants, in block rows t .. t+dl-1. With circulant reuse of period T, the
// circulant in block row j, block column c has shift
//     SHIFTS[((t mod T)*dl + (j - t))*nb + (c mod nb)]
// so only T*dl*nb shift values exist (24 for T = 3). The paper gives no shift
// values; the table below is this design's own: drawn at random below M and
// kept because the resulting matrix has no 4-cycles (for every pair of block
// rows j1, j2 and block columns c1, c2 that all hold circulants,
// p(j1,c1) - p(j2,c1) + p(j2,c2) - p(j1,c2) != 0 mod M).
package qc_sc_ldpc_pkg;

  localparam int unsigned DEF_M  = 400;  // circulant size (lifting factor)
  localparam int unsigned DEF_L  = 129;  // coupled protographs in the chain
  localparam int unsigned DEF_DL = 4;    // bit node degree d_l
  localparam int unsigned DEF_NB = 2;    // bit nodes per protograph n_b
  localparam int unsigned DEF_T  = 3;    // reuse period (reuse-3)

  // Width of one entry of a flat shift table.
  localparam int unsigned SHIFT_ENTRY_W = 16;

  // Reuse-3 shift table, entry i at bits [16*i +: 16], i = (s*DL + k)*NB + b.
  // Listed from entry 23 down to entry 0.
  localparam logic [DEF_T*DEF_DL*DEF_NB*SHIFT_ENTRY_W-1:0] DEF_SHIFTS = {
    16'd92,  16'd349, 16'd286, 16'd157, 16'd292, 16'd60,  16'd276, 16'd73,   // s = 2
    16'd214, 16'd148, 16'd68,  16'd285, 16'd23,  16'd113, 16'd25,  16'd203,  // s = 1
    16'd299, 16'd295, 16'd31,  16'd298, 16'd321, 16'd322, 16'd114, 16'd63    // s = 0
  };

  // Index into a flat shift table for block row j and block column c.
  // Only meaningful when the circulant exists (0 <= j - c/nb < dl).
  function automatic int unsigned shift_index(int unsigned j, int unsigned c,
                                              int unsigned dl, int unsigned nb,
                                              int unsigned t_period);
    int unsigned t;
    t = c / nb;
    return ((t % t_period) * dl + (j - t)) * nb + (c % nb);
  endfunction

endpackage
