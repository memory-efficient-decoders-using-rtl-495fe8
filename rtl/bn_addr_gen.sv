// bn_addr_gen -- bit node address generator with the circulant shift store.
//
// Holds the parity-check matrix of a reuse-T QC SC-LDPC code: T*dl*nb shift
// values (24 for the reuse-3 (4,8) code), small enough to sit in logic rather
// than block RAM. For the circulant at block row j, block column c it looks
// up that circulant's shift p and computes the first bit node of the block
// column, c*M. The cyclic shift unit then turns the row offset into the bit
// node address c*M + (r + p) mod M.
//
// Table lookup: protograph t = c / nb, period slot s = t mod T, row within the
// column k = j - t, column within the protograph b = c mod nb; entry
// (s*dl + k)*nb + b of SHIFTS (16 bits per entry, entry 0 in the low bits).
// The reuse of T sets of circulant columns along the chain is the paper's
// construction; the table contents and their ordering are this design's own,
// as the paper gives no shift values.
//
// Timing: one register stage, updated when in_valid is high, aligned with
// cn_addr_gen. rst is synchronous.
module bn_addr_gen #(
  parameter int unsigned M  = qc_sc_ldpc_pkg::DEF_M,
  parameter int unsigned L  = qc_sc_ldpc_pkg::DEF_L,
  parameter int unsigned DL = qc_sc_ldpc_pkg::DEF_DL,
  parameter int unsigned NB = qc_sc_ldpc_pkg::DEF_NB,
  parameter int unsigned T  = qc_sc_ldpc_pkg::DEF_T,
  parameter logic [T*DL*NB*qc_sc_ldpc_pkg::SHIFT_ENTRY_W-1:0] SHIFTS = qc_sc_ldpc_pkg::DEF_SHIFTS,
  localparam int unsigned V_W  = $clog2(L + DL - 1),
  localparam int unsigned H_W  = $clog2(NB * L),
  localparam int unsigned R_W  = $clog2(M),
  localparam int unsigned BN_W = $clog2(NB * L * M)
) (
  input  logic            clk,
  input  logic            rst,
  input  logic            in_valid,
  input  logic [V_W-1:0]  in_v,
  input  logic [H_W-1:0]  in_h,
  output logic [BN_W-1:0] out_col_base,
  output logic [R_W-1:0]  out_shift
);

  localparam int unsigned EW = qc_sc_ldpc_pkg::SHIFT_ENTRY_W;
  localparam int unsigned NS = T * DL * NB;

  // The shift store: a constant table, which synthesis maps to LUTs.
  logic [R_W-1:0] shift_rom [NS];
  always_comb begin
    for (int i = 0; i < NS; i++) shift_rom[i] = R_W'(SHIFTS[i*EW +: EW]);
  end

  int unsigned idx;
  always_comb idx = qc_sc_ldpc_pkg::shift_index(32'(in_v), 32'(in_h), DL, NB, T);

  always_ff @(posedge clk) begin
    if (rst) begin
      out_col_base <= '0;
      out_shift    <= '0;
    end else if (in_valid) begin
      out_col_base <= BN_W'(32'(in_h) * M);
      out_shift    <= shift_rom[idx < NS ? idx : 0];
    end
  end

  // The address counter only passes circulants that exist.
  a_idx_in_range: assert property (@(posedge clk) disable iff (rst) in_valid |-> idx < NS);

endmodule
