// cyclic_shift -- cyclic shift unit.
//
// Applies a circulant permutation: row r of I(p) has its one in column
// (r + p) mod M. With the row offset r from the check node path and the shift
// p and block column base c*M from the bit node path, the bit node of the edge
// is c*M + (r + p) mod M. Because r and p are both below M, the modulo is one
// compare and one conditional subtraction. The check node address, valid and
// end-of-circulant flag are delayed to stay aligned with it.
//
// That QC codes need this unit, and what it computes, is the paper's; the
// single-stage form is this design's own.
//
// Timing: one register stage, one edge per clock. rst is synchronous.
module cyclic_shift #(
  parameter int unsigned M  = qc_sc_ldpc_pkg::DEF_M,
  parameter int unsigned L  = qc_sc_ldpc_pkg::DEF_L,
  parameter int unsigned DL = qc_sc_ldpc_pkg::DEF_DL,
  parameter int unsigned NB = qc_sc_ldpc_pkg::DEF_NB,
  localparam int unsigned R_W  = $clog2(M),
  localparam int unsigned CN_W = $clog2((L + DL - 1) * M),
  localparam int unsigned BN_W = $clog2(NB * L * M)
) (
  input  logic            clk,
  input  logic            rst,
  input  logic            in_valid,
  input  logic            in_last,
  input  logic [CN_W-1:0] in_cn_addr,
  input  logic [R_W-1:0]  in_r,
  input  logic [BN_W-1:0] in_col_base,
  input  logic [R_W-1:0]  in_shift,
  output logic            out_valid,
  output logic            out_last,
  output logic [CN_W-1:0] out_cn_addr,
  output logic [BN_W-1:0] out_bn_addr
);

  logic [R_W:0] sum;
  logic [R_W:0] col_off;

  always_comb begin
    sum     = {1'b0, in_r} + {1'b0, in_shift};
    col_off = (sum >= (R_W + 1)'(M)) ? sum - (R_W + 1)'(M) : sum;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      out_valid   <= 1'b0;
      out_last    <= 1'b0;
      out_cn_addr <= '0;
      out_bn_addr <= '0;
    end else begin
      out_valid <= in_valid;
      out_last  <= in_valid && in_last;
      if (in_valid) begin
        out_cn_addr <= in_cn_addr;
        out_bn_addr <= in_col_base + BN_W'(col_off);
      end
    end
  end

  a_operands_in_range: assert property (@(posedge clk) disable iff (rst)
    in_valid |-> (32'(in_r) < M && 32'(in_shift) < M));

endmodule
