// cn_addr_gen -- check node address generator.
//
// In a QC SC-LDPC matrix every row of block row j is one check node, so the
// check node of row offset r in block row j has address j*M + r. This block
// registers that address together with the row offset r, which the cyclic
// shift unit needs to find the bit node of the same edge, and carries the
// valid and end-of-circulant flags of the edge stream.
//
// The paper names this block and says that the address generators hold the
// matrix information and produce the decoder's addresses; the arithmetic
// follows from the circulant layout, and the one-register stage is this
// design's own choice.
//
// Timing: one register stage, one edge per clock. rst is synchronous.
module cn_addr_gen #(
  parameter int unsigned M  = qc_sc_ldpc_pkg::DEF_M,
  parameter int unsigned L  = qc_sc_ldpc_pkg::DEF_L,
  parameter int unsigned DL = qc_sc_ldpc_pkg::DEF_DL,
  localparam int unsigned V_W  = $clog2(L + DL - 1),
  localparam int unsigned R_W  = $clog2(M),
  localparam int unsigned CN_W = $clog2((L + DL - 1) * M)
) (
  input  logic            clk,
  input  logic            rst,
  input  logic            in_valid,
  input  logic [V_W-1:0]  in_v,
  input  logic [R_W-1:0]  in_r,
  input  logic            in_last,
  output logic            out_valid,
  output logic [CN_W-1:0] out_cn_addr,
  output logic [R_W-1:0]  out_r,
  output logic            out_last
);

  always_ff @(posedge clk) begin
    if (rst) begin
      out_valid   <= 1'b0;
      out_last    <= 1'b0;
      out_cn_addr <= '0;
      out_r       <= '0;
    end else begin
      out_valid <= in_valid;
      out_last  <= in_valid && in_last;
      if (in_valid) begin
        out_cn_addr <= CN_W'(32'(in_v) * M + 32'(in_r));
        out_r       <= in_r;
      end
    end
  end

endmodule
