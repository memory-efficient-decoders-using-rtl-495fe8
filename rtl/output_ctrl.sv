// output_ctrl -- output controller.
//
// Sequences the output side: presents each (check node, bit node) address
// pair for one clock with out_valid, marks the last edge of each circulant with
// out_last, and keeps running counts of the edges and of the complete
// circulants delivered since reset, so the consumer can tell when a whole
// matrix or a set of circulants has been issued. It also checks that every
// circulant arrives as exactly M edges.
//
// The paper names this block and says it sequences the output data; the
// register stage, flags and counters are this design's own.
//
// Timing: one register stage. rst is synchronous and clears the counters.
module output_ctrl #(
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
  input  logic [BN_W-1:0] in_bn_addr,
  output logic            out_valid,
  output logic            out_last,
  output logic [CN_W-1:0] out_cn_addr,
  output logic [BN_W-1:0] out_bn_addr,
  output logic [31:0]     edge_count,
  output logic [31:0]     circ_count
);

  logic [R_W-1:0] row_q;  // edges seen so far in the current circulant

  always_ff @(posedge clk) begin
    if (rst) begin
      out_valid   <= 1'b0;
      out_last    <= 1'b0;
      out_cn_addr <= '0;
      out_bn_addr <= '0;
      edge_count  <= '0;
      circ_count  <= '0;
      row_q       <= '0;
    end else begin
      out_valid <= in_valid;
      out_last  <= in_valid && in_last;
      if (in_valid) begin
        out_cn_addr <= in_cn_addr;
        out_bn_addr <= in_bn_addr;
        edge_count  <= edge_count + 1;
        if (in_last) begin
          circ_count <= circ_count + 1;
          row_q      <= '0;
        end else begin
          row_q <= row_q + 1'b1;
        end
      end
    end
  end

  // A circulant ends exactly on its M-th edge.
  a_last_on_mth: assert property (@(posedge clk) disable iff (rst)
    in_valid |-> (in_last == (row_q == R_W'(M - 1))));

endmodule
