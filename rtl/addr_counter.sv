// addr_counter -- address counter of the QC SC-LDPC matrix storage model.
//
// Sequences the input side. A command names one circulant of the parity-check
// matrix by its element position: cmd_v is the vertical position (block row j,
// 0 .. L+dl-2) and cmd_h the horizontal position (block column c,
// 0 .. nb*L-1). The counter checks that the staircase has a circulant there,
// i.e. c < nb*L and 0 <= j - c/nb < dl; if so it walks the row offset r of
// that circulant through 0 .. M-1, one row per clock, so the generators after
// it produce one (check node, bit node) edge per clock. A command for a block
// that is all zero is dropped and flagged on cmd_err for one cycle.
//
// The paper names this block and says it sequences the input; the position
// check, the command handshake and the one-row-per-clock rate are this
// design's own choices.
//
// Interface and timing: cmd_valid/cmd_ready handshake, a command is taken on
// a rising clock edge with both high. cmd_ready is high when idle and during
// the last row of the current circulant, so circulants can follow each other
// with no gap. The cycle after a command is taken, cnt_valid is high with
// cnt_r = 0; cnt_last marks r = M-1. rst is synchronous and active high.
module addr_counter #(
  parameter int unsigned M  = qc_sc_ldpc_pkg::DEF_M,
  parameter int unsigned L  = qc_sc_ldpc_pkg::DEF_L,
  parameter int unsigned DL = qc_sc_ldpc_pkg::DEF_DL,
  parameter int unsigned NB = qc_sc_ldpc_pkg::DEF_NB,
  localparam int unsigned V_W = $clog2(L + DL - 1),
  localparam int unsigned H_W = $clog2(NB * L),
  localparam int unsigned R_W = $clog2(M)
) (
  input  logic           clk,
  input  logic           rst,
  input  logic           cmd_valid,
  output logic           cmd_ready,
  input  logic [V_W-1:0] cmd_v,
  input  logic [H_W-1:0] cmd_h,
  output logic           cmd_err,
  output logic           cnt_valid,
  output logic [V_W-1:0] cnt_v,
  output logic [H_W-1:0] cnt_h,
  output logic [R_W-1:0] cnt_r,
  output logic           cnt_last
);

  logic           busy;
  logic [V_W-1:0] v_q;
  logic [H_W-1:0] h_q;
  logic [R_W-1:0] r_q;
  logic           at_end;
  logic           accept;
  logic           legal;
  int unsigned    t_in;

  assign at_end    = (r_q == R_W'(M - 1));
  assign cmd_ready = !busy || at_end;
  assign accept    = cmd_valid && cmd_ready;

  // A circulant exists at (j, c) when c is a column of the chain and j lies in
  // the dl block rows that protograph t = c / nb connects to.
  always_comb begin
    t_in  = 32'(cmd_h) / NB;
    legal = (32'(cmd_h) < NB * L) && (32'(cmd_v) >= t_in) && (32'(cmd_v) - t_in < DL);
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      busy    <= 1'b0;
      v_q     <= '0;
      h_q     <= '0;
      r_q     <= '0;
      cmd_err <= 1'b0;
    end else begin
      cmd_err <= accept && !legal;
      if (accept && legal) begin
        busy <= 1'b1;
        v_q  <= cmd_v;
        h_q  <= cmd_h;
        r_q  <= '0;
      end else if (busy) begin
        if (at_end) busy <= 1'b0;
        else        r_q  <= r_q + 1'b1;
      end
    end
  end

  assign cnt_valid = busy;
  assign cnt_v     = v_q;
  assign cnt_h     = h_q;
  assign cnt_r     = r_q;
  assign cnt_last  = busy && at_end;

  // The row offset never leaves the circulant.
  a_r_in_range: assert property (@(posedge clk) disable iff (rst) busy |-> (32'(r_q) < M));

endmodule
