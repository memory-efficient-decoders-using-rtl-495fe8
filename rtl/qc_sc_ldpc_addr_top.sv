// qc_sc_ldpc_addr_top -- storage and address-generation model for a reuse-3
// quasi-cyclic spatially coupled LDPC decoder.
//
// Given the element position of one circulant of the parity-check matrix
// (block row on cmd_v, block column on cmd_h), the model emits the M edges of
// that circulant as (check node address, bit node address) pairs, one per
// clock. The whole matrix of the default (4,8,129) code with M = 400 is
// 1032 circulants, 412,800 edges, from a stored table of only 24 shifts.
//
// Structure, as in the paper's block diagram: address counter -> check node
// address generator and bit node address generator in parallel -> cyclic
// shift unit -> output controller. Clock and a synchronous reset are the only
// other inputs. The command handshake, cmd_err, the counters and the
// pipeline depth are this design's own.
//
// Timing: a command taken at clock edge k gives its first address pair at
// out_valid after edge k+4 and its last after edge k+M+3; a following command
// may be taken on the edge that starts the last row, so back-to-back
// circulants stream with no gap (one edge per clock).
module qc_sc_ldpc_addr_top #(
  parameter int unsigned M  = qc_sc_ldpc_pkg::DEF_M,
  parameter int unsigned L  = qc_sc_ldpc_pkg::DEF_L,
  parameter int unsigned DL = qc_sc_ldpc_pkg::DEF_DL,
  parameter int unsigned NB = qc_sc_ldpc_pkg::DEF_NB,
  parameter int unsigned T  = qc_sc_ldpc_pkg::DEF_T,
  parameter logic [T*DL*NB*qc_sc_ldpc_pkg::SHIFT_ENTRY_W-1:0] SHIFTS = qc_sc_ldpc_pkg::DEF_SHIFTS,
  localparam int unsigned V_W  = $clog2(L + DL - 1),
  localparam int unsigned H_W  = $clog2(NB * L),
  localparam int unsigned R_W  = $clog2(M),
  localparam int unsigned CN_W = $clog2((L + DL - 1) * M),
  localparam int unsigned BN_W = $clog2(NB * L * M)
) (
  input  logic            clk,
  input  logic            rst,
  // element position of a circulant (vertical = block row, horizontal = block column)
  input  logic            cmd_valid,
  output logic            cmd_ready,
  input  logic [V_W-1:0]  cmd_v,
  input  logic [H_W-1:0]  cmd_h,
  output logic            cmd_err,
  // address stream
  output logic            out_valid,
  output logic            out_last,
  output logic [CN_W-1:0] cn_addr,
  output logic [BN_W-1:0] bn_addr,
  output logic [31:0]     edge_count,
  output logic [31:0]     circ_count
);

  logic           cnt_valid, cnt_last;
  logic [V_W-1:0] cnt_v;
  logic [H_W-1:0] cnt_h;
  logic [R_W-1:0] cnt_r;

  logic            cn_valid, cn_last;
  logic [CN_W-1:0] cn_cn_addr;
  logic [R_W-1:0]  cn_r;

  logic [BN_W-1:0] bn_col_base;
  logic [R_W-1:0]  bn_shift;

  logic            cs_valid, cs_last;
  logic [CN_W-1:0] cs_cn_addr;
  logic [BN_W-1:0] cs_bn_addr;

  addr_counter #(.M(M), .L(L), .DL(DL), .NB(NB)) u_addr_counter (
    .clk, .rst,
    .cmd_valid, .cmd_ready, .cmd_v, .cmd_h, .cmd_err,
    .cnt_valid, .cnt_v, .cnt_h, .cnt_r, .cnt_last
  );

  cn_addr_gen #(.M(M), .L(L), .DL(DL)) u_cn_addr_gen (
    .clk, .rst,
    .in_valid(cnt_valid), .in_v(cnt_v), .in_r(cnt_r), .in_last(cnt_last),
    .out_valid(cn_valid), .out_cn_addr(cn_cn_addr), .out_r(cn_r), .out_last(cn_last)
  );

  bn_addr_gen #(.M(M), .L(L), .DL(DL), .NB(NB), .T(T), .SHIFTS(SHIFTS)) u_bn_addr_gen (
    .clk, .rst,
    .in_valid(cnt_valid), .in_v(cnt_v), .in_h(cnt_h),
    .out_col_base(bn_col_base), .out_shift(bn_shift)
  );

  cyclic_shift #(.M(M), .L(L), .DL(DL), .NB(NB)) u_cyclic_shift (
    .clk, .rst,
    .in_valid(cn_valid), .in_last(cn_last), .in_cn_addr(cn_cn_addr), .in_r(cn_r),
    .in_col_base(bn_col_base), .in_shift(bn_shift),
    .out_valid(cs_valid), .out_last(cs_last), .out_cn_addr(cs_cn_addr), .out_bn_addr(cs_bn_addr)
  );

  output_ctrl #(.M(M), .L(L), .DL(DL), .NB(NB)) u_output_ctrl (
    .clk, .rst,
    .in_valid(cs_valid), .in_last(cs_last), .in_cn_addr(cs_cn_addr), .in_bn_addr(cs_bn_addr),
    .out_valid, .out_last, .out_cn_addr(cn_addr), .out_bn_addr(bn_addr),
    .edge_count, .circ_count
  );

endmodule
