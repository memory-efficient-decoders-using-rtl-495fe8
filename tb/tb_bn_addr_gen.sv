// tb_bn_addr_gen -- self-checking test of the bit node address generator.
//
// Default reuse-3 code. For every circulant of the whole staircase (every
// block column c and each of its dl block rows) checks the column base c*M and
// the shift against a reference table kept here in plain index order
// (period slot s, row k, column b), so that a wrong packing or lookup shows.
// Also checks that the outputs hold while in_valid is low.
module tb_bn_addr_gen;
  localparam int unsigned M = qc_sc_ldpc_pkg::DEF_M, L = qc_sc_ldpc_pkg::DEF_L;
  localparam int unsigned DL = qc_sc_ldpc_pkg::DEF_DL, NB = qc_sc_ldpc_pkg::DEF_NB, T = qc_sc_ldpc_pkg::DEF_T;
  localparam int unsigned V_W = $clog2(L + DL - 1), H_W = $clog2(NB * L), R_W = $clog2(M), BN_W = $clog2(NB * L * M);

  // ref_shift[s][k][b]
  int unsigned ref_shift [T][DL][NB] = '{
    '{'{63, 114}, '{322, 321}, '{298, 31}, '{295, 299}},
    '{'{203, 25}, '{113, 23}, '{285, 68}, '{148, 214}},
    '{'{73, 276}, '{60, 292}, '{157, 286}, '{349, 92}}
  };

  logic clk = 0, rst = 1, in_valid = 0;
  logic [V_W-1:0] in_v = '0;
  logic [H_W-1:0] in_h = '0;
  logic [BN_W-1:0] out_col_base;
  logic [R_W-1:0] out_shift;
  int checks = 0, failures = 0;

  bn_addr_gen dut (.*);
  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    int unsigned t, p;
    logic [BN_W-1:0] base_hold;
    logic [R_W-1:0] shift_hold;
    repeat (3) @(negedge clk);
    rst = 0;
    for (int unsigned c = 0; c < NB * L; c++)
      for (int unsigned k = 0; k < DL; k++) begin
        t = c / NB;
        p = ref_shift[t % T][k][c % NB];
        in_valid = 1; in_h = H_W'(c); in_v = V_W'(t + k);
        @(negedge clk);
        check(out_col_base == BN_W'(c * M), $sformatf("column base c=%0d", c));
        check(out_shift == R_W'(p), $sformatf("shift c=%0d k=%0d got %0d exp %0d", c, k, out_shift, p));
        // hold while idle
        base_hold = out_col_base; shift_hold = out_shift;
        in_valid = 0; in_h = H_W'($urandom_range(0, NB * L - 1));
        @(negedge clk);
        check(out_col_base == base_hold && out_shift == shift_hold, "hold when idle");
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
