// tb_cyclic_shift -- self-checking test of the cyclic shift unit.
//
// Default code size. Drives the corner cases r + p = M-1, M and 2M-2 and then
// random (r, p, column base, check address) sets, and checks one clock later
// that the bit node address is base + (r + p) mod M, that the check node
// address passes unchanged, and that valid and last are delayed by one clock.
module tb_cyclic_shift;
  localparam int unsigned M = qc_sc_ldpc_pkg::DEF_M, L = qc_sc_ldpc_pkg::DEF_L;
  localparam int unsigned DL = qc_sc_ldpc_pkg::DEF_DL, NB = qc_sc_ldpc_pkg::DEF_NB;
  localparam int unsigned R_W = $clog2(M), CN_W = $clog2((L + DL - 1) * M), BN_W = $clog2(NB * L * M);

  logic clk = 0, rst = 1;
  logic in_valid = 0, in_last = 0, out_valid, out_last;
  logic [CN_W-1:0] in_cn_addr = '0, out_cn_addr;
  logic [R_W-1:0] in_r = '0, in_shift = '0;
  logic [BN_W-1:0] in_col_base = '0, out_bn_addr;
  int checks = 0, failures = 0;

  cyclic_shift dut (.*);
  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    int unsigned r, p, c, cn;
    bit vl, ls;
    repeat (3) @(negedge clk);
    rst = 0;
    for (int i = 0; i < 4000; i++) begin
      case (i)
        0: begin r = M - 1; p = 0;     end
        1: begin r = 1;     p = M - 1; end
        2: begin r = M - 1; p = M - 1; end
        3: begin r = 0;     p = 0;     end
        default: begin r = $urandom_range(0, M - 1); p = $urandom_range(0, M - 1); end
      endcase
      c  = $urandom_range(0, NB * L - 1);
      cn = $urandom_range(0, (L + DL - 1) * M - 1);
      vl = (i < 4) ? 1 : $urandom_range(0, 3) != 0;
      ls = $urandom_range(0, 1);
      in_valid = vl; in_last = ls; in_r = R_W'(r); in_shift = R_W'(p);
      in_col_base = BN_W'(c * M); in_cn_addr = CN_W'(cn);
      @(negedge clk);
      check(out_valid == vl && out_last == (vl && ls), "flag delay");
      if (vl) begin
        check(out_bn_addr == BN_W'(c * M + (r + p) % M),
              $sformatf("bn addr r=%0d p=%0d c=%0d got %0d", r, p, c, out_bn_addr));
        check(out_cn_addr == CN_W'(cn), "cn addr passes");
      end
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
