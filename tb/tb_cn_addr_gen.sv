// tb_cn_addr_gen -- self-checking test of the check node address generator.
//
// Default code size. Drives random (block row, row offset) pairs with random
// valid and last flags on the falling edge and checks, one clock later, that
// the address is j*M + r, that r is carried along, and that valid and last
// are delayed by exactly one clock (last only together with valid).
module tb_cn_addr_gen;
  localparam int unsigned M = qc_sc_ldpc_pkg::DEF_M, L = qc_sc_ldpc_pkg::DEF_L, DL = qc_sc_ldpc_pkg::DEF_DL;
  localparam int unsigned V_W = $clog2(L + DL - 1), R_W = $clog2(M), CN_W = $clog2((L + DL - 1) * M);

  logic clk = 0, rst = 1;
  logic in_valid = 0, in_last = 0, out_valid, out_last;
  logic [V_W-1:0] in_v = '0;
  logic [R_W-1:0] in_r = '0, out_r;
  logic [CN_W-1:0] out_cn_addr;
  int checks = 0, failures = 0;

  cn_addr_gen #(.M(M), .L(L), .DL(DL)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    int unsigned v, r;
    bit vl, ls;
    repeat (3) @(negedge clk);
    rst = 0;
    for (int i = 0; i < 3000; i++) begin
      v  = (i < 4) ? ((i % 2) ? L + DL - 2 : 0) : $urandom_range(0, L + DL - 2);
      r  = (i < 4) ? ((i / 2) ? M - 1 : 0) : $urandom_range(0, M - 1);
      vl = (i < 4) ? 1 : $urandom_range(0, 3) != 0;
      ls = $urandom_range(0, 1);
      in_v = V_W'(v); in_r = R_W'(r); in_valid = vl; in_last = ls;
      @(negedge clk);
      check(out_valid == vl, "valid delay");
      check(out_last == (vl && ls), "last delay");
      if (vl) begin
        check(out_cn_addr == CN_W'(v * M + r), $sformatf("cn addr %0d for v=%0d r=%0d", out_cn_addr, v, r));
        check(out_r == R_W'(r), "row offset");
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
