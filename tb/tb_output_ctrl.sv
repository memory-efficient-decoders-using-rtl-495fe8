// tb_output_ctrl -- self-checking test of the output controller.
//
// Small circulants (M = 6). Feeds 40 circulants of M edges each with random
// idle cycles between edges, and checks one clock later that the address pair,
// valid and last appear unchanged, and that the edge and circulant counters
// match counts kept here.
module tb_output_ctrl;
  localparam int unsigned M = 6, L = 10, DL = 4, NB = 2;
  localparam int unsigned CN_W = $clog2((L + DL - 1) * M), BN_W = $clog2(NB * L * M);

  logic clk = 0, rst = 1;
  logic in_valid = 0, in_last = 0, out_valid, out_last;
  logic [CN_W-1:0] in_cn_addr = '0, out_cn_addr;
  logic [BN_W-1:0] in_bn_addr = '0, out_bn_addr;
  logic [31:0] edge_count, circ_count;
  int checks = 0, failures = 0;

  output_ctrl #(.M(M), .L(L), .DL(DL), .NB(NB)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    int unsigned edges = 0, circs = 0, cn, bn;
    bit ls;
    repeat (3) @(negedge clk);
    rst = 0;
    @(negedge clk);
    check(edge_count == 0 && circ_count == 0 && !out_valid, "reset state");
    for (int c = 0; c < 40; c++)
      for (int r = 0; r < M; r++) begin
        // idle cycles
        repeat ($urandom_range(0, 1)) begin
          in_valid = 0; in_last = 0;
          @(negedge clk);
          check(!out_valid && !out_last, "idle gives no output");
          check(edge_count == edges && circ_count == circs, "counters hold");
        end
        cn = $urandom_range(0, (L + DL - 1) * M - 1);
        bn = $urandom_range(0, NB * L * M - 1);
        ls = (r == M - 1);
        in_valid = 1; in_last = ls; in_cn_addr = CN_W'(cn); in_bn_addr = BN_W'(bn);
        @(negedge clk);
        edges++;
        if (ls) circs++;
        check(out_valid && out_last == ls, "flags");
        check(out_cn_addr == CN_W'(cn) && out_bn_addr == BN_W'(bn), "address pair");
        check(edge_count == edges, $sformatf("edge count %0d exp %0d", edge_count, edges));
        check(circ_count == circs, $sformatf("circulant count %0d exp %0d", circ_count, circs));
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
