// tb_addr_counter -- self-checking test of the address counter.
//
// Small code (M = 5, L = 6, dl = 4, nb = 2). Sends every element position of
// the (L+dl-1) x (nb*L) block grid, legal or not, some with idle gaps and some
// back to back, and checks against a model written here: a legal position
// gives exactly M rows r = 0..M-1 on consecutive clocks with the position
// held and cnt_last on r = M-1; an all-zero block gives one cmd_err pulse and
// no rows. Also checks that back-to-back legal commands stream with no gap.
module tb_addr_counter;
  localparam int unsigned M = 5, L = 6, DL = 4, NB = 2;
  localparam int unsigned V_W = $clog2(L + DL - 1), H_W = $clog2(NB * L), R_W = $clog2(M);

  logic clk = 0, rst = 1;
  logic cmd_valid = 0, cmd_ready, cmd_err;
  logic [V_W-1:0] cmd_v = '0;
  logic [H_W-1:0] cmd_h = '0;
  logic cnt_valid, cnt_last;
  logic [V_W-1:0] cnt_v;
  logic [H_W-1:0] cnt_h;
  logic [R_W-1:0] cnt_r;

  int checks = 0, failures = 0;
  int unsigned exp_v[$], exp_h[$], exp_r[$];
  int unsigned n_err_exp = 0, n_err_seen = 0, gaps_in_burst = 0;
  bit burst = 0, prev_valid = 0;

  addr_counter #(.M(M), .L(L), .DL(DL), .NB(NB)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  // Output monitor: compare every row against the expected queue.
  // Sampled on the falling edge, when every register output is settled.
  always @(negedge clk) if (!rst) begin
    if (cmd_err) n_err_seen++;
    if (cnt_valid) begin
      if (exp_v.size() == 0) check(0, "unexpected row");
      else begin
        check(cnt_v == exp_v[0] && cnt_h == exp_h[0] && cnt_r == exp_r[0], $sformatf("row content got %0d %0d %0d exp %0d %0d %0d", cnt_v, cnt_h, cnt_r, exp_v[0], exp_h[0], exp_r[0]));
        check(cnt_last == (exp_r[0] == M - 1), "last flag");
        void'(exp_v.pop_front()); void'(exp_h.pop_front()); void'(exp_r.pop_front());
      end
    end else if (burst && prev_valid && exp_v.size() != 0) gaps_in_burst++;
    prev_valid = cnt_valid;
  end

  task automatic send(input int unsigned v, input int unsigned h);
    int unsigned t;
    // Inputs change on the falling edge; the command is taken at the first
    // rising edge with cmd_ready high.
    @(negedge clk);
    cmd_valid = 1; cmd_v = V_W'(v); cmd_h = H_W'(h);
    while (!cmd_ready) @(negedge clk);
    t = h / NB;
    if (h < NB * L && v >= t && v - t < DL)
      for (int r = 0; r < M; r++) begin exp_v.push_back(v); exp_h.push_back(h); exp_r.push_back(r); end
    else n_err_exp++;
    @(posedge clk);
    cmd_valid <= 0;
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst <= 0;
    @(posedge clk);
    // every grid position, with a random idle gap
    for (int v = 0; v < L + DL - 1; v++)
      for (int h = 0; h < NB * L; h++) begin
        send(v, h);
        repeat ($urandom_range(0, 2)) @(posedge clk);
      end
    repeat (M + 3) @(posedge clk);
    check(exp_v.size() == 0, "all rows delivered");
    check(n_err_seen == n_err_exp, "cmd_err count");
    // back-to-back legal commands: column 3 in its dl rows, twice over
    burst = 1;
    for (int k = 0; k < 2 * DL; k++) begin
      send(1 + (k % DL), 3);
    end
    repeat (M + 3) @(posedge clk);
    burst = 0;
    check(gaps_in_burst == 0, "no bubble between back-to-back circulants");
    check(exp_v.size() == 0, "burst rows delivered");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
