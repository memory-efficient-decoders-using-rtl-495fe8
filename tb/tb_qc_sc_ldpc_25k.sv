// tb_qc_sc_ldpc_25k -- end-to-end test of the storage model on the 25K code
// of the same family: (4,8,129) with M = 100, N = 25,800 bits, 12,900 checks,
// 1032 circulants, 103,200 edges. The hardware is the same as for the 100K
// code; only M and the shift table change (the table below is 4-cycle free
// for M = 100, drawn the same way as the default one).
//
// Same three phases and checks as the default-size test: every circulant
// streamed back to back and compared with a reference built from the
// definition of I(p), node degrees, absence of 4-cycles, rate and latency,
// rejected all-zero positions, and commands with idle gaps.
module tb_qc_sc_ldpc_25k;
  localparam int unsigned M = 100, L = qc_sc_ldpc_pkg::DEF_L;
  localparam int unsigned DL = qc_sc_ldpc_pkg::DEF_DL, NB = qc_sc_ldpc_pkg::DEF_NB, T = qc_sc_ldpc_pkg::DEF_T;
  localparam int unsigned V_W = $clog2(L + DL - 1), H_W = $clog2(NB * L);
  localparam int unsigned CN_W = $clog2((L + DL - 1) * M), BN_W = $clog2(NB * L * M);
  localparam int unsigned NBITS = NB * L * M, NCHK = (L + DL - 1) * M;
  localparam int unsigned NCIRC = NB * L * DL, NEDGE = NCIRC * M;

  int unsigned ref_shift [T][DL][NB] = '{
    '{'{15, 28}, '{80, 80}, '{74, 7}, '{73, 74}},
    '{'{50, 6}, '{28, 5}, '{71, 17}, '{37, 53}},
    '{'{18, 69}, '{15, 73}, '{39, 71}, '{87, 23}}
  };

  // The same table packed for the design: entry i at bits [16*i +: 16].
  localparam logic [T*DL*NB*16-1:0] SHIFTS_25K = {
    16'd23, 16'd87, 16'd71, 16'd39, 16'd73, 16'd15, 16'd69, 16'd18,
    16'd53, 16'd37, 16'd17, 16'd71, 16'd5,  16'd28, 16'd6,  16'd50,
    16'd74, 16'd73, 16'd7,  16'd74, 16'd80, 16'd80, 16'd28, 16'd15
  };

  logic clk = 0, rst = 1;
  logic cmd_valid = 0, cmd_ready, cmd_err, out_valid, out_last;
  logic [V_W-1:0] cmd_v = '0;
  logic [H_W-1:0] cmd_h = '0;
  logic [CN_W-1:0] cn_addr;
  logic [BN_W-1:0] bn_addr;
  logic [31:0] edge_count, circ_count;

  qc_sc_ldpc_addr_top #(.M(M), .SHIFTS(SHIFTS_25K)) dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  longint cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  // expected edges, one entry per address pair: {cn, bn, last}
  int unsigned q_cn[$], q_bn[$];
  bit q_last[$];
  byte unsigned bit_deg [NBITS];
  byte unsigned chk_deg [NCHK];
  int unsigned seen_shift [L + DL - 1][NB * L];   // shift read back from row 0
  longint first_out = -1, last_out = -1, first_cmd = -1;
  int unsigned n_out = 0, n_err_seen = 0, n_err_exp = 0;
  int unsigned n_handover = 0, n_gap_cmd = 0;
  bit collect = 1;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s at cycle %0d", what, cycle); end
  endtask

  // Monitor on the falling edge, when outputs are settled.
  always @(negedge clk) if (!rst) begin
    if (cmd_err) n_err_seen++;
    if (out_valid) begin
      if (first_out < 0) first_out = cycle;
      last_out = cycle;
      n_out++;
      if (q_cn.size() == 0) check(0, "address pair with none expected");
      else begin
        if (cn_addr != CN_W'(q_cn[0]) || bn_addr != BN_W'(q_bn[0]) || out_last != q_last[0])
          check(0, $sformatf("pair got (%0d,%0d,%0d) exp (%0d,%0d,%0d)", cn_addr, bn_addr, out_last,
                             q_cn[0], q_bn[0], q_last[0]));
        else checks++;
        if (collect) begin
          bit_deg[bn_addr]++;
          chk_deg[cn_addr]++;
          if (32'(cn_addr) % M == 0)
            seen_shift[32'(cn_addr) / M][32'(bn_addr) / M] = 32'(bn_addr) % M;
        end
        void'(q_cn.pop_front()); void'(q_bn.pop_front()); void'(q_last.pop_front());
      end
    end
  end

  // Present a command on the falling edge; it is taken at the next rising edge
  // with cmd_ready high. Expected pairs are queued when it is taken.
  task automatic send(input int unsigned j, input int unsigned c);
    int unsigned t, p;
    bit waited = 0;
    @(negedge clk);
    cmd_valid = 1; cmd_v = V_W'(j); cmd_h = H_W'(c);
    while (!cmd_ready) begin waited = 1; @(negedge clk); end
    // taken while the previous circulant was still running
    if (waited) n_handover++;
    if (first_cmd < 0) first_cmd = cycle;
    t = c / NB;
    if (c < NB * L && j >= t && j - t < DL) begin
      p = ref_shift[t % T][j - t][c % NB];
      for (int unsigned r = 0; r < M; r++) begin
        q_cn.push_back(j * M + r);
        q_bn.push_back(c * M + (r + p) % M);
        q_last.push_back(r == M - 1);
      end
    end else n_err_exp++;
    @(posedge clk);
    cmd_valid <= 0;
  endtask

  initial begin
    int unsigned exp_deg, four_cycles;
    repeat (3) @(negedge clk);
    rst = 0;
    // ---- phase 1: whole matrix, back to back
    for (int unsigned c = 0; c < NB * L; c++)
      for (int unsigned k = 0; k < DL; k++)
        send(c / NB + k, c);
    wait (q_cn.size() == 0);
    repeat (4) @(negedge clk);
    check(n_out == NEDGE, $sformatf("edges %0d exp %0d", n_out, NEDGE));
    check(edge_count == NEDGE && circ_count == NCIRC, "output controller counters");
    check(last_out - first_out + 1 == NEDGE, $sformatf("streaming rate: %0d cycles for %0d edges",
                                                        last_out - first_out + 1, NEDGE));
    check(first_out - first_cmd == 4, $sformatf("latency %0d", first_out - first_cmd));
    for (int unsigned b = 0; b < NBITS; b++) check(bit_deg[b] == DL, $sformatf("bit node %0d degree %0d", b, bit_deg[b]));
    for (int unsigned x = 0; x < NCHK; x++) begin
      // block row j is joined by protographs t = j-dl+1 .. j that exist
      int unsigned j, lo, hi;
      j = x / M;
      lo = (j >= DL - 1) ? j - DL + 1 : 0;
      hi = (j < L - 1) ? j : L - 1;
      exp_deg = NB * (hi - lo + 1);
      check(chk_deg[x] == exp_deg, $sformatf("check node %0d degree %0d exp %0d", x, chk_deg[x], exp_deg));
    end
    // 4-cycles: two block rows, two block columns, all four circulants present
    four_cycles = 0;
    for (int unsigned j1 = 0; j1 < L + DL - 1; j1++)
      for (int unsigned j2 = j1 + 1; j2 < j1 + DL && j2 < L + DL - 1; j2++)
        for (int unsigned c1 = 0; c1 < NB * L; c1++)
          for (int unsigned c2 = c1 + 1; c2 < NB * L && c2 < c1 + NB * DL; c2++) begin
            int unsigned t1, t2, s;
            t1 = c1 / NB; t2 = c2 / NB;
            if (j1 >= t1 && j2 - t1 < DL && j1 >= t2 && j2 - t2 < DL) begin
              s = (seen_shift[j1][c1] + M - seen_shift[j2][c1] + seen_shift[j2][c2] + M - seen_shift[j1][c2]) % M;
              if (s == 0) four_cycles++;
            end
          end
    check(four_cycles == 0, $sformatf("%0d 4-cycles", four_cycles));
    $display("phase 1: %0d edges in %0d cycles, latency %0d", n_out, last_out - first_out + 1, first_out - first_cmd);
    // ---- phase 2: element positions of all-zero blocks
    collect = 0;
    send(0, 2);              // protograph 1 does not reach block row 0
    send(DL, 0);             // protograph 0 ends at block row dl-1
    send(L + DL - 2, 0);
    send(0, NB * L);         // beyond the last column
    repeat (6) @(negedge clk);
    check(n_err_seen == n_err_exp && n_err_exp == 4, $sformatf("rejected %0d exp %0d", n_err_seen, n_err_exp));
    check(q_cn.size() == 0 && n_out == NEDGE, "no pairs for all-zero blocks");
    // ---- phase 3: circulants with idle gaps between commands
    for (int i = 0; i < 6; i++) begin
      int unsigned c;
      c = $urandom_range(0, NB * L - 1);
      send(c / NB + $urandom_range(0, DL - 1), c);
      wait (q_cn.size() == 0);
      repeat (3) @(negedge clk);
      n_gap_cmd++;
    end
    check(n_out == NEDGE + 6 * M, "phase 3 pairs");
    // ---- mechanisms
    check(n_handover > 0, "back-to-back hand-over never happened");
    check(n_err_seen > 0, "rejected position never happened");
    check(n_gap_cmd > 0, "idle gap never happened");
    $display("mechanisms: handover=%0d rejected=%0d gapped=%0d", n_handover, n_err_seen, n_gap_cmd);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (NEDGE + 20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
