// pim_ctrl_tb: self-checking test of the DCS PIM controller.
//
// Part 1 replays the eleven-command GEMV example (three WR-INPs, two groups of
// three MACs, two RD-OUTs) and checks every issue cycle against the dynamic
// schedule worked out by hand from the timing rules: W0..W2 at 0/2/4, M3 at 5
// (W0 done), M4/M5 at 7/9 (is-MAC bypass on Out 0), M7..M9 at 11/13/15 ahead
// of R6 (out of order), R6 at 16, R10 at 21 - 22 cycles in all, where the
// in-order schedule needs 34.
// Part 2 sends 3000 random commands over small GBuf/OBuf index ranges with
// random back-pressure on the write-back path and checks, for every issue,
// that both queues stay in order, that commands of one queue are tCCDS apart,
// and that the previous command on each entry it uses was issued at least its
// latency earlier (MAC after MAC on one OBuf entry only needs to come later).
module pim_ctrl_tb;
  import pim_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic     cmd_valid, cmd_ready, wb_ok;
  pim_cmd_t cmd;
  logic     issue_valid, idle, ev_ooo, ev_bypass, ev_dep_wait;
  pim_cmd_t issue_cmd;

  pim_ctrl dut (.*);

  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic pim_cmd_t mk(pim_op_e op, int g, int c, int o);
    pim_cmd_t x = '0;
    x.op = op; x.gbuf_idx = GBUF_IDX_W'(g); x.col = COL_W'(c); x.out_idx = OUT_IDX_W'(o);
    return x;
  endfunction

  // ---------------- reference bookkeeping for part 2 ----------------
  localparam int NR = 3000;
  pim_cmd_t rc [NR];
  int       issue_t [NR];
  int       prev_g [NR], prev_o [NR];
  int       q_order [2][$];
  int       last_q_t [2];
  int       n_ooo = 0, n_bypass = 0, n_wait = 0;
  bit       part2 = 0;
  int       issued_cnt = 0;

  function automatic int lat(pim_op_e op);
    return op == OP_WR_INP ? T_WR_INP : op == OP_MAC ? T_MAC : T_RD_OUT;
  endfunction

  always @(posedge clk) if (rst_n) begin
    if (ev_ooo) n_ooo++;
    if (ev_bypass) n_bypass++;
    if (ev_dep_wait) n_wait++;
  end

  // part 2 issue monitor
  always @(posedge clk) if (rst_n && part2 && issue_valid) begin
    int k, j;
    k = (issue_cmd.op == OP_MAC) ? 0 : 1;
    if (q_order[k].size() == 0) check(0, "issue with empty reference queue");
    else begin
      j = q_order[k].pop_front();
      check(issue_cmd == rc[j], $sformatf("queue order, cmd %0d", j));
      check(last_q_t[k] < 0 || cyc - last_q_t[k] >= T_CCDS, $sformatf("tCCDS, cmd %0d", j));
      last_q_t[k] = cyc;
      if (prev_g[j] >= 0) check(issue_t[prev_g[j]] >= 0 && cyc - issue_t[prev_g[j]] >= lat(rc[prev_g[j]].op),
                                $sformatf("GBuf hazard, cmd %0d", j));
      if (prev_o[j] >= 0) begin
        if (rc[j].op == OP_MAC && rc[prev_o[j]].op == OP_MAC)
          check(issue_t[prev_o[j]] >= 0 && cyc > issue_t[prev_o[j]], $sformatf("OBuf MAC order, cmd %0d", j));
        else
          check(issue_t[prev_o[j]] >= 0 && cyc - issue_t[prev_o[j]] >= lat(rc[prev_o[j]].op),
                $sformatf("OBuf hazard, cmd %0d", j));
      end
      check(issue_cmd.op != OP_RD_OUT || wb_ok, "RD-OUT without write-back room");
      issue_t[j] = cyc;
      issued_cnt++;
    end
  end

  initial begin
    int t0;
    int got [11];
    int exp_t [11] = '{0, 2, 4, 5, 7, 9, 16, 11, 13, 15, 21};
    pim_cmd_t seq [11];
    seq[0] = mk(OP_WR_INP, 0, 0, 0); seq[1] = mk(OP_WR_INP, 1, 0, 0); seq[2] = mk(OP_WR_INP, 2, 0, 0);
    seq[3] = mk(OP_MAC, 0, 0, 0);    seq[4] = mk(OP_MAC, 1, 1, 0);    seq[5] = mk(OP_MAC, 2, 2, 0);
    seq[6] = mk(OP_RD_OUT, 0, 0, 0);
    seq[7] = mk(OP_MAC, 0, 3, 1);    seq[8] = mk(OP_MAC, 1, 4, 1);    seq[9] = mk(OP_MAC, 2, 5, 1);
    seq[10] = mk(OP_RD_OUT, 0, 0, 1);
    for (int i = 0; i < 11; i++) seq[i].wb_addr = GPR_AW'(i);

    cmd_valid = 0; cmd = '0; wb_ok = 1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);

    // ---------------- part 1: the timing example ----------------
    fork
      begin
        for (int i = 0; i < 11; i++) begin
          cmd_valid <= 1; cmd <= seq[i];
          @(posedge clk);
          while (!cmd_ready) @(posedge clk);
        end
        cmd_valid <= 0;
      end
      begin
        int n = 0;
        t0 = -1;
        while (n < 11) begin
          @(posedge clk);
          if (issue_valid) begin
            if (t0 < 0) t0 = cyc;
            for (int i = 0; i < 11; i++)
              if (issue_cmd.wb_addr == GPR_AW'(i) && issue_cmd.op == seq[i].op &&
                  issue_cmd.col == seq[i].col && issue_cmd.gbuf_idx == seq[i].gbuf_idx &&
                  issue_cmd.out_idx == seq[i].out_idx) got[i] = cyc - t0;
            n++;
          end
        end
      end
    join
    for (int i = 0; i < 11; i++)
      check(got[i] == exp_t[i], $sformatf("example cmd %0d issued at %0d, expected %0d", i, got[i], exp_t[i]));
    check(got[10] + 1 == 22, "example total 22 cycles");
    repeat (10) @(posedge clk);
    check(idle, "idle after example");
    check(n_ooo > 0, "out-of-order issue seen in example");
    check(n_bypass > 0, "is-MAC bypass seen in example");

    // ---------------- part 2: random stress ----------------
    begin
      int lastg [8], lasto [8];
      for (int e = 0; e < 8; e++) begin lastg[e] = -1; lasto[e] = -1; end
      for (int j = 0; j < NR; j++) begin
        int r;
        r = $urandom_range(0, 2);
        rc[j] = mk(pim_op_e'(r), $urandom_range(0, 7), $urandom_range(0, 31), $urandom_range(0, 7));
        rc[j].wb_addr = GPR_AW'(j);
        rc[j].row = ROW_W'($urandom);
        rc[j].data = {8{$urandom}};
        issue_t[j] = -1;
        prev_g[j] = (rc[j].op != OP_RD_OUT) ? lastg[rc[j].gbuf_idx] : -1;
        prev_o[j] = (rc[j].op != OP_WR_INP) ? lasto[rc[j].out_idx] : -1;
        if (rc[j].op != OP_RD_OUT) lastg[rc[j].gbuf_idx] = j;
        if (rc[j].op != OP_WR_INP) lasto[rc[j].out_idx] = j;
      end
    end
    last_q_t[0] = -1; last_q_t[1] = -1;
    part2 = 1;
    n_ooo = 0; n_bypass = 0; n_wait = 0;
    fork
      begin
        for (int j = 0; j < NR; j++) begin
          while ($urandom_range(0, 9) == 0) begin cmd_valid <= 0; @(posedge clk); end
          cmd_valid <= 1; cmd <= rc[j];
          q_order[(rc[j].op == OP_MAC) ? 0 : 1].push_back(j);
          @(posedge clk);
          while (!cmd_ready) @(posedge clk);
        end
        cmd_valid <= 0;
      end
      begin
        while (issued_cnt < NR) begin
          wb_ok <= ($urandom_range(0, 4) != 0);
          @(posedge clk);
        end
      end
    join
    wb_ok <= 1;
    repeat (5) @(posedge clk);
    check(issued_cnt == NR, "all random commands issued");
    check(idle, "idle after random run");
    check(n_ooo > 0 && n_bypass > 0 && n_wait > 0, "random run exercised reorder, bypass and waits");
    $display("random run: %0d out-of-order issues, %0d bypasses", n_ooo, n_bypass);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
