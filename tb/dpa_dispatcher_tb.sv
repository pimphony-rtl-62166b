// dpa_dispatcher_tb: self-checking test of the DPA dispatcher.
// Loads the paper's QK^T example program
//   WR-INP; Dyn-Loop{LB = T_cur / (channels*banks), LE = 3};
//   Dyn-Modi{row, coefficient 1}; MAC{row = 0, virtual K row}; RD-OUT; End
// and the VA2PA entries of the paper's example (request 1: virtual chunk 0 ->
// physical 22, 1 -> 50 after a lazily allocated second chunk; request 2:
// 0 -> 33, 1 -> 34), sets T_cur and runs decoding steps. The emitted
// instruction streams are compared with streams written out by hand:
// physical row = chunk * 2 + row-in-chunk (two rows of each bank per 1 MB
// chunk). Also covers LB = 0 (body skipped), LB rounding up, the T_cur
// increment after each step, a second program that steps the column field
// of an untranslated MAC, and random output back-pressure.
module dpa_dispatcher_tb;
  import pim_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic ib_we, va_we, va_kv, cfg_we, run_valid, run_ready, done, out_valid, out_ready, ev_xlate, ev_loop;
  logic [9:0] ib_addr, run_pc;
  dpa_inst_t ib_wdata;
  logic [4:0] va_req, cfg_req, cfg_rreq, run_req;
  logic [9:0] va_va;
  logic [PA_W-1:0] va_pa;
  logic [20:0] cfg_tcur, cfg_rtcur;
  pim_inst_t out_inst;

  dpa_dispatcher dut (.*);

  int checks = 0, failures = 0, n_x = 0, n_l = 0;
  task automatic check(bit ok, string s);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", s); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  pim_inst_t got [$];
  always @(posedge clk) if (rst_n) begin
    if (out_valid && out_ready) got.push_back(out_inst);
    if (ev_xlate) n_x++;
    if (ev_loop) n_l++;
  end
  always @(negedge clk) out_ready <= ($urandom_range(0, 2) != 0);

  function automatic pim_inst_t pi(pim_op_e op, int row, int col);
    pim_inst_t x = '0;
    x.op = op; x.ch_mask = '1; x.op_size = 1; x.row = ROW_W'(row); x.col = COL_W'(col);
    return x;
  endfunction

  task automatic wr_ib(int a, dpa_inst_t w);
    @(negedge clk); ib_we = 1; ib_addr = 10'(a); ib_wdata = w;
    @(negedge clk); ib_we = 0;
  endtask
  task automatic wr_va(int req, int va, int pa);
    @(negedge clk); va_we = 1; va_kv = 0; va_req = 5'(req); va_va = 10'(va); va_pa = PA_W'(pa);
    @(negedge clk); va_we = 0;
  endtask
  task automatic wr_cfg(int req, int t);
    @(negedge clk); cfg_we = 1; cfg_req = 5'(req); cfg_tcur = 21'(t);
    @(negedge clk); cfg_we = 0;
  endtask
  task automatic run(int req, int pc);
    got.delete();
    @(negedge clk); run_valid = 1; run_req = 5'(req); run_pc = 10'(pc);
    @(posedge clk); while (!run_ready) @(posedge clk);
    @(negedge clk); run_valid = 0;
    while (!done) @(posedge clk);
    @(negedge clk);
  endtask

  task automatic expect_stream(pim_inst_t e [$], string name);
    check(got.size() == e.size(), $sformatf("%s: %0d instructions, expected %0d", name, got.size(), e.size()));
    for (int i = 0; i < e.size() && i < got.size(); i++)
      check(got[i] == e[i], $sformatf("%s: instruction %0d", name, i));
  endtask

  initial begin
    dpa_inst_t w;
    pim_inst_t e [$];
    ib_we = 0; va_we = 0; cfg_we = 0; run_valid = 0; ib_addr = 0; ib_wdata = '0;
    va_kv = 0; va_req = 0; va_va = 0; va_pa = 0; cfg_req = 0; cfg_tcur = 0; cfg_rreq = 0;
    run_req = 0; run_pc = 0;
    repeat (2) @(posedge clk); rst_n = 1;

    // program 1 at address 0: the paper's QK^T loop
    w = '0; w.kind = DPA_PIM;  w.inst = pi(OP_WR_INP, 0, 0);             wr_ib(0, w);
    w = '0; w.kind = DPA_LOOP; w.lb_shift = 9; w.le = 3;                 wr_ib(1, w);
    w = '0; w.kind = DPA_MODI; w.target = FLD_ROW; w.coeff = 1;          wr_ib(2, w);
    w = '0; w.kind = DPA_PIM;  w.xlate = 1; w.inst = pi(OP_MAC, 0, 0);   wr_ib(3, w);
    w = '0; w.kind = DPA_PIM;  w.inst = pi(OP_RD_OUT, 0, 0);             wr_ib(4, w);
    w = '0; w.kind = DPA_END;                                            wr_ib(5, w);
    // program 2 at address 100: column-stepped untranslated MAC
    w = '0; w.kind = DPA_LOOP; w.lb_shift = 4; w.le = 2;                 wr_ib(100, w);
    w = '0; w.kind = DPA_MODI; w.target = FLD_COL; w.coeff = 3;          wr_ib(101, w);
    w = '0; w.kind = DPA_PIM;  w.inst = pi(OP_MAC, 7, 1);                wr_ib(102, w);
    w = '0; w.kind = DPA_END;                                            wr_ib(103, w);

    wr_va(1, 0, 22); wr_va(2, 0, 33); wr_va(2, 1, 34);
    wr_cfg(1, 200); wr_cfg(2, 300);

    // request 1, T_cur = 200: LB = 1, virtual row 0 -> physical 44 (chunk 22)
    run(1, 0);
    e = '{pi(OP_WR_INP, 0, 0), pi(OP_MAC, 44, 0), pi(OP_RD_OUT, 0, 0)};
    expect_stream(e, "req1 T=200");
    cfg_rreq = 1; #1 check(cfg_rtcur == 201, "T_cur of request 1 incremented");

    // request 2, T_cur = 300: LB = 1, virtual 0 -> chunk 33
    run(2, 0);
    e = '{pi(OP_WR_INP, 0, 0), pi(OP_MAC, 66, 0), pi(OP_RD_OUT, 0, 0)};
    expect_stream(e, "req2 T=300");

    // request 1 grows to 1500 tokens: LB = 3 needs virtual chunk 1, which the
    // host allocates lazily at physical chunk 50
    wr_va(1, 1, 50);
    wr_cfg(1, 1500);
    run(1, 0);
    e = '{pi(OP_WR_INP, 0, 0), pi(OP_MAC, 44, 0), pi(OP_RD_OUT, 0, 0), pi(OP_MAC, 45, 0),
          pi(OP_RD_OUT, 0, 0), pi(OP_MAC, 100, 0), pi(OP_RD_OUT, 0, 0)};
    expect_stream(e, "req1 T=1500");
    cfg_rreq = 1; #1 check(cfg_rtcur == 1501, "T_cur 1501");

    // request 2 at 1024 tokens: exactly LB = 2
    wr_cfg(2, 1024);
    run(2, 0);
    e = '{pi(OP_WR_INP, 0, 0), pi(OP_MAC, 66, 0), pi(OP_RD_OUT, 0, 0), pi(OP_MAC, 67, 0), pi(OP_RD_OUT, 0, 0)};
    expect_stream(e, "req2 T=1024");

    // T_cur = 0: the loop body is skipped
    wr_cfg(3, 0);
    run(3, 0);
    e = '{pi(OP_WR_INP, 0, 0)};
    expect_stream(e, "req3 T=0");
    cfg_rreq = 3; #1 check(cfg_rtcur == 1, "T_cur 0 -> 1");

    // program 2, T_cur = 33: LB = ceil(33/16) = 3, col = 1 + 3t
    wr_cfg(4, 33);
    run(4, 100);
    e = '{pi(OP_MAC, 7, 1), pi(OP_MAC, 7, 4), pi(OP_MAC, 7, 7)};
    expect_stream(e, "program 2");

    check(n_x == 7 && n_l > 0, "translation and loop events");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
