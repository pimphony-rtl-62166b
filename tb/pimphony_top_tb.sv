// pimphony_top_tb: end-to-end test of the PIM module at its full default
// size (32 channels x 16 banks, all buffers at their default depth).
//
// The host side of this testbench writes a sixteen-tile query into the GPR, a
// DPA program, the VA2PA table and the token counts, then runs decoding steps.
// The program is a token-centric dot-product pass: every channel works on its
// own token slice of the same virtual rows.
//   WR-INP x16 (multicast to all channels)      GBuf 0..15 <= GPR 0..15
//   Dyn-Loop  LB = ceil(T_cur / 1024), 10 words  (two rows per iteration)
//     Dyn-Modi row += 2t ; MAC x16 {virtual K row 0, out 0}
//     Dyn-Modi gpr += 2t ; RD-OUT {GPR 1000, out 0}
//     Dyn-Modi row += 2t ; MAC x16 {virtual K row 1, out 1}
//     Dyn-Modi gpr += 2t ; RD-OUT {GPR 1001, out 1}
//     Dyn-Modi gpr += 2t ; EPU_RED {GPR 1000, 2 tiles, all channels}
//   End
// A behavioural DRAM model returns a fixed hash of (channel, bank, row,
// column, lane). For every virtual row v the testbench works out the
// physical row (VA2PA chunk * 2 + v % 2), each channel's 16 bank results
// and the cross-channel sum, and checks channels 1..31's partial slots
// (GPR 1000 + v + c*512) and the reduced tiles (GPR 1000 + v). Request 5
// runs with 3000 tokens over three non-contiguous chunks, then request 6 with
// 1000 tokens in one chunk, then request 5 again after its token count grew
// past a chunk boundary and the host appended a chunk. It also checks T_cur
// after each step, the per-channel command count, and that each mechanism
// (multicast, translation, dynamic loop, EPU reduction, out-of-order issue,
// is-MAC bypass, dependency wait, back-pressure) happened at least once.
module pimphony_top_tb;
  import pim_pkg::*;
  localparam int STRIDE = GPR_ENTRIES / NCH;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic ib_we, va_we, va_kv, cfg_we, run_valid, run_ready, run_done, host_we, busy;
  logic [9:0] ib_addr, run_pc;
  dpa_inst_t ib_wdata;
  logic [4:0] va_req, cfg_req, cfg_rreq, run_req;
  logic [9:0] va_va;
  logic [PA_W-1:0] va_pa;
  logic [20:0] cfg_tcur, cfg_rtcur;
  logic [GPR_AW-1:0] host_waddr, host_raddr;
  tile_t host_wdata, host_rdata;
  logic [NCH-1:0] bank_rd;
  logic [ROW_W-1:0] bank_row [NCH];
  logic [COL_W-1:0] bank_col [NCH];
  tile_t bank_rdata [NCH][NBANK];
  logic [NCH-1:0] ev_ooo, ev_bypass, ev_dep_wait, ev_issue;
  logic ev_multicast, ev_xlate, ev_loop, ev_reduce, ev_backpressure;

  pimphony_top dut (.*);

  // ---------------- behavioural DRAM ----------------
  function automatic elem_t dram(int c, int b, int r, int col, int l);
    return elem_t'((c * 1103515245) ^ (b * 40503) ^ (r * 2654435761) ^ (col * 97) ^ (l * 7919) ^ 16'h3c3c);
  endfunction
  always_comb
    for (int c = 0; c < NCH; c++)
      for (int b = 0; b < NBANK; b++)
        for (int l = 0; l < TILE_ELEMS; l++)
          bank_rdata[c][b][l*ELEM_W +: ELEM_W] = dram(c, b, int'(bank_row[c]), int'(bank_col[c]), l);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string s);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", s); end
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- event counters ----------------
  int n_ooo, n_bypass, n_wait, n_mc, n_x, n_loop, n_red, n_bp;
  int n_issue [NCH];
  always @(posedge clk) if (rst_n) begin
    n_ooo    += $countones(ev_ooo);
    n_bypass += $countones(ev_bypass);
    n_wait   += $countones(ev_dep_wait);
    n_mc     += int'(ev_multicast);
    n_x      += int'(ev_xlate);
    n_loop   += int'(ev_loop);
    n_red    += int'(ev_reduce);
    n_bp     += int'(ev_backpressure);
    for (int c = 0; c < NCH; c++) n_issue[c] += int'(ev_issue[c]);
  end

  // ---------------- host helpers ----------------
  tile_t q [16];
  int    va2pa_m [int][int];   // [req][vchunk]

  function automatic pim_inst_t pi(pim_op_e op, int sz, int gpr, int gb, int row, int col, int out);
    pim_inst_t x = '0;
    x.op = op; x.ch_mask = '1; x.op_size = OPSZ_W'(sz); x.gpr_addr = GPR_AW'(gpr);
    x.gbuf_idx = GBUF_IDX_W'(gb); x.row = ROW_W'(row); x.col = COL_W'(col); x.out_idx = OUT_IDX_W'(out);
    return x;
  endfunction
  function automatic dpa_inst_t modi(dpa_field_e f, int k);
    dpa_inst_t w = '0;
    w.kind = DPA_MODI; w.target = f; w.coeff = 16'(k);
    return w;
  endfunction
  function automatic dpa_inst_t pimw(pim_inst_t i, bit x);
    dpa_inst_t w = '0;
    w.kind = DPA_PIM; w.xlate = x; w.kv = 1'b0; w.inst = i;
    return w;
  endfunction

  task automatic wr_ib(int a, dpa_inst_t w);
    @(negedge clk); ib_we = 1; ib_addr = 10'(a); ib_wdata = w;
    @(negedge clk); ib_we = 0;
  endtask
  task automatic wr_va(int req, int va, int pa);
    @(negedge clk); va_we = 1; va_kv = 0; va_req = 5'(req); va_va = 10'(va); va_pa = PA_W'(pa);
    va2pa_m[req][va] = pa;
    @(negedge clk); va_we = 0;
  endtask
  task automatic wr_cfg(int req, int t);
    @(negedge clk); cfg_we = 1; cfg_req = 5'(req); cfg_tcur = 21'(t);
    @(negedge clk); cfg_we = 0;
  endtask

  // expected per-channel result tile of virtual row v of request req
  function automatic tile_t chan_result(int req, int c, int v);
    tile_t r;
    int p;
    p = va2pa_m[req][v / ROWS_PER_CHUNK] * ROWS_PER_CHUNK + v % ROWS_PER_CHUNK;
    for (int b = 0; b < NBANK; b++) begin
      elem_t s;
      s = '0;
      for (int k = 0; k < 16; k++)
        for (int l = 0; l < TILE_ELEMS; l++)
          s += elem_t'(q[k][l*ELEM_W +: ELEM_W] * dram(c, b, p, k, l));
      r[b*ELEM_W +: ELEM_W] = s;
    end
    return r;
  endfunction

  task automatic step(int req, int tcur);
    int lb, nv, t0, cyc;
    int issued0 [NCH];
    for (int c = 0; c < NCH; c++) issued0[c] = n_issue[c];
    lb = (tcur + 1023) / 1024;
    nv = 2 * lb;
    @(negedge clk); run_valid = 1; run_req = 5'(req); run_pc = 0;
    @(posedge clk); while (!run_ready) @(posedge clk);
    @(negedge clk); run_valid = 0;
    cyc = 0;
    while (busy || cyc < 2) begin @(posedge clk); cyc++; end
    $display("request %0d, %0d tokens: %0d rows per channel slice, %0d cycles", req, tcur, nv, cyc);
    for (int v = 0; v < nv; v++) begin
      tile_t sum;
      sum = '0;
      for (int c = 0; c < NCH; c++) begin
        tile_t r;
        r = chan_result(req, c, v);
        sum = tile_add(sum, r);
        if (c > 0) begin
          @(negedge clk); host_raddr = GPR_AW'(1000 + v + c * STRIDE); #1;
          check(host_rdata == r, $sformatf("req %0d row %0d channel %0d partial", req, v, c));
        end
      end
      @(negedge clk); host_raddr = GPR_AW'(1000 + v); #1;
      check(host_rdata == sum, $sformatf("req %0d row %0d reduced", req, v));
    end
    for (int c = 0; c < NCH; c++)
      check(n_issue[c] - issued0[c] == 16 + lb * 34, $sformatf("channel %0d command count", c));
    cfg_rreq = 5'(req); #1;
    check(int'(cfg_rtcur) == tcur + 1, $sformatf("T_cur of request %0d", req));
  endtask

  initial begin
    ib_we = 0; va_we = 0; cfg_we = 0; run_valid = 0; host_we = 0;
    ib_addr = 0; ib_wdata = '0; va_kv = 0; va_req = 0; va_va = 0; va_pa = 0;
    cfg_req = 0; cfg_tcur = 0; cfg_rreq = 0; run_req = 0; run_pc = 0;
    host_waddr = 0; host_wdata = '0; host_raddr = 0;
    n_ooo = 0; n_bypass = 0; n_wait = 0; n_mc = 0; n_x = 0; n_loop = 0; n_red = 0; n_bp = 0;
    for (int c = 0; c < NCH; c++) n_issue[c] = 0;
    repeat (3) @(posedge clk); rst_n = 1;

    // query tiles
    for (int k = 0; k < 16; k++) begin
      q[k] = {8{$urandom}};
      @(negedge clk); host_we = 1; host_waddr = GPR_AW'(k); host_wdata = q[k];
    end
    @(negedge clk); host_we = 0;

    // the program
    wr_ib(0,  pimw(pi(OP_WR_INP, 16, 0, 0, 0, 0, 0), 0));
    begin
      dpa_inst_t w;
      w = '0; w.kind = DPA_LOOP; w.lb_shift = 10; w.le = 10;
      wr_ib(1, w);
    end
    wr_ib(2,  modi(FLD_ROW, 2));
    wr_ib(3,  pimw(pi(OP_MAC, 16, 0, 0, 0, 0, 0), 1));
    wr_ib(4,  modi(FLD_GPR, 2));
    wr_ib(5,  pimw(pi(OP_RD_OUT, 1, 1000, 0, 0, 0, 0), 0));
    wr_ib(6,  modi(FLD_ROW, 2));
    wr_ib(7,  pimw(pi(OP_MAC, 16, 0, 0, 1, 0, 1), 1));
    wr_ib(8,  modi(FLD_GPR, 2));
    wr_ib(9,  pimw(pi(OP_RD_OUT, 1, 1001, 0, 0, 0, 1), 0));
    wr_ib(10, modi(FLD_GPR, 2));
    wr_ib(11, pimw(pi(OP_EPU_RED, 2, 1000, 0, 0, 0, 0), 0));
    begin
      dpa_inst_t w;
      w = '0; w.kind = DPA_END;
      wr_ib(12, w);
    end

    // request 5: 3000 tokens -> 6 virtual rows -> 3 chunks, non-contiguous
    wr_va(5, 0, 7); wr_va(5, 1, 300); wr_va(5, 2, 12);
    wr_cfg(5, 3000);
    // request 6: 1000 tokens -> 1 chunk
    wr_va(6, 0, 400);
    wr_cfg(6, 1000);

    step(5, 3000);
    step(6, 1000);
    // request 5 grew to 4000 tokens: the host appends chunk 3 lazily
    wr_va(5, 3, 9);
    wr_cfg(5, 4000);
    step(5, 4000);

    check(n_mc > 0,     "multicast happened");
    check(n_x > 0,      "address translation happened");
    check(n_loop > 0,   "dynamic loop iterated");
    check(n_red > 0,    "EPU reduction happened");
    check(n_ooo > 0,    "out-of-order issue happened");
    check(n_bypass > 0, "is-MAC bypass happened");
    check(n_wait > 0,   "dependency wait happened");
    check(n_bp > 0,     "back-pressure happened");
    $display("events: multicast %0d, translations %0d, loop iterations %0d, reductions %0d, out-of-order %0d, bypass %0d, dep-wait cycles %0d, back-pressure cycles %0d",
             n_mc, n_x, n_loop, n_red, n_ooo, n_bypass, n_wait, n_bp);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
