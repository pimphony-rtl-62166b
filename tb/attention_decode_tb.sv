// attention_decode_tb: one attention head of a decoding step, as the
// evaluated models run it, on the full-size PIM module (32 channels x 16
// banks, default parameters).
//
// The head has d_h = 128 (the 7B and 72B models alike): a query or a
// probability vector is 8 tiles of 16 elements. Under token-centric
// partitioning every virtual KV row holds 512 tokens, one per bank of every
// channel, so a request of T tokens uses ceil(T / 512) virtual rows in each
// of its K and V spaces. One program does the whole step:
//   WR-INP x8 (all channels)  GBuf 0..7  <= query            (GPR 0..7)
//   Dyn-Loop LB = ceil(T_cur/512), 4 words                     -- QK^T
//     Dyn-Modi row += t ; MAC x8 {virtual K row 0, out 0}
//     Dyn-Modi gpr += t ; RD-OUT {GPR 16, out 0}
//   WR-INP x8 (all channels)  GBuf 8..15 <= probabilities    (GPR 8..15)
//   Dyn-Loop LB, 2 words                                       -- SV
//     Dyn-Modi row += t ; MAC x8 {virtual V row 0, out 1}
//   RD-OUT {GPR 272, out 1}                 per-channel partial SV tiles
//   EPU_RED {GPR 272, 1 tile, all channels} cross-channel reduction
//   End                                      T_cur += 1
// QK^T leaves, for every channel c and row t, the 16 scores of that
// channel's tokens at GPR 16 + t + c*512 (concatenation, no reduction).
// SV accumulates over all rows of a channel in one OBuf entry, drains one
// partial per channel and reduces them in the EPU. The probabilities are
// written by the host here: the Softmax between the two halves runs on the
// EPU in the original system and is not part of this design.
// Token counts are those of the evaluated benchmarks: the mean lengths of
// the summarisation (13,966) and long-document QA (50,693) sets and the
// longest multi-field QA request (119,480 tokens, 234 rows). Each request's
// chunks are scattered over the module. The testbench computes every score
// tile and the reduced SV tile from the behavioural DRAM's hash and checks
// them, T_cur after the step and the step's cycle count against a
// lower bound of 16 cycles per row (8 MACs tCCDS apart, twice).
module attention_decode_tb;
  import pim_pkg::*;
  localparam int STRIDE = GPR_ENTRIES / NCH;
  localparam int DH_TILES = 8;
  localparam int QK_BASE = 16, SV_BASE = 272;

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

  // behavioural DRAM: a fixed hash of (channel, bank, row, column, lane)
  function automatic elem_t dram(int c, int b, int r, int col, int l);
    return elem_t'((c * 1103515245) ^ (b * 40503) ^ (r * 2654435761) ^ (col * 97) ^ (l * 7919) ^ 16'h5a17);
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
    repeat (2000000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  tile_t q [DH_TILES], pr [DH_TILES];
  int    pmap [int];   // {kv, req, vchunk} -> physical chunk

  function automatic pim_inst_t pi(pim_op_e op, int sz, int gpr, int gb, int out);
    pim_inst_t x = '0;
    x.op = op; x.ch_mask = '1; x.op_size = OPSZ_W'(sz); x.gpr_addr = GPR_AW'(gpr);
    x.gbuf_idx = GBUF_IDX_W'(gb); x.out_idx = OUT_IDX_W'(out);
    return x;
  endfunction
  function automatic dpa_inst_t pimw(pim_inst_t i, bit x, bit kv);
    dpa_inst_t w = '0;
    w.kind = DPA_PIM; w.xlate = x; w.kv = kv; w.inst = i;
    return w;
  endfunction
  function automatic dpa_inst_t modi(dpa_field_e f);
    dpa_inst_t w = '0;
    w.kind = DPA_MODI; w.target = f; w.coeff = 16'd1;
    return w;
  endfunction
  function automatic dpa_inst_t loopw(int le);
    dpa_inst_t w = '0;
    w.kind = DPA_LOOP; w.lb_shift = 5'd9; w.le = 8'(le);
    return w;
  endfunction

  task automatic wr_ib(int a, dpa_inst_t w);
    @(negedge clk); ib_we = 1; ib_addr = 10'(a); ib_wdata = w;
    @(negedge clk); ib_we = 0;
  endtask
  task automatic map_request(int req, int rows);
    for (int kv = 0; kv < 2; kv++)
      for (int v = 0; v < (rows + ROWS_PER_CHUNK - 1) / ROWS_PER_CHUNK; v++) begin
        int pa;
        pa = (req * 5003 + kv * 8191 + v * 37 + 11) % NCHUNK;
        pmap[(kv << 20) | (req << 10) | v] = pa;
        @(negedge clk); va_we = 1; va_kv = kv[0]; va_req = 5'(req); va_va = 10'(v); va_pa = PA_W'(pa);
      end
    @(negedge clk); va_we = 0;
  endtask

  function automatic int prow(int kv, int req, int t);
    return pmap[(kv << 20) | (req << 10) | (t / ROWS_PER_CHUNK)] * ROWS_PER_CHUNK + t % ROWS_PER_CHUNK;
  endfunction

  task automatic decode_step(int req, int tokens);
    int rows, cyc;
    tile_t sv;
    rows = (tokens + 511) / 512;
    map_request(req, rows);
    @(negedge clk); cfg_we = 1; cfg_req = 5'(req); cfg_tcur = 21'(tokens);
    @(negedge clk); cfg_we = 0;
    run_valid = 1; run_req = 5'(req); run_pc = 0;
    @(posedge clk); while (!run_ready) @(posedge clk);
    @(negedge clk); run_valid = 0;
    cyc = 0;
    while (busy || cyc < 2) begin @(posedge clk); cyc++; end
    $display("request %0d: %0d tokens, %0d rows per K/V space, %0d cycles", req, tokens, rows, cyc);
    check(cyc >= 32 * rows, $sformatf("req %0d cycle count %0d below the tCCDS bound", req, cyc));
    sv = '0;
    for (int c = 0; c < NCH; c++) begin
      tile_t part;
      part = '0;
      for (int t = 0; t < rows; t++) begin
        tile_t s;
        int pk, pv;
        pk = prow(0, req, t);
        pv = prow(1, req, t);
        for (int b = 0; b < NBANK; b++) begin
          elem_t a, v;
          a = '0; v = '0;
          for (int k = 0; k < DH_TILES; k++)
            for (int l = 0; l < TILE_ELEMS; l++) begin
              a += elem_t'(q[k][l*ELEM_W +: ELEM_W]  * dram(c, b, pk, k, l));
              v += elem_t'(pr[k][l*ELEM_W +: ELEM_W] * dram(c, b, pv, k, l));
            end
          s[b*ELEM_W +: ELEM_W] = a;
          part[b*ELEM_W +: ELEM_W] = part[b*ELEM_W +: ELEM_W] + v;
        end
        @(negedge clk); host_raddr = GPR_AW'(QK_BASE + t + c * STRIDE); #1;
        check(host_rdata == s, $sformatf("req %0d QK^T scores row %0d channel %0d", req, t, c));
      end
      if (c > 0) begin
        @(negedge clk); host_raddr = GPR_AW'(SV_BASE + c * STRIDE); #1;
        check(host_rdata == part, $sformatf("req %0d SV partial of channel %0d", req, c));
      end
      sv = tile_add(sv, part);
    end
    @(negedge clk); host_raddr = GPR_AW'(SV_BASE); #1;
    check(host_rdata == sv, $sformatf("req %0d reduced SV output", req));
    cfg_rreq = 5'(req); #1;
    check(int'(cfg_rtcur) == tokens + 1, $sformatf("T_cur of request %0d", req));
  endtask

  initial begin
    ib_we = 0; va_we = 0; cfg_we = 0; run_valid = 0; host_we = 0;
    ib_addr = 0; ib_wdata = '0; va_kv = 0; va_req = 0; va_va = 0; va_pa = 0;
    cfg_req = 0; cfg_tcur = 0; cfg_rreq = 0; run_req = 0; run_pc = 0;
    host_waddr = 0; host_wdata = '0; host_raddr = 0;
    repeat (3) @(posedge clk); rst_n = 1;

    for (int k = 0; k < DH_TILES; k++) begin
      q[k]  = {8{$urandom}};
      pr[k] = {8{$urandom}};
      @(negedge clk); host_we = 1; host_waddr = GPR_AW'(k);            host_wdata = q[k];
      @(negedge clk); host_we = 1; host_waddr = GPR_AW'(DH_TILES + k); host_wdata = pr[k];
    end
    @(negedge clk); host_we = 0;

    wr_ib(0,  pimw(pi(OP_WR_INP, DH_TILES, 0, 0, 0), 0, 0));
    wr_ib(1,  loopw(4));
    wr_ib(2,  modi(FLD_ROW));
    wr_ib(3,  pimw(pi(OP_MAC, DH_TILES, 0, 0, 0), 1, 0));
    wr_ib(4,  modi(FLD_GPR));
    wr_ib(5,  pimw(pi(OP_RD_OUT, 1, QK_BASE, 0, 0), 0, 0));
    wr_ib(6,  pimw(pi(OP_WR_INP, DH_TILES, DH_TILES, DH_TILES, 0), 0, 0));
    wr_ib(7,  loopw(2));
    wr_ib(8,  modi(FLD_ROW));
    wr_ib(9,  pimw(pi(OP_MAC, DH_TILES, 0, DH_TILES, 1), 1, 1));
    wr_ib(10, pimw(pi(OP_RD_OUT, 1, SV_BASE, 0, 1), 0, 0));
    wr_ib(11, pimw(pi(OP_EPU_RED, 1, SV_BASE, 0, 0), 0, 0));
    begin
      dpa_inst_t w;
      w = '0; w.kind = DPA_END;
      wr_ib(12, w);
    end

    decode_step(3, 13966);    // summarisation set, mean length
    decode_step(9, 50693);    // long-document QA set, mean length
    decode_step(17, 119480);  // multi-field QA set, longest request

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
