// epu_tb: self-checking test of the EPU reduction.
// A behavioural GPR (array in the testbench, combinational read) is filled
// with random partial tiles for all 32 channel slots; random reductions
// (random base, tile count and channel mask) are started and the written
// sums are compared with sums computed here. Checks that nothing outside the
// result tiles is written and that one reduction takes count*(NCH+1)+1 cycles
// from start to done.
module epu_tb;
  import pim_pkg::*;
  localparam int STRIDE = GPR_ENTRIES / NCH;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start, busy, done, gpr_we;
  logic [GPR_AW-1:0] base, gpr_raddr, gpr_waddr;
  logic [OPSZ_W-1:0] count;
  logic [NCH-1:0]    ch_mask;
  tile_t gpr_rdata, gpr_wdata;

  epu dut (.*);

  tile_t mem [GPR_ENTRIES];
  assign gpr_rdata = mem[gpr_raddr];
  int writes;
  always @(posedge clk) if (gpr_we) begin mem[gpr_waddr] <= gpr_wdata; writes++; end

  int checks = 0, failures = 0;
  task automatic check(bit ok, string s);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", s); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    start = 0; base = '0; count = '0; ch_mask = '0;
    for (int i = 0; i < GPR_ENTRIES; i++)
      mem[i] = {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom};
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int trial = 0; trial < 20; trial++) begin
      tile_t exp_t [int];
      int b, n, t0, lat;
      logic [NCH-1:0] m;
      b = $urandom_range(0, STRIDE - 20);
      n = $urandom_range(1, 16);
      m = (trial == 0) ? '1 : {$urandom};
      for (int i = 0; i < n; i++) begin
        tile_t s;
        s = '0;
        for (int c = 0; c < NCH; c++)
          if (m[c]) for (int l = 0; l < TILE_ELEMS; l++)
            s[l*ELEM_W +: ELEM_W] += mem[b + c*STRIDE + i][l*ELEM_W +: ELEM_W];
        exp_t[i] = s;
      end
      writes = 0;
      @(negedge clk);
      start = 1; base = GPR_AW'(b); count = OPSZ_W'(n); ch_mask = m;
      @(posedge clk); t0 = $time;
      @(negedge clk); start = 0;
      while (!done) @(posedge clk);
      lat = ($time - t0) / 10;
      check(lat == n * (NCH + 1) + 1, $sformatf("latency %0d, expected %0d", lat, n * (NCH + 1) + 1));
      @(negedge clk);
      check(writes == n, "one write per result tile");
      for (int i = 0; i < n; i++)
        check(mem[b + i] == exp_t[i], $sformatf("trial %0d tile %0d", trial, i));
      check(!busy, "idle after done");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
