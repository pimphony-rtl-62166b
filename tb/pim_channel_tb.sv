// pim_channel_tb: self-checking test of one channel datapath.
// A behavioural DRAM model returns, for bank b, row r and column c, a tile
// whose lanes are a fixed hash of (b, r, c, lane). Random WR-INP / MAC /
// RD-OUT commands are applied; the testbench keeps its own copy of the GBuf
// and of every bank's accumulators and checks each RD-OUT response (data,
// write-back address, and that it comes exactly one cycle after the command),
// and that a drained entry restarts from zero.
module pim_channel_tb;
  import pim_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic cmd_valid, bank_rd, rsp_valid;
  pim_cmd_t cmd;
  logic [ROW_W-1:0] bank_row;
  logic [COL_W-1:0] bank_col;
  tile_t bank_rdata [NBANK];
  logic [GPR_AW-1:0] rsp_addr;
  logic [NBANK*ELEM_W-1:0] rsp_data;

  pim_channel dut (.*);

  function automatic elem_t dram(int b, int r, int c, int l);
    return elem_t'((b * 40503) ^ (r * 2654435761) ^ (c * 97) ^ (l * 7919) ^ 16'h5a5a);
  endfunction
  always_comb
    for (int b = 0; b < NBANK; b++)
      for (int l = 0; l < TILE_ELEMS; l++)
        bank_rdata[b][l*ELEM_W +: ELEM_W] = dram(b, int'(bank_row), int'(bank_col), l);

  tile_t m_gbuf [GBUF_ENTRIES];
  elem_t m_obuf [NBANK][OBUF_ENTRIES];
  int checks = 0, failures = 0, n_rd = 0;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    cmd_valid = 0; cmd = '0;
    for (int e = 0; e < GBUF_ENTRIES; e++) m_gbuf[e] = '0;
    for (int b = 0; b < NBANK; b++) for (int e = 0; e < OBUF_ENTRIES; e++) m_obuf[b][e] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // initialise the GBuf entries used
    for (int e = 0; e < 8; e++) begin
      @(negedge clk);
      cmd_valid = 1; cmd = '0; cmd.op = OP_WR_INP; cmd.gbuf_idx = GBUF_IDX_W'(e);
      cmd.data = {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom};
      m_gbuf[e] = cmd.data;
    end
    for (int i = 0; i < 3000; i++) begin
      int op;
      logic [NBANK*ELEM_W-1:0] exp_d;
      @(negedge clk);
      op = $urandom_range(0, 5);
      cmd = '0;
      cmd.gbuf_idx = GBUF_IDX_W'($urandom_range(0, 7));
      cmd.out_idx  = OUT_IDX_W'($urandom_range(0, 3) == 0 ? 63 : $urandom_range(0, 3));
      cmd.row      = ROW_W'($urandom);
      cmd.col      = COL_W'($urandom);
      cmd.wb_addr  = GPR_AW'($urandom);
      cmd.data     = {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom};
      cmd_valid = ($urandom_range(0, 7) != 0);
      cmd.op = (op == 0) ? OP_WR_INP : (op == 5) ? OP_RD_OUT : OP_MAC;
      if (cmd_valid) begin
        unique case (cmd.op)
          OP_WR_INP: m_gbuf[cmd.gbuf_idx] = cmd.data;
          OP_MAC: for (int b = 0; b < NBANK; b++) begin
            elem_t s;
            s = '0;
            for (int l = 0; l < TILE_ELEMS; l++)
              s += elem_t'(m_gbuf[cmd.gbuf_idx][l*ELEM_W +: ELEM_W] * dram(b, int'(cmd.row), int'(cmd.col), l));
            m_obuf[b][cmd.out_idx] += s;
          end
          default: begin
            for (int b = 0; b < NBANK; b++) begin
              exp_d[b*ELEM_W +: ELEM_W] = m_obuf[b][cmd.out_idx];
              m_obuf[b][cmd.out_idx] = '0;
            end
          end
        endcase
      end
      if (cmd_valid && cmd.op == OP_RD_OUT) begin
        logic [GPR_AW-1:0] a;
        a = cmd.wb_addr;
        @(posedge clk); #1;
        checks++;
        n_rd++;
        if (!(rsp_valid && rsp_addr == a && rsp_data == exp_d)) begin
          failures++; $display("FAIL: RD-OUT %0d data", i);
        end
      end else begin
        @(posedge clk); #1;
        checks++;
        if (rsp_valid) begin failures++; $display("FAIL: spurious response"); end
      end
    end
    checks++; if (n_rd < 100) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
