// inst_sequencer_tb: self-checking test of Op-size unrolling.
// Random instructions of all four opcodes and op_size 1..8 are pushed with
// random gaps while the output is drained with random stalls. Every output is
// compared with the expansion worked out here (per-opcode stepped fields,
// op_size = 1, EPU_RED passed once unchanged); the test also checks the
// rate: with the output always ready one instruction of op_size n leaves in
// exactly n consecutive cycles.
module inst_sequencer_tb;
  import pim_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid, in_ready, out_valid, out_ready, idle;
  pim_inst_t in_inst, out_inst;
  inst_sequencer dut (.*);

  pim_inst_t exp_q [$];
  int checks = 0, failures = 0;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic pim_inst_t rnd(bit epu_ok);
    pim_inst_t x;
    x = {$urandom, $urandom, $urandom, $urandom};
    x.op = pim_op_e'($urandom_range(0, epu_ok ? 3 : 2));
    x.op_size = OPSZ_W'($urandom_range(1, 8));
    return x;
  endfunction

  task automatic expand(pim_inst_t x);
    if (x.op == OP_EPU_RED) begin exp_q.push_back(x); return; end
    for (int k = 0; k < int'(x.op_size); k++) begin
      pim_inst_t y;
      y = x; y.op_size = 1;
      case (x.op)
        OP_WR_INP: begin y.gpr_addr = x.gpr_addr + GPR_AW'(k); y.gbuf_idx = x.gbuf_idx + GBUF_IDX_W'(k); end
        OP_MAC:    begin y.gbuf_idx = x.gbuf_idx + GBUF_IDX_W'(k); y.col = x.col + COL_W'(k); end
        default:   begin y.gpr_addr = x.gpr_addr + GPR_AW'(k); y.out_idx = x.out_idx + OUT_IDX_W'(k); end
      endcase
      exp_q.push_back(y);
    end
  endtask

  int n_out = 0;
  bit random_ready = 1;
  always @(posedge clk) if (rst_n) begin
    if (out_valid && out_ready) begin
      pim_inst_t e;
      e = exp_q.pop_front();
      checks++;
      if (out_inst !== e) begin failures++; $display("FAIL: output %0d", n_out); end
      n_out++;
    end
  end
  always @(negedge clk) out_ready <= random_ready ? ($urandom_range(0, 3) != 0) : 1'b1;

  initial begin
    in_valid = 0; in_inst = '0; out_ready = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int i = 0; i < 400; i++) begin
      @(negedge clk);
      in_valid = ($urandom_range(0, 2) != 0);
      in_inst = rnd(1);
      @(posedge clk);
      while (in_valid && !in_ready) @(posedge clk);
      if (in_valid) expand(in_inst);
    end
    @(negedge clk); in_valid = 0;
    while (exp_q.size() != 0) @(posedge clk);
    // rate check: one instruction of op_size 7, output always ready
    random_ready = 0;
    repeat (3) @(posedge clk);
    @(negedge clk);
    in_valid = 1; in_inst = rnd(0); in_inst.op_size = 7; expand(in_inst);
    @(negedge clk); in_valid = 0;
    begin
      int cyc = 0, first = -1, last = -1;
      repeat (20) begin
        @(posedge clk);
        if (out_valid && out_ready) begin if (first < 0) first = cyc; last = cyc; end
        cyc++;
      end
      checks++;
      if (last - first != 6) begin failures++; $display("FAIL: 7 outputs took %0d cycles", last - first + 1); end
    end
    checks++; if (!idle || exp_q.size() != 0) begin failures++; $display("FAIL: not drained"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
