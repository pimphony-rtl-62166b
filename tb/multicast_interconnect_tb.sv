// multicast_interconnect_tb: self-checking test of the Multicast Interconnect.
// Phase A: 400 random WR-INP / MAC / RD-OUT instructions with random channel
//   masks, against 32 modelled controllers whose ready lines toggle at
//   random. Every command a controller accepts is compared with the expected
//   per-channel stream (fields, multicast WR-INP data read from the GPR model,
//   per-channel RD-OUT write-back slot gpr_addr + c*512); a command is never
//   offered to a channel that is not ready, and an instruction goes to all of
//   its channels in one cycle.
// Phase B: random RD-OUT responses on all channels, honouring wb_ok; every
//   response must be written into the GPR exactly once.
// Phase C: an EPU_RED instruction must not start the EPU while a controller
//   is busy, must start it with the instruction's base, count and mask once
//   all is drained, and must be consumed on the EPU's done.
module multicast_interconnect_tb;
  import pim_pkg::*;
  localparam int STRIDE = GPR_ENTRIES / NCH;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid, in_ready, wb_we, epu_start, epu_busy, epu_done, idle, ev_multicast;
  pim_inst_t in_inst;
  logic [GPR_AW-1:0] gpr_raddr, wb_addr, epu_base;
  tile_t gpr_rdata, wb_data;
  logic [NCH-1:0] ctrl_valid, ctrl_ready, wb_ok, ctrl_idle, rsp_valid, epu_mask;
  pim_cmd_t ctrl_cmd [NCH];
  logic [GPR_AW-1:0] rsp_addr [NCH];
  tile_t rsp_data [NCH];
  logic [OPSZ_W-1:0] epu_count;

  multicast_interconnect dut (.*);

  tile_t gmem [GPR_ENTRIES];
  assign gpr_rdata = gmem[gpr_raddr];

  pim_cmd_t exp_c [NCH][$];
  tile_t    exp_wb [int];
  int checks = 0, failures = 0, n_mc = 0;
  task automatic check(bit ok, string s);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", s); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // controller model and monitors
  bit phase_a = 0;
  always @(posedge clk) if (rst_n) begin
    if (ev_multicast) n_mc++;
    if (in_valid && in_ready && in_inst.op != OP_EPU_RED)
      for (int c = 0; c < NCH; c++) if (in_inst.ch_mask[c]) begin
        pim_cmd_t e;
        e.op = in_inst.op; e.gbuf_idx = in_inst.gbuf_idx; e.row = in_inst.row; e.col = in_inst.col;
        e.out_idx = in_inst.out_idx; e.wb_addr = GPR_AW'(int'(in_inst.gpr_addr) + c * STRIDE);
        e.data = gmem[in_inst.gpr_addr];
        exp_c[c].push_back(e);
      end
    for (int c = 0; c < NCH; c++) begin
      if (ctrl_valid[c]) begin
        check(ctrl_ready[c], "command offered to a busy controller");
        check(exp_c[c].size() > 0 && ctrl_cmd[c] == exp_c[c][0], $sformatf("channel %0d command", c));
        if (exp_c[c].size() > 0) void'(exp_c[c].pop_front());
      end
    end
    if (wb_we) begin
      check(exp_wb.exists(int'(wb_addr)) && exp_wb[int'(wb_addr)] == wb_data, $sformatf("write-back @%0d", wb_addr));
      exp_wb.delete(int'(wb_addr));
    end
  end
  always @(negedge clk) if (phase_a) ctrl_ready <= ~({$urandom} & {$urandom} & {$urandom} & {$urandom} & {$urandom});

  initial begin
    in_valid = 0; in_inst = '0; ctrl_ready = '1; ctrl_idle = '1; rsp_valid = '0;
    epu_busy = 0; epu_done = 0;
    for (int c = 0; c < NCH; c++) begin rsp_addr[c] = '0; rsp_data[c] = '0; end
    for (int i = 0; i < GPR_ENTRIES; i++) gmem[i] = {8{$urandom}};
    repeat (2) @(posedge clk); rst_n = 1;

    // ---------------- phase A ----------------
    phase_a = 1;
    for (int i = 0; i < 400; i++) begin
      @(negedge clk);
      in_valid = 1;
      in_inst = {$urandom, $urandom, $urandom, $urandom};
      in_inst.op = pim_op_e'($urandom_range(0, 2));
      in_inst.op_size = 1;
      in_inst.ch_mask = (i % 4 == 0) ? '1 : {$urandom};
      @(posedge clk);
      while (!in_ready) @(posedge clk);
    end
    @(negedge clk); in_valid = 0; phase_a = 0; ctrl_ready = '1;
    repeat (3) @(posedge clk);
    for (int c = 0; c < NCH; c++) check(exp_c[c].size() == 0, "all commands delivered");
    check(n_mc > 0, "multicast seen");

    // ---------------- phase B ----------------
    for (int i = 0; i < 300; i++) begin
      @(negedge clk);
      for (int c = 0; c < NCH; c++) begin
        rsp_valid[c] = wb_ok[c] && ($urandom_range(0, 3) == 0);
        rsp_addr[c]  = GPR_AW'(c * STRIDE + i);
        rsp_data[c]  = {8{$urandom}};
        if (rsp_valid[c]) exp_wb[int'(rsp_addr[c])] = rsp_data[c];
      end
    end
    @(negedge clk); rsp_valid = '0;
    repeat (NCH * 5) @(posedge clk);
    check(exp_wb.size() == 0, "every response written back");

    // ---------------- phase C ----------------
    @(negedge clk);
    ctrl_idle = '1; ctrl_idle[5] = 1'b0;
    in_valid = 1; in_inst = '0; in_inst.op = OP_EPU_RED; in_inst.gpr_addr = 14'd100;
    in_inst.op_size = 3; in_inst.ch_mask = 32'h0f0f_00ff;
    repeat (10) begin @(posedge clk); check(!epu_start && !in_ready, "EPU held while a controller is busy"); end
    @(negedge clk); ctrl_idle = '1;
    #1;
    check(epu_start && epu_base == 14'd100 && epu_count == 3 && epu_mask == 32'h0f0f_00ff, "EPU started with the instruction's operands");
    @(posedge clk);
    @(negedge clk); epu_busy = 1;
    repeat (5) begin @(posedge clk); #1; check(!in_ready && !epu_start, "EPU_RED held while EPU runs"); end
    @(negedge clk); epu_done = 1;
    #1 check(in_ready, "EPU_RED consumed on done");
    @(negedge clk); epu_done = 0; epu_busy = 0; in_valid = 0;
    repeat (2) @(posedge clk); #1;
    check(idle, "idle at the end");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
