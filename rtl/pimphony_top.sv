// pimphony_top: one PIM module with the PIM HUB orchestration of this design
// - dynamic PIM access, token-centric multicast and dynamic command
// scheduling - from the host-facing dispatcher down to the channel
// datapaths.
//
// Instruction path: the host loads a DPA program, the VA2PA table and the
// per-request token counts into the dispatcher, then starts one decoding
// step per request (run_*). The dispatcher expands loops, applies operand
// modifiers and translates virtual rows, and feeds plain PIM instructions to
// the Instruction Sequencer, which unrolls Op-size. The Multicast
// Interconnect sends each instruction to the PIM controllers named in its
// Ch-mask; each controller (DCS) issues its commands to its channel datapath
// out of order as dependencies allow. RD-OUT results return through the
// interconnect into the GPR; EPU_RED instructions make the EPU add the
// per-channel partial results.
// Data path: the host reads and writes the GPR (host_*); it should write
// only while the module is idle, because module writes take the port first.
// The DRAM cell arrays are outside: each channel drives bank_rd/bank_row/
// bank_col and expects the NBANK 32-byte column slices on bank_rdata in the
// same cycle.
// The event outputs pulse once per occurrence of each mechanism, for
// monitoring. busy is high while any stage holds work.
module pimphony_top
  import pim_pkg::*;
#(
  parameter int N_CH       = NCH,
  parameter int IB_DEPTH   = 1024,
  parameter int MAX_REQ    = 32,
  parameter int MAX_VCHUNK = 1024,
  parameter int TCUR_W     = 21,
  localparam int IB_AW  = $clog2(IB_DEPTH),
  localparam int REQ_W  = $clog2(MAX_REQ),
  localparam int VA_W   = $clog2(MAX_VCHUNK)
) (
  input  logic               clk,
  input  logic               rst_n,
  // host: dispatcher
  input  logic               ib_we,
  input  logic [IB_AW-1:0]   ib_addr,
  input  dpa_inst_t          ib_wdata,
  input  logic               va_we,
  input  logic               va_kv,
  input  logic [REQ_W-1:0]   va_req,
  input  logic [VA_W-1:0]    va_va,
  input  logic [PA_W-1:0]    va_pa,
  input  logic               cfg_we,
  input  logic [REQ_W-1:0]   cfg_req,
  input  logic [TCUR_W-1:0]  cfg_tcur,
  input  logic [REQ_W-1:0]   cfg_rreq,
  output logic [TCUR_W-1:0]  cfg_rtcur,
  input  logic               run_valid,
  output logic               run_ready,
  input  logic [REQ_W-1:0]   run_req,
  input  logic [IB_AW-1:0]   run_pc,
  output logic               run_done,
  // host: GPR
  input  logic               host_we,
  input  logic [GPR_AW-1:0]  host_waddr,
  input  tile_t              host_wdata,
  input  logic [GPR_AW-1:0]  host_raddr,
  output tile_t              host_rdata,
  // DRAM bank arrays
  output logic [N_CH-1:0]    bank_rd,
  output logic [ROW_W-1:0]   bank_row [N_CH],
  output logic [COL_W-1:0]   bank_col [N_CH],
  input  tile_t              bank_rdata [N_CH][NBANK],
  // status and events
  output logic               busy,
  output logic [N_CH-1:0]    ev_ooo,
  output logic [N_CH-1:0]    ev_bypass,
  output logic [N_CH-1:0]    ev_dep_wait,
  output logic [N_CH-1:0]    ev_issue,
  output logic               ev_multicast,
  output logic               ev_xlate,
  output logic               ev_loop,
  output logic               ev_reduce,
  output logic               ev_backpressure
);
  localparam int CH_STRIDE = GPR_ENTRIES / N_CH;

  // dispatcher -> sequencer
  logic      d_valid, d_ready;
  pim_inst_t d_inst;
  // sequencer -> interconnect
  logic      s_valid, s_ready;
  pim_inst_t s_inst;
  logic      seq_idle, ic_idle;

  // GPR ports
  logic [GPR_AW-1:0] ic_raddr, epu_raddr, wb_addr, epu_waddr;
  tile_t             gpr_rdata_a, wb_data, epu_wdata;
  logic              wb_we, epu_we;

  // EPU
  logic              epu_start, epu_busy, epu_done;
  logic [GPR_AW-1:0] epu_base;
  logic [OPSZ_W-1:0] epu_count;
  logic [N_CH-1:0]   epu_mask;

  // controllers and channels
  logic [N_CH-1:0]   c_valid, c_ready, c_idle, wb_ok, i_valid, r_valid;
  pim_cmd_t          c_cmd [N_CH];
  pim_cmd_t          i_cmd [N_CH];
  logic [GPR_AW-1:0] r_addr [N_CH];
  tile_t             r_data [N_CH];

  dpa_dispatcher #(
    .IB_DEPTH(IB_DEPTH), .MAX_REQ(MAX_REQ), .MAX_VCHUNK(MAX_VCHUNK), .TCUR_W(TCUR_W)
  ) u_disp (
    .clk, .rst_n,
    .ib_we, .ib_addr, .ib_wdata,
    .va_we, .va_kv, .va_req, .va_va, .va_pa,
    .cfg_we, .cfg_req, .cfg_tcur, .cfg_rreq, .cfg_rtcur,
    .run_valid, .run_ready, .run_req, .run_pc, .done(run_done),
    .out_valid(d_valid), .out_ready(d_ready), .out_inst(d_inst),
    .ev_xlate, .ev_loop
  );

  inst_sequencer u_seq (
    .clk, .rst_n,
    .in_valid(d_valid), .in_ready(d_ready), .in_inst(d_inst),
    .out_valid(s_valid), .out_ready(s_ready), .out_inst(s_inst),
    .idle(seq_idle)
  );

  multicast_interconnect #(.N_CH(N_CH), .CH_STRIDE(CH_STRIDE)) u_ic (
    .clk, .rst_n,
    .in_valid(s_valid), .in_ready(s_ready), .in_inst(s_inst),
    .gpr_raddr(ic_raddr), .gpr_rdata(gpr_rdata_a),
    .wb_we, .wb_addr, .wb_data,
    .ctrl_valid(c_valid), .ctrl_ready(c_ready), .ctrl_cmd(c_cmd),
    .wb_ok, .ctrl_idle(c_idle),
    .rsp_valid(r_valid), .rsp_addr(r_addr), .rsp_data(r_data),
    .epu_start, .epu_base, .epu_count, .epu_mask, .epu_busy, .epu_done,
    .idle(ic_idle), .ev_multicast
  );

  epu #(.N_CH(N_CH), .CH_STRIDE(CH_STRIDE)) u_epu (
    .clk, .rst_n,
    .start(epu_start), .base(epu_base), .count(epu_count), .ch_mask(epu_mask),
    .busy(epu_busy), .done(epu_done),
    .gpr_raddr(epu_raddr), .gpr_rdata(gpr_rdata_a),
    .gpr_we(epu_we), .gpr_waddr(epu_waddr), .gpr_wdata(epu_wdata)
  );

  // GPR: EPU first, then RD-OUT write-back, then the host
  logic              g_we;
  logic [GPR_AW-1:0] g_waddr;
  tile_t             g_wdata;
  always_comb begin
    if (epu_we)       begin g_we = 1'b1;    g_waddr = epu_waddr;  g_wdata = epu_wdata;  end
    else if (wb_we)   begin g_we = 1'b1;    g_waddr = wb_addr;    g_wdata = wb_data;    end
    else              begin g_we = host_we; g_waddr = host_waddr; g_wdata = host_wdata; end
  end

  gpr u_gpr (
    .clk,
    .we(g_we), .waddr(g_waddr), .wdata(g_wdata),
    .raddr_a(epu_busy ? epu_raddr : ic_raddr), .rdata_a(gpr_rdata_a),
    .raddr_b(host_raddr), .rdata_b(host_rdata)
  );

  for (genvar c = 0; c < N_CH; c++) begin : g_ch
    pim_ctrl u_ctrl (
      .clk, .rst_n,
      .cmd_valid(c_valid[c]), .cmd_ready(c_ready[c]), .cmd(c_cmd[c]),
      .wb_ok(wb_ok[c]),
      .issue_valid(i_valid[c]), .issue_cmd(i_cmd[c]),
      .idle(c_idle[c]),
      .ev_ooo(ev_ooo[c]), .ev_bypass(ev_bypass[c]), .ev_dep_wait(ev_dep_wait[c])
    );

    pim_channel u_chan (
      .clk, .rst_n,
      .cmd_valid(i_valid[c]), .cmd(i_cmd[c]),
      .bank_rd(bank_rd[c]), .bank_row(bank_row[c]), .bank_col(bank_col[c]),
      .bank_rdata(bank_rdata[c]),
      .rsp_valid(r_valid[c]), .rsp_addr(r_addr[c]), .rsp_data(r_data[c])
    );
  end

  assign ev_issue        = i_valid;
  assign ev_reduce       = epu_done;
  assign ev_backpressure = s_valid && !s_ready && (s_inst.op != OP_EPU_RED);
  assign busy = !run_ready || !seq_idle || !ic_idle || !(&c_idle) || (|r_valid) || epu_busy;
endmodule
