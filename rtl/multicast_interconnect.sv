// multicast_interconnect: Multicast Interconnect of the PIM HUB.
//
// Takes the unrolled instruction stream from the Instruction Sequencer and
// turns each instruction into one channel command per channel set in its
// Ch-mask, sending them to those PIM controllers in the same cycle (an
// instruction waits until every addressed controller can take it). It also
// moves the data:
//   WR-INP : the tile at GPR[gpr_addr] is read (gpr_raddr/gpr_rdata) and
//            sent with the command to every addressed channel (multicast).
//   RD-OUT : channel c is told to write its result to
//            GPR[gpr_addr + c*CH_STRIDE], so every channel has its own slot.
//            Results come back on the channels' response ports, wait in a
//            WBQ-deep write-back queue per channel and are written into the
//            GPR one per cycle, channels served round-robin. wb_ok[c] tells
//            controller c whether a further RD-OUT result still fits.
//   EPU_RED: the interconnect waits until every controller is idle and every
//            result has been written back, then starts the EPU reduction and
//            waits for it to finish. This is the only ordering it enforces
//            through the GPR.
// From the paper: decoding into channel-specific commands, multicasting by
// Ch-mask, routing data between the GPR and the controllers, and the TCP
// reduction through GPR and EPU. Own choices: the per-channel GPR slot
// layout for RD-OUT, the write-back queues and arbitration, and the barrier
// before a reduction.
// The handshake assertions at the end are disabled during reset with
// disable iff (!rst_n); a lint note that rst_n is used both synchronously
// and asynchronously refers to them, not to any flip-flop.
module multicast_interconnect
  import pim_pkg::*;
#(
  parameter int N_CH      = NCH,
  parameter int CH_STRIDE = GPR_ENTRIES / NCH,
  parameter int WBQ       = 4
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // unrolled instructions
  input  logic                 in_valid,
  output logic                 in_ready,
  input  pim_inst_t            in_inst,
  // GPR read (WR-INP data)
  output logic [GPR_AW-1:0]    gpr_raddr,
  input  tile_t                gpr_rdata,
  // GPR write (RD-OUT results)
  output logic                 wb_we,
  output logic [GPR_AW-1:0]    wb_addr,
  output tile_t                wb_data,
  // PIM controllers
  output logic [N_CH-1:0]      ctrl_valid,
  input  logic [N_CH-1:0]      ctrl_ready,
  output pim_cmd_t             ctrl_cmd [N_CH],
  output logic [N_CH-1:0]      wb_ok,
  input  logic [N_CH-1:0]      ctrl_idle,
  // channel RD-OUT responses
  input  logic [N_CH-1:0]      rsp_valid,
  input  logic [GPR_AW-1:0]    rsp_addr [N_CH],
  input  tile_t                rsp_data [N_CH],
  // EPU
  output logic                 epu_start,
  output logic [GPR_AW-1:0]    epu_base,
  output logic [OPSZ_W-1:0]    epu_count,
  output logic [N_CH-1:0]      epu_mask,
  input  logic                 epu_busy,
  input  logic                 epu_done,
  // status
  output logic                 idle,
  output logic                 ev_multicast   // one instruction to >1 channel
);
  typedef struct packed {
    logic [GPR_AW-1:0] addr;
    tile_t             data;
  } wb_t;

  typedef enum logic [1:0] {E_IDLE, E_DRAIN, E_RUN} estate_e;
  estate_e es;

  logic [N_CH-1:0] wq_v;
  logic [N_CH-1:0] wq_pop;
  wb_t             wq_d   [N_CH];
  logic [$clog2(WBQ+1)-1:0] wq_cnt [N_CH];

  for (genvar c = 0; c < N_CH; c++) begin : g_wbq
    logic in_rdy_unused;
    sync_fifo #(.T(wb_t), .DEPTH(WBQ)) u_q (
      .clk, .rst_n,
      .in_valid(rsp_valid[c]), .in_ready(in_rdy_unused),
      .in_data('{addr: rsp_addr[c], data: rsp_data[c]}),
      .out_valid(wq_v[c]), .out_ready(wq_pop[c]), .out_data(wq_d[c]),
      .count(wq_cnt[c])
    );
    assign wb_ok[c] = (32'(wq_cnt[c]) + 32'(rsp_valid[c])) < WBQ;
    assert property (@(posedge clk) disable iff (!rst_n) rsp_valid[c] |-> in_rdy_unused);
  end

  // ---------------- round-robin write-back ----------------
  logic [$clog2(N_CH)-1:0] rr, pick, cand;
  logic                    any;
  always_comb begin
    any  = 1'b0;
    pick = rr;
    cand = rr;
    for (int j = 0; j < N_CH; j++) begin
      cand = ($clog2(N_CH))'((int'(rr) + j) % N_CH);
      if (!any && wq_v[cand]) begin
        any  = 1'b1;
        pick = cand;
      end
    end
  end
  always_comb begin
    wq_pop = '0;
    if (any) wq_pop[pick] = 1'b1;
  end
  assign wb_we   = any;
  assign wb_addr = wq_d[pick].addr;
  assign wb_data = wq_d[pick].data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rr <= '0;
    else if (any) rr <= (pick == ($clog2(N_CH))'(N_CH - 1)) ? '0 : pick + 1'b1;
  end

  // ---------------- command multicast ----------------
  wire is_epu   = (in_inst.op == OP_EPU_RED);
  wire targets_ready = &(ctrl_ready | ~in_inst.ch_mask);
  wire send     = in_valid && !is_epu && targets_ready;

  assign gpr_raddr = in_inst.gpr_addr;

  always_comb begin
    for (int c = 0; c < N_CH; c++) begin
      ctrl_valid[c]       = send && in_inst.ch_mask[c];
      ctrl_cmd[c].op       = in_inst.op;
      ctrl_cmd[c].gbuf_idx = in_inst.gbuf_idx;
      ctrl_cmd[c].row      = in_inst.row;
      ctrl_cmd[c].col      = in_inst.col;
      ctrl_cmd[c].out_idx  = in_inst.out_idx;
      ctrl_cmd[c].wb_addr  = GPR_AW'(in_inst.gpr_addr + GPR_AW'(c * CH_STRIDE));
      ctrl_cmd[c].data     = gpr_rdata;
    end
  end

  assign ev_multicast = send && ((in_inst.ch_mask & (in_inst.ch_mask - 1'b1)) != '0);

  // ---------------- EPU barrier ----------------
  wire drained = (&ctrl_idle) && !(|wq_v) && !(|rsp_valid);

  assign epu_start = (es == E_DRAIN) && drained && !epu_busy;
  assign epu_base  = in_inst.gpr_addr;
  assign epu_count = in_inst.op_size;
  assign epu_mask  = in_inst.ch_mask;

  assign in_ready = is_epu ? (es == E_RUN && epu_done) : targets_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) es <= E_IDLE;
    else unique case (es)
      E_IDLE:  if (in_valid && is_epu) es <= E_DRAIN;
      E_DRAIN: if (epu_start) es <= E_RUN;
      E_RUN:   if (epu_done) es <= E_IDLE;
      default: es <= E_IDLE;
    endcase
  end

  assign idle = (es == E_IDLE) && !(|wq_v);
endmodule
