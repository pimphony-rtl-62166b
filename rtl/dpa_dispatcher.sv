// dpa_dispatcher: on-module PIM instruction dispatcher for Dynamic PIM
// Access (DPA).
//
// Holds three host-written memories and a decoder:
//   Instruction buffer : IB_DEPTH DPA-encoded instructions (dpa_inst_t).
//   Config buffer      : per request ID, the current token count T_cur.
//   VA2PA table        : per (K/V, request ID, virtual chunk) the physical
//                        chunk. A chunk spans all channels and banks and
//                        ROWS_PER_CHUNK rows of each bank (1 MB).
// run_valid/run_req/run_pc start one decoding step for a request: the decoder
// walks the program from run_pc and emits plain PIM instructions on a
// valid/ready port to the Instruction Sequencer, one per cycle at best.
//   Dyn-Loop {lb_shift, le}: the next le program words form a loop body run
//     LB = ceil(T_cur / 2^lb_shift) times (loop index t = 0..LB-1); LB = 0
//     skips the body. One loop level.
//   Dyn-Modi {target, coeff}: the next PIM instruction gets
//     target += coeff * t.
//   PIM instruction with xlate set: its row is a virtual row r of the
//     request's K (kv = 0) or V (kv = 1) space and is sent out as
//     VA2PA[kv][req][r / ROWS_PER_CHUNK] * ROWS_PER_CHUNK + r % ROWS_PER_CHUNK.
//   End: T_cur of the request is incremented (one token generated), done
//     pulses and the decoder takes the next run.
// Host writes to the three memories take one cycle and may happen at any
// time; the host is expected not to rewrite an entry the running step uses.
// From the paper: the three buffers and the decoder, Dyn-Loop with loop bound
// and loop entry count, Dyn-Modi with target field and coefficient, the loop
// bound T_cur/N, translation per request, 1 MB chunks and the T_cur increment
// per step without host help. Own choices: the program encoding, the End
// word, rounding LB up, a single loop level, Dyn-Modi acting on the next
// instruction only, and the buffer sizes (32 requests, 1024 chunks per request
// and per K/V, 1024 program words: about 128 KB in all, inside the paper's
// 200 KB budget).
module dpa_dispatcher
  import pim_pkg::*;
#(
  parameter int IB_DEPTH   = 1024,
  parameter int MAX_REQ    = 32,
  parameter int MAX_VCHUNK = 1024,
  parameter int TCUR_W     = 21,      // up to 2M tokens
  localparam int IB_AW  = $clog2(IB_DEPTH),
  localparam int REQ_W  = $clog2(MAX_REQ),
  localparam int VA_W   = $clog2(MAX_VCHUNK)
) (
  input  logic               clk,
  input  logic               rst_n,
  // host: instruction buffer
  input  logic               ib_we,
  input  logic [IB_AW-1:0]   ib_addr,
  input  dpa_inst_t          ib_wdata,
  // host: VA2PA table
  input  logic               va_we,
  input  logic               va_kv,
  input  logic [REQ_W-1:0]   va_req,
  input  logic [VA_W-1:0]    va_va,
  input  logic [PA_W-1:0]    va_pa,
  // host: config buffer
  input  logic               cfg_we,
  input  logic [REQ_W-1:0]   cfg_req,
  input  logic [TCUR_W-1:0]  cfg_tcur,
  input  logic [REQ_W-1:0]   cfg_rreq,
  output logic [TCUR_W-1:0]  cfg_rtcur,
  // host: start one decoding step
  input  logic               run_valid,
  output logic               run_ready,
  input  logic [REQ_W-1:0]   run_req,
  input  logic [IB_AW-1:0]   run_pc,
  output logic               done,
  // decoded PIM instructions
  output logic               out_valid,
  input  logic               out_ready,
  output pim_inst_t          out_inst,
  // event pulses
  output logic               ev_xlate,
  output logic               ev_loop
);
  dpa_inst_t   ib   [IB_DEPTH];
  logic [TCUR_W-1:0] tcur [MAX_REQ];
  logic [PA_W-1:0]   va2pa [2*MAX_REQ*MAX_VCHUNK];

  typedef enum logic {D_IDLE, D_RUN} dstate_e;
  dstate_e st;

  logic [REQ_W-1:0]  req_q;
  logic [IB_AW-1:0]  pc, loop_start, loop_last;
  logic              in_loop;
  logic [TCUR_W-1:0] lb_q, t_q;
  logic              modi_v;
  dpa_field_e        modi_tgt;
  logic [31:0]       modi_amt;

  dpa_inst_t w;
  assign w = ib[pc];

  // ---------------- host writes ----------------
  always_ff @(posedge clk) begin
    if (ib_we) ib[ib_addr] <= ib_wdata;
    if (va_we) va2pa[{va_kv, va_req, va_va}] <= va_pa;
  end
  assign cfg_rtcur = tcur[cfg_rreq];

  // ---------------- decode of a PIM word ----------------
  logic [ROW_W-1:0] vrow;
  logic [VA_W-1:0]  vchunk;
  logic [PA_W-1:0]  pchunk;
  pim_inst_t        mod_inst;

  always_comb begin
    mod_inst = w.inst;
    if (modi_v) begin
      unique case (modi_tgt)
        FLD_ROW:  mod_inst.row      = w.inst.row      + ROW_W'(modi_amt);
        FLD_COL:  mod_inst.col      = w.inst.col      + COL_W'(modi_amt);
        FLD_GPR:  mod_inst.gpr_addr = w.inst.gpr_addr + GPR_AW'(modi_amt);
        FLD_GBUF: mod_inst.gbuf_idx = w.inst.gbuf_idx + GBUF_IDX_W'(modi_amt);
        default:  mod_inst.out_idx  = w.inst.out_idx  + OUT_IDX_W'(modi_amt);
      endcase
    end
    vrow   = mod_inst.row;
    vchunk = VA_W'(vrow / ROW_W'(ROWS_PER_CHUNK));
    pchunk = va2pa[{w.xlate ? w.kv : 1'b0, req_q, vchunk}];
    out_inst = mod_inst;
    if (w.xlate)
      out_inst.row = ROW_W'(pchunk) * ROW_W'(ROWS_PER_CHUNK) + (vrow % ROW_W'(ROWS_PER_CHUNK));
  end

  wire running  = (st == D_RUN);
  assign out_valid = running && (w.kind == DPA_PIM);
  wire   advance  = running && ((w.kind == DPA_PIM) ? out_ready : (w.kind != DPA_END));
  assign run_ready = (st == D_IDLE);
  assign ev_xlate  = out_valid && out_ready && w.xlate;

  // loop bound of a Dyn-Loop word
  logic [TCUR_W-1:0] lb_new;
  always_comb begin
    logic [TCUR_W:0] r;
    r = ({1'b0, tcur[req_q]} + (TCUR_W+1)'((1 << w.lb_shift) - 1)) >> w.lb_shift;
    lb_new = r[TCUR_W-1:0];
  end

  // next pc after the current word, honouring the loop
  logic [IB_AW-1:0]  pc_next;
  logic              loop_back;
  always_comb begin
    loop_back = in_loop && (pc == loop_last) && (t_q + 1'b1 < lb_q);
    pc_next   = loop_back ? loop_start : pc + 1'b1;
  end

  assign ev_loop = advance && loop_back;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st         <= D_IDLE;
      req_q      <= '0;
      pc         <= '0;
      loop_start <= '0;
      loop_last  <= '0;
      in_loop    <= 1'b0;
      lb_q       <= '0;
      t_q        <= '0;
      modi_v     <= 1'b0;
      modi_tgt   <= FLD_ROW;
      modi_amt   <= '0;
      done       <= 1'b0;
      for (int r = 0; r < MAX_REQ; r++) tcur[r] <= '0;
    end else begin
      done <= 1'b0;
      if (cfg_we) tcur[cfg_req] <= cfg_tcur;
      unique case (st)
        D_IDLE: if (run_valid) begin
          st      <= D_RUN;
          req_q   <= run_req;
          pc      <= run_pc;
          in_loop <= 1'b0;
          modi_v  <= 1'b0;
        end
        D_RUN: begin
          if (w.kind == DPA_END) begin
            tcur[req_q] <= tcur[req_q] + 1'b1;
            done        <= 1'b1;
            st          <= D_IDLE;
          end else if (w.kind == DPA_LOOP) begin
            if (lb_new == '0) begin
              pc <= pc + 1'b1 + IB_AW'(w.le);
            end else begin
              in_loop    <= (w.le != '0);
              loop_start <= pc + 1'b1;
              loop_last  <= pc + IB_AW'(w.le);
              lb_q       <= lb_new;
              t_q        <= '0;
              pc         <= pc + 1'b1;
            end
          end else if (advance) begin
            if (w.kind == DPA_MODI) begin
              modi_v   <= 1'b1;
              modi_tgt <= w.target;
              modi_amt <= 32'(w.coeff) * 32'(t_q);
            end else begin
              modi_v <= 1'b0;
            end
            pc <= pc_next;
            if (loop_back) t_q <= t_q + 1'b1;
            else if (in_loop && pc == loop_last) in_loop <= 1'b0;
          end
        end
        default: st <= D_IDLE;
      endcase
    end
  end
endmodule
