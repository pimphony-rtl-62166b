// pim_ctrl: per-channel PIM controller with Dynamic PIM Command Scheduling
// (DCS).
//
// Commands (WR-INP, MAC, RD-OUT) arrive in program order on a valid/ready
// port. Each gets a command ID from a wrapping counter and passes the
// Dependency Table (D-Table), which keeps, for every GBuf entry and every
// OBuf entry, the ID of the last command that was given that entry. The
// command takes the recorded IDs as its dependency IDs (GBuf-DID, Out-DID;
// none if the entry was never used) and the D-Table entries are overwritten
// with the new ID. MACs then join the compute queue, WR-INP and RD-OUT the
// I/O transfer queue. Each queue issues in order; the two issue out of order
// with respect to each other.
//
// The Status Table (S-Table) keeps, per GBuf and OBuf entry, the ID of the
// last issued command on it, the cycle at which that access completes
// (expiration time) and, for OBuf entries, an is-MAC flag. The head of a
// queue may issue when, for every entry it uses, it has no dependency, or the
// S-Table shows its DID and the current cycle has reached the expiration
// time. A MAC whose OBuf predecessor was also a MAC skips the OBuf
// expiration (accumulation pipelines), so back-to-back MACs on one OBuf
// entry go out tCCDS apart. Commands of one queue are at least tCCDS apart;
// one command is issued per cycle, the compute queue first. RD-OUT also needs
// wb_ok (room in the write-back path). On issue the S-Table entries are
// rewritten with the command's ID and cycle + tWR-INP / tMAC / tRD-OUT.
//
// IDs wrap after 2^ID_W commands. When an ID is handed out again, every
// D-Table and S-Table record and every queued DID still holding it is
// dropped: at most QDEPTH commands per queue are waiting, so a command with
// that ID issued and finished long before.
//
// Follows the paper: D-Table, S-Table with ID / expiration / is-MAC, the two
// queues, the issue rule and the is-MAC bypass. Own choices: queue depths,
// ID and timestamp widths (timestamps are compared in a window of the
// longest command time, so they may wrap), compute-first arbitration, "reached" (>=) for the
// expiration test (the paper says "exceeds"; >= reproduces its timing
// example), and the handling of wrapped IDs.
// The handshake assertions at the end are disabled during reset with
// disable iff (!rst_n); a lint note that rst_n is used both synchronously
// and asynchronously refers to them, not to any flip-flop.
module pim_ctrl
  import pim_pkg::*;
#(
  parameter int QDEPTH = 8
) (
  input  logic      clk,
  input  logic      rst_n,
  // commands from the multicast interconnect
  input  logic      cmd_valid,
  output logic      cmd_ready,
  input  pim_cmd_t  cmd,
  // space in the RD-OUT write-back path
  input  logic      wb_ok,
  // issue to the channel datapath
  output logic      issue_valid,
  output pim_cmd_t  issue_cmd,
  // status and event pulses
  output logic      idle,
  output logic      ev_ooo,      // issued ahead of an older command
  output logic      ev_bypass,   // MAC issued through the is-MAC bypass
  output logic      ev_dep_wait  // a queue head waited on a dependency
);
  typedef logic [ID_W-1:0] id_t;
  typedef logic [TS_W-1:0] ts_t;

  typedef struct packed {
    pim_cmd_t cmd;
    id_t      id;
    logic     g_dv;
    id_t      g_did;
    logic     o_dv;
    id_t      o_did;
  } qent_t;

  localparam int QAW = $clog2(QDEPTH);

  ts_t t_cur;
  id_t next_id;

  // ---------------- D-Table ----------------
  logic dt_g_v [GBUF_ENTRIES];
  id_t  dt_g_id[GBUF_ENTRIES];
  logic dt_o_v [OBUF_ENTRIES];
  id_t  dt_o_id[OBUF_ENTRIES];

  // ---------------- S-Table ----------------
  logic st_g_v  [GBUF_ENTRIES];
  id_t  st_g_id [GBUF_ENTRIES];
  ts_t  st_g_exp[GBUF_ENTRIES];
  logic st_o_v  [OBUF_ENTRIES];
  id_t  st_o_id [OBUF_ENTRIES];
  ts_t  st_o_exp[OBUF_ENTRIES];
  logic st_o_mac[OBUF_ENTRIES];

  // ---------------- queues (0 = compute, 1 = I/O) ----------------
  qent_t          q     [2][QDEPTH];
  logic [QAW-1:0] q_head[2];
  logic [QAW-1:0] q_tail[2];
  logic [QAW:0]   q_cnt [2];

  function automatic logic uses_g(pim_op_e op);
    return op != OP_RD_OUT;
  endfunction
  function automatic logic uses_o(pim_op_e op);
    return op != OP_WR_INP;
  endfunction
  // No expiration time is ever set more than MAX_LAT cycles ahead, so a time
  // is still pending only while exp - now lies in 1..MAX_LAT. Anything else,
  // a record left untouched for longer than the timestamp wraps included,
  // counts as reached; such a stale record can cost at most MAX_LAT cycles of
  // needless wait when its old value aliases the current time.
  localparam int MAX_LAT = (T_MAC > T_WR_INP ? T_MAC : T_WR_INP) > T_RD_OUT
                           ? (T_MAC > T_WR_INP ? T_MAC : T_WR_INP) : T_RD_OUT;
  function automatic logic reached(ts_t now, ts_t exp);
    ts_t d;
    d = exp - now;
    return (d == '0) || (d > ts_t'(MAX_LAT));
  endfunction
  function automatic logic [QAW-1:0] qinc(logic [QAW-1:0] p);
    return (p == QAW'(QDEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  // ---------------- accept ----------------
  wire  in_io   = (cmd.op != OP_MAC);
  assign cmd_ready = (q_cnt[in_io] != (QAW+1)'(QDEPTH));
  wire  accept  = cmd_valid && cmd_ready;

  qent_t new_ent;
  always_comb begin
    new_ent       = '0;
    new_ent.cmd   = cmd;
    new_ent.id    = next_id;
    new_ent.g_dv  = uses_g(cmd.op) && dt_g_v[cmd.gbuf_idx] && (dt_g_id[cmd.gbuf_idx] != next_id);
    new_ent.g_did = dt_g_id[cmd.gbuf_idx];
    new_ent.o_dv  = uses_o(cmd.op) && dt_o_v[cmd.out_idx] && (dt_o_id[cmd.out_idx] != next_id);
    new_ent.o_did = dt_o_id[cmd.out_idx];
  end

  // ---------------- readiness of the queue heads ----------------
  qent_t head [2];
  logic  hv   [2];
  logic  dep_ok[2];
  logic  bypass[2];
  logic  ccds_ok[2];
  logic  last_v[2];
  ts_t   last_t[2];
  logic  can  [2];

  always_comb begin
    for (int k = 0; k < 2; k++) begin
      logic g_ok, o_ok, o_timed;
      head[k] = q[k][q_head[k]];
      hv[k]   = (q_cnt[k] != '0);
      g_ok = !uses_g(head[k].cmd.op) || !head[k].g_dv ||
             (st_g_v[head[k].cmd.gbuf_idx] && st_g_id[head[k].cmd.gbuf_idx] == head[k].g_did &&
              reached(t_cur, st_g_exp[head[k].cmd.gbuf_idx]));
      o_timed = reached(t_cur, st_o_exp[head[k].cmd.out_idx]);
      bypass[k] = (head[k].cmd.op == OP_MAC) && st_o_mac[head[k].cmd.out_idx] && !o_timed;
      o_ok = !uses_o(head[k].cmd.op) || !head[k].o_dv ||
             (st_o_v[head[k].cmd.out_idx] && st_o_id[head[k].cmd.out_idx] == head[k].o_did &&
              (o_timed || (head[k].cmd.op == OP_MAC && st_o_mac[head[k].cmd.out_idx])));
      dep_ok[k]  = g_ok && o_ok;
      ccds_ok[k] = !last_v[k] || reached(t_cur, ts_t'(last_t[k] + ts_t'(T_CCDS)));
      can[k]     = hv[k] && dep_ok[k] && ccds_ok[k] &&
                   ((head[k].cmd.op != OP_RD_OUT) || wb_ok);
    end
  end

  wire   sel_c = can[0];
  wire   sel_i = !can[0] && can[1];
  wire   fire  = sel_c || sel_i;
  wire   sel   = sel_i;            // queue index issued this cycle
  qent_t fe;
  assign fe = head[sel];

  assign issue_valid = fire;
  assign issue_cmd   = fe.cmd;
  assign idle        = (q_cnt[0] == '0) && (q_cnt[1] == '0);

  // the issued command is younger than the other queue's waiting head
  assign ev_ooo      = fire && hv[!sel] && ($signed(ID_W'(head[!sel].id - fe.id)) < 0);
  assign ev_bypass   = fire && bypass[sel] && fe.o_dv && uses_o(fe.cmd.op);
  assign ev_dep_wait = (hv[0] && !dep_ok[0]) || (hv[1] && !dep_ok[1]);

  // ---------------- state ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      t_cur   <= '0;
      next_id <= '0;
      for (int e = 0; e < GBUF_ENTRIES; e++) begin
        dt_g_v[e] <= 1'b0; dt_g_id[e] <= '0;
        st_g_v[e] <= 1'b0; st_g_id[e] <= '0; st_g_exp[e] <= '0;
      end
      for (int e = 0; e < OBUF_ENTRIES; e++) begin
        dt_o_v[e] <= 1'b0; dt_o_id[e] <= '0;
        st_o_v[e] <= 1'b0; st_o_id[e] <= '0; st_o_exp[e] <= '0; st_o_mac[e] <= 1'b0;
      end
      for (int k = 0; k < 2; k++) begin
        q_head[k] <= '0; q_tail[k] <= '0; q_cnt[k] <= '0;
        last_v[k] <= 1'b0; last_t[k] <= '0;
        for (int j = 0; j < QDEPTH; j++) q[k][j] <= '0;
      end
    end else begin
      t_cur <= t_cur + 1'b1;

      // drop records of a reused ID
      if (accept) begin
        for (int e = 0; e < GBUF_ENTRIES; e++) begin
          if (dt_g_id[e] == next_id) dt_g_v[e] <= 1'b0;
          if (st_g_id[e] == next_id) st_g_v[e] <= 1'b0;
        end
        for (int e = 0; e < OBUF_ENTRIES; e++) begin
          if (dt_o_id[e] == next_id) dt_o_v[e] <= 1'b0;
          if (st_o_id[e] == next_id) st_o_v[e] <= 1'b0;
        end
        for (int k = 0; k < 2; k++)
          for (int j = 0; j < QDEPTH; j++) begin
            if (q[k][j].g_did == next_id) q[k][j].g_dv <= 1'b0;
            if (q[k][j].o_did == next_id) q[k][j].o_dv <= 1'b0;
          end
      end

      // issue: update the S-Table and pop
      if (fire) begin
        unique case (fe.cmd.op)
          OP_WR_INP: begin
            st_g_v[fe.cmd.gbuf_idx]   <= 1'b1;
            st_g_id[fe.cmd.gbuf_idx]  <= fe.id;
            st_g_exp[fe.cmd.gbuf_idx] <= ts_t'(t_cur + ts_t'(T_WR_INP));
          end
          OP_MAC: begin
            st_g_v[fe.cmd.gbuf_idx]   <= 1'b1;
            st_g_id[fe.cmd.gbuf_idx]  <= fe.id;
            st_g_exp[fe.cmd.gbuf_idx] <= ts_t'(t_cur + ts_t'(T_MAC));
            st_o_v[fe.cmd.out_idx]    <= 1'b1;
            st_o_id[fe.cmd.out_idx]   <= fe.id;
            st_o_exp[fe.cmd.out_idx]  <= ts_t'(t_cur + ts_t'(T_MAC));
            st_o_mac[fe.cmd.out_idx]  <= 1'b1;
          end
          default: begin  // OP_RD_OUT
            st_o_v[fe.cmd.out_idx]    <= 1'b1;
            st_o_id[fe.cmd.out_idx]   <= fe.id;
            st_o_exp[fe.cmd.out_idx]  <= ts_t'(t_cur + ts_t'(T_RD_OUT));
            st_o_mac[fe.cmd.out_idx]  <= 1'b0;
          end
        endcase
        q_head[sel] <= qinc(q_head[sel]);
        last_v[sel] <= 1'b1;
        last_t[sel] <= t_cur;
      end

      // accept: D-Table lookup/update and enqueue
      if (accept) begin
        if (uses_g(cmd.op)) begin
          dt_g_v[cmd.gbuf_idx]  <= 1'b1;
          dt_g_id[cmd.gbuf_idx] <= next_id;
        end
        if (uses_o(cmd.op)) begin
          dt_o_v[cmd.out_idx]  <= 1'b1;
          dt_o_id[cmd.out_idx] <= next_id;
        end
        q[in_io][q_tail[in_io]] <= new_ent;
        q_tail[in_io] <= qinc(q_tail[in_io]);
        next_id <= next_id + 1'b1;
      end

      for (int k = 0; k < 2; k++)
        q_cnt[k] <= q_cnt[k] + (QAW+1)'(accept && in_io == k[0])
                             - (QAW+1)'(fire && sel == k[0]);
    end
  end

  // a command is never issued before the command it depends on
  assert property (@(posedge clk) disable iff (!rst_n)
    fire && uses_g(fe.cmd.op) && fe.g_dv |-> st_g_id[fe.cmd.gbuf_idx] == fe.g_did);
  assert property (@(posedge clk) disable iff (!rst_n)
    fire && uses_o(fe.cmd.op) && fe.o_dv |-> st_o_id[fe.cmd.out_idx] == fe.o_did);
endmodule
