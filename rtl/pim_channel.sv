// pim_channel: digital datapath of one PIM channel - the Global Buffer, the
// per-bank MAC units and the per-bank Output Buffers.
//
// The controller hands it one command per cycle at most (cmd_valid, cmd):
//   WR-INP : GBuf[gbuf_idx] <= cmd.data                       (32 B tile)
//   MAC    : for every bank b,
//            OBuf[b][out_idx] += dot(GBuf[gbuf_idx], bank_rdata[b])
//            where bank_rdata[b] is the 32 B slice at (row, col) of bank b
//   RD-OUT : rsp_data <= {OBuf[NBANK-1][out_idx], ..., OBuf[0][out_idx]}
//            (2 B per bank, 32 B in all), rsp_valid/rsp_addr one cycle later;
//            the drained OBuf entry is invalidated so the next MAC starts
//            afresh (a per-entry valid bit, so the OBuf arrays need no reset).
// The DRAM cell arrays are not part of this module: the (row, col) of a MAC
// leaves on bank_row/bank_col with bank_rd and the NBANK slices come back
// combinationally on bank_rdata in the same cycle.
// Each command takes effect on the cycle it is issued; the multi-cycle
// latencies (tWR-INP, tMAC, tRD-OUT) are enforced by the controller, which
// never issues a command whose operands are still in use.
// From the paper: GBuf as the input buffer, per-bank MAC, the 2 B per bank
// read-out, and the OutRegs widened into multi-entry OBufs. Own choices: 64
// OBuf entries, integer arithmetic modulo 2^16 in place of FP16, clear on
// read-out, and same-cycle effect of every command.
module pim_channel
  import pim_pkg::*;
#(
  parameter int N_BANK = NBANK
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            cmd_valid,
  input  pim_cmd_t        cmd,
  // DRAM bank array read port
  output logic            bank_rd,
  output logic [ROW_W-1:0] bank_row,
  output logic [COL_W-1:0] bank_col,
  input  tile_t           bank_rdata [N_BANK],
  // RD-OUT response
  output logic            rsp_valid,
  output logic [GPR_AW-1:0] rsp_addr,
  output logic [N_BANK*ELEM_W-1:0] rsp_data
);
  tile_t gbuf [GBUF_ENTRIES];
  // One valid bit per OBuf entry, shared by all banks (they always use the
  // same entry). A MAC into an invalid entry starts from zero and RD-OUT
  // invalidates the entry, so the OBuf arrays themselves need no reset.
  logic [OBUF_ENTRIES-1:0] ob_valid;
  elem_t ob_rd [N_BANK];

  wire is_wr  = cmd_valid && (cmd.op == OP_WR_INP);
  wire is_mac = cmd_valid && (cmd.op == OP_MAC);
  wire is_rd  = cmd_valid && (cmd.op == OP_RD_OUT);
  wire hit    = ob_valid[cmd.out_idx];

  assign bank_rd  = is_mac;
  assign bank_row = cmd.row;
  assign bank_col = cmd.col;

  tile_t gtile;
  assign gtile = gbuf[cmd.gbuf_idx];

  always_ff @(posedge clk) begin
    if (is_wr) gbuf[cmd.gbuf_idx] <= cmd.data;
  end

  for (genvar b = 0; b < N_BANK; b++) begin : g_bank
    elem_t obuf [OBUF_ENTRIES];
    elem_t cur;
    assign cur       = hit ? obuf[cmd.out_idx] : '0;
    assign ob_rd[b]  = cur;
    always_ff @(posedge clk) begin
      if (is_mac) obuf[cmd.out_idx] <= cur + tile_dot(gtile, bank_rdata[b]);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) ob_valid <= '0;
    else if (is_mac) ob_valid[cmd.out_idx] <= 1'b1;
    else if (is_rd)  ob_valid[cmd.out_idx] <= 1'b0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rsp_valid <= 1'b0;
      rsp_addr  <= '0;
      rsp_data  <= '0;
    end else begin
      rsp_valid <= is_rd;
      if (is_rd) begin
        rsp_addr <= cmd.wb_addr;
        for (int b = 0; b < N_BANK; b++) rsp_data[b*ELEM_W +: ELEM_W] <= ob_rd[b];
      end
    end
  end
endmodule
