// inst_sequencer: Instruction Sequencer of the PIM HUB.
//
// Decoded PIM instructions from the dispatcher wait in the Instruction Queue
// (a FIFO of QDEPTH entries). The sequencer takes the head instruction and
// unrolls it into op_size copies, one per cycle on a valid/ready port, each
// with op_size = 1 and with its address fields stepped by the repetition
// index k:
//   WR-INP : gpr_addr + k, gbuf_idx + k
//   MAC    : gbuf_idx + k, col + k           (row and out_idx fixed)
//   RD-OUT : gpr_addr + k, out_idx + k
// EPU_RED goes out once, unchanged (its op_size is the EPU's tile count).
// That Op-size sets the repetition count and that the repeats touch
// consecutive GPR / GBuf / column addresses is the paper's; which fields step
// for which opcode is read off the command stack of its DCS example (three
// MACs on GBuf 0,1,2 and Col 0,1,2 into Out 0). Queue depth and the
// treatment of op_size = 0 (sent once) are this design's own choices.
module inst_sequencer
  import pim_pkg::*;
#(
  parameter int QDEPTH = 16
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      in_valid,
  output logic      in_ready,
  input  pim_inst_t in_inst,
  output logic      out_valid,
  input  logic      out_ready,
  output pim_inst_t out_inst,
  output logic      idle
);
  logic      hv;
  pim_inst_t h;
  logic      pop;
  logic [$clog2(QDEPTH+1)-1:0] cnt;
  logic [OPSZ_W-1:0] k;

  sync_fifo #(.T(pim_inst_t), .DEPTH(QDEPTH)) u_iq (
    .clk, .rst_n,
    .in_valid, .in_ready, .in_data(in_inst),
    .out_valid(hv), .out_ready(pop), .out_data(h), .count(cnt)
  );

  wire last = (h.op == OP_EPU_RED) || (k + 1'b1 >= h.op_size);

  always_comb begin
    out_inst = h;
    if (h.op != OP_EPU_RED) begin
      out_inst.op_size = OPSZ_W'(1);
      unique case (h.op)
        OP_WR_INP: begin
          out_inst.gpr_addr = h.gpr_addr + GPR_AW'(k);
          out_inst.gbuf_idx = h.gbuf_idx + GBUF_IDX_W'(k);
        end
        OP_MAC: begin
          out_inst.gbuf_idx = h.gbuf_idx + GBUF_IDX_W'(k);
          out_inst.col      = h.col + COL_W'(k);
        end
        default: begin
          out_inst.gpr_addr = h.gpr_addr + GPR_AW'(k);
          out_inst.out_idx  = h.out_idx + OUT_IDX_W'(k);
        end
      endcase
    end
  end

  assign out_valid = hv;
  assign pop       = hv && out_ready && last;
  assign idle      = (cnt == '0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) k <= '0;
    else if (hv && out_ready) k <= last ? '0 : k + 1'b1;
  end
endmodule
