// epu: Extra Processing Unit of the PIM HUB, reduction path.
//
// Under token-centric partitioning every channel computes a partial SV
// product over its own slice of tokens; the partial output tiles land in the
// GPR, channel c's copy at base + c*CH_STRIDE. The EPU adds them up lane by
// lane and writes the sum back over channel 0's copy at base:
//   GPR[base+i] = sum over c in ch_mask of GPR[base + c*CH_STRIDE + i],
//   for i = 0 .. count-1 (16 lanes, modulo 2^16).
// It reads one GPR tile per cycle on the read port it is given and visits all
// NCH channel slots per output tile (unmasked ones are read and ignored) and
// spends one more cycle writing it, so done pulses count*(NCH+1)+1 cycles
// after the start edge. start is taken when busy is low.
// The paper says that the EPU performs this reduction (and Softmax); the
// sequential one-tile-per-cycle datapath is this design's own choice.
// Softmax is not built.
module epu
  import pim_pkg::*;
#(
  parameter int N_CH      = NCH,
  parameter int CH_STRIDE = GPR_ENTRIES / NCH,
  parameter int AW        = GPR_AW
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  logic [AW-1:0]      base,
  input  logic [OPSZ_W-1:0]  count,
  input  logic [N_CH-1:0]    ch_mask,
  output logic               busy,
  output logic               done,
  // GPR access
  output logic [AW-1:0]      gpr_raddr,
  input  tile_t              gpr_rdata,
  output logic               gpr_we,
  output logic [AW-1:0]      gpr_waddr,
  output tile_t              gpr_wdata
);
  typedef enum logic [1:0] {S_IDLE, S_READ, S_WRITE} state_e;
  state_e state;

  logic [AW-1:0]                 base_q;
  logic [OPSZ_W-1:0]             cnt_q, i_q;
  logic [N_CH-1:0]               mask_q;
  logic [$clog2(N_CH+1)-1:0]     c_q;
  tile_t                         acc;

  assign busy      = (state != S_IDLE);
  assign gpr_raddr = AW'(base_q + AW'(c_q) * AW'(CH_STRIDE) + AW'(i_q));
  assign gpr_we    = (state == S_WRITE);
  assign gpr_waddr = AW'(base_q + AW'(i_q));
  assign gpr_wdata = acc;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= S_IDLE;
      base_q <= '0;
      cnt_q  <= '0;
      i_q    <= '0;
      mask_q <= '0;
      c_q    <= '0;
      acc    <= '0;
      done   <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          base_q <= base;
          cnt_q  <= count;
          mask_q <= ch_mask;
          i_q    <= '0;
          c_q    <= '0;
          acc    <= '0;
          state  <= S_READ;
        end
        S_READ: begin
          if (1'(mask_q >> c_q)) acc <= tile_add(acc, gpr_rdata);
          if (c_q == ($clog2(N_CH+1))'(N_CH - 1)) state <= S_WRITE;
          else c_q <= c_q + 1'b1;
        end
        S_WRITE: begin
          acc <= '0;
          c_q <= '0;
          if (i_q + 1'b1 >= cnt_q) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end else begin
            i_q   <= i_q + 1'b1;
            state <= S_READ;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
