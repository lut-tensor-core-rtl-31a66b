// lmma_ctrl -- LMMA instruction sequencer of the LUT-based Tensor Core.
//
// Accepts one LMMA instruction per valid/ready handshake, checks it against
// the hardware (shape M/N/K must equal the tile, the weight must have 1 to
// W_BIT_MAX bits, accumulation and output must be INT32) and then:
//   LOAD  : on the accepting edge load_o is high, so the table and weight
//           buffers capture their operands and the accumulators take Accum;
//   RUN   : W_BIT cycles, en_o high and shamt_o = 0,1,..,W_BIT-1, one weight
//           bit-plane per cycle (the bit-serial shifter sequence);
//   DONE  : out_valid high until out_ready; a new instruction may be
//           accepted in the same cycle the result is taken.
// An illegal instruction goes straight to DONE with err_o set and the
// accumulators untouched except for the Accum load. So out_valid rises
// W_BIT+1 cycles after acceptance (1 cycle for an illegal one), and
// back-to-back instructions issue every W_BIT+1 cycles. The W_BIT-cycle
// bit-serial run is the published scheme; the handshakes, the checks and
// the load cycle are this implementation's choices. The activation type
// field is not read: tables reach the core as LUT_BIT-bit integers whatever
// the activation type was, so it selects nothing in hardware.
module lmma_ctrl
  import lut_tc_pkg::*;
#(
  parameter int unsigned M         = 2,
  parameter int unsigned N         = 64,
  parameter int unsigned K         = 4,
  parameter int unsigned W_BIT_MAX = 4,
  localparam int unsigned SH_W     = plane_idx_bits(W_BIT_MAX)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  output logic              in_ready,
  input  lmma_instr_t       instr_i,
  output logic              load_o,
  output logic              en_o,
  output logic [SH_W-1:0]   shamt_o,
  output logic              out_valid,
  input  logic              out_ready,
  output logic              err_o
);

  typedef enum logic [1:0] {S_IDLE, S_RUN, S_DONE} state_e;

  state_e          state_q;
  logic [SH_W-1:0] plane_q;   // current bit-plane
  logic [SH_W-1:0] last_q;    // W_BIT-1 of the running instruction
  logic            err_q;
  logic            accept;
  logic            legal;
  logic [2:0]      wbits;

  always_comb begin
    wbits = instr_i.w_dtype;
    legal = (32'(instr_i.m) == M) && (32'(instr_i.n) == N) && (32'(instr_i.k) == K)
         && (wbits >= 3'd1) && (32'(wbits) <= W_BIT_MAX)
         && (instr_i.accum_dtype == ACC_INT32) && (instr_i.o_dtype == ACC_INT32);
  end

  assign in_ready  = (state_q == S_IDLE) || (state_q == S_DONE && out_ready);
  assign accept    = in_valid && in_ready;
  assign load_o    = accept;
  assign en_o      = (state_q == S_RUN);
  assign shamt_o   = plane_q;
  assign out_valid = (state_q == S_DONE);
  assign err_o     = err_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= S_IDLE;
      plane_q <= '0;
      last_q  <= '0;
      err_q   <= 1'b0;
    end else begin
      unique case (state_q)
        S_IDLE, S_DONE: begin
          if (accept) begin
            plane_q <= '0;
            last_q  <= SH_W'(wbits - 3'd1);
            err_q   <= !legal;
            state_q <= legal ? S_RUN : S_DONE;
          end else if (state_q == S_DONE && out_ready) begin
            state_q <= S_IDLE;
          end
        end
        S_RUN: begin
          if (plane_q == last_q) state_q <= S_DONE;
          else                   plane_q <= plane_q + 1'b1;
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end

  // Handshake rules.
  a_out_hold: assert property (@(posedge clk) disable iff (!rst_n)
    out_valid && !out_ready |=> out_valid);
  a_no_accept_busy: assert property (@(posedge clk) disable iff (!rst_n)
    (state_q == S_RUN) |-> !in_ready);

endmodule
