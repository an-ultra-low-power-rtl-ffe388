// pe: processing element of the CGRA.
//
// A PE executes one instruction per array step. Its instructions sit in a
// small context store (NSLOTS words) that the memory controller fills before
// the kernel starts; the array's step counter `pc` selects the instruction of
// the current step, so all tiles run their programs in lock-step. Operands
// come from the output registers of the four torus neighbours (nbr[N,E,S,W]),
// from four local registers, from the PE's own output register, from its
// accumulator or from the instruction's immediate. The ALU adds, subtracts,
// multiplies, and forms the dot product of four packed signed 8-bit lanes;
// MAC accumulates that dot product into a 32-bit accumulator, which is how a
// PE computes one element of a GEMM sub-block, and passes operand a on to its
// output register if asked (systolic forwarding).
//
// Timing: a result written at step s is in the output register, and visible
// to the neighbours, from step s+1. Nothing changes while `en` is low (stall
// or idle). `clear` (kernel start) zeroes the output, registers and
// accumulator but keeps the context.
//
// From the paper: a PE performs additions, multiplications and dot products
// on packed data and talks directly to its neighbours without a switch. The
// instruction set, the lane format, the register file, the accumulator and the
// context store are this design's choices.
module pe
  import cgra_pkg::*;
#(
  parameter int unsigned TILE_ID = 0,
  parameter int unsigned NSLOTS  = 16
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  cfg_wr_t                   cfg,     // context write (broadcast)
  input  logic                      clear,   // zero data state at kernel start
  input  logic                      en,      // execute the instruction of step pc
  input  logic [$clog2(NSLOTS)-1:0] pc,
  input  word_t                     nbr [4], // N, E, S, W neighbour outputs
  output word_t                     out      // output register, read by neighbours
);

  word_t  ctx [NSLOTS];
  word_t  rf  [RF_DEPTH];
  word_t  acc;
  word_t  out_q;
  instr_t ins;
  word_t  a, b, res, dp;

  function automatic word_t pick(input src_e s, input word_t n [4], input word_t r [RF_DEPTH],
                                 input word_t self_v, input word_t acc_v, input logic [15:0] imm);
    unique case (s)
      SRC_N:    return n[0];
      SRC_E:    return n[1];
      SRC_S:    return n[2];
      SRC_W:    return n[3];
      SRC_R0:   return r[0];
      SRC_R1:   return r[1];
      SRC_R2:   return r[2];
      SRC_R3:   return r[3];
      SRC_SELF: return self_v;
      SRC_ACC:  return acc_v;
      SRC_IMM:  return word_t'(signed'(imm));
      default:  return '0;
    endcase
  endfunction

  always_comb begin
    ins = instr_t'(ctx[pc]);
    a   = pick(ins.src_a, nbr, rf, out_q, acc, ins.imm);
    b   = pick(ins.src_b, nbr, rf, out_q, acc, ins.imm);
    dp  = dotp4(a, b);
    unique case (pe_op_e'(ins.op))
      PE_ADD:   res = a + b;
      PE_SUB:   res = a - b;
      PE_MUL:   res = a * b;
      PE_DOTP:  res = dp;
      PE_MAC:   res = a;
      PE_MOV:   res = a;
      PE_ACCRD: res = acc;
      default:  res = '0;
    endcase
  end

  // Context store: written only by the memory controller.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NSLOTS; i++) ctx[i] <= '0;   // NOP
    end else if (cfg.valid && cfg.tile == 5'(TILE_ID) && 32'(cfg.slot) < NSLOTS) begin
      ctx[cfg.slot[$clog2(NSLOTS)-1:0]] <= cfg.data;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_q <= '0;
      acc   <= '0;
      for (int i = 0; i < RF_DEPTH; i++) rf[i] <= '0;
    end else if (clear) begin
      out_q <= '0;
      acc   <= '0;
      for (int i = 0; i < RF_DEPTH; i++) rf[i] <= '0;
    end else if (en && pe_op_e'(ins.op) != PE_NOP) begin
      if (ins.wr_out) out_q <= res;
      if (ins.wr_rf)  rf[ins.rf_idx] <= res;
      if (pe_op_e'(ins.op) == PE_MAC)        acc <= acc + dp;
      else if (pe_op_e'(ins.op) == PE_ACCRD) acc <= '0;
    end
  end

  assign out = out_q;

endmodule
