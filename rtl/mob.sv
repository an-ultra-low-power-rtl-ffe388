// mob: memory operation block of the CGRA.
//
// A MOB executes the LOAD/STORE part of a kernel, so the PEs only compute.
// Like a PE it holds NSLOTS context words and runs the instruction selected by
// the array step counter `pc`. A LOAD or STORE addresses the shared L1 memory
// at ptr + imm (word address), where ptr is a pointer register that SETPTR and
// ADDPTR move, so a loop body walks through a matrix once per iteration. A
// STORE writes operand a, typically the output of a neighbouring PE. A LOAD's
// data goes into the MOB's output register, which its torus neighbours read;
// MOV forwards a neighbour's value instead.
//
// Handshake with the L1 interconnect (l1_req_t / l1_rsp_t): the request is
// held until `gnt`; read data comes back with `rvalid` one cycle after the
// grant. While a request of the current step is not granted the MOB raises
// `stall`, and the array freezes every tile (en low) until all MOBs have their
// grants. A request already granted in a frozen step is not repeated.
//
// Timing: a LOAD issued at step s is written into the output register when
// step s+1 completes, so neighbours see it from step s+2 whatever stalls
// happen in between; that writeback takes precedence over a MOV in step s+1.
// A two-entry buffer holds load data that returns while the array is stalled.
//
// From the paper: MOBs sit in two rows of four between the PE rows, handle
// LOAD/STORE between memory and the PE array, and work alongside the PEs'
// computation. The instruction encoding, pointer addressing, stall rule and
// load timing are this design's choices.
module mob
  import cgra_pkg::*;
#(
  parameter int unsigned TILE_ID = 1,
  parameter int unsigned NSLOTS  = 16
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  cfg_wr_t                   cfg,     // context write (broadcast)
  input  logic                      clear,   // zero data state at kernel start
  input  logic                      run,     // kernel running (requests allowed)
  input  logic                      en,      // the current step completes this cycle
  input  logic [$clog2(NSLOTS)-1:0] pc,
  input  word_t                     nbr [4], // N, E, S, W neighbour outputs
  output word_t                     out,     // output register
  output l1_req_t                   l1_req,
  input  l1_rsp_t                   l1_rsp,
  output logic                      stall    // request of this step not yet granted
);

  word_t             ctx [NSLOTS];
  instr_t            ins;
  mob_op_e           op;
  word_t             a;
  word_t             out_q;
  logic [ADDR_W-1:0] ptr;
  logic              done;       // this step's access already granted
  logic              ld_granted; // this step's LOAD has been granted
  logic              mem_op;
  word_t             buf_q [2];
  logic              tgl;        // slot for the next load's data
  logic              rslot;      // slot of the read in flight
  logic              wb_due;     // previous step's load is written back at this step's end
  logic              wb_slot;
  logic              cur_slot;   // slot of this step's load

  always_comb begin
    ins = instr_t'(ctx[pc]);
    op  = mob_op_e'(ins.op);
    unique case (ins.src_a)
      SRC_N:    a = nbr[0];
      SRC_E:    a = nbr[1];
      SRC_S:    a = nbr[2];
      SRC_W:    a = nbr[3];
      SRC_SELF: a = out_q;
      SRC_IMM:  a = word_t'(signed'(ins.imm));
      default:  a = '0;
    endcase
    mem_op        = run && (op == MOB_LOAD || op == MOB_STORE);
    l1_req.req    = mem_op && !done;
    l1_req.we     = (op == MOB_STORE);
    l1_req.addr   = ptr + ins.imm;
    l1_req.wdata  = a;
    stall         = l1_req.req && !l1_rsp.gnt;
    ld_granted    = (op == MOB_LOAD) && run && (done || l1_rsp.gnt);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NSLOTS; i++) ctx[i] <= '0;
    end else if (cfg.valid && cfg.tile == 5'(TILE_ID) && 32'(cfg.slot) < NSLOTS) begin
      ctx[cfg.slot[$clog2(NSLOTS)-1:0]] <= cfg.data;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_q    <= '0;
      ptr      <= '0;
      done     <= 1'b0;
      tgl      <= 1'b0;
      rslot    <= 1'b0;
      cur_slot <= 1'b0;
      wb_due   <= 1'b0;
      wb_slot  <= 1'b0;
      buf_q[0] <= '0;
      buf_q[1] <= '0;
    end else if (clear) begin
      out_q    <= '0;
      ptr      <= '0;
      done     <= 1'b0;
      wb_due   <= 1'b0;
    end else begin
      // Grant of this step's access.
      if (l1_req.req && l1_rsp.gnt) begin
        if (!l1_req.we) begin
          rslot    <= tgl;
          cur_slot <= tgl;
          tgl      <= ~tgl;
        end
      end
      if (l1_rsp.rvalid) buf_q[rslot] <= l1_rsp.rdata;

      if (en) begin
        done <= 1'b0;
        unique case (op)
          MOB_MOV:    if (ins.wr_out) out_q <= a;
          MOB_SETPTR: ptr <= ins.imm;
          MOB_ADDPTR: ptr <= ptr + ins.imm;
          default: ;
        endcase
        if (wb_due)
          out_q <= (l1_rsp.rvalid && rslot == wb_slot) ? l1_rsp.rdata : buf_q[wb_slot];
        wb_due  <= ld_granted;
        wb_slot <= (l1_req.req && l1_rsp.gnt) ? tgl : cur_slot;
      end else if (!run) begin
        done   <= 1'b0;
        wb_due <= 1'b0;
      end else if (l1_req.req && l1_rsp.gnt) begin
        done <= 1'b1;
      end
    end
  end

  assign out = out_q;

  // The interconnect may only return read data for a granted read.
  logic rd_outstanding;
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) rd_outstanding <= 1'b0;
    else        rd_outstanding <= l1_req.req && l1_rsp.gnt && !l1_req.we;

  a_rvalid_only_after_read: assert property (@(posedge clk) disable iff (!rst_n)
    l1_rsp.rvalid |-> rd_outstanding);

endmodule
