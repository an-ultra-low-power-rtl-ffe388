// memory_controller: loads a kernel's configuration into the array and runs it.
//
// The host starts a kernel by pulsing `start` with the word address of its
// descriptor in the context memory. The descriptor is a header word followed
// by STEPS x 24 instruction words, step by step and, within a step, tile by
// tile (tile index r*4 + c):
//   header[4:0]   STEPS, steps of the loop body (1..NSLOTS)
//   header[8]     CLEAR, zero every tile's data state before the kernel
//   header[31:16] ITERS, number of times the loop body runs
// The controller reads the descriptor (one word per cycle), decodes each
// instruction word's position into a (tile, slot) pair and writes it over the
// configuration bus into that tile's context store, so every PE and MOB is
// configured before execution begins. It then pulses `clear` if asked, raises
// `run` and steps `pc` through 0..STEPS-1 ITERS times, advancing only on the
// cycles where the array reports a completed step (so it follows L1 stalls).
// `done` pulses for one cycle when the last step has completed; `busy` is high
// from `start` until then. A header with STEPS or ITERS of zero, or STEPS above
// NSLOTS, ends at once with `done` and `error`.
//
// Timing: configuration takes 24*STEPS + 3 cycles after `start`, plus one
// cycle for the clear; execution takes STEPS*ITERS stall-free cycles.
//
// From the paper: the memory controller retrieves and interprets the
// configuration data in the context memory and distributes instructions to
// each PE and MOB before kernel execution starts. The descriptor format and
// the sequencing of the loop are this design's choices.
module memory_controller
  import cgra_pkg::*;
#(
  parameter int unsigned CTX_AW = 10,
  parameter int unsigned NSLOTS = 16,
  localparam int unsigned PCW   = $clog2(NSLOTS)
) (
  input  logic              clk,
  input  logic              rst_n,
  // host control
  input  logic              start,
  input  logic [CTX_AW-1:0] kernel_addr,
  output logic              busy,
  output logic              done,
  output logic              error,
  // context memory read port
  output logic              ctx_en,
  output logic [CTX_AW-1:0] ctx_addr,
  input  word_t             ctx_rdata,
  // array control
  output cfg_wr_t           cfg,
  output logic              clear,
  output logic              run,
  output logic [PCW-1:0]    pc,
  input  logic              step_done
);

  typedef enum logic [2:0] {S_IDLE, S_HDR, S_CFG, S_CLEAR, S_RUN, S_DONE} state_e;

  state_e            state;
  logic [4:0]        steps;
  logic [15:0]       iters, iter;
  logic              clr_flag;
  logic [CTX_AW-1:0] rd_addr;
  logic [9:0]        rd_left;   // words still to request
  logic [9:0]        wr_left;   // words still to write to the tiles
  logic              rd_vld;    // a read was issued last cycle
  logic [4:0]        tile_c;
  logic [3:0]        slot_c;
  logic              bad_hdr;
  logic [9:0]        n_words;

  always_comb begin
    bad_hdr = (ctx_rdata[4:0] == 5'd0) || (32'(ctx_rdata[4:0]) > NSLOTS) ||
              (ctx_rdata[31:16] == 16'd0);
    n_words = 10'(ctx_rdata[4:0]) * 10'(N_TILES);
  end

  assign busy     = (state != S_IDLE);
  assign run      = (state == S_RUN);
  assign clear    = (state == S_CLEAR);
  assign ctx_en   = (state == S_IDLE && start) || (state == S_CFG && rd_left != 0);
  assign ctx_addr = (state == S_IDLE) ? kernel_addr : rd_addr;

  always_comb begin
    cfg       = '0;
    cfg.valid = (state == S_CFG) && rd_vld;
    cfg.tile  = tile_c;
    cfg.slot  = slot_c;
    cfg.data  = ctx_rdata;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      steps    <= '0;
      iters    <= '0;
      iter     <= '0;
      clr_flag <= 1'b0;
      rd_addr  <= '0;
      rd_left  <= '0;
      wr_left  <= '0;
      rd_vld   <= 1'b0;
      tile_c   <= '0;
      slot_c   <= '0;
      pc       <= '0;
      done     <= 1'b0;
      error    <= 1'b0;
    end else begin
      done   <= 1'b0;
      rd_vld <= ctx_en && state != S_IDLE;
      unique case (state)
        S_IDLE: if (start) begin
          rd_addr <= kernel_addr + 1'b1;
          error   <= 1'b0;
          state   <= S_HDR;
        end
        S_HDR: begin
          if (bad_hdr) begin
            error <= 1'b1;
            state <= S_DONE;
          end else begin
            steps    <= ctx_rdata[4:0];
            clr_flag <= ctx_rdata[8];
            iters    <= ctx_rdata[31:16];
            rd_left  <= n_words;
            wr_left  <= n_words;
            tile_c   <= '0;
            slot_c   <= '0;
            state    <= S_CFG;
          end
        end
        S_CFG: begin
          if (ctx_en) begin
            rd_addr <= rd_addr + 1'b1;
            rd_left <= rd_left - 1'b1;
          end
          if (rd_vld) begin
            wr_left <= wr_left - 1'b1;
            if (tile_c == 5'(N_TILES - 1)) begin
              tile_c <= '0;
              slot_c <= slot_c + 1'b1;
            end else begin
              tile_c <= tile_c + 1'b1;
            end
            if (wr_left == 10'd1) begin
              pc    <= '0;
              iter  <= '0;
              state <= clr_flag ? S_CLEAR : S_RUN;
            end
          end
        end
        S_CLEAR: state <= S_RUN;
        S_RUN: if (step_done) begin
          if (32'(pc) == 32'(steps) - 1) begin
            pc <= '0;
            if (iter == iters - 1'b1) state <= S_DONE;
            else                      iter  <= iter + 1'b1;
          end else begin
            pc <= pc + 1'b1;
          end
        end
        S_DONE: begin
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  a_cfg_only_when_configuring: assert property (@(posedge clk) disable iff (!rst_n)
    cfg.valid |-> state == S_CFG);

endmodule
