// cgra_array: the CGRA proper, 16 PEs and 8 MOBs on a switchless torus.
//
// The tiles form a 6 x 4 grid laid out as in the PE/MOB array drawing: rows
// 0, 2, 3 and 5 are PEs, rows 1 and 4 are MOBs. Tile (r, c) has index
// r*4 + c, which is also the tile number used by configuration writes.
//
// Switchless mesh torus: every tile has one output register and reads the
// output registers of its four neighbours directly, north (r-1), east (c+1),
// south (r+1) and west (c-1), with indices taken modulo the grid size, so the
// top row talks to the bottom row and the left column to the right one. There
// are no routers or switches on these links: which neighbour a tile listens
// to is chosen by the operand fields of its own instruction, so data paths are
// fixed and a hop costs exactly one step.
//
// All tiles execute in lock-step. The memory controller supplies `run` and
// the step index `pc`; the array completes a step (en = run && !stall) only
// in a cycle where every MOB that accesses L1 in this step has its grant.
// Otherwise the whole array stalls, which keeps the static schedule exact.
//
// From the paper: array sizes and layout, the torus wrap-around, direct
// neighbour links without switches, the split of LOAD/STORE (MOBs) from
// arithmetic (PEs). The global stall and the lock-step stepping are this
// design's choices.
module cgra_array
  import cgra_pkg::*;
#(
  parameter int unsigned NSLOTS = 16
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  cfg_wr_t                   cfg,
  input  logic                      clear,
  input  logic                      run,
  input  logic [$clog2(NSLOTS)-1:0] pc,
  output logic                      stall,     // some MOB waits for L1
  output logic                      step_done, // the step at pc completes this cycle
  output l1_req_t                   l1_req [N_MOBS],
  input  l1_rsp_t                   l1_rsp [N_MOBS],
  output word_t                     tile_out [N_TILES]
);

  localparam int unsigned R = GRID_ROWS;
  localparam int unsigned C = GRID_COLS;

  logic [N_MOBS-1:0] mob_stall;
  logic              en;

  assign stall     = |mob_stall;
  assign en        = run && !stall;
  assign step_done = en;

  for (genvar r = 0; r < R; r++) begin : g_row
    for (genvar c = 0; c < C; c++) begin : g_col
      localparam int unsigned ID = r * C + c;
      word_t nbr [4];
      // Torus links: N, E, S, W with wrap-around.
      assign nbr[0] = tile_out[((r + R - 1) % R) * C + c];
      assign nbr[1] = tile_out[r * C + (c + 1) % C];
      assign nbr[2] = tile_out[((r + 1) % R) * C + c];
      assign nbr[3] = tile_out[r * C + (c + C - 1) % C];

      if (row_is_mob(r)) begin : g_mob
        localparam int unsigned M = mob_index(r, c);
        mob #(.TILE_ID(ID), .NSLOTS(NSLOTS)) u_mob (
          .clk, .rst_n, .cfg, .clear, .run, .en, .pc,
          .nbr    (nbr),
          .out    (tile_out[ID]),
          .l1_req (l1_req[M]),
          .l1_rsp (l1_rsp[M]),
          .stall  (mob_stall[M])
        );
      end else begin : g_pe
        pe #(.TILE_ID(ID), .NSLOTS(NSLOTS)) u_pe (
          .clk, .rst_n, .cfg, .clear, .en, .pc,
          .nbr (nbr),
          .out (tile_out[ID])
        );
      end
    end
  end

endmodule
