// tb_cgra_array: self-checking test of the PE/MOB array and its torus links.
//
// Every tile first puts its own index on its output register, then copies
// the output of its north, east, south or west neighbour; the result of every
// tile is compared with the neighbour index worked out here with wrap-around,
// which checks all 96 torus links, the edge wrap included. Then all eight
// MOBs load from an L1 model that grants each port at random, and the PEs next
// to them copy the loaded words; this checks the global stall (the array
// must not move on until every MOB is served) and the load timing. The
// stall-free steps must take one cycle each.
module tb_cgra_array;
  import cgra_pkg::*;

  localparam int unsigned R = GRID_ROWS, C = GRID_COLS;

  logic       clk = 0, rst_n = 0;
  cfg_wr_t    cfg;
  logic       clear, run;
  logic [3:0] pc;
  logic       stall, step_done;
  l1_req_t    req [N_MOBS];
  l1_rsp_t    rsp [N_MOBS];
  word_t      tile_out [N_TILES];
  logic [N_MOBS-1:0] gnt_ok = '0;
  int         checks = 0, failures = 0, stall_cycles = 0;

  cgra_array #(.NSLOTS(16)) dut (
    .clk, .rst_n, .cfg, .clear, .run, .pc, .stall, .step_done,
    .l1_req (req), .l1_rsp (rsp), .tile_out
  );

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // L1 model: word at address a holds a * 3 + 7; random grant per port.
  for (genvar m = 0; m < N_MOBS; m++) begin : g_l1
    assign rsp[m].gnt = req[m].req && gnt_ok[m];
    always @(posedge clk) begin
      rsp[m].rvalid <= req[m].req && rsp[m].gnt && !req[m].we;
      rsp[m].rdata  <= word_t'(req[m].addr) * 3 + 7;
    end
  end
  always @(posedge clk) begin
    gnt_ok <= N_MOBS'($urandom);
    if (run && stall) stall_cycles++;
  end

  function automatic int nb(int r, int c, int d);
    case (d)
      0: return ((r + R - 1) % R) * C + c;
      1: return r * C + (c + 1) % C;
      2: return ((r + 1) % R) * C + c;
      default: return r * C + (c + C - 1) % C;
    endcase
  endfunction

  task automatic check(string what, word_t got, word_t exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %h expected %h", what, got, exp);
    end
  endtask

  task automatic put(int tile, int slot, word_t w);
    @(negedge clk);
    cfg = '{valid: 1'b1, tile: 5'(tile), slot: 4'(slot), data: w};
    @(negedge clk);
    cfg = '0;
  endtask

  task automatic step(int s);
    pc <= 4'(s);
    #1;
    while (!step_done) begin @(posedge clk); #1; end
    @(posedge clk); #1;
  endtask

  longint t0;

  initial begin
    cfg = '0; clear = 0; run = 0; pc = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;

    for (int r = 0; r < R; r++)
      for (int c = 0; c < C; c++) begin
        int t;
        t = r * C + c;
        for (int d = 0; d < 4; d++) begin
          logic [3:0] op_mov;
          op_mov = row_is_mob(r) ? 4'(MOB_MOV) : 4'(PE_MOV);
          put(t, 2 * d,     make_instr(op_mov, SRC_IMM, SRC_ZERO, 1, 0, 0, 16'(t + 100)));
          put(t, 2 * d + 1, make_instr(op_mov, src_e'(d), SRC_ZERO, 1, 0, 0, 0));
        end
        if (row_is_mob(r)) begin
          put(t, 8, make_instr(MOB_LOAD, SRC_ZERO, SRC_ZERO, 1, 0, 0, 16'(t * 5)));
        end else if (r == 0 || r == 3) begin
          put(t, 10, make_instr(PE_MOV, SRC_S, SRC_ZERO, 1, 0, 0, 0));  // MOB below
        end else begin
          put(t, 10, make_instr(PE_MOV, SRC_N, SRC_ZERO, 1, 0, 0, 0));  // MOB above
        end
      end

    clear <= 1; @(posedge clk); clear <= 0;
    run <= 1;
    // torus links, with unlimited grants not needed (no memory access)
    t0 = $time;
    for (int d = 0; d < 4; d++) begin
      step(2 * d);
      for (int t = 0; t < N_TILES; t++) check("own id", tile_out[t], word_t'(t + 100));
      step(2 * d + 1);
      for (int r = 0; r < R; r++)
        for (int c = 0; c < C; c++)
          check($sformatf("link dir %0d tile %0d", d, r * C + c), tile_out[r * C + c],
                word_t'(nb(r, c, d) + 100));
    end
    checks++;
    if (($time - t0) != 8 * 10 + 1) begin  // eight 10 ns cycles, plus the 1 ns drive offset
      failures++;
      $display("FAIL 8 stall-free steps took %0d ns", $time - t0);
    end

    // loads through all eight MOBs at once, then PEs read them
    for (int k = 0; k < 10; k++) begin
      step(8);
      step(9);
      step(10);
      for (int r = 0; r < R; r++)
        for (int c = 0; c < C; c++) begin
          int t, mt;
          t = r * C + c;
          if (row_is_mob(r)) begin
            check("MOB load data", tile_out[t], word_t'(t * 5 * 3 + 7));
          end else begin
            mt = (r == 0 || r == 3) ? nb(r, c, 2) : nb(r, c, 0);
            check("PE reads MOB", tile_out[t], word_t'(mt * 5 * 3 + 7));
          end
        end
    end
    checks++;
    if (stall_cycles == 0) begin
      failures++;
      $display("FAIL array never stalled");
    end
    $display("stall cycles: %0d", stall_cycles);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
