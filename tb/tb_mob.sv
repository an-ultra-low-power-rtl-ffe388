// tb_mob: self-checking test of one memory operation block.
//
// The MOB is connected to a small L1 model here that grants requests at
// random (about half the time) and returns read data one cycle after the
// grant. A second, external stall source freezes the step at random too, as
// another MOB of the array would. A program of pointer moves, loads, stores
// and a MOV is run several times; at the start of every step the output
// register is compared with what the static schedule promises (load data
// visible two steps after the LOAD), and the memory model counts accesses so
// that a request repeated during a stall is caught. Stores are checked in the
// model's memory.
module tb_mob;
  import cgra_pkg::*;

  localparam int unsigned ID = 6;

  logic       clk = 0, rst_n = 0;
  cfg_wr_t    cfg;
  logic       clear, run, en;
  logic [3:0] pc;
  word_t      nbr [4];
  word_t      out;
  l1_req_t    req;
  l1_rsp_t    rsp;
  logic       stall, ext_stall = 0, gnt_ok = 0;
  int         checks = 0, failures = 0;
  int         accesses = 0, stall_cycles = 0;

  mob #(.TILE_ID(ID), .NSLOTS(16)) dut (
    .clk, .rst_n, .cfg, .clear, .run, .en, .pc, .nbr, .out,
    .l1_req (req), .l1_rsp (rsp), .stall
  );

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // L1 model
  word_t mem [256];
  assign rsp.gnt = req.req && gnt_ok;
  assign en      = run && !stall && !ext_stall;
  always @(posedge clk) begin
    rsp.rvalid <= 1'b0;
    if (req.req && rsp.gnt) begin
      accesses++;
      if (req.we) mem[req.addr[7:0]] <= req.wdata;
      else begin
        rsp.rdata  <= mem[req.addr[7:0]];
        rsp.rvalid <= 1'b1;
      end
    end
    if (run && !en) stall_cycles++;
    gnt_ok    <= ($urandom % 2) == 0;
    ext_stall <= ($urandom % 4) == 0;
  end

  task automatic check(string what, word_t got, word_t exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %h expected %h", what, got, exp);
    end
  endtask

  task automatic put(int slot, word_t w);
    @(negedge clk);
    cfg = '{valid: 1'b1, tile: 5'(ID), slot: 4'(slot), data: w};
    @(negedge clk);
    cfg = '0;
  endtask

  // Run step s: hold pc until the cycle in which the step completes.
  task automatic step(int s);
    pc <= 4'(s);
    #1;
    while (!en) begin @(posedge clk); #1; end
    @(posedge clk); #1;
  endtask

  word_t exp_out;

  initial begin
    cfg = '0; clear = 0; run = 0; pc = 0;
    for (int i = 0; i < 256; i++) mem[i] = $urandom;
    foreach (nbr[i]) nbr[i] = $urandom;
    repeat (2) @(posedge clk);
    rst_n = 1;

    put(0, make_instr(MOB_SETPTR, SRC_ZERO, SRC_ZERO, 0, 0, 0, 16'd10));
    put(1, make_instr(MOB_LOAD,   SRC_ZERO, SRC_ZERO, 1, 0, 0, 16'd0));
    put(2, make_instr(MOB_LOAD,   SRC_ZERO, SRC_ZERO, 1, 0, 0, 16'd1));
    put(3, make_instr(MOB_NOP,    SRC_ZERO, SRC_ZERO, 0, 0, 0, 16'd0));
    put(4, make_instr(MOB_STORE,  SRC_N,    SRC_ZERO, 0, 0, 0, 16'd100));
    put(5, make_instr(MOB_ADDPTR, SRC_ZERO, SRC_ZERO, 0, 0, 0, 16'd2));
    put(6, make_instr(MOB_MOV,    SRC_W,    SRC_ZERO, 1, 0, 0, 16'd0));
    put(7, make_instr(MOB_LOAD,   SRC_ZERO, SRC_ZERO, 1, 0, 0, 16'd0));
    put(8, make_instr(MOB_NOP,    SRC_ZERO, SRC_ZERO, 0, 0, 0, 16'd0));
    put(9, make_instr(MOB_STORE,  SRC_SELF, SRC_ZERO, 0, 0, 0, 16'hffff)); // ptr-1

    clear <= 1; @(posedge clk); clear <= 0;
    run <= 1;
    for (int it = 0; it < 20; it++) begin
      nbr[0] = $urandom; nbr[3] = $urandom;
      step(0);
      step(1);
      step(2);
      check("load @10 visible at s+2", out, mem[10]);
      step(3);
      check("load @11 visible at s+2", out, mem[11]);
      step(4);
      step(5);
      step(6);
      check("MOV W", out, nbr[3]);
      step(7);
      check("MOV holds during load step", out, nbr[3]);
      step(8);
      check("load @12", out, mem[12]);
      step(9);
      check("store of N at 110", mem[110], nbr[0]);
      check("store of SELF at 11", mem[11], mem[12]);
      // restore the word for the next round
      mem[11] = $urandom;
    end
    run <= 0;
    @(posedge clk); #1;
    checks++;
    if (accesses != 20 * 5) begin
      failures++;
      $display("FAIL accesses %0d, expected %0d (repeated request?)", accesses, 20 * 5);
    end
    checks++;
    if (stall_cycles == 0) begin
      failures++;
      $display("FAIL no stall happened");
    end
    $display("stall cycles: %0d", stall_cycles);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
