// tb_pe: self-checking test of one processing element.
//
// Writes a program into the PE's context store, drives the four neighbour
// inputs with random words and steps through the program, comparing the
// output register after every step with a reference computed here. Covers
// every ALU operation, the register file, the immediate, MAC accumulation
// with forwarding, ACCRD, stall (en low), clear, and that configuration
// writes for another tile are ignored. Each step takes one cycle.
module tb_pe;
  import cgra_pkg::*;

  localparam int unsigned ID = 5;

  logic       clk = 0, rst_n = 0;
  cfg_wr_t    cfg;
  logic       clear, en;
  logic [3:0] pc;
  word_t      nbr [4];
  word_t      out;
  int         checks = 0, failures = 0;

  pe #(.TILE_ID(ID), .NSLOTS(16)) dut (.clk, .rst_n, .cfg, .clear, .en, .pc, .nbr, .out);

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic word_t ref_dotp(word_t a, word_t b);
    int s = 0;
    for (int i = 0; i < 4; i++) begin
      byte x, y;
      x = byte'(a >> (8 * i));
      y = byte'(b >> (8 * i));
      s += int'(x) * int'(y);
    end
    return word_t'(s);
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

  // Execute slot s with en high for one cycle.
  task automatic exec(int s);
    pc <= 4'(s);
    en <= 1'b1;
    @(posedge clk);
    en <= 1'b0;
    #1;
  endtask

  word_t n0, n1, n2, n3, acc_ref, w;

  initial begin
    cfg = '0; clear = 0; en = 0; pc = 0;
    foreach (nbr[i]) nbr[i] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;

    n0 = $urandom; n1 = $urandom; n2 = $urandom; n3 = $urandom;
    nbr[0] = n0; nbr[1] = n1; nbr[2] = n2; nbr[3] = n3;

    put(ID, 0, make_instr(PE_ADD,   SRC_N,   SRC_E,   1, 0, 0, 0));
    put(ID, 1, make_instr(PE_SUB,   SRC_S,   SRC_W,   1, 0, 0, 0));
    put(ID, 2, make_instr(PE_MUL,   SRC_N,   SRC_IMM, 1, 0, 0, 16'hfffd)); // * -3
    put(ID, 3, make_instr(PE_DOTP,  SRC_E,   SRC_W,   1, 0, 0, 0));
    put(ID, 4, make_instr(PE_MOV,   SRC_S,   SRC_ZERO,0, 1, 2, 0));        // R2 <- S
    put(ID, 5, make_instr(PE_MAC,   SRC_N,   SRC_R2,  1, 0, 0, 0));        // acc += N.R2, out <- N
    put(ID, 6, make_instr(PE_MAC,   SRC_W,   SRC_E,   0, 0, 0, 0));
    put(ID, 7, make_instr(PE_ACCRD, SRC_ZERO,SRC_ZERO,1, 0, 0, 0));
    put(ID, 8, make_instr(PE_ADD,   SRC_N,   SRC_SELF,1, 0, 0, 0));
    put(ID, 9, make_instr(PE_SUB,   SRC_W,   SRC_IMM, 1, 0, 0, 16'd3));
    put(ID, 10, make_instr(PE_ADD,  SRC_R2,  SRC_SELF,1, 1, 1, 0));        // out,R1 <- R2+out
    put(ID, 11, make_instr(PE_NOP,  SRC_N,   SRC_N,   1, 0, 0, 0));
    put(ID, 12, make_instr(PE_ADD,  SRC_ACC, SRC_R1,  1, 0, 0, 0));
    put(ID + 1, 11, make_instr(PE_MOV, SRC_N, SRC_N, 1, 0, 0, 0));        // other tile

    exec(0);  check("ADD",  out, n0 + n1);
    exec(1);  check("SUB",  out, n2 - n3);
    exec(2);  check("MUL",  out, n0 * 32'hfffffffd);
    exec(3);  check("DOTP", out, ref_dotp(n1, n3));
    w = out;
    exec(4);  check("MOV to RF keeps out", out, w);
    exec(5);  acc_ref = ref_dotp(n0, n2); check("MAC forwards a", out, n0);
    exec(6);  acc_ref += ref_dotp(n3, n1); check("MAC without wr_out", out, n0);
    exec(7);  check("ACCRD", out, acc_ref);
    exec(12); check("ACCRD cleared acc", out, 32'(0) + 0);
    // out is now 0 (acc 0 + R1 0)
    nbr[0] = 32'h8000_0000; #1;
    exec(8);  check("ADD N+SELF", out, 32'h8000_0000);
    nbr[0] = 32'h0000_1234; #1;
    exec(8);  check("ADD N+SELF 2", out, 32'h8000_1234);
    exec(9);  check("SUB imm", out, n3 - 3);
    w = out;
    exec(10); check("ADD R2+SELF", out, n2 + w);
    w = out;
    exec(11); check("NOP holds", out, w);
    exec(12); check("ACC+R1", out, n2 + n3 - 3);
    // stall: en low does nothing
    w = out;
    pc <= 4'd0; en <= 1'b0; @(posedge clk); #1;
    check("en low holds", out, w);
    // clear
    clear <= 1'b1; @(posedge clk); clear <= 1'b0; #1;
    check("clear zeroes out", out, 0);
    exec(12); check("clear zeroes acc and RF", out, 0);

    // random DOTP/MAC sweep
    acc_ref = 0;
    for (int i = 0; i < 50; i++) begin
      n0 = $urandom; n2 = $urandom;
      nbr[0] = n0; nbr[2] = n2;
      put(ID, 13, make_instr(PE_MOV, SRC_S, SRC_ZERO, 0, 1, 2, 0));
      exec(13);
      exec(5);
      acc_ref += ref_dotp(n0, n2);
    end
    exec(7); check("50 MACs", out, acc_ref);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
