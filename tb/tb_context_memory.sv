// tb_context_memory: self-checking test of the context memory.
//
// Fills all 1024 words through the host port with a pattern computed here,
// reads them back through both ports (one-cycle read latency) and checks a
// read on port B of a word being written on port A in the same cycle
// (old data).
module tb_context_memory;
  import cgra_pkg::*;

  logic clk = 0;
  logic a_en = 0, a_we = 0, b_en = 0;
  logic [9:0] a_addr = 0, b_addr = 0;
  word_t a_wdata = 0, a_rdata, b_rdata;
  int checks = 0, failures = 0;

  context_memory #(.BYTES(4096)) dut (.clk, .a_en, .a_we, .a_addr, .a_wdata, .a_rdata,
                                      .b_en, .b_addr, .b_rdata);

  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic word_t pat(int i);
    return word_t'(i * 32'h9e3779b1) ^ 32'h5a5a0000;
  endfunction

  task automatic check(string what, word_t got, word_t exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %h expected %h", what, got, exp);
    end
  endtask

  initial begin
    for (int i = 0; i < 1024; i++) begin
      @(negedge clk);
      a_en = 1; a_we = 1; a_addr = 10'(i); a_wdata = pat(i);
    end
    @(negedge clk); a_en = 0; a_we = 0;
    for (int i = 0; i < 1024; i++) begin
      @(negedge clk);
      a_en = 1; a_addr = 10'(i); b_en = 1; b_addr = 10'(1023 - i);
      @(negedge clk);
      a_en = 0; b_en = 0;
      check("port A read", a_rdata, pat(i));
      check("port B read", b_rdata, pat(1023 - i));
    end
    // same-cycle write (A) and read (B)
    @(negedge clk);
    a_en = 1; a_we = 1; a_addr = 10'd77; a_wdata = 32'hdeadbeef; b_en = 1; b_addr = 10'd77;
    @(negedge clk);
    a_en = 0; a_we = 0; b_en = 0;
    check("read during write returns old", b_rdata, pat(77));
    b_en = 1;
    @(negedge clk);
    b_en = 0;
    check("new word", b_rdata, 32'hdeadbeef);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
