// tb_l1_memory: self-checking test of the banked shared L1 memory.
//
// Writes every bank at random addresses, all banks in the same cycle, keeps a
// reference copy here, and reads everything back, checking the one-cycle read
// latency and that banks do not disturb each other.
module tb_l1_memory;
  import cgra_pkg::*;

  localparam int unsigned NB = 8, AW = 10;

  logic          clk = 0;
  logic          en [NB], we [NB];
  logic [AW-1:0] addr [NB];
  word_t         wdata [NB], rdata [NB];
  word_t         refm [NB][2**AW];
  logic          valid [NB][2**AW];
  int checks = 0, failures = 0;

  l1_memory #(.NB(NB), .BANK_AW(AW)) dut (.clk, .en, .we, .addr, .wdata, .rdata);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int b = 0; b < NB; b++) begin
      en[b] = 0; we[b] = 0; addr[b] = 0; wdata[b] = 0;
      for (int i = 0; i < 2**AW; i++) valid[b][i] = 0;
    end
    for (int k = 0; k < 2000; k++) begin
      @(negedge clk);
      for (int b = 0; b < NB; b++) begin
        en[b] = 1; we[b] = 1; addr[b] = AW'($urandom); wdata[b] = $urandom;
        refm[b][addr[b]] = wdata[b]; valid[b][addr[b]] = 1;
      end
    end
    for (int k = 0; k < 2000; k++) begin
      logic [AW-1:0] a [NB];
      @(negedge clk);
      for (int b = 0; b < NB; b++) begin
        a[b] = AW'($urandom);
        en[b] = 1; we[b] = 0; addr[b] = a[b];
      end
      @(negedge clk);
      for (int b = 0; b < NB; b++) begin
        en[b] = 0;
        if (valid[b][a[b]]) begin
          checks++;
          if (rdata[b] !== refm[b][a[b]]) begin
            failures++;
            $display("FAIL bank %0d addr %0d: got %h expected %h", b, a[b], rdata[b], refm[b][a[b]]);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
