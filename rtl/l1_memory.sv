// l1_memory: the shared L1 data memory, built from NB single-port banks.
//
// Each bank is a synchronous SRAM of 2^BANK_AW 32-bit words with one port:
// when `en` is high it writes `wdata` (if `we`) or reads, and the read word is
// on `rdata` in the next cycle. Banks are independent, so the interconnect can
// serve one access per bank per cycle. The default is 8 banks of 1024 words,
// 32 KiB in total.
//
// From the paper: a shared L1 memory, reached through an interconnect, is
// where the host and the CGRA exchange data. Its size and banking are not
// given; the numbers here are this design's choices.
module l1_memory
  import cgra_pkg::*;
#(
  parameter int unsigned NB      = 8,
  parameter int unsigned BANK_AW = 10
) (
  input  logic               clk,
  input  logic               en    [NB],
  input  logic               we    [NB],
  input  logic [BANK_AW-1:0] addr  [NB],
  input  word_t              wdata [NB],
  output word_t              rdata [NB]
);

  for (genvar b = 0; b < NB; b++) begin : g_bank
    word_t mem [2**BANK_AW];
    always_ff @(posedge clk) begin
      if (en[b]) begin
        if (we[b]) mem[addr[b]] <= wdata[b];
        else       rdata[b]     <= mem[addr[b]];
      end
    end
  end

endmodule
