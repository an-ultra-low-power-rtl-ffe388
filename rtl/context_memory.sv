// context_memory: storage for the kernels' configuration words.
//
// A 4 KiB memory of 32-bit words (1024 words at the default size). The host
// writes and reads it through port A; the memory controller reads it through
// port B while it configures the array. Both reads are synchronous: data
// appears on the cycle after the address. A write and a read of the same word
// in one cycle return the old word on port B.
//
// From the paper: the CGRA subsystem holds a 4 KiB context memory from which
// the memory controller takes the configuration. The word width and the two
// ports are this design's choices.
module context_memory
  import cgra_pkg::*;
#(
  parameter int unsigned BYTES = 4096,
  localparam int unsigned WORDS = BYTES / 4,
  localparam int unsigned AW    = $clog2(WORDS)
) (
  input  logic          clk,
  // port A: host
  input  logic          a_en,
  input  logic          a_we,
  input  logic [AW-1:0] a_addr,
  input  word_t         a_wdata,
  output word_t         a_rdata,
  // port B: memory controller (read only)
  input  logic          b_en,
  input  logic [AW-1:0] b_addr,
  output word_t         b_rdata
);

  word_t mem [WORDS];

  always_ff @(posedge clk) begin
    if (a_en) begin
      if (a_we) mem[a_addr] <= a_wdata;
      a_rdata <= mem[a_addr];
    end
  end

  always_ff @(posedge clk) begin
    if (b_en) b_rdata <= mem[b_addr];
  end

endmodule
