// cgra_system: the CGRA integrated system, top level.
//
// The CGRA subsystem (context memory, memory controller and the PE/MOB array)
// is loosely coupled to a host processor: the two share an L1 data memory
// through an interconnect and exchange operands and results there. The host
// itself is outside this module; its three connections are ports:
//   host_l1_*   a master port on the L1 interconnect (same protocol as a MOB:
//               request held until gnt, read data one cycle after the grant)
//   host_ctx_*  read/write port of the context memory, where the host places
//               kernel descriptors (see memory_controller)
//   start / kernel_addr / busy / done / error   kernel launch and completion
// A kernel runs as: host writes data to L1 and descriptors to the context
// memory, pulses `start`; the memory controller configures every PE and MOB,
// then steps the array; MOBs move data between L1 and the PEs; `done` pulses
// at the end and the host reads the results from L1. `stall` and `step_done`
// show the array's progress (a step completes, or the array waits for L1).
//
// From the paper: the block structure (context memory, memory controller,
// CGRA, shared L1, interconnect, host) and the 4 KiB context memory. Widths,
// L1 size and the launch interface are this design's choices.
module cgra_system
  import cgra_pkg::*;
#(
  parameter int unsigned CTX_BYTES   = 4096,
  parameter int unsigned NSLOTS      = 16,
  parameter int unsigned L1_BANKS    = 8,
  parameter int unsigned L1_BANK_AW  = 10,
  localparam int unsigned CTX_AW     = $clog2(CTX_BYTES / 4)
) (
  input  logic              clk,
  input  logic              rst_n,
  // host access to shared L1
  input  l1_req_t           host_l1_req,
  output l1_rsp_t           host_l1_rsp,
  // host access to the context memory
  input  logic              host_ctx_en,
  input  logic              host_ctx_we,
  input  logic [CTX_AW-1:0] host_ctx_addr,
  input  word_t             host_ctx_wdata,
  output word_t             host_ctx_rdata,
  // kernel control
  input  logic              start,
  input  logic [CTX_AW-1:0] kernel_addr,
  output logic              busy,
  output logic              done,
  output logic              error,
  // status
  output logic              stall,
  output logic              step_done
);

  localparam int unsigned NM = N_MOBS + 1;

  logic              ctx_en;
  logic [CTX_AW-1:0] ctx_addr;
  word_t             ctx_rdata;
  cfg_wr_t           cfg;
  logic              clear, run;
  logic [$clog2(NSLOTS)-1:0] pc;

  l1_req_t mob_req [N_MOBS];
  l1_rsp_t mob_rsp [N_MOBS];
  l1_req_t m_req   [NM];
  l1_rsp_t m_rsp   [NM];
  // The tiles' output registers are an observation port of the array; in the
  // system results leave only through MOB stores, so nothing reads them here.
  word_t   tile_out [N_TILES];

  logic                  b_en    [L1_BANKS];
  logic                  b_we    [L1_BANKS];
  logic [L1_BANK_AW-1:0] b_addr  [L1_BANKS];
  word_t                 b_wdata [L1_BANKS];
  word_t                 b_rdata [L1_BANKS];

  context_memory #(.BYTES(CTX_BYTES)) u_ctx (
    .clk,
    .a_en (host_ctx_en), .a_we (host_ctx_we), .a_addr (host_ctx_addr),
    .a_wdata (host_ctx_wdata), .a_rdata (host_ctx_rdata),
    .b_en (ctx_en), .b_addr (ctx_addr), .b_rdata (ctx_rdata)
  );

  memory_controller #(.CTX_AW(CTX_AW), .NSLOTS(NSLOTS)) u_mc (
    .clk, .rst_n, .start, .kernel_addr, .busy, .done, .error,
    .ctx_en, .ctx_addr, .ctx_rdata,
    .cfg, .clear, .run, .pc, .step_done
  );

  cgra_array #(.NSLOTS(NSLOTS)) u_cgra (
    .clk, .rst_n, .cfg, .clear, .run, .pc, .stall, .step_done,
    .l1_req (mob_req), .l1_rsp (mob_rsp), .tile_out
  );

  always_comb begin
    for (int m = 0; m < N_MOBS; m++) begin
      m_req[m]   = mob_req[m];
      mob_rsp[m] = m_rsp[m];
    end
    m_req[N_MOBS] = host_l1_req;
    host_l1_rsp   = m_rsp[N_MOBS];
  end

  l1_interconnect #(.NM(NM), .NB(L1_BANKS), .BANK_AW(L1_BANK_AW)) u_ic (
    .clk, .rst_n, .m_req, .m_rsp,
    .b_en, .b_we, .b_addr, .b_wdata, .b_rdata
  );

  l1_memory #(.NB(L1_BANKS), .BANK_AW(L1_BANK_AW)) u_l1 (
    .clk, .en (b_en), .we (b_we), .addr (b_addr), .wdata (b_wdata), .rdata (b_rdata)
  );

endmodule
