// l1_interconnect: connects the MOBs and the host to the banks of shared L1.
//
// NM masters (the eight MOBs, then the host) reach NB word-interleaved banks:
// the low log2(NB) bits of a word address pick the bank, the rest are the
// address inside the bank. Every bank has its own round-robin arbiter, so
// masters that hit different banks are all served in the same cycle and
// masters that collide on a bank are served one per cycle in turn.
//
// Timing: `gnt` is combinational in the cycle of the request. The bank reads
// on that clock edge, and `rvalid` with `rdata` come back to the granted
// master in the next cycle. Writes need only the grant.
//
// From the paper: an interconnect gives the CGRA and the host access to the
// shared L1 memory through which they exchange data. Bank count, interleaving,
// arbitration and the request/grant protocol are this design's choices.
module l1_interconnect
  import cgra_pkg::*;
#(
  parameter int unsigned NM       = N_MOBS + 1,
  parameter int unsigned NB       = 8,
  parameter int unsigned BANK_AW  = 10,
  localparam int unsigned BSEL_W  = $clog2(NB),
  localparam int unsigned MSEL_W  = $clog2(NM)
) (
  input  logic               clk,
  input  logic               rst_n,
  input  l1_req_t            m_req   [NM],
  output l1_rsp_t            m_rsp   [NM],
  output logic               b_en    [NB],
  output logic               b_we    [NB],
  output logic [BANK_AW-1:0] b_addr  [NB],
  output word_t              b_wdata [NB],
  input  word_t              b_rdata [NB]
);

  logic [MSEL_W-1:0] rr    [NB];   // highest-priority master per bank
  logic [MSEL_W-1:0] win   [NB];
  logic              hit   [NB];
  logic [NM-1:0]     want  [NB];
  logic [NM-1:0]     gnt_v;
  logic [NM-1:0]     rd_q;         // master got a read grant last cycle
  logic [BSEL_W-1:0] bsel_q [NM];  // bank it read from

  function automatic logic [BSEL_W-1:0] bank_of(input logic [ADDR_W-1:0] addr);
    return addr[BSEL_W-1:0];
  endfunction

  always_comb begin
    gnt_v = '0;
    for (int b = 0; b < NB; b++) begin
      for (int m = 0; m < NM; m++)
        want[b][m] = m_req[m].req && (bank_of(m_req[m].addr) == BSEL_W'(b));
      // Round robin: first requester at or after rr[b].
      hit[b] = 1'b0;
      win[b] = '0;
      for (int k = 0; k < NM; k++) begin
        int unsigned m;
        m = (32'(rr[b]) + k) % NM;
        if (!hit[b] && want[b][m]) begin
          hit[b] = 1'b1;
          win[b] = MSEL_W'(m);
        end
      end
      if (hit[b]) gnt_v[win[b]] = 1'b1;
      b_en[b]    = hit[b];
      b_we[b]    = m_req[win[b]].we;
      b_addr[b]  = BANK_AW'(m_req[win[b]].addr >> BSEL_W);
      b_wdata[b] = m_req[win[b]].wdata;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int b = 0; b < NB; b++) rr[b] <= '0;
      for (int m = 0; m < NM; m++) bsel_q[m] <= '0;
      rd_q <= '0;
    end else begin
      for (int b = 0; b < NB; b++)
        if (hit[b]) rr[b] <= MSEL_W'((32'(win[b]) + 1) % NM);
      for (int m = 0; m < NM; m++) begin
        rd_q[m]   <= gnt_v[m] && !m_req[m].we;
        bsel_q[m] <= bank_of(m_req[m].addr);
      end
    end
  end

  always_comb begin
    for (int m = 0; m < NM; m++) begin
      m_rsp[m].gnt    = gnt_v[m];
      m_rsp[m].rvalid = rd_q[m];
      m_rsp[m].rdata  = b_rdata[bsel_q[m]];
    end
  end

  // At most one master per bank per cycle, and only masters that asked.
  for (genvar b = 0; b < NB; b++) begin : g_chk
    a_one_winner: assert property (@(posedge clk) disable iff (!rst_n)
      hit[b] |-> want[b][win[b]]);
  end
  logic [NM-1:0] req_v;
  always_comb for (int m = 0; m < NM; m++) req_v[m] = m_req[m].req;
  a_gnt_needs_req: assert property (@(posedge clk) disable iff (!rst_n)
    (gnt_v & ~req_v) == '0);

endmodule
