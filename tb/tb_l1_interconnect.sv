// tb_l1_interconnect: self-checking test of the L1 interconnect.
//
// Nine masters issue random reads and writes, each holding its request until
// it is granted, into eight bank models kept here. Every cycle the test checks
// that each bank serves at most one master, that a bank with requesters serves
// one of them, that grants go only to requesters hitting that bank, and that
// a waiting master is served within nine cycles (round robin). Read data is
// compared with a reference memory updated in grant order. Addresses are
// drawn from a small range so that bank conflicts are frequent.
module tb_l1_interconnect;
  import cgra_pkg::*;

  localparam int unsigned NM = 9, NB = 8, AW = 10;

  logic          clk = 0, rst_n = 0;
  l1_req_t       m_req [NM];
  l1_rsp_t       m_rsp [NM];
  logic          b_en [NB], b_we [NB];
  logic [AW-1:0] b_addr [NB];
  word_t         b_wdata [NB], b_rdata [NB];
  word_t         bankmem [NB][2**AW];
  word_t         refm [2**16];
  word_t         exp_rd [NM];
  logic          exp_v [NM];
  int            wait_c [NM];
  logic          granted [NM];
  int checks = 0, failures = 0, conflicts = 0, reads = 0;

  l1_interconnect #(.NM(NM), .NB(NB), .BANK_AW(AW)) dut (
    .clk, .rst_n, .m_req, .m_rsp, .b_en, .b_we, .b_addr, .b_wdata, .b_rdata);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // bank models
  always @(posedge clk)
    for (int b = 0; b < NB; b++)
      if (b_en[b]) begin
        if (b_we[b]) bankmem[b][b_addr[b]] <= b_wdata[b];
        else         b_rdata[b] <= bankmem[b][b_addr[b]];
      end

  task automatic fail(string s);
    failures++;
    $display("FAIL %s", s);
  endtask

  initial begin
    for (int i = 0; i < 2**16; i++) refm[i] = 0;
    for (int b = 0; b < NB; b++) for (int i = 0; i < 2**AW; i++) bankmem[b][i] = 0;
    for (int m = 0; m < NM; m++) begin m_req[m] = '0; exp_v[m] = 0; granted[m] = 0; wait_c[m] = 0; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int cyc = 0; cyc < 3000; cyc++) begin
      int served [NB];
      int want_b [NB];
      @(negedge clk);
      // check read data of last cycle's grants
      for (int m = 0; m < NM; m++) begin
        if (exp_v[m]) begin
          checks++;
          if (!m_rsp[m].rvalid || m_rsp[m].rdata !== exp_rd[m])
            fail($sformatf("read data master %0d: %h vs %h", m, m_rsp[m].rdata, exp_rd[m]));
          reads++;
        end else begin
          checks++;
          if (m_rsp[m].rvalid) fail($sformatf("spurious rvalid master %0d", m));
        end
        exp_v[m] = 0;
      end
      // drop the requests granted last cycle, then new requests for idle masters
      for (int m = 0; m < NM; m++) if (granted[m]) begin m_req[m].req = 0; granted[m] = 0; end
      for (int m = 0; m < NM; m++)
        if (!m_req[m].req && ($urandom % 3) != 0) begin
          m_req[m].req   = 1;
          m_req[m].we    = ($urandom % 2) == 0;
          m_req[m].addr  = 16'($urandom % 64);
          m_req[m].wdata = $urandom;
        end
      #1;
      for (int b = 0; b < NB; b++) begin served[b] = 0; want_b[b] = 0; end
      for (int m = 0; m < NM; m++)
        if (m_req[m].req) want_b[m_req[m].addr[2:0]]++;
      for (int m = 0; m < NM; m++) begin
        if (m_rsp[m].gnt) begin
          checks++;
          if (!m_req[m].req) fail("grant without request");
          served[m_req[m].addr[2:0]]++;
        end
      end
      for (int b = 0; b < NB; b++) begin
        checks++;
        if (served[b] != (want_b[b] > 0 ? 1 : 0))
          fail($sformatf("bank %0d served %0d of %0d requesters", b, served[b], want_b[b]));
        if (want_b[b] > 1) conflicts++;
      end
      // apply grants in the reference, in any order (one per bank)
      for (int m = 0; m < NM; m++) begin
        if (m_req[m].req && m_rsp[m].gnt) begin
          if (m_req[m].we) refm[m_req[m].addr] = m_req[m].wdata;
          else begin exp_rd[m] = refm[m_req[m].addr]; exp_v[m] = 1; end
          granted[m] = 1;
          wait_c[m] = 0;
        end else if (m_req[m].req) begin
          wait_c[m]++;
          checks++;
          if (wait_c[m] >= NM) fail($sformatf("master %0d starved", m));
        end
      end
    end
    checks++;
    if (conflicts == 0) fail("no bank conflict happened");
    $display("bank conflicts: %0d, reads checked: %0d", conflicts, reads);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
