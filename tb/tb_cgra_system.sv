// tb_cgra_system: end-to-end GEMM on the whole CGRA system.
//
// The testbench plays the host. It fills shared L1 with an M x K matrix A and
// a K x N matrix B of random signed 8-bit values (A row-major, B column-major,
// four values per 32-bit word), computes C = A x B itself, and then, for every
// 4 x 4 block of C, writes two kernels into the context memory and runs them:
//
//   GEMM kernel (5 steps, K/4 iterations, clears the array first)
//     MOBs in row 1 load the B column word and the A words of matrix rows 0
//     and 1; MOBs in row 4 load the A words of rows 2 and 3. PEs next to a MOB
//     take the words from it; the PEs of rows 0 and 2 pass the B word on, to
//     row 3 (south) and to row 5 (north, across the torus wrap from row 0).
//     Every PE then accumulates one packed dot product per iteration.
//   Drain kernel (3 steps, 1 iteration)
//     Every PE moves its accumulator to its output; the MOBs store them to C.
//
// Grid row to matrix row: PE rows 0, 2, 3, 5 compute C rows 0, 1, 2, 3 of the
// block; grid column j computes C column j. While the GEMM kernel runs the
// host also reads L1 to compete with the MOBs. Checked: every word of C, the
// number of array steps of each kernel (STEPS x ITERS, whatever the stalls),
// and that each mechanism happened: array stalls on L1 bank conflicts, host
// requests held back by the CGRA, reconfiguration between two kernels, the
// clear, data crossing the torus wrap, and a rejected descriptor.
module tb_cgra_system;
  import cgra_pkg::*;

  localparam int M = 8, N = 8, K = 64;
  localparam int KW = K / 4;
  localparam int A_BASE = 'h0000;
  localparam int B_BASE = 'h0400;
  localparam int C_BASE = 'h0800;
  localparam int K1_ADDR = 0, K2_ADDR = 200, BAD_ADDR = 400;

  logic        clk = 0, rst_n = 0;
  l1_req_t     host_l1_req;
  l1_rsp_t     host_l1_rsp;
  logic        host_ctx_en = 0, host_ctx_we = 0;
  logic [9:0]  host_ctx_addr = 0;
  word_t       host_ctx_wdata = 0, host_ctx_rdata;
  logic        start = 0;
  logic [9:0]  kernel_addr = 0;
  logic        busy, done, error, stall, step_done;

  cgra_system dut (
    .clk, .rst_n, .host_l1_req, .host_l1_rsp,
    .host_ctx_en, .host_ctx_we, .host_ctx_addr, .host_ctx_wdata, .host_ctx_rdata,
    .start, .kernel_addr, .busy, .done, .error, .stall, .step_done
  );

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_stall = 0, n_host_wait = 0, n_kernels = 0, n_clear = 0, n_wrap = 0, n_error = 0;
  int n_steps = 0;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic done_seen = 0;
  always @(posedge clk) if (done) done_seen <= 1;

  // mechanism counters
  always @(posedge clk) if (rst_n) begin
    if (stall) n_stall++;
    if (step_done) n_steps++;
    if (dut.clear) n_clear++;
    if (host_l1_req.req && !host_l1_rsp.gnt) n_host_wait++;
  end
  // PE (5, c) reads PE (0, c) through its south link, which wraps around.
  for (genvar c = 0; c < GRID_COLS; c++) begin : g_wrap
    always @(posedge clk)
      if (dut.u_cgra.g_row[5].g_col[c].g_pe.u_pe.en &&
          dut.u_cgra.g_row[5].g_col[c].g_pe.u_pe.ins.op == 4'(PE_MAC) &&
          dut.u_cgra.g_row[5].g_col[c].g_pe.u_pe.ins.src_b == SRC_S)
        n_wrap++;
  end

  task automatic fail(string s);
    failures++;
    $display("FAIL %s", s);
  endtask

  // ---- host helpers --------------------------------------------------------
  task automatic l1_write(int addr, word_t d);
    @(negedge clk);
    host_l1_req = '{req: 1'b1, we: 1'b1, addr: 16'(addr), wdata: d};
    #1;
    while (!host_l1_rsp.gnt) begin @(negedge clk); #1; end
    @(negedge clk);
    host_l1_req = '0;
  endtask

  task automatic l1_read(int addr, output word_t d);
    @(negedge clk);
    host_l1_req = '{req: 1'b1, we: 1'b0, addr: 16'(addr), wdata: '0};
    #1;
    while (!host_l1_rsp.gnt) begin @(negedge clk); #1; end
    @(negedge clk);
    host_l1_req = '0;
    d = host_l1_rsp.rdata;
  endtask

  task automatic ctx_write(int addr, word_t d);
    @(negedge clk);
    host_ctx_en = 1; host_ctx_we = 1; host_ctx_addr = 10'(addr); host_ctx_wdata = d;
    @(negedge clk);
    host_ctx_en = 0; host_ctx_we = 0;
  endtask

  // ---- kernel building -----------------------------------------------------
  word_t prog [16][N_TILES];

  function automatic int tid(int r, int c);
    return r * GRID_COLS + c;
  endfunction

  task automatic clear_prog();
    for (int s = 0; s < 16; s++) for (int t = 0; t < N_TILES; t++) prog[s][t] = '0;
  endtask

  task automatic write_kernel(int addr, int steps, int iters, bit clr);
    ctx_write(addr, word_t'({16'(iters), 7'd0, clr, 3'd0, 5'(steps)}));
    for (int s = 0; s < steps; s++)
      for (int t = 0; t < N_TILES; t++)
        ctx_write(addr + 1 + s * N_TILES + t, prog[s][t]);
  endtask

  function automatic word_t I(logic [3:0] op, src_e a, src_e b, bit wo, bit wr, int ri, int imm);
    return make_instr(op, a, b, wo, wr, 2'(ri), 16'(imm));
  endfunction

  // GEMM kernel for the C block at block row bm, block column bn.
  task automatic build_gemm(int bm, int bn);
    int a0;
    clear_prog();
    a0 = A_BASE + bm * 4 * KW;
    for (int j = 0; j < GRID_COLS; j++) begin
      int bj;
      bj = B_BASE + (bn * 4 + j) * KW;
      prog[0][tid(1, j)] = I(MOB_LOAD,   SRC_ZERO, SRC_ZERO, 1, 0, 0, bj);
      prog[0][tid(4, j)] = I(MOB_LOAD,   SRC_ZERO, SRC_ZERO, 1, 0, 0, a0 + 2 * KW);
      prog[1][tid(1, j)] = I(MOB_LOAD,   SRC_ZERO, SRC_ZERO, 1, 0, 0, a0 + 0 * KW);
      prog[1][tid(4, j)] = I(MOB_LOAD,   SRC_ZERO, SRC_ZERO, 1, 0, 0, a0 + 3 * KW);
      prog[2][tid(1, j)] = I(MOB_LOAD,   SRC_ZERO, SRC_ZERO, 1, 0, 0, a0 + 1 * KW);
      prog[2][tid(4, j)] = I(MOB_ADDPTR, SRC_ZERO, SRC_ZERO, 0, 0, 0, 1);
      prog[2][tid(0, j)] = I(PE_MOV,     SRC_S,    SRC_ZERO, 1, 1, 0, 0);  // R0, out <- B
      prog[2][tid(2, j)] = I(PE_MOV,     SRC_N,    SRC_ZERO, 1, 1, 0, 0);  // R0, out <- B
      prog[2][tid(3, j)] = I(PE_MOV,     SRC_S,    SRC_ZERO, 0, 1, 1, 0);  // R1 <- A row 2
      prog[3][tid(1, j)] = I(MOB_ADDPTR, SRC_ZERO, SRC_ZERO, 0, 0, 0, 1);
      prog[3][tid(0, j)] = I(PE_MAC,     SRC_S,    SRC_R0,   0, 0, 0, 0);  // A row 0 . B
      prog[3][tid(3, j)] = I(PE_MAC,     SRC_R1,   SRC_N,    0, 0, 0, 0);  // A row 2 . B
      prog[3][tid(5, j)] = I(PE_MAC,     SRC_N,    SRC_S,    0, 0, 0, 0);  // A row 3 . B (wrap)
      prog[4][tid(2, j)] = I(PE_MAC,     SRC_N,    SRC_R0,   0, 0, 0, 0);  // A row 1 . B
    end
  endtask

  task automatic build_drain(int bm, int bn);
    clear_prog();
    for (int j = 0; j < GRID_COLS; j++) begin
      int cb;
      cb = C_BASE + (bm * 4) * N + bn * 4 + j;
      foreach (prog[0][t]) if (!row_is_mob(t / GRID_COLS))
        prog[0][t] = I(PE_ACCRD, SRC_ZERO, SRC_ZERO, 1, 0, 0, 0);
      prog[0][tid(1, j)] = I(MOB_SETPTR, SRC_ZERO, SRC_ZERO, 0, 0, 0, 0);
      prog[0][tid(4, j)] = I(MOB_SETPTR, SRC_ZERO, SRC_ZERO, 0, 0, 0, 0);
      prog[1][tid(1, j)] = I(MOB_STORE,  SRC_N, SRC_ZERO, 0, 0, 0, cb + 0 * N);
      prog[1][tid(4, j)] = I(MOB_STORE,  SRC_N, SRC_ZERO, 0, 0, 0, cb + 2 * N);
      prog[2][tid(1, j)] = I(MOB_STORE,  SRC_S, SRC_ZERO, 0, 0, 0, cb + 1 * N);
      prog[2][tid(4, j)] = I(MOB_STORE,  SRC_S, SRC_ZERO, 0, 0, 0, cb + 3 * N);
    end
  endtask

  task automatic run_kernel(int addr, int exp_steps, bit host_traffic);
    int s0;
    word_t d;
    s0 = n_steps;
    @(negedge clk);
    done_seen = 0;
    kernel_addr = 10'(addr); start = 1;
    @(negedge clk);
    start = 0;
    while (!done_seen) begin
      if (host_traffic && dut.run) l1_read(A_BASE + ($urandom % 64), d);
      else @(negedge clk);
    end
    n_kernels++;
    if (error) n_error++;
    checks++;
    if (n_steps - s0 != exp_steps)
      fail($sformatf("kernel at %0d ran %0d steps, expected %0d", addr, n_steps - s0, exp_steps));
  endtask

  // ---- data ----------------------------------------------------------------
  byte   A [M][K];
  byte   B [K][N];
  int    C [M][N];

  initial begin
    word_t d;
    longint cyc0;
    host_l1_req = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;

    for (int i = 0; i < M; i++) for (int k = 0; k < K; k++) A[i][k] = byte'($urandom);
    for (int k = 0; k < K; k++) for (int j = 0; j < N; j++) B[k][j] = byte'($urandom);
    for (int i = 0; i < M; i++)
      for (int j = 0; j < N; j++) begin
        C[i][j] = 0;
        for (int k = 0; k < K; k++) C[i][j] += int'(A[i][k]) * int'(B[k][j]);
      end
    for (int i = 0; i < M; i++)
      for (int kw = 0; kw < KW; kw++)
        l1_write(A_BASE + i * KW + kw,
                 {A[i][4*kw+3], A[i][4*kw+2], A[i][4*kw+1], A[i][4*kw]});
    for (int j = 0; j < N; j++)
      for (int kw = 0; kw < KW; kw++)
        l1_write(B_BASE + j * KW + kw,
                 {B[4*kw+3][j], B[4*kw+2][j], B[4*kw+1][j], B[4*kw][j]});

    cyc0 = $time;
    for (int bm = 0; bm < M / 4; bm++)
      for (int bn = 0; bn < N / 4; bn++) begin
        build_gemm(bm, bn);
        write_kernel(K1_ADDR, 5, KW, 1);
        build_drain(bm, bn);
        write_kernel(K2_ADDR, 3, 1, 0);
        run_kernel(K1_ADDR, 5 * KW, (bm + bn) % 2 == 0);
        run_kernel(K2_ADDR, 3, 0);
      end
    $display("GEMM %0dx%0dx%0d done in %0d cycles (host writes of descriptors included)",
             M, K, N, ($time - cyc0) / 10);

    for (int i = 0; i < M; i++)
      for (int j = 0; j < N; j++) begin
        l1_read(C_BASE + i * N + j, d);
        checks++;
        if (d !== word_t'(C[i][j])) fail($sformatf("C[%0d][%0d] = %0d, expected %0d", i, j, $signed(d), C[i][j]));
      end

    // a descriptor with zero steps is rejected
    ctx_write(BAD_ADDR, 32'h0001_0000);
    run_kernel(BAD_ADDR, 0, 0);

    $display("mechanisms: stall cycles %0d, host waits %0d, kernels %0d, clears %0d, wrap MACs %0d, errors %0d",
             n_stall, n_host_wait, n_kernels, n_clear, n_wrap, n_error);
    checks += 6;
    if (n_stall == 0)     fail("array never stalled");
    if (n_host_wait == 0) fail("host never waited for L1");
    if (n_kernels < 3)    fail("fewer than three kernels");
    if (n_clear == 0)     fail("clear never happened");
    if (n_wrap == 0)      fail("no transfer across the torus wrap");
    if (n_error != 1)     fail("bad descriptor not rejected exactly once");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
