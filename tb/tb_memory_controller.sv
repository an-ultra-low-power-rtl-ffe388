// tb_memory_controller: self-checking test of the memory controller.
//
// A context-memory model here (one-cycle read) holds two descriptors. For
// each, the test pulses `start` and checks every configuration write (tile,
// slot and word, in step-then-tile order), the configuration time of
// 24*STEPS + 3 cycles, the `clear` pulse when asked for, the sequence of `pc`
// values over ITERS iterations while `step_done` is withheld at random (as
// array stalls do), and the final `done`. A third descriptor with STEPS = 0
// must end with `error`.
module tb_memory_controller;
  import cgra_pkg::*;

  logic        clk = 0, rst_n = 0;
  logic        start = 0, busy, done, error;
  logic [9:0]  kernel_addr = 0;
  logic        ctx_en;
  logic [9:0]  ctx_addr;
  word_t       ctx_rdata;
  cfg_wr_t     cfg;
  logic        clear, run, step_done = 0;
  logic [3:0]  pc;
  word_t       cmem [1024];
  int checks = 0, failures = 0;
  int n_cfg, n_clear, n_steps, cfg_first, cfg_last, stalls;
  int exp_pc;

  memory_controller #(.CTX_AW(10), .NSLOTS(16)) dut (
    .clk, .rst_n, .start, .kernel_addr, .busy, .done, .error,
    .ctx_en, .ctx_addr, .ctx_rdata, .cfg, .clear, .run, .pc, .step_done);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (ctx_en) ctx_rdata <= cmem[ctx_addr];

  task automatic fail(string s);
    failures++;
    $display("FAIL %s", s);
  endtask

  function automatic word_t body(int base, int k);
    return word_t'((base << 16) ^ (k * 32'h01000193) ^ 32'h00c0ffee);
  endfunction

  int base_g, steps_g, cyc;

  // monitor: configuration writes, clear, pc sequence
  always @(posedge clk) if (rst_n) begin
    cyc++;
    if (cfg.valid) begin
      int k;
      k = n_cfg;
      checks++;
      if (cfg.tile != 5'(k % N_TILES) || cfg.slot != 4'(k / N_TILES) || cfg.data != body(base_g, k))
        fail($sformatf("cfg write %0d: tile %0d slot %0d data %h", k, cfg.tile, cfg.slot, cfg.data));
      if (n_cfg == 0) cfg_first = cyc;
      cfg_last = cyc;
      n_cfg++;
    end
    if (clear) n_clear++;
    if (run && step_done) begin
      checks++;
      if (32'(pc) != exp_pc) fail($sformatf("pc %0d expected %0d", pc, exp_pc));
      exp_pc = (exp_pc + 1) % steps_g;
      n_steps++;
    end
    if (run && !step_done) stalls++;
  end
  always @(negedge clk) step_done <= ($urandom % 3) != 0;

  task automatic kernel(int base, int steps, int iters, bit clr, bit bad);
    int t_start;
    base_g = base; steps_g = steps;
    n_cfg = 0; n_clear = 0; n_steps = 0; exp_pc = 0;
    cmem[base] = word_t'({16'(iters), 7'd0, clr, 3'd0, 5'(steps)});
    for (int k = 0; k < steps * N_TILES; k++) cmem[base + 1 + k] = body(base, k);
    @(negedge clk);
    kernel_addr = 10'(base); start = 1;
    t_start = cyc;
    @(negedge clk);
    start = 0;
    while (!done) @(negedge clk);
    checks++;
    if (error != bad) fail($sformatf("error flag %0d", error));
    if (!bad) begin
      checks += 4;
      if (n_cfg != steps * N_TILES) fail($sformatf("%0d cfg writes", n_cfg));
      if (cfg_last - t_start != steps * N_TILES + 3)
        fail($sformatf("configuration took %0d cycles", cfg_last - t_start + 1));
      if (n_clear != (clr ? 1 : 0)) fail($sformatf("%0d clear pulses", n_clear));
      if (n_steps != steps * iters) fail($sformatf("%0d steps run", n_steps));
    end
    @(negedge clk);
    checks++;
    if (busy) fail("still busy after done");
  endtask

  initial begin
    cyc = 0; stalls = 0;
    for (int i = 0; i < 1024; i++) cmem[i] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    kernel(0, 3, 5, 1, 0);
    kernel(300, 16, 2, 0, 0);
    kernel(800, 0, 2, 0, 1);
    checks++;
    if (stalls == 0) fail("step_done never withheld");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
