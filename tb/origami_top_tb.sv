// origami_top_tb: end-to-end test of the ORIGAMI logic die at its evaluated
// size (8 reduction engines of 8 inputs, 64 optimization engines), with a
// vault memory model (9-cycle latency, random back-pressure) and a model of
// the out-of-memory master.
//
// One program, run once per training sample, holds two SGD steps:
//   A. Logistic regression with 128 features split block_level: the logic
//      die reduces features 0..63 (eight 8-input reductions whose partial
//      sums a ninth reduction adds up), hands its partial sum to the master
//      through S_psum/S_ready, waits on M_ready for the delta that the master
//      computes from the aggregated sum (master features 64..127, sigmoid,
//      minus label), then updates its 64 weights with the optimization
//      engines and writes them back.
//   B. One weight row of a 2D regression run wholly on the die, as a
//      partial_level partition does: reduction, sigmoid through the
//      non-linear table in memory, comparator against the label,
//      optimization of 64 weights, write-back.
// The testbench recomputes every updated weight independently in Q16.16 and
// compares memory after each sample; weights carry over between samples.
// It counts how often each mechanism occurred (split synchronization, flag
// wait, register interlock, memory wait and back-pressure, broadcast moves,
// table lookups, each engine type) and fails any that never did.
module origami_top_tb;
  import origami_pkg::*;

  localparam int unsigned NUM_RU = 8, K = 8, NUM_CU = 8, NUM_OU = 64;
  localparam regmap_t RM = make_regmap(NUM_RU, K, NUM_CU, NUM_OU);
  localparam int unsigned IA = $clog2(1024);
  localparam int unsigned SAMPLES = 4;

  // memory layout (word addresses)
  localparam int unsigned XA = 0, WA = 256, ONE = 500, MU = 501, YB = 502;
  localparam int unsigned XB = 1024, WB = 1152, SIG = 2048, SHIFT = 10;
  localparam word_t MU_VAL = 32'sh0000_2000;   // 0.125

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic imem_we, start, busy, done;
  logic [IA-1:0] imem_addr;
  instr_t imem_wdata;
  logic mem_req_valid, mem_req_ready, mem_rsp_valid;
  mem_req_t mem_req;
  word_t [MEM_LANES-1:0] mem_rsp_rdata;
  logic s_ready, m_ready, m_delta_we, m_ready_set;
  word_t s_psum, m_delta_wd, ext_psum, delta_in, agg;
  int unsigned rounds;

  origami_top dut (.*);

  hmc_vault_model #(.DEPTH(8192), .LAT(9), .BACKPRESSURE(1'b1)) u_mem (.clk, .rst_n,
    .req_valid(mem_req_valid), .req_ready(mem_req_ready), .req(mem_req),
    .rsp_valid(mem_rsp_valid), .rsp_rdata(mem_rsp_rdata));

  fpga_master_model #(.COMPUTE_LAT(20)) u_master (.clk, .rst_n, .s_ready, .s_psum,
    .ext_psum, .delta_in, .agg, .m_delta_we, .m_delta_wd, .m_ready_set, .rounds);

  // ---------------- independent reference arithmetic ----------------
  function automatic word_t ref_mul(word_t a, word_t b);
    longint signed p;
    p = longint'(a) * longint'(b);
    return word_t'(p / 65536 - ((p < 0 && (p % 65536) != 0) ? 1 : 0));
  endfunction

  word_t sig_tab [1024];
  function automatic word_t ref_sig(word_t v);
    longint signed i;
    i = longint'(v);
    i = (i >= 0) ? i / 1024 : -((-i + 1023) / 1024);
    i += 512;
    if (i < 0) i = 0;
    if (i > 1023) i = 1023;
    return sig_tab[i];
  endfunction

  word_t ya;                // label of sample in phase A (master side)
  word_t wa_ext [64];       // master's own weights (not updated here)
  assign delta_in = ref_sig(agg) - ya;

  // ---------------- mechanism counters ----------------
  int n_hazard, n_mem_wait, n_backpressure, n_flag_wait, n_bcast, n_lut;
  int n_ru, n_cu, n_ou, n_set, n_clr;
  always @(posedge clk) if (rst_n) begin
    n_hazard       += dut.u_ctrl.stall_hazard;
    n_mem_wait     += dut.u_ctrl.stall_mem;
    n_flag_wait    += dut.u_ctrl.stall_wait;
    n_backpressure += (mem_req_valid && !mem_req_ready);
    n_bcast        += (|dut.wr_en) && dut.u_ctrl.state == dut.u_ctrl.S_RUN && dut.u_ctrl.ins.bcast;
    n_bcast        += mem_rsp_valid && dut.u_ctrl.rd_bcast;
    n_lut          += dut.nl_start;
    n_ru           += $countones(dut.ru_start);
    n_cu           += $countones(dut.cu_start);
    n_ou           += $countones(dut.ou_start);
    n_set          += $countones(dut.flag_set);
    n_clr          += $countones(dut.flag_clr);
  end

  // ---------------- the program ----------------
  instr_t prog [$];
  task automatic reduce_64(int unsigned xb, int unsigned wb);
    for (int r = 0; r < 8; r++) begin
      prog.push_back(mk(OP_MOV_MR, 0, RM.ru_x + 8 * r, xb + 8 * r, 8));
      prog.push_back(mk(OP_MOV_MR, 0, RM.ru_w + 8 * r, wb + 8 * r, 8));
      prog.push_back(mk(OP_REDUCE, r));
    end
    // add the eight partial sums with reduction engine 0 (weights 1.0)
    prog.push_back(mk(OP_MOV_RR, RM.ru_sum, RM.ru_x, 0, 8));
    prog.push_back(mk(OP_MOV_MR, 0, RM.ru_w, ONE, 8, 1'b1));
    prog.push_back(mk(OP_REDUCE, 0));
  endtask
  task automatic optimize_64(int unsigned delta_reg, int unsigned xb, int unsigned wb);
    for (int g = 0; g < 8; g++) prog.push_back(mk(OP_MOV_RR, delta_reg, RM.ou_delta + 8 * g, 0, 8, 1'b1));
    for (int g = 0; g < 8; g++) prog.push_back(mk(OP_MOV_MR, 0, RM.ou_mu + 8 * g, MU, 8, 1'b1));
    for (int g = 0; g < 8; g++) prog.push_back(mk(OP_MOV_MR, 0, RM.ou_x + 8 * g, xb + 8 * g, 8));
    for (int g = 0; g < 8; g++) prog.push_back(mk(OP_MOV_MR, 0, RM.ou_w + 8 * g, wb + 8 * g, 8));
    for (int i = 0; i < 64; i++) prog.push_back(mk(OP_OPTIMIZE, i));
    for (int g = 0; g < 8; g++) prog.push_back(mk(OP_MOV_RM, RM.ou_out + 8 * g, 0, wb + 8 * g, 8));
  endtask
  task automatic build_program();
    // A: block_level split with the master
    reduce_64(XA, WA);
    prog.push_back(mk(OP_MOV_RR, RM.ru_sum, RM.s_psum));
    prog.push_back(mk(OP_SET, FLAG_S_READY));
    prog.push_back(mk(OP_WAIT, FLAG_M_READY));
    prog.push_back(mk(OP_MOV_RR, RM.m_delta, RM.cu_out + 7));   // keep delta in a spare register
    prog.push_back(mk(OP_CLR, FLAG_M_READY));
    prog.push_back(mk(OP_CLR, FLAG_S_READY));
    optimize_64(RM.m_delta, XA, WA);
    // B: whole subgraph on the die
    reduce_64(XB, WB);
    prog.push_back(mk(OP_LUT, RM.ru_sum, RM.cu_po, SIG, 1, 1'b0, SHIFT));
    prog.push_back(mk(OP_MOV_MR, 0, RM.cu_eo, YB, 1));
    prog.push_back(mk(OP_COMPARE, 0));
    optimize_64(RM.cu_out, XB, WB);
    prog.push_back(mk(OP_HALT));
  endtask

  function automatic word_t rnd(int unsigned span);
    return word_t'($urandom_range(0, 2 * span)) - word_t'(span);
  endfunction

  // reference weights
  word_t ref_wa [64], ref_wb [64];

  task automatic new_sample();
    for (int i = 0; i < 128; i++) u_mem.mem[XA + i] = rnd(32'h0001_0000);
    for (int i = 0; i < 64; i++)  u_mem.mem[XB + i] = rnd(32'h0001_0000);
    ya = $urandom_range(0, 1) ? 32'sh0001_0000 : 32'sh0;
    u_mem.mem[YB] = $urandom_range(0, 1) ? 32'sh0001_0000 : 32'sh0;
  endtask

  task automatic reference_step();
    word_t s, psum, aggr, d, sb;
    // A
    psum = 0;
    for (int r = 0; r < 8; r++) begin
      s = 0;
      for (int i = 0; i < 8; i++) s += ref_mul(u_mem.mem[XA + 8 * r + i], ref_wa[8 * r + i]);
      psum += ref_mul(s, 32'sh0001_0000);
    end
    s = 0;
    for (int i = 0; i < 64; i++) s += ref_mul(u_mem.mem[XA + 64 + i], wa_ext[i]);
    ext_psum = s;
    aggr = psum + s;
    d = ref_sig(aggr) - ya;
    for (int i = 0; i < 64; i++) ref_wa[i] = ref_wa[i] - ref_mul(ref_mul(d, u_mem.mem[XA + i]), MU_VAL);
    // B
    sb = 0;
    for (int r = 0; r < 8; r++) begin
      s = 0;
      for (int i = 0; i < 8; i++) s += ref_mul(u_mem.mem[XB + 8 * r + i], ref_wb[8 * r + i]);
      sb += ref_mul(s, 32'sh0001_0000);
    end
    d = ref_sig(sb) - u_mem.mem[YB];
    for (int i = 0; i < 64; i++) ref_wb[i] = ref_wb[i] - ref_mul(ref_mul(d, u_mem.mem[XB + i]), MU_VAL);
  endtask

  initial begin
    int t, total_cycles;
    imem_we = 0; imem_addr = 0; imem_wdata = '0; start = 0; ext_psum = 0; ya = 0;
    n_hazard = 0; n_mem_wait = 0; n_backpressure = 0; n_flag_wait = 0; n_bcast = 0; n_lut = 0;
    n_ru = 0; n_cu = 0; n_ou = 0; n_set = 0; n_clr = 0;
    // sigmoid table: entry i holds round(2^16 / (1 + exp(-(i - 512) / 64)))
    for (int i = 0; i < 1024; i++) begin
      real v;
      v = (real'(i) - 512.0) / 64.0;
      sig_tab[i] = word_t'($rtoi(65536.0 / (1.0 + $exp(-v)) + 0.5));
      u_mem.mem[SIG + i] = sig_tab[i];
    end
    u_mem.mem[ONE] = 32'sh0001_0000;
    u_mem.mem[MU]  = MU_VAL;
    for (int i = 0; i < 64; i++) begin
      ref_wa[i] = rnd(32'h0000_8000); u_mem.mem[WA + i] = ref_wa[i];
      wa_ext[i] = rnd(32'h0000_8000); u_mem.mem[WA + 64 + i] = wa_ext[i];
      ref_wb[i] = rnd(32'h0000_8000); u_mem.mem[WB + i] = ref_wb[i];
    end
    build_program();
    checks++;
    if (prog.size() > 1024) begin failures++; $display("program too long"); end
    repeat (2) @(negedge clk);
    rst_n = 1;
    foreach (prog[i]) begin
      imem_we = 1; imem_addr = IA'(i); imem_wdata = prog[i]; @(negedge clk);
    end
    imem_we = 0;
    $display("program: %0d instructions", prog.size());
    total_cycles = 0;
    for (int n = 0; n < SAMPLES; n++) begin
      int bad;
      new_sample();
      reference_step();
      start = 1; @(negedge clk); start = 0;
      t = 0;
      while (!done && t < 20000) begin @(negedge clk); t++; end
      total_cycles += t;
      checks++;
      if (!done) begin failures++; $display("sample %0d did not finish", n); end
      checks++;
      if (s_psum + ext_psum != agg) begin failures++; $display("master aggregate mismatch"); end
      bad = 0;
      for (int i = 0; i < 64; i++) begin
        checks += 2;
        if (u_mem.mem[WA + i] !== ref_wa[i]) begin
          failures++; bad++;
          if (bad < 5) $display("sample %0d: wa[%0d] = %h, expected %h", n, i, u_mem.mem[WA + i], ref_wa[i]);
        end
        if (u_mem.mem[WB + i] !== ref_wb[i]) begin
          failures++; bad++;
          if (bad < 5) $display("sample %0d: wb[%0d] = %h, expected %h", n, i, u_mem.mem[WB + i], ref_wb[i]);
        end
      end
      $display("sample %0d: %0d cycles", n, t);
    end
    begin : mechanisms
      checks += 12;
      if (u_master.rounds != SAMPLES)  begin failures++; $display("master rounds %0d", u_master.rounds); end
      if (n_flag_wait == 0)    begin failures++; $display("flag wait never happened"); end
      if (n_hazard == 0)       begin failures++; $display("register interlock never happened"); end
      if (n_mem_wait == 0)     begin failures++; $display("memory wait never happened"); end
      if (n_backpressure == 0) begin failures++; $display("back-pressure never happened"); end
      if (n_bcast == 0)        begin failures++; $display("broadcast move never happened"); end
      if (n_lut != SAMPLES)    begin failures++; $display("table lookups %0d", n_lut); end
      if (n_ru != 18 * SAMPLES) begin failures++; $display("reductions %0d", n_ru); end
      if (n_cu != SAMPLES)     begin failures++; $display("comparisons %0d", n_cu); end
      if (n_ou != 128 * SAMPLES) begin failures++; $display("optimizations %0d", n_ou); end
      if (n_set != SAMPLES)    begin failures++; $display("flag sets %0d", n_set); end
      if (n_clr != 2 * SAMPLES) begin failures++; $display("flag clears %0d", n_clr); end
    end
    $display("mechanisms: split rounds=%0d flag-wait cycles=%0d interlock=%0d memory-wait=%0d back-pressure=%0d broadcast=%0d lookups=%0d",
             u_master.rounds, n_flag_wait, n_hazard, n_mem_wait, n_backpressure, n_bcast, n_lut);
    $display("engine operations: reduction=%0d comparator=%0d optimization=%0d; %0d cycles for %0d samples",
             n_ru, n_cu, n_ou, total_cycles, SAMPLES);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
