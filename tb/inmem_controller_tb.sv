// inmem_controller_tb: self-checking test of the in-memory controller.
//
// The controller runs a short program against the real register file, the
// real non-linear address generator, a vault memory model with back-pressure
// and stand-in compute engines that answer with marked values after the
// engines' real pipeline delays (4 cycles for a reduction, 3 for an
// optimization, same cycle for a comparator). The program exercises every
// instruction: burst and broadcast moves in all three directions, the three
// compute instructions, a table lookup, set/wait/clr of both flags and halt.
// It checks register and memory contents, the engine start pulses, and that
// the engine-busy stall, the register interlock, the memory wait and the
// flag wait each happened. The program is then run a second time.
module inmem_controller_tb;
  import origami_pkg::*;

  localparam int unsigned NUM_RU = 8, K = 8, NUM_CU = 8, NUM_OU = 64, IMEM_DEPTH = 1024;
  localparam regmap_t RM = make_regmap(NUM_RU, K, NUM_CU, NUM_OU);
  localparam int unsigned NREG = RM.nreg;
  localparam int unsigned IA = $clog2(IMEM_DEPTH);

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  task automatic expect_eq(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin failures++; $display("%s = %h, expected %h", what, got, exp); end
  endtask

  logic imem_we, start, busy, done;
  logic [IA-1:0] imem_addr;
  instr_t imem_wdata;
  word_t [NREG-1:0] regs;
  logic [1:0] flags, flag_set, flag_clr;
  logic [MEM_LANES-1:0] wr_en;
  logic [MEM_LANES-1:0][REG_AW-1:0] wr_addr;
  word_t [MEM_LANES-1:0] wr_data;
  logic [NUM_RU-1:0] ru_start, ru_valid;
  logic [NUM_CU-1:0] cu_start, cu_valid;
  logic [NUM_OU-1:0] ou_start, ou_valid;
  word_t [NUM_RU-1:0] ru_sum;
  word_t [NUM_CU-1:0] cu_delta;
  word_t [NUM_OU-1:0] ou_w_new;
  logic nl_start, nl_valid;
  word_t nl_operand;
  logic [4:0] nl_shift;
  logic [ADDR_W-1:0] nl_base, nl_addr;
  logic mem_req_valid, mem_req_ready, mem_rsp_valid;
  mem_req_t mem_req;
  word_t [MEM_LANES-1:0] mem_rsp_rdata;
  logic m_delta_we, m_ready_set;
  word_t m_delta_wd;

  inmem_controller #(.NUM_RU(NUM_RU), .K(K), .NUM_CU(NUM_CU), .NUM_OU(NUM_OU), .IMEM_DEPTH(IMEM_DEPTH)) dut (.*);
  comp_regfile #(.NUM_RU(NUM_RU), .K(K), .NUM_CU(NUM_CU), .NUM_OU(NUM_OU)) u_regs (.*);
  nonlinear_engine #(.LUT_BITS(10)) u_nl (.clk, .rst_n, .start(nl_start), .operand(nl_operand),
    .shift(nl_shift), .base(nl_base), .valid(nl_valid), .addr(nl_addr));
  hmc_vault_model #(.DEPTH(4096), .LAT(9), .BACKPRESSURE(1'b1)) u_mem (.clk, .rst_n,
    .req_valid(mem_req_valid), .req_ready(mem_req_ready), .req(mem_req),
    .rsp_valid(mem_rsp_valid), .rsp_rdata(mem_rsp_rdata));

  // stand-in engines
  logic [3:0][NUM_RU-1:0] ru_pipe;
  logic [2:0][NUM_OU-1:0] ou_pipe;
  int ru_starts [NUM_RU];
  int ou_starts, cu_starts;
  always_ff @(posedge clk) begin
    ru_pipe <= {ru_pipe[2:0], ru_start};
    ou_pipe <= {ou_pipe[1:0], ou_start};
    for (int i = 0; i < NUM_RU; i++) if (ru_start[i]) ru_starts[i]++;
    if (|ou_start) ou_starts++;
    if (|cu_start) cu_starts++;
  end
  assign ru_valid = rst_n ? ru_pipe[3] : '0;
  assign ou_valid = rst_n ? ou_pipe[2] : '0;
  assign cu_valid = cu_start;
  for (genvar i = 0; i < NUM_RU; i++) assign ru_sum[i] = 32'h1000_0000 + i * 16 + ru_starts[i];
  for (genvar i = 0; i < NUM_OU; i++) assign ou_w_new[i] = 32'h2000_0000 + i;
  for (genvar i = 0; i < NUM_CU; i++) assign cu_delta[i] = regs[RM.cu_po + i] - regs[RM.cu_eo + i];

  // master stand-in: sets M_ready some cycles after S_ready rises
  int s_seen;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      m_delta_we <= 0; m_ready_set <= 0; m_delta_wd <= 0; s_seen <= 0;
    end else begin
      m_delta_we <= 0; m_ready_set <= 0;
      if (flags[FLAG_S_READY] && !flags[FLAG_M_READY]) begin
        s_seen <= s_seen + 1;
        if (s_seen == 12) begin
          m_delta_we <= 1; m_delta_wd <= 32'sh0000_4000; m_ready_set <= 1;
        end
      end else s_seen <= 0;
    end
  end

  int n_hazard, n_engine, n_mem, n_wait;
  always @(posedge clk) if (rst_n) begin
    n_hazard += dut.stall_hazard;
    n_engine += dut.stall_engine;
    n_mem    += dut.stall_mem;
    n_wait   += dut.stall_wait;
  end

  instr_t prog [$];
  initial begin
    prog.push_back(mk(OP_MOV_MR, 0, RM.ru_x, 100, 8));
    prog.push_back(mk(OP_MOV_MR, 0, RM.ou_mu, 200, 8, 1'b1));
    prog.push_back(mk(OP_REDUCE, 3));
    prog.push_back(mk(OP_REDUCE, 3));                          // engine busy
    prog.push_back(mk(OP_MOV_RR, RM.ru_sum + 3, RM.s_psum));    // interlock
    prog.push_back(mk(OP_MOV_RM, RM.ru_x, 0, 300, 8));
    prog.push_back(mk(OP_SET, FLAG_S_READY));
    prog.push_back(mk(OP_WAIT, FLAG_M_READY));                 // flag wait
    prog.push_back(mk(OP_MOV_RR, RM.m_delta, RM.ou_delta, 0, 8, 1'b1));
    prog.push_back(mk(OP_CLR, FLAG_M_READY));
    prog.push_back(mk(OP_CLR, FLAG_S_READY));
    prog.push_back(mk(OP_OPTIMIZE, 5));
    prog.push_back(mk(OP_MOV_RM, RM.ou_out + 5, 0, 400, 1));   // interlock
    prog.push_back(mk(OP_MOV_MR, 0, RM.cu_po + 2, 110, 1));
    prog.push_back(mk(OP_MOV_MR, 0, RM.cu_eo + 2, 111, 1));
    prog.push_back(mk(OP_COMPARE, 2));
    prog.push_back(mk(OP_LUT, RM.ru_x + 1, RM.cu_po, 1000, 1, 1'b0, 10));
    prog.push_back(mk(OP_MOV_RM, RM.cu_out + 2, 0, 401, 1));
    prog.push_back(mk(OP_NOP));
    prog.push_back(mk(OP_HALT));
    prog.push_back(mk(OP_SET, FLAG_S_READY));                  // never reached
  end

  task automatic run_once(int pass);
    int t;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    t = 0;
    while (!done && t < 3000) begin @(negedge clk); t++; end
    expect_eq("done", done, 1);
    expect_eq("busy after halt", busy, 0);
    for (int i = 0; i < 8; i++) expect_eq("ru_x", regs[RM.ru_x + i], u_mem.mem[100 + i]);
    for (int i = 0; i < 8; i++) expect_eq("ou_mu bcast", regs[RM.ou_mu + i], u_mem.mem[200]);
    expect_eq("ou_mu lane 8 untouched", regs[RM.ou_mu + 8], 0);
    expect_eq("s_psum from second reduce", regs[RM.s_psum], 32'h1000_0000 + 3 * 16 + 2 * pass);
    for (int i = 0; i < 8; i++) expect_eq("mov reg->mem", u_mem.mem[300 + i], u_mem.mem[100 + i]);
    for (int i = 0; i < 8; i++) expect_eq("delta bcast", regs[RM.ou_delta + i], 32'h4000);
    expect_eq("optimization result stored", u_mem.mem[400], 32'h2000_0005);
    expect_eq("comparator result stored", u_mem.mem[401], u_mem.mem[110] - u_mem.mem[111]);
    // LUT: operand mem[101] = 1.5 -> index 512 + 96 = 608
    expect_eq("table lookup", regs[RM.cu_po], u_mem.mem[1000 + 608]);
    expect_eq("flags cleared", flags, 0);
    expect_eq("reduce starts", ru_starts[3], 2 * pass);
    expect_eq("other engines idle", ru_starts[2], 0);
    expect_eq("optimize starts", ou_starts, pass);
    expect_eq("compare starts", cu_starts, pass);
  endtask

  initial begin
    imem_we = 0; imem_addr = 0; imem_wdata = '0; start = 0;
    for (int i = 0; i < NUM_RU; i++) ru_starts[i] = 0;
    ou_starts = 0; cu_starts = 0; n_hazard = 0; n_engine = 0; n_mem = 0; n_wait = 0;
    ru_pipe = '0; ou_pipe = '0;
    for (int i = 0; i < 8; i++) u_mem.mem[100 + i] = 32'sh0001_8000 + i;   // 1.5, ...
    u_mem.mem[110] = 32'sh0003_0000; u_mem.mem[111] = 32'sh0001_0000;
    u_mem.mem[200] = 32'sh0000_0100;
    for (int i = 0; i < 1024; i++) u_mem.mem[1000 + i] = 32'h5000_0000 + i;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < prog.size(); i++) begin
      imem_we = 1; imem_addr = IA'(i); imem_wdata = prog[i]; @(negedge clk);
    end
    imem_we = 0;
    expect_eq("idle before start", busy, 0);
    run_once(1);
    run_once(2);
    expect_eq("interlock stall seen", n_hazard > 0, 1);
    expect_eq("engine busy stall seen", n_engine > 0, 1);
    expect_eq("memory stall seen", n_mem > 0, 1);
    expect_eq("flag wait stall seen", n_wait > 0, 1);
    $display("stalls: interlock=%0d engine=%0d memory=%0d wait=%0d", n_hazard, n_engine, n_mem, n_wait);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
