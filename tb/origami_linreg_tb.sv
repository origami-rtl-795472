// origami_linreg_tb: linear-regression training on the ORIGAMI logic die.
//
// Runs the LinReg pattern sequence (reduction, comparator, optimization; no
// non-linear step) for a 64-feature model held entirely by the die, which is
// what the die executes for its share of a partitioned model. Targets come
// from a fixed hidden weight vector, so SGD should drive the error down.
// For every sample the program is restarted on new data in memory; the
// testbench recomputes the weights independently in Q16.16 and compares
// them with memory, and at the end checks that the mean squared error over
// the training set has fallen to under a tenth of its starting value.
module origami_linreg_tb;
  import origami_pkg::*;

  localparam int unsigned NUM_RU = 8, K = 8, NUM_CU = 8, NUM_OU = 64;
  localparam regmap_t RM = make_regmap(NUM_RU, K, NUM_CU, NUM_OU);
  localparam int unsigned IA = $clog2(1024);
  localparam int unsigned NSET = 16, EPOCHS = 6;
  localparam int unsigned X = 0, W = 256, ONE = 500, MU = 501, Y = 502;
  localparam word_t MU_VAL = 32'sh0000_4000;   // 1/4

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic imem_we, start, busy, done;
  logic [IA-1:0] imem_addr;
  instr_t imem_wdata;
  logic mem_req_valid, mem_req_ready, mem_rsp_valid;
  mem_req_t mem_req;
  word_t [MEM_LANES-1:0] mem_rsp_rdata;
  logic s_ready, m_ready;
  word_t s_psum;

  origami_top dut (.clk, .rst_n, .imem_we, .imem_addr, .imem_wdata, .start, .busy, .done,
    .mem_req_valid, .mem_req_ready, .mem_req, .mem_rsp_valid, .mem_rsp_rdata,
    .s_ready, .s_psum, .m_ready, .m_delta_we(1'b0), .m_delta_wd('0), .m_ready_set(1'b0));

  hmc_vault_model #(.DEPTH(4096), .LAT(9), .BACKPRESSURE(1'b0)) u_mem (.clk, .rst_n,
    .req_valid(mem_req_valid), .req_ready(mem_req_ready), .req(mem_req),
    .rsp_valid(mem_rsp_valid), .rsp_rdata(mem_rsp_rdata));

  function automatic word_t ref_mul(word_t a, word_t b);
    longint signed p;
    p = longint'(a) * longint'(b);
    return word_t'(p / 65536 - ((p < 0 && (p % 65536) != 0) ? 1 : 0));
  endfunction

  word_t xs [NSET][64];
  word_t ys [NSET];
  word_t w_hidden [64];
  word_t ref_w [64];

  function automatic word_t predict(int s);
    word_t acc, part;
    acc = 0;
    for (int r = 0; r < 8; r++) begin
      part = 0;
      for (int i = 0; i < 8; i++) part += ref_mul(xs[s][8 * r + i], ref_w[8 * r + i]);
      acc += ref_mul(part, 32'sh0001_0000);
    end
    return acc;
  endfunction

  function automatic real mse();
    real e;
    e = 0.0;
    for (int s = 0; s < NSET; s++) begin
      real d;
      d = real'(predict(s) - ys[s]) / 65536.0;
      e += d * d;
    end
    return e / NSET;
  endfunction

  instr_t prog [$];
  task automatic build_program();
    for (int r = 0; r < 8; r++) begin
      prog.push_back(mk(OP_MOV_MR, 0, RM.ru_x + 8 * r, X + 8 * r, 8));
      prog.push_back(mk(OP_MOV_MR, 0, RM.ru_w + 8 * r, W + 8 * r, 8));
      prog.push_back(mk(OP_REDUCE, r));
    end
    prog.push_back(mk(OP_MOV_RR, RM.ru_sum, RM.ru_x, 0, 8));
    prog.push_back(mk(OP_MOV_MR, 0, RM.ru_w, ONE, 8, 1'b1));
    prog.push_back(mk(OP_REDUCE, 0));
    prog.push_back(mk(OP_MOV_RR, RM.ru_sum, RM.cu_po + 1));
    prog.push_back(mk(OP_MOV_MR, 0, RM.cu_eo + 1, Y, 1));
    prog.push_back(mk(OP_COMPARE, 1));
    for (int g = 0; g < 8; g++) prog.push_back(mk(OP_MOV_RR, RM.cu_out + 1, RM.ou_delta + 8 * g, 0, 8, 1'b1));
    for (int g = 0; g < 8; g++) prog.push_back(mk(OP_MOV_MR, 0, RM.ou_mu + 8 * g, MU, 8, 1'b1));
    for (int g = 0; g < 8; g++) prog.push_back(mk(OP_MOV_MR, 0, RM.ou_x + 8 * g, X + 8 * g, 8));
    for (int g = 0; g < 8; g++) prog.push_back(mk(OP_MOV_MR, 0, RM.ou_w + 8 * g, W + 8 * g, 8));
    for (int i = 0; i < 64; i++) prog.push_back(mk(OP_OPTIMIZE, i));
    for (int g = 0; g < 8; g++) prog.push_back(mk(OP_MOV_RM, RM.ou_out + 8 * g, 0, W + 8 * g, 8));
    prog.push_back(mk(OP_HALT));
  endtask

  initial begin
    real e0, e1;
    int t, bad;
    imem_we = 0; imem_addr = 0; imem_wdata = '0; start = 0;
    for (int i = 0; i < 64; i++) begin
      w_hidden[i] = word_t'($urandom_range(0, 32'h0001_0000)) - 32'sh0000_8000;
      ref_w[i] = 0;
      u_mem.mem[W + i] = 0;
    end
    for (int s = 0; s < NSET; s++) begin
      word_t acc;
      acc = 0;
      for (int i = 0; i < 64; i++) begin
        xs[s][i] = word_t'($urandom_range(0, 32'h0000_8000)) - 32'sh0000_4000;  // [-0.25, 0.25]
        acc += ref_mul(xs[s][i], w_hidden[i]);
      end
      ys[s] = acc;
    end
    u_mem.mem[ONE] = 32'sh0001_0000;
    u_mem.mem[MU]  = MU_VAL;
    build_program();
    repeat (2) @(negedge clk);
    rst_n = 1;
    foreach (prog[i]) begin
      imem_we = 1; imem_addr = IA'(i); imem_wdata = prog[i]; @(negedge clk);
    end
    imem_we = 0;
    e0 = mse();
    bad = 0;
    for (int ep = 0; ep < EPOCHS; ep++) begin
      for (int s = 0; s < NSET; s++) begin
        word_t d;
        for (int i = 0; i < 64; i++) u_mem.mem[X + i] = xs[s][i];
        u_mem.mem[Y] = ys[s];
        d = predict(s) - ys[s];
        for (int i = 0; i < 64; i++) ref_w[i] = ref_w[i] - ref_mul(ref_mul(d, xs[s][i]), MU_VAL);
        start = 1; @(negedge clk); start = 0;
        t = 0;
        while (!done && t < 20000) begin @(negedge clk); t++; end
        checks++;
        if (!done) begin failures++; $display("sample did not finish"); end
        for (int i = 0; i < 64; i++) begin
          checks++;
          if (u_mem.mem[W + i] !== ref_w[i]) begin
            failures++; bad++;
            if (bad < 5) $display("epoch %0d sample %0d: w[%0d] = %h, expected %h", ep, s, i, u_mem.mem[W + i], ref_w[i]);
          end
        end
      end
      $display("epoch %0d: mean squared error %f", ep, mse());
    end
    e1 = mse();
    checks++;
    if (!(e1 < 0.1 * e0)) begin failures++; $display("error did not fall: %f -> %f", e0, e1); end
    $display("mean squared error %f -> %f over %0d epochs of %0d samples", e0, e1, EPOCHS, NSET);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (500000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
