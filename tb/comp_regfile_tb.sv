// comp_regfile_tb: self-checking test of the computation/synchronization
// register file at the evaluated size (8 reduction engines of 8 inputs,
// 8 comparators, 64 optimization engines: 482 words).
//
// Keeps a reference copy of every register and, over many random cycles,
// drives the controller lanes, engine results, master M_delta writes and
// flag set/clear strobes at once, then compares every register and both
// flags. Collisions are resolved in the reference by the documented
// priorities: engine result over master over controller, set over clear.
module comp_regfile_tb;
  import origami_pkg::*;

  localparam int unsigned NUM_RU = 8, K = 8, NUM_CU = 8, NUM_OU = 64;
  localparam regmap_t RM = make_regmap(NUM_RU, K, NUM_CU, NUM_OU);
  localparam int unsigned NREG = RM.nreg;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [MEM_LANES-1:0]             wr_en;
  logic [MEM_LANES-1:0][REG_AW-1:0] wr_addr;
  word_t [MEM_LANES-1:0]            wr_data;
  logic  [NUM_RU-1:0] ru_valid;  word_t [NUM_RU-1:0] ru_sum;
  logic  [NUM_CU-1:0] cu_valid;  word_t [NUM_CU-1:0] cu_delta;
  logic  [NUM_OU-1:0] ou_valid;  word_t [NUM_OU-1:0] ou_w_new;
  logic  m_delta_we, m_ready_set;
  word_t m_delta_wd;
  logic [1:0] flag_set, flag_clr, flags;
  word_t [NREG-1:0] regs;

  comp_regfile #(.NUM_RU(NUM_RU), .K(K), .NUM_CU(NUM_CU), .NUM_OU(NUM_OU)) dut (.*);

  word_t      ref_regs [NREG];
  logic [1:0] ref_flags;

  task automatic drive_random();
    wr_en = '0; ru_valid = '0; cu_valid = '0; ou_valid = '0;
    for (int l = 0; l < MEM_LANES; l++) begin
      wr_en[l]   = ($urandom_range(0, 3) == 0);
      wr_addr[l] = REG_AW'($urandom_range(0, NREG - 1));
      wr_data[l] = word_t'($urandom);
    end
    for (int i = 0; i < NUM_RU; i++) begin ru_valid[i] = ($urandom_range(0, 7) == 0); ru_sum[i] = word_t'($urandom); end
    for (int i = 0; i < NUM_CU; i++) begin cu_valid[i] = ($urandom_range(0, 7) == 0); cu_delta[i] = word_t'($urandom); end
    for (int i = 0; i < NUM_OU; i++) begin ou_valid[i] = ($urandom_range(0, 15) == 0); ou_w_new[i] = word_t'($urandom); end
    m_delta_we  = ($urandom_range(0, 7) == 0);
    m_delta_wd  = word_t'($urandom);
    m_ready_set = ($urandom_range(0, 7) == 0);
    flag_set    = 2'($urandom);
    flag_clr    = 2'($urandom);
    // occasionally make two lanes hit the same register as an engine output
    if ($urandom_range(0, 3) == 0) begin
      wr_en[0] = 1'b1; wr_addr[0] = REG_AW'(RM.ru_sum + 2); ru_valid[2] = 1'b1;
    end
  endtask

  task automatic update_ref();
    for (int l = 0; l < MEM_LANES; l++)
      if (wr_en[l] && int'(wr_addr[l]) < NREG) ref_regs[wr_addr[l]] = wr_data[l];
    if (m_delta_we) ref_regs[RM.m_delta] = m_delta_wd;
    for (int i = 0; i < NUM_RU; i++) if (ru_valid[i]) ref_regs[RM.ru_sum + i] = ru_sum[i];
    for (int i = 0; i < NUM_CU; i++) if (cu_valid[i]) ref_regs[RM.cu_out + i] = cu_delta[i];
    for (int i = 0; i < NUM_OU; i++) if (ou_valid[i]) ref_regs[RM.ou_out + i] = ou_w_new[i];
    if (flag_set[0] || m_ready_set) ref_flags[0] = 1'b1; else if (flag_clr[0]) ref_flags[0] = 1'b0;
    if (flag_set[1])                ref_flags[1] = 1'b1; else if (flag_clr[1]) ref_flags[1] = 1'b0;
  endtask

  task automatic compare();
    int bad;
    bad = 0;
    for (int r = 0; r < NREG; r++) if (regs[r] !== ref_regs[r]) bad++;
    checks += 2;
    if (bad != 0) begin failures++; $display("%0d registers differ", bad); end
    if (flags !== ref_flags) begin failures++; $display("flags %b expected %b", flags, ref_flags); end
  endtask

  initial begin
    wr_en = '0; wr_addr = '0; wr_data = '0; ru_valid = '0; ru_sum = '0; cu_valid = '0;
    cu_delta = '0; ou_valid = '0; ou_w_new = '0; m_delta_we = 0; m_delta_wd = 0;
    m_ready_set = 0; flag_set = 0; flag_clr = 0;
    for (int r = 0; r < NREG; r++) ref_regs[r] = '0;
    ref_flags = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    compare();  // reset state
    if (NREG != 482) begin failures++; $display("register map has %0d words", NREG); end
    checks++;
    for (int n = 0; n < 2000; n++) begin
      drive_random();
      update_ref();
      @(negedge clk);
      compare();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
