// origami_top: the ORIGAMI accelerator on the logic die of a 3D-stacked memory.
//
// ORIGAMI trains machine-learning models with two platforms at once: small
// heterogeneous compute engines on the memory's logic die, and an
// out-of-memory platform (an FPGA on the active die) fed with the rest of
// the memory bandwidth. This module is the logic-die side in the configuration
// the paper evaluates: NUM_RU = 8 reduction engines of K = 8 multipliers
// (8/RU), NUM_OU = 64 optimization engines, comparator engines, the address
// generator of the non-linear engine (whose tables live in DRAM), the
// computation/synchronization registers, and the in-memory controller that
// runs the compiler's static instruction schedule.
//
// Ports:
//   imem_*, start, busy, done   program load and run control (from the host)
//   mem_*                       one vault memory port: request beats of up
//                               to MEM_LANES words, in-order read responses
//   s_ready, s_psum             block_level synchronization, read by the
//                               master: the logic die's partial sum is ready
//   m_delta_we/_wd, m_ready_set the master writes the aggregated delta into
//                               M_delta and sets M_ready
//   m_ready                     M_ready flag as seen on the logic die
// The number of comparator engines (NUM_CU) is not given by the paper and is
// this design's choice (one per reduction engine), as is everything about
// the memory port other than its purpose.
module origami_top
  import origami_pkg::*;
#(
  parameter int unsigned NUM_RU     = 8,
  parameter int unsigned K          = 8,
  parameter int unsigned NUM_CU     = 8,
  parameter int unsigned NUM_OU     = 64,
  parameter int unsigned IMEM_DEPTH = 1024,
  parameter int unsigned LUT_BITS   = 10,
  localparam regmap_t    RM         = make_regmap(NUM_RU, K, NUM_CU, NUM_OU),
  localparam int unsigned NREG      = RM.nreg,
  localparam int unsigned IA        = $clog2(IMEM_DEPTH)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  imem_we,
  input  logic [IA-1:0]         imem_addr,
  input  instr_t                imem_wdata,
  input  logic                  start,
  output logic                  busy,
  output logic                  done,
  output logic                  mem_req_valid,
  input  logic                  mem_req_ready,
  output mem_req_t              mem_req,
  input  logic                  mem_rsp_valid,
  input  word_t [MEM_LANES-1:0] mem_rsp_rdata,
  output logic                  s_ready,
  output word_t                 s_psum,
  output logic                  m_ready,
  input  logic                  m_delta_we,
  input  word_t                 m_delta_wd,
  input  logic                  m_ready_set
);

  word_t [NREG-1:0]                 regs;
  logic  [1:0]                      flags;
  logic  [MEM_LANES-1:0]            wr_en;
  logic  [MEM_LANES-1:0][REG_AW-1:0] wr_addr;
  word_t [MEM_LANES-1:0]            wr_data;
  logic  [1:0]                      flag_set, flag_clr;

  logic  [NUM_RU-1:0] ru_start, ru_valid;
  word_t [NUM_RU-1:0] ru_sum;
  logic  [NUM_CU-1:0] cu_start, cu_valid;
  word_t [NUM_CU-1:0] cu_delta;
  logic  [NUM_OU-1:0] ou_start, ou_valid;
  word_t [NUM_OU-1:0] ou_w_new;

  logic              nl_start, nl_valid;
  word_t             nl_operand;
  logic [4:0]        nl_shift;
  logic [ADDR_W-1:0] nl_base, nl_addr;

  inmem_controller #(
    .NUM_RU(NUM_RU), .K(K), .NUM_CU(NUM_CU), .NUM_OU(NUM_OU), .IMEM_DEPTH(IMEM_DEPTH)
  ) u_ctrl (
    .clk, .rst_n, .imem_we, .imem_addr, .imem_wdata, .start, .busy, .done,
    .regs, .flags, .wr_en, .wr_addr, .wr_data, .flag_set, .flag_clr,
    .ru_start, .ru_valid, .cu_start, .cu_valid, .ou_start, .ou_valid,
    .nl_start, .nl_operand, .nl_shift, .nl_base, .nl_valid, .nl_addr,
    .mem_req_valid, .mem_req_ready, .mem_req, .mem_rsp_valid, .mem_rsp_rdata
  );

  comp_regfile #(
    .NUM_RU(NUM_RU), .K(K), .NUM_CU(NUM_CU), .NUM_OU(NUM_OU)
  ) u_regs (
    .clk, .rst_n, .wr_en, .wr_addr, .wr_data,
    .ru_valid, .ru_sum, .cu_valid, .cu_delta, .ou_valid, .ou_w_new,
    .m_delta_we, .m_delta_wd, .m_ready_set,
    .flag_set, .flag_clr, .flags, .regs
  );

  for (genvar i = 0; i < NUM_RU; i++) begin : g_ru
    word_t [K-1:0] x, w;
    for (genvar j = 0; j < K; j++) begin : g_in
      assign x[j] = regs[RM.ru_x + i*K + j];
      assign w[j] = regs[RM.ru_w + i*K + j];
    end
    reduction_engine #(.K(K)) u_ru (
      .clk, .rst_n, .start(ru_start[i]), .x, .w, .valid(ru_valid[i]), .sum(ru_sum[i])
    );
  end

  for (genvar i = 0; i < NUM_CU; i++) begin : g_cu
    comparator_engine u_cu (
      .start(cu_start[i]), .po(regs[RM.cu_po + i]), .eo(regs[RM.cu_eo + i]),
      .valid(cu_valid[i]), .delta(cu_delta[i])
    );
  end

  for (genvar i = 0; i < NUM_OU; i++) begin : g_ou
    optimization_engine u_ou (
      .clk, .rst_n, .start(ou_start[i]),
      .delta(regs[RM.ou_delta + i]), .x(regs[RM.ou_x + i]),
      .mu(regs[RM.ou_mu + i]), .w(regs[RM.ou_w + i]),
      .valid(ou_valid[i]), .w_new(ou_w_new[i])
    );
  end

  nonlinear_engine #(.LUT_BITS(LUT_BITS)) u_nl (
    .clk, .rst_n, .start(nl_start), .operand(nl_operand), .shift(nl_shift),
    .base(nl_base), .valid(nl_valid), .addr(nl_addr)
  );

  assign s_ready = flags[FLAG_S_READY];
  assign m_ready = flags[FLAG_M_READY];
  assign s_psum  = regs[RM.s_psum];

endmodule
