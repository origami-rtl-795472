// comp_regfile: computation and synchronization registers of ORIGAMI.
//
// In the paper's ISA the inputs and output of every compute engine are
// hard-wired to dedicated computation registers, and two synchronization
// registers (M_delta, S_psum) and two flags (M_ready, S_ready) couple the
// logic die to the out-of-memory platform during block_level split
// execution. This module holds all of them as one flat array of words laid
// out by origami_pkg::make_regmap, so that the controller's move instructions
// can address any of them, while every word is also wired out in parallel to
// the engine that reads it.
//
// Writers, in increasing priority when they hit the same register in the
// same cycle: the controller's MEM_LANES write lanes; the master's M_delta
// write; an engine's result (which only ever lands in that engine's output
// register). Flags: a set (by the controller's `set` or the master's
// M_ready set) wins over a clear in the same cycle, so no event is lost. All
// writes take effect at the clock edge; reads are combinational. Reset clears
// every register and both flags. The flat layout and the priorities are this
// design's choice.
module comp_regfile
  import origami_pkg::*;
#(
  parameter int unsigned NUM_RU = 8,
  parameter int unsigned K      = 8,
  parameter int unsigned NUM_CU = 8,
  parameter int unsigned NUM_OU = 64,
  localparam regmap_t    RM     = make_regmap(NUM_RU, K, NUM_CU, NUM_OU),
  localparam int unsigned NREG  = RM.nreg
) (
  input  logic                         clk,
  input  logic                         rst_n,
  // controller write lanes
  input  logic [MEM_LANES-1:0]         wr_en,
  input  logic [MEM_LANES-1:0][REG_AW-1:0] wr_addr,
  input  word_t [MEM_LANES-1:0]        wr_data,
  // engine results
  input  logic [NUM_RU-1:0]            ru_valid,
  input  word_t [NUM_RU-1:0]           ru_sum,
  input  logic [NUM_CU-1:0]            cu_valid,
  input  word_t [NUM_CU-1:0]           cu_delta,
  input  logic [NUM_OU-1:0]            ou_valid,
  input  word_t [NUM_OU-1:0]           ou_w_new,
  // out-of-memory master side
  input  logic                         m_delta_we,
  input  word_t                        m_delta_wd,
  input  logic                         m_ready_set,
  // flags, indexed by FLAG_M_READY / FLAG_S_READY
  input  logic [1:0]                   flag_set,
  input  logic [1:0]                   flag_clr,
  output logic [1:0]                   flags,
  // every register, read in parallel
  output word_t [NREG-1:0]             regs
);

  initial begin
    assert (NREG <= (1 << REG_AW))
      else $fatal(1, "register map (%0d words) exceeds REG_AW", NREG);
  end

  // One word register per map entry; each picks its writer by priority.
  for (genvar r = 0; r < NREG; r++) begin : g_reg
    logic  we;
    word_t wd;
    always_comb begin
      we = 1'b0;
      wd = '0;
      // controller lanes (the highest-numbered lane addressing r wins)
      for (int l = 0; l < MEM_LANES; l++)
        if (wr_en[l] && (int'(wr_addr[l]) == r)) begin we = 1'b1; wd = wr_data[l]; end
      if (r == RM.m_delta && m_delta_we) begin we = 1'b1; wd = m_delta_wd; end
      if (r >= RM.ru_sum && r < RM.ru_sum + NUM_RU && ru_valid[(r - RM.ru_sum) % NUM_RU]) begin
        we = 1'b1; wd = ru_sum[(r - RM.ru_sum) % NUM_RU];
      end
      if (r >= RM.cu_out && r < RM.cu_out + NUM_CU && cu_valid[(r - RM.cu_out) % NUM_CU]) begin
        we = 1'b1; wd = cu_delta[(r - RM.cu_out) % NUM_CU];
      end
      if (r >= RM.ou_out && r < RM.ou_out + NUM_OU && ou_valid[(r - RM.ou_out) % NUM_OU]) begin
        we = 1'b1; wd = ou_w_new[(r - RM.ou_out) % NUM_OU];
      end
    end
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n)  regs[r] <= '0;
      else if (we) regs[r] <= wd;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      flags <= '0;
    end else begin
      for (int f = 0; f < 2; f++) begin
        if (flag_set[f] || (f == int'(FLAG_M_READY) && m_ready_set)) flags[f] <= 1'b1;
        else if (flag_clr[f])                                          flags[f] <= 1'b0;
      end
    end
  end

endmodule
