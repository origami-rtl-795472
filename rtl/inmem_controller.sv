// inmem_controller: the in-memory controller of ORIGAMI.
//
// A light-weight sequencer on the logic die that executes the statically
// scheduled instruction stream the compiler generates for the in-memory
// partition of a learning algorithm. It implements the paper's three
// instruction classes:
//   communication   mov between memory and the computation registers
//                   (OP_MOV_MR, OP_MOV_RM) and between registers (OP_MOV_RR)
//   computation     reduce / comparator / optimization %Num: start engine Num
//                   on its input registers; the result lands in its output
//                   register (OP_REDUCE, OP_COMPARE, OP_OPTIMIZE)
//   synchronization set / wait / clr of the flags M_ready and S_ready
// plus two of this design's own: OP_LUT, which reads a non-linear function
// table in memory through the non-linear engine, and OP_HALT, which ends the
// program. The paper does not give an encoding; origami_pkg defines one.
//
// One instruction issues per cycle, in order. The controller stalls an
// instruction, rather than relying on the schedule alone, when
//   * it reads or writes the output register of an engine still computing
//     (register interlock), or starts an engine that is still busy;
//   * it waits for a memory response or for the memory port to accept;
//   * it is `wait %f` and the flag is clear.
// A move carries up to MEM_LANES consecutive words (one memory beat); with
// `bcast` the first source word is copied to every destination, which is how
// one delta reaches the dedicated delta registers of many optimization
// engines. Only one memory read is outstanding at a time; writes are posted.
//
// Program memory: IMEM_DEPTH instruction words, written through the imem_*
// port while the controller is idle. `start` runs from address 0; `done`
// rises at OP_HALT and stays high until the next `start`. The program store,
// the interlocks and the blocking memory reads are this design's choices.
module inmem_controller
  import origami_pkg::*;
#(
  parameter int unsigned NUM_RU     = 8,
  parameter int unsigned K          = 8,
  parameter int unsigned NUM_CU     = 8,
  parameter int unsigned NUM_OU     = 64,
  parameter int unsigned IMEM_DEPTH = 1024,
  localparam regmap_t    RM         = make_regmap(NUM_RU, K, NUM_CU, NUM_OU),
  localparam int unsigned NREG      = RM.nreg,
  localparam int unsigned IA        = $clog2(IMEM_DEPTH)
) (
  input  logic                             clk,
  input  logic                             rst_n,
  // program load and run control
  input  logic                             imem_we,
  input  logic [IA-1:0]                    imem_addr,
  input  instr_t                           imem_wdata,
  input  logic                             start,
  output logic                             busy,
  output logic                             done,
  // register file
  input  word_t [NREG-1:0]                 regs,
  input  logic [1:0]                       flags,
  output logic [MEM_LANES-1:0]             wr_en,
  output logic [MEM_LANES-1:0][REG_AW-1:0] wr_addr,
  output word_t [MEM_LANES-1:0]            wr_data,
  output logic [1:0]                       flag_set,
  output logic [1:0]                       flag_clr,
  // compute engines
  output logic [NUM_RU-1:0]                ru_start,
  input  logic [NUM_RU-1:0]                ru_valid,
  output logic [NUM_CU-1:0]                cu_start,
  input  logic [NUM_CU-1:0]                cu_valid,
  output logic [NUM_OU-1:0]                ou_start,
  input  logic [NUM_OU-1:0]                ou_valid,
  // non-linear engine
  output logic                             nl_start,
  output word_t                            nl_operand,
  output logic [4:0]                       nl_shift,
  output logic [ADDR_W-1:0]                nl_base,
  input  logic                             nl_valid,
  input  logic [ADDR_W-1:0]                nl_addr,
  // memory port (vault)
  output logic                             mem_req_valid,
  input  logic                             mem_req_ready,
  output mem_req_t                         mem_req,
  input  logic                             mem_rsp_valid,
  input  word_t [MEM_LANES-1:0]            mem_rsp_rdata
);

  typedef enum logic [2:0] {S_IDLE, S_RUN, S_MEM_RD, S_NL, S_LUT_REQ, S_DONE} state_e;

  instr_t imem [IMEM_DEPTH];
  state_e state;
  logic [IA-1:0] pc;
  instr_t ins;

  // pending memory read / table read
  logic [REG_AW-1:0] rd_dst;
  logic [3:0]        rd_cnt;
  logic              rd_bcast;
  logic [ADDR_W-1:0] lut_addr;

  // engines in flight
  logic [NUM_RU-1:0] ru_busy;
  logic [NUM_OU-1:0] ou_busy;
  logic [NREG-1:0]   out_busy;

  // stall reasons, for observation
  logic stall_hazard, stall_engine, stall_mem, stall_wait;

  logic [3:0] cnt;
  logic       src_hz, dst_hz;
  logic       advance;

  always_ff @(posedge clk) begin
    if (imem_we) imem[imem_addr] <= imem_wdata;
  end

  assign ins  = imem[pc];
  assign cnt  = {1'b0, ins.cnt_m1} + 4'd1;
  assign busy = (state != S_IDLE) && (state != S_DONE);
  assign done = (state == S_DONE);

  // output registers of engines still computing
  always_comb begin
    out_busy = '0;
    for (int i = 0; i < NUM_RU; i++) out_busy[RM.ru_sum + i] = ru_busy[i];
    for (int i = 0; i < NUM_OU; i++) out_busy[RM.ou_out + i] = ou_busy[i];
  end

  function automatic logic range_busy(logic [NREG-1:0] ob, logic [REG_AW-1:0] base,
                                      logic [3:0] n, logic one);
    logic b;
    b = 1'b0;
    for (int l = 0; l < MEM_LANES; l++) begin
      int unsigned r;
      r = int'(base) + (one ? 0 : l);
      if (l < int'(n) && r < NREG) b |= ob[r];
    end
    return b;
  endfunction

  // issue logic
  always_comb begin
    wr_en         = '0;
    wr_addr       = '0;
    wr_data       = '0;
    flag_set      = '0;
    flag_clr      = '0;
    ru_start      = '0;
    cu_start      = '0;
    ou_start      = '0;
    nl_start      = 1'b0;
    nl_operand    = regs[ins.ra];
    nl_shift      = ins.shift;
    nl_base       = ins.addr;
    mem_req_valid = 1'b0;
    mem_req       = '0;
    stall_hazard  = 1'b0;
    stall_engine  = 1'b0;
    stall_mem     = 1'b0;
    stall_wait    = 1'b0;
    advance       = 1'b0;
    src_hz        = range_busy(out_busy, ins.ra, cnt, ins.bcast);
    dst_hz        = range_busy(out_busy, ins.rb, cnt, 1'b0);

    unique case (state)
      S_RUN: begin
        unique case (ins.op)
          OP_MOV_MR: begin
            if (dst_hz) stall_hazard = 1'b1;
            else begin
              mem_req_valid  = 1'b1;
              mem_req.we     = 1'b0;
              mem_req.addr   = ins.addr;
              mem_req.nwords = cnt;
              stall_mem      = !mem_req_ready;
            end
          end
          OP_MOV_RM: begin
            if (src_hz) stall_hazard = 1'b1;
            else begin
              mem_req_valid  = 1'b1;
              mem_req.we     = 1'b1;
              mem_req.addr   = ins.addr;
              mem_req.nwords = cnt;
              for (int l = 0; l < MEM_LANES; l++)
                if (l < int'(cnt))
                  mem_req.wdata[l] = regs[ins.bcast ? int'(ins.ra) : int'(ins.ra) + l];
              stall_mem = !mem_req_ready;
              advance   = mem_req_ready;
            end
          end
          OP_MOV_RR: begin
            if (src_hz || dst_hz) stall_hazard = 1'b1;
            else begin
              for (int l = 0; l < MEM_LANES; l++) begin
                wr_en[l]   = (l < int'(cnt));
                wr_addr[l] = ins.rb + REG_AW'(l);
                wr_data[l] = regs[ins.bcast ? int'(ins.ra) : int'(ins.ra) + l];
              end
              advance = 1'b1;
            end
          end
          OP_REDUCE: begin
            if (int'(ins.ra) < NUM_RU && ru_busy[ins.ra]) stall_engine = 1'b1;
            else begin
              if (int'(ins.ra) < NUM_RU) ru_start[ins.ra] = 1'b1;
              advance = 1'b1;
            end
          end
          OP_COMPARE: begin
            if (int'(ins.ra) < NUM_CU) cu_start[ins.ra] = 1'b1;
            advance = 1'b1;
          end
          OP_OPTIMIZE: begin
            if (int'(ins.ra) < NUM_OU && ou_busy[ins.ra]) stall_engine = 1'b1;
            else begin
              if (int'(ins.ra) < NUM_OU) ou_start[ins.ra] = 1'b1;
              advance = 1'b1;
            end
          end
          OP_LUT: begin
            if (range_busy(out_busy, ins.ra, 4'd1, 1'b1) ||
                range_busy(out_busy, ins.rb, 4'd1, 1'b1)) stall_hazard = 1'b1;
            else nl_start = 1'b1;
          end
          OP_SET:  begin flag_set[ins.ra[0]] = 1'b1; advance = 1'b1; end
          OP_CLR:  begin flag_clr[ins.ra[0]] = 1'b1; advance = 1'b1; end
          OP_WAIT: begin
            if (flags[ins.ra[0]]) advance = 1'b1;
            else stall_wait = 1'b1;
          end
          default: advance = (ins.op == OP_NOP);
        endcase
      end
      S_MEM_RD: begin
        stall_mem = !mem_rsp_valid;
        if (mem_rsp_valid) begin
          for (int l = 0; l < MEM_LANES; l++) begin
            wr_en[l]   = (l < int'(rd_cnt));
            wr_addr[l] = rd_dst + REG_AW'(l);
            wr_data[l] = rd_bcast ? mem_rsp_rdata[0] : mem_rsp_rdata[l];
          end
        end
      end
      S_LUT_REQ: begin
        mem_req_valid  = 1'b1;
        mem_req.we     = 1'b0;
        mem_req.addr   = lut_addr;
        mem_req.nwords = 4'd1;
        stall_mem      = !mem_req_ready;
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      pc       <= '0;
      rd_dst   <= '0;
      rd_cnt   <= '0;
      rd_bcast <= 1'b0;
      lut_addr <= '0;
      ru_busy  <= '0;
      ou_busy  <= '0;
    end else begin
      ru_busy <= (ru_busy | ru_start) & ~ru_valid;
      ou_busy <= (ou_busy | ou_start) & ~ou_valid;
      unique case (state)
        S_IDLE, S_DONE: if (start) begin
          state <= S_RUN;
          pc    <= '0;
        end
        S_RUN: begin
          if (advance) pc <= pc + 1'b1;
          if (ins.op == OP_HALT) state <= S_DONE;
          if (ins.op == OP_MOV_MR && mem_req_valid && mem_req_ready) begin
            state    <= S_MEM_RD;
            rd_dst   <= ins.rb;
            rd_cnt   <= cnt;
            rd_bcast <= ins.bcast;
          end
          if (nl_start) begin
            state    <= S_NL;
            rd_dst   <= ins.rb;
            rd_cnt   <= 4'd1;
            rd_bcast <= 1'b0;
          end
        end
        S_NL: if (nl_valid) begin
          lut_addr <= nl_addr;
          state    <= S_LUT_REQ;
        end
        S_LUT_REQ: if (mem_req_ready) state <= S_MEM_RD;
        S_MEM_RD: if (mem_rsp_valid) begin
          state <= S_RUN;
          pc    <= pc + 1'b1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // A memory request, once offered, is held unchanged until accepted.
  a_req_stable: assert property (@(posedge clk) disable iff (!rst_n)
    mem_req_valid && !mem_req_ready |=> mem_req_valid && $stable(mem_req));
  // Engines are only started in range and never while busy.
  a_ru_not_busy: assert property (@(posedge clk) disable iff (!rst_n)
    (ru_start & ru_busy) == '0);
  // No response arrives when no read is pending.
  a_rsp_expected: assert property (@(posedge clk) disable iff (!rst_n)
    mem_rsp_valid |-> state == S_MEM_RD);

endmodule
