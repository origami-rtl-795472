// origami_pkg: types, constants and helper functions shared by the ORIGAMI
// logic-die accelerator.
//
// Number format: every datum (inputs x, weights w, sums, delta, learning rate
// mu) is a signed 32-bit two's-complement fixed-point word with FRAC = 16
// fraction bits (Q16.16). A product is the full 64-bit product shifted right
// arithmetically by FRAC and truncated back to 32 bits; sums wrap. The 32-bit
// word size follows the paper's own 32-bit example in its compute-bandwidth
// formula; the fixed-point format and the rounding are this design's choice.
//
// Register map: each compute engine has dedicated computation registers that
// are hard-wired to its inputs and output; the two synchronization registers
// M_delta and S_psum follow. The map is laid out field by field (all X inputs
// of the reduction engines, then all W inputs, ...) so that one move
// instruction of up to MEM_LANES words fills consecutive engine inputs.
//
// Instruction word (64 bits, this design's own encoding of the paper's ISA):
//   [63:60] op   [59] bcast   [58:56] cnt-1   [55:51] shift
//   [50:42] ra   [41:33] rb   [32] spare      [31:0] addr
package origami_pkg;

  localparam int unsigned DW   = 32;  // datum width
  localparam int unsigned FRAC = 16;  // fraction bits of a datum
  localparam int unsigned MEM_LANES = 8;  // words per memory beat (32 bytes)
  localparam int unsigned REG_AW = 9;     // register address width (<= 512 registers)
  localparam int unsigned ADDR_W = 32;    // memory word address width

  typedef logic signed [DW-1:0] word_t;

  // Flags of the synchronization ISA.
  localparam int unsigned FLAG_M_READY = 0;
  localparam int unsigned FLAG_S_READY = 1;

  typedef enum logic [3:0] {
    OP_NOP      = 4'd0,
    OP_MOV_MR   = 4'd1,   // mov mem[addr..] -> reg[rb..]
    OP_MOV_RM   = 4'd2,   // mov reg[ra..]   -> mem[addr..]
    OP_MOV_RR   = 4'd3,   // mov reg[ra..]   -> reg[rb..]
    OP_REDUCE   = 4'd4,   // reduce %ra       (start reduction engine ra)
    OP_COMPARE  = 4'd5,   // comparator %ra   (start comparator engine ra)
    OP_OPTIMIZE = 4'd6,   // optimization %ra (start optimization engine ra)
    OP_LUT      = 4'd7,   // reg[rb] <- mem[addr + index(reg[ra], shift)]
    OP_SET      = 4'd8,   // set %ra  (flag)
    OP_WAIT     = 4'd9,   // wait %ra (flag)
    OP_CLR      = 4'd10,  // clr %ra  (flag)
    OP_HALT     = 4'd15
  } opcode_e;

  typedef struct packed {
    opcode_e           op;
    logic              bcast;   // source word 0 copied to every destination
    logic [2:0]        cnt_m1;  // number of words moved, minus one
    logic [4:0]        shift;   // OP_LUT: operand scaling (right shift)
    logic [REG_AW-1:0] ra;      // source register / engine number / flag
    logic [REG_AW-1:0] rb;      // destination register
    logic              spare;
    logic [ADDR_W-1:0] addr;    // memory word address / table base
  } instr_t;

  // One request on the memory port: a beat of up to MEM_LANES consecutive words.
  typedef struct packed {
    logic                       we;
    logic [ADDR_W-1:0]          addr;
    logic [3:0]                 nwords;
    word_t [MEM_LANES-1:0]      wdata;
  } mem_req_t;

  // Base addresses of the register map.
  typedef struct packed {
    int unsigned ru_x, ru_w, ru_sum;
    int unsigned cu_po, cu_eo, cu_out;
    int unsigned ou_delta, ou_x, ou_mu, ou_w, ou_out;
    int unsigned m_delta, s_psum, nreg;
  } regmap_t;

  function automatic regmap_t make_regmap(int unsigned nru, int unsigned k,
                                          int unsigned ncu, int unsigned nou);
    regmap_t m;
    m.ru_x     = 0;
    m.ru_w     = m.ru_x + nru * k;
    m.ru_sum   = m.ru_w + nru * k;
    m.cu_po    = m.ru_sum + nru;
    m.cu_eo    = m.cu_po + ncu;
    m.cu_out   = m.cu_eo + ncu;
    m.ou_delta = m.cu_out + ncu;
    m.ou_x     = m.ou_delta + nou;
    m.ou_mu    = m.ou_x + nou;
    m.ou_w     = m.ou_mu + nou;
    m.ou_out   = m.ou_w + nou;
    m.m_delta  = m.ou_out + nou;
    m.s_psum   = m.m_delta + 1;
    m.nreg     = m.s_psum + 1;
    return m;
  endfunction

  // Fixed-point multiply: (a*b) >>> FRAC, truncated to DW bits.
  function automatic word_t fx_mul(word_t a, word_t b);
    logic signed [2*DW-1:0] p;
    p = a * b;
    return word_t'(p >>> FRAC);
  endfunction

  // Instruction builders (used by programs written in SystemVerilog).
  function automatic instr_t mk(opcode_e op, int unsigned ra = 0, int unsigned rb = 0,
                                int unsigned addr = 0, int unsigned cnt = 1,
                                bit bcast = 1'b0, int unsigned shift = 0);
    instr_t i;
    i        = '0;
    i.op     = op;
    i.ra     = REG_AW'(ra);
    i.rb     = REG_AW'(rb);
    i.addr   = ADDR_W'(addr);
    i.cnt_m1 = 3'(cnt - 1);
    i.bcast  = bcast;
    i.shift  = 5'(shift);
    return i;
  endfunction

endpackage
