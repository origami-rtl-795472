// hmc_vault_model: behavioural model of one vault of the 3D-stacked DRAM,
// for simulation only (not synthesizable logic; the real part is a commercial
// HMC device).
//
// Holds DEPTH 32-bit words. A request is accepted when req_valid and
// req_ready are both high; it carries up to MEM_LANES consecutive words
// starting at word address req.addr. Writes take effect at acceptance and
// produce no response. Reads return, in order, one response beat LAT cycles
// after acceptance (LAT = 9 cycles of 313 MHz covers the 27.5 ns access
// latency of the modelled memory). With BACKPRESSURE set, req_ready is low
// on a pseudo-random quarter of the cycles. The array `mem` is public so
// testbenches can preload and inspect it; addresses wrap at DEPTH.
module hmc_vault_model
  import origami_pkg::*;
#(
  parameter int unsigned DEPTH        = 8192,
  parameter int unsigned LAT          = 9,
  parameter bit          BACKPRESSURE = 1'b0
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  req_valid,
  output logic                  req_ready,
  input  mem_req_t              req,
  output logic                  rsp_valid,
  output word_t [MEM_LANES-1:0] rsp_rdata
);

  word_t mem [DEPTH];

  typedef struct {
    longint unsigned      due;
    word_t [MEM_LANES-1:0] data;
  } pend_t;

  pend_t           q [$];
  longint unsigned cyc;
  int unsigned     lfsr;

  initial begin
    for (int i = 0; i < DEPTH; i++) mem[i] = '0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cyc       <= 0;
      lfsr      <= 32'h1234_5678;
      req_ready <= 1'b1;
      rsp_valid <= 1'b0;
      rsp_rdata <= '0;
    end else begin
      cyc  <= cyc + 1;
      lfsr <= {lfsr[30:0], lfsr[31] ^ lfsr[21] ^ lfsr[1] ^ lfsr[0]};
      req_ready <= BACKPRESSURE ? (lfsr[1:0] != 2'b00) : 1'b1;
      if (req_valid && req_ready) begin
        if (req.we) begin
          for (int l = 0; l < MEM_LANES; l++)
            if (l < int'(req.nwords)) mem[(req.addr + l) % DEPTH] = req.wdata[l];
        end else begin
          pend_t p;
          p.due = cyc + LAT - 1;
          for (int l = 0; l < MEM_LANES; l++)
            p.data[l] = (l < int'(req.nwords)) ? mem[(req.addr + l) % DEPTH] : '0;
          q.push_back(p);
        end
      end
      rsp_valid <= 1'b0;
      if (q.size() > 0 && q[0].due <= cyc) begin
        rsp_valid <= 1'b1;
        rsp_rdata <= q[0].data;
        void'(q.pop_front());
      end
    end
  end

endmodule
