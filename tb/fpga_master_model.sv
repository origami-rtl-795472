// fpga_master_model: behavioural model of the out-of-memory platform (an
// FPGA on the active die) in its role as master of block_level split
// execution, for simulation only.
//
// It waits until the logic die raises S_ready, reads the logic die's partial
// sum from S_psum, adds its own partial sum `ext_psum`, and presents the
// aggregate on `agg`. After COMPUTE_LAT cycles it writes `delta_in` (which the
// testbench derives from `agg`, standing for the master's non-linear and
// comparator steps) into M_delta and sets M_ready. It serves the next round
// only after S_ready has fallen again. `rounds` counts completed rounds.
module fpga_master_model
  import origami_pkg::*;
#(
  parameter int unsigned COMPUTE_LAT = 6
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        s_ready,
  input  word_t       s_psum,
  input  word_t       ext_psum,
  input  word_t       delta_in,
  output word_t       agg,
  output logic        m_delta_we,
  output word_t       m_delta_wd,
  output logic        m_ready_set,
  output int unsigned rounds
);

  typedef enum logic [1:0] {M_IDLE, M_COMPUTE, M_DONE} mstate_e;
  mstate_e     st;
  int unsigned cnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st          <= M_IDLE;
      cnt         <= 0;
      agg         <= '0;
      m_delta_we  <= 1'b0;
      m_delta_wd  <= '0;
      m_ready_set <= 1'b0;
      rounds      <= 0;
    end else begin
      m_delta_we  <= 1'b0;
      m_ready_set <= 1'b0;
      unique case (st)
        M_IDLE: if (s_ready) begin
          agg <= s_psum + ext_psum;
          cnt <= 0;
          st  <= M_COMPUTE;
        end
        M_COMPUTE: begin
          cnt <= cnt + 1;
          if (cnt + 1 >= COMPUTE_LAT) begin
            m_delta_we  <= 1'b1;
            m_delta_wd  <= delta_in;
            m_ready_set <= 1'b1;
            rounds      <= rounds + 1;
            st          <= M_DONE;
          end
        end
        M_DONE: if (!s_ready) st <= M_IDLE;
        default: st <= M_IDLE;
      endcase
    end
  end

endmodule
