// reduction_engine_tb: self-checking test of the reduction engine.
//
// Drives random x/w vectors into an 8-input engine (the evaluated 8/RU) and a
// 3-input one (tree padding), in single operations and back to back, and
// compares each sum with a sum of independently computed Q16.16 products. It
// also checks that `valid` arrives exactly 1 + clog2(K) cycles after `start`
// (4 cycles for K = 8; with the sum register that is the 5-cycle, 15 ns
// latency at 313 MHz).
module reduction_engine_tb;
  import origami_pkg::*;

  localparam int unsigned K  = 8;
  localparam int unsigned K3 = 3;
  localparam int unsigned N  = 200;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  logic           start;
  word_t [K-1:0]  x, w;
  logic           valid;
  word_t          sum;
  logic           start3;
  word_t [K3-1:0] x3, w3;
  logic           valid3;
  word_t          sum3;

  reduction_engine #(.K(K))  dut  (.clk, .rst_n, .start,         .x,      .w,      .valid,         .sum);
  reduction_engine #(.K(K3)) dut3 (.clk, .rst_n, .start(start3), .x(x3),  .w(w3),  .valid(valid3), .sum(sum3));

  function automatic word_t ref_mul(word_t a, word_t b);
    longint signed p;
    p = longint'(a) * longint'(b);
    return word_t'(p / 65536 - ((p < 0 && (p % 65536) != 0) ? 1 : 0));
  endfunction

  function automatic word_t rnd();
    return word_t'($urandom_range(0, 32'h0008_0000)) - word_t'(32'h0004_0000);
  endfunction

  word_t exp_q[$];
  int    cyc_q[$];
  word_t exp3_q[$];
  int    cyc = 0;

  always @(posedge clk) cyc <= cyc + 1;

  // scoreboard
  always @(posedge clk) if (rst_n) begin
    if (valid) begin
      checks += 2;
      if (exp_q.size() == 0) begin failures += 2; $display("unexpected valid"); end
      else begin
        word_t e; int c;
        e = exp_q.pop_front(); c = cyc_q.pop_front();
        if (sum !== e) begin failures++; $display("sum %h expected %h", sum, e); end
        if (cyc - c != 1 + $clog2(K)) begin
          failures++; $display("latency %0d expected %0d", cyc - c, 1 + $clog2(K));
        end
      end
    end
    if (valid3) begin
      checks++;
      if (exp3_q.size() == 0 || sum3 !== exp3_q.pop_front()) begin
        failures++; $display("K=3 sum mismatch %h", sum3);
      end
    end
  end

  task automatic issue(bit b2b);
    word_t e, e3;
    e = 0; e3 = 0;
    for (int i = 0; i < K; i++) begin x[i] = rnd(); w[i] = rnd(); e += ref_mul(x[i], w[i]); end
    for (int i = 0; i < K3; i++) begin x3[i] = rnd(); w3[i] = rnd(); e3 += ref_mul(x3[i], w3[i]); end
    start = 1'b1; start3 = 1'b1;
    exp_q.push_back(e); cyc_q.push_back(cyc); exp3_q.push_back(e3);
    @(negedge clk);
    start = 1'b0; start3 = 1'b0;
    if (!b2b) repeat ($urandom_range(0, 6)) @(negedge clk);
  endtask

  initial begin
    start = 0; start3 = 0; x = '0; w = '0; x3 = '0; w3 = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    // a known case: 1.0*1.0 + 2.0*0.5 + ... all eight lanes = 8 * 1.0 ... check shape
    for (int i = 0; i < K; i++) begin x[i] = 32'sh0001_0000 * (i + 1); w[i] = 32'sh0000_8000; end
    start = 1'b1; exp_q.push_back(32'sh0012_0000); cyc_q.push_back(cyc);  // 0.5*(1+..+8)=18
    @(negedge clk); start = 1'b0;
    repeat (8) @(negedge clk);
    for (int n = 0; n < N; n++) issue(n % 2 == 0);
    repeat (10) @(negedge clk);
    checks++;
    if (exp_q.size() != 0 || exp3_q.size() != 0) begin failures++; $display("missing results"); end
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
