// optimization_engine_tb: self-checking test of the optimization engine.
//
// Checks w_new = w - mu*(delta*x) in Q16.16 against an independent model, for
// directed values and random ones issued both singly and back to back, and
// checks that `valid` comes exactly 3 cycles after `start` (4 edges into the
// output register: the 12 ns latency at 313 MHz).
module optimization_engine_tb;
  import origami_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  logic  start, valid;
  word_t delta, x, mu, w, w_new;

  optimization_engine dut (.clk, .rst_n, .start, .delta, .x, .mu, .w, .valid, .w_new);

  function automatic word_t ref_mul(word_t a, word_t b);
    longint signed p;
    p = longint'(a) * longint'(b);
    return word_t'(p / 65536 - ((p < 0 && (p % 65536) != 0) ? 1 : 0));
  endfunction

  function automatic word_t rnd();
    return word_t'($urandom_range(0, 32'h0010_0000)) - word_t'(32'h0008_0000);
  endfunction

  word_t exp_q[$];
  int    cyc_q[$];
  int    cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  always @(posedge clk) if (rst_n && valid) begin
    checks += 2;
    if (exp_q.size() == 0) begin failures += 2; $display("unexpected valid"); end
    else begin
      word_t e; int c;
      e = exp_q.pop_front(); c = cyc_q.pop_front();
      if (w_new !== e) begin failures++; $display("w_new %h expected %h", w_new, e); end
      if (cyc - c != 3) begin failures++; $display("latency %0d expected 3", cyc - c); end
    end
  end

  task automatic issue(word_t d, word_t xx, word_t m, word_t ww, bit b2b);
    delta = d; x = xx; mu = m; w = ww; start = 1'b1;
    exp_q.push_back(ww - ref_mul(ref_mul(d, xx), m));
    cyc_q.push_back(cyc);
    @(negedge clk);
    start = 1'b0;
    delta = rnd(); x = rnd(); mu = rnd(); w = rnd();   // inputs may change after start
    if (!b2b) repeat ($urandom_range(0, 5)) @(negedge clk);
  endtask

  initial begin
    start = 0; delta = 0; x = 0; mu = 0; w = 0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    // delta=0.5, x=2.0, mu=0.25 -> w = 1.0 - 0.25 = 0.75
    issue(32'sh0000_8000, 32'sh0002_0000, 32'sh0000_4000, 32'sh0001_0000, 1'b0);
    // delta=-1.0, x=3.0, mu=0.5 -> w = 0 + 1.5
    issue(-32'sh0001_0000, 32'sh0003_0000, 32'sh0000_8000, 32'sh0000_0000, 1'b0);
    for (int n = 0; n < 300; n++) issue(rnd(), rnd(), rnd(), rnd(), n % 3 != 0);
    repeat (8) @(negedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("missing results"); end
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
