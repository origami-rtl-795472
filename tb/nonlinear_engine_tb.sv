// nonlinear_engine_tb: self-checking test of the non-linear table address
// generator.
//
// For directed operands (zero, the first and last entries, beyond both ends)
// and random ones with random shifts and table bases it checks
// addr = base + clamp(floor(operand / 2**shift) + 512, 0, 1023) for a
// 1024-entry table, and that the address is valid one cycle after start.
module nonlinear_engine_tb;
  import origami_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  logic              start, valid;
  word_t             operand;
  logic [4:0]        shift;
  logic [ADDR_W-1:0] base, addr;

  nonlinear_engine #(.LUT_BITS(10)) dut (.clk, .rst_n, .start, .operand, .shift, .base, .valid, .addr);

  task automatic check(word_t op, int unsigned sh, int unsigned b);
    longint signed q, e;
    operand = op; shift = 5'(sh); base = b; start = 1'b1;
    q = longint'(op);
    // floor division by 2**sh
    e = (q >= 0) ? q / (longint'(1) << sh) : -((-q + (longint'(1) << sh) - 1) / (longint'(1) << sh));
    e = e + 512;
    if (e < 0) e = 0;
    if (e > 1023) e = 1023;
    @(negedge clk);
    start = 1'b0;
    checks += 2;
    if (valid !== 1'b1) begin failures++; $display("valid missing"); end
    if (addr !== ADDR_W'(b + e)) begin failures++; $display("addr %0d expected %0d (op %h sh %0d)", addr, b + e, op, sh); end
    @(negedge clk);
    checks++;
    if (valid !== 1'b0) begin failures++; $display("valid stuck"); end
  endtask

  initial begin
    start = 0; operand = 0; shift = 0; base = 0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    check(32'sh0000_0000, 10, 1000);              // 0 -> middle entry
    check(32'sh0001_0000, 10, 1000);              // 1.0 -> 512 + 64
    check(-32'sh0001_0000, 10, 1000);             // -1.0 -> 512 - 64
    check(32'sh0008_0000, 10, 0);                 // +8.0 -> clamps to 1023
    check(-32'sh0008_0000, 10, 0);                // -8.0 -> entry 0
    check(-32'sh0100_0000, 10, 77);               // far below
    check(32'sh7fff_ffff, 0, 5);                  // far above
    for (int i = 0; i < 300; i++)
      check(word_t'($urandom), $urandom_range(0, 31), $urandom_range(0, 100000));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
