// comparator_engine_tb: self-checking test of the comparator engine.
//
// Applies directed and random predicted/expected outputs and checks that
// delta = PO - EO (with two's-complement wrap), that its sign gives the
// comparison PO < EO, and that `valid` follows `start` in the same cycle
// (one clock edge into the output register: 3 ns fits one 313 MHz cycle).
module comparator_engine_tb;
  import origami_pkg::*;

  int checks = 0, failures = 0;
  logic  start, valid;
  word_t po, eo, delta;

  comparator_engine dut (.start, .po, .eo, .valid, .delta);

  task automatic check(word_t p, word_t e, logic s);
    longint signed d;
    po = p; eo = e; start = s;
    #1;
    d = longint'(p) - longint'(e);
    checks += 2;
    if (delta !== word_t'(d)) begin failures++; $display("delta %h expected %h", delta, word_t'(d)); end
    if (valid !== s) begin failures++; $display("valid %b expected %b", valid, s); end
    if (d > -(longint'(1) << 31) && d < (longint'(1) << 31)) begin
      checks++;
      if (delta[DW-1] !== (p < e)) begin failures++; $display("sign does not compare %h %h", p, e); end
    end
  endtask

  initial begin
    check(32'sh0001_0000, 32'sh0000_8000, 1'b1);   // 1.0 - 0.5 = 0.5
    check(32'sh0000_8000, 32'sh0001_0000, 1'b1);   // 0.5 - 1.0 = -0.5
    check(32'sh0000_0000, 32'sh0000_0000, 1'b0);
    for (int i = 0; i < 500; i++) check(word_t'($urandom), word_t'($urandom), 1'($urandom));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
