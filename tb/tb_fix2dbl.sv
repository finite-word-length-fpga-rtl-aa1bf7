// tb_fix2dbl -- self-checking test of the ap_fixed<27,2> to double converter.
//
// Every value must convert exactly: the double read back as a real must equal
// q / 2^25, and its bit pattern must equal the one the simulator produces for
// that real. Tests random codes, all single-bit powers of two, zero and both
// extremes.
module tb_fix2dbl;
  logic signed [26:0] q;
  logic [63:0] d;
  int checks = 0, failures = 0;

  fix2dbl #(.W(27), .F(25)) dut (.q(q), .d(d));

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(longint v);
    real e;
    q = 27'(v);
    #1;
    e = real'(v) / 33554432.0;
    checks++;
    if (d != $realtobits(e)) begin
      failures++;
      if (failures < 10) $display("q=%0d: got %h (%g) expected %h (%g)", v, d, $bitstoreal(d), $realtobits(e), e);
    end
  endtask

  initial begin
    for (int k = 0; k < 20000; k++) check(longint'($urandom_range(32'h7ffffff)) - (64'sd1 <<< 26));
    for (int b = 0; b < 26; b++) begin check(64'sd1 <<< b); check(-(64'sd1 <<< b)); end
    check(0);
    check((64'sd1 <<< 26) - 1);
    check(-(64'sd1 <<< 26));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
