// tb_mcla_adder: self-checking test of the modified carry look-ahead adder at
// the 25-bit width of the paper's adder and at the pruned widths 22, 20, 18
// and 16 used by the truncated CIC filter. Each width gets directed carry
// chain cases (all ones plus one, alternating patterns, carry-in) and random
// operands; every sum is compared with a + b + ci modulo 2^WIDTH computed by
// the testbench's own arithmetic. The adder is combinational: results are
// checked 1 ns after the operands change.
module tb_mcla_adder;
  int checks = 0, failures = 0;

  logic [24:0] a25, b25, s25;
  logic [21:0] a22, b22, s22;
  logic [19:0] a20, b20, s20;
  logic [17:0] a18, b18, s18;
  logic [15:0] a16, b16, s16;
  logic        ci;

  mcla_adder                dut25 (.a(a25), .b(b25), .ci(ci), .s(s25));
  mcla_adder #(.WIDTH(22))  dut22 (.a(a22), .b(b22), .ci(ci), .s(s22));
  mcla_adder #(.WIDTH(20))  dut20 (.a(a20), .b(b20), .ci(ci), .s(s20));
  mcla_adder #(.WIDTH(18))  dut18 (.a(a18), .b(b18), .ci(ci), .s(s18));
  mcla_adder #(.WIDTH(16))  dut16 (.a(a16), .b(b16), .ci(ci), .s(s16));

  task automatic apply(input longint unsigned a, input longint unsigned b, input bit c);
    longint unsigned full;
    a25 = 25'(a); b25 = 25'(b); a22 = 22'(a); b22 = 22'(b);
    a20 = 20'(a); b20 = 20'(b); a18 = 18'(a); b18 = 18'(b);
    a16 = 16'(a); b16 = 16'(b); ci = c;
    #1;
    full = (a & 64'h1FF_FFFF) + (b & 64'h1FF_FFFF) + 64'(c);
    checks += 5;
    if (s25 != 25'(full)) begin failures++; $display("FAIL w25 a=%h b=%h ci=%0d s=%h exp=%h", a25, b25, c, s25, 25'(full)); end
    if (s22 != 22'(a22 + b22 + 22'(c))) begin failures++; $display("FAIL w22 a=%h b=%h s=%h", a22, b22, s22); end
    if (s20 != 20'(a20 + b20 + 20'(c))) begin failures++; $display("FAIL w20 a=%h b=%h s=%h", a20, b20, s20); end
    if (s18 != 18'(a18 + b18 + 18'(c))) begin failures++; $display("FAIL w18 a=%h b=%h s=%h", a18, b18, s18); end
    if (s16 != 16'(a16 + b16 + 16'(c))) begin failures++; $display("FAIL w16 a=%h b=%h s=%h", a16, b16, s16); end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // directed: full carry propagation, group boundaries, carry-in
    apply(64'h1FF_FFFF, 64'h1, 0);
    apply(64'h1FF_FFFF, 64'h0, 1);
    apply(64'h0AA_AAAA, 64'h155_5555, 0);
    apply(64'h0AA_AAAA, 64'h155_5555, 1);
    for (int i = 0; i < 25; i++) begin
      apply((64'h1 << i) - 1, 64'h1, 0);
      apply(64'h1 << i, 64'h1 << i, 0);
      apply((64'h1 << i) - 1, 64'h0, 1);
    end
    // random operands
    for (int i = 0; i < 4000; i++)
      apply({$urandom, $urandom}, {$urandom, $urandom}, 1'($urandom));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
