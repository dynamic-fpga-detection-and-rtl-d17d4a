// tb_sb_deobfuscate: checks the SB inverse function f^-1.
//
// For W = 8 every word is compared with the inverse bit equations
// (A <- B xor C or B xnor C, B moves back), and f^-1(f(x)) = x is checked with
// a reference f written here, for W = 8 and W = 7 exhaustively and for W = 194
// on random words.
module tb_sb_deobfuscate;
  int checks = 0, failures = 0;

  logic [7:0]   d8,  q8;
  logic [6:0]   d7,  q7;
  logic [193:0] d194, q194, x194;

  sb_deobfuscate #(.W(8))   dut8   (.din(d8),   .dout(q8));
  sb_deobfuscate #(.W(7))   dut7   (.din(d7),   .dout(q7));
  sb_deobfuscate #(.W(194)) dut194 (.din(d194), .dout(q194));

  // Reference forward function for any width up to 194 bits.
  function automatic logic [193:0] f_ref(input logic [193:0] a, input int w);
    logic [193:0] r;
    r = a;
    for (int k = 0; k < w / 2; k++) begin
      r[2*k]   = a[2*k+1];
      r[2*k+1] = (k & 1) ? ~(a[2*k] ^ a[2*k+1]) : (a[2*k] ^ a[2*k+1]);
    end
    if (w % 2 == 1) begin
      logic t;
      t = r[w-1]; r[w-1] = r[0]; r[0] = t;
    end
    return r;
  endfunction

  function automatic logic [7:0] inv8(input logic [7:0] c);
    return { c[6], ~(c[6] ^ c[7]),
             c[4],   c[4] ^ c[5],
             c[2], ~(c[2] ^ c[3]),
             c[0],   c[0] ^ c[1] };
  endfunction

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", what);
    end
  endtask

  logic [193:0] tmp;

  initial begin
    for (int v = 0; v < 256; v++) begin
      d8 = 8'(v); #1;
      check(q8 == inv8(d8), $sformatf("W=8 in=%02h out=%02h exp=%02h", d8, q8, inv8(d8)));
      tmp = f_ref(194'(v), 8);
      d8 = tmp[7:0]; #1;
      check(q8 == 8'(v), $sformatf("W=8 round trip of %02h gave %02h", v, q8));
    end
    for (int v = 0; v < 128; v++) begin
      tmp = f_ref(194'(v), 7);
      d7 = tmp[6:0]; #1;
      check(q7 == 7'(v), $sformatf("W=7 round trip of %02h gave %02h", v, q7));
    end
    for (int n = 0; n < 200; n++) begin
      for (int k = 0; k < 7; k++) x194[32*k +: 32] = $urandom;
      d194 = f_ref(x194, 194); #1;
      check(q194 == x194, "W=194 round trip");
    end
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
