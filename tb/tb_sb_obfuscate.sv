// tb_sb_obfuscate: checks the SB confusion function f.
//
// For W = 8 every input value is compared with the bit equations read off the
// pair structure (low bit <- B, high bit <- A xor B, then A xnor B, ...).
// For W = 7 the extra swap of the last bit with bit 0 is checked the same way.
// A W = 194 instance (the widest benchmark output) is checked on random words
// against a reference loop written here. f must also be one-to-one on 8 bits.
module tb_sb_obfuscate;
  int checks = 0, failures = 0;

  logic [7:0]   d8,  q8;
  logic [6:0]   d7,  q7;
  logic [193:0] d194, q194, r194;

  sb_obfuscate #(.W(8))   dut8   (.din(d8),   .dout(q8));
  sb_obfuscate #(.W(7))   dut7   (.din(d7),   .dout(q7));
  sb_obfuscate #(.W(194)) dut194 (.din(d194), .dout(q194));

  function automatic logic [7:0] ref8(input logic [7:0] a);
    return { ~(a[6] ^ a[7]), a[7],    // pair 3: XNOR
               a[4] ^ a[5],  a[5],    // pair 2: XOR
             ~(a[2] ^ a[3]), a[3],    // pair 1: XNOR
               a[0] ^ a[1],  a[1] };  // pair 0: XOR
  endfunction

  function automatic logic [6:0] ref7(input logic [6:0] a);
    logic [6:0] p;
    p = { a[6], a[4] ^ a[5], a[5], ~(a[2] ^ a[3]), a[3], a[0] ^ a[1], a[1] };
    return { p[0], p[5:1], p[6] };
  endfunction

  function automatic logic [193:0] ref194(input logic [193:0] a);
    logic [193:0] r;
    for (int k = 0; k < 97; k++) begin
      r[2*k]   = a[2*k+1];
      r[2*k+1] = (k & 1) ? ~(a[2*k] ^ a[2*k+1]) : (a[2*k] ^ a[2*k+1]);
    end
    return r;
  endfunction

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", what);
    end
  endtask

  bit seen [256];

  initial begin
    for (int v = 0; v < 256; v++) begin
      d8 = 8'(v); #1;
      check(q8 == ref8(d8), $sformatf("W=8 in=%02h out=%02h exp=%02h", d8, q8, ref8(d8)));
      check(!seen[q8], $sformatf("W=8 output %02h produced twice", q8));
      seen[q8] = 1'b1;
    end
    for (int v = 0; v < 128; v++) begin
      d7 = 7'(v); #1;
      check(q7 == ref7(d7), $sformatf("W=7 in=%02h out=%02h exp=%02h", d7, q7, ref7(d7)));
    end
    for (int n = 0; n < 200; n++) begin
      for (int k = 0; k < 7; k++) d194[32*k +: 32] = $urandom;
      #1;
      r194 = ref194(d194);
      check(q194 == r194, "W=194 random word");
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
