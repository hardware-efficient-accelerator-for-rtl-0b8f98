// Test of the partial IAND: y = x AND NOT s when enabled, y = s otherwise.
module tb_partial_iand;
  logic en;
  logic [3:0][7:0] x, s, y;
  int checks = 0, failures = 0;
  partial_iand dut (.*);
  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    for (int i = 0; i < 2000; i++) begin
      logic [31:0] e;
      en = 1'($urandom); x = 32'($urandom); s = 32'($urandom);
      #1;
      for (int b = 0; b < 32; b++) e[b] = en ? (x[b/8][b%8] & ~s[b/8][b%8]) : s[b/8][b%8];
      checks++;
      if (y !== e) begin failures++; $display("FAIL en=%0d x=%h s=%h y=%h", en, x, s, y); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
