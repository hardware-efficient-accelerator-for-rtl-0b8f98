// Exhaustive-ish random test of one PE: psum_out = (use_in ? psum_in : 0) + (spk ? w : 0).
module tb_pe;
  logic spk, use_in;
  logic signed [7:0]  w;
  logic signed [11:0] pin, pout;
  int checks = 0, failures = 0;
  pe dut (.spk, .w, .use_in, .psum_in(pin), .psum_out(pout));
  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    for (int i = 0; i < 2000; i++) begin
      int e;
      spk = 1'($urandom); use_in = 1'($urandom);
      w = 8'($urandom); pin = 12'(int'($urandom % 1500) - 750);
      #1;
      e = (use_in ? int'(pin) : 0) + (spk ? int'(w) : 0);
      checks++;
      if (int'(pout) != e) begin
        failures++;
        $display("FAIL spk=%0d use=%0d w=%0d pin=%0d got %0d exp %0d", spk, use_in, w, pin, pout, e);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
