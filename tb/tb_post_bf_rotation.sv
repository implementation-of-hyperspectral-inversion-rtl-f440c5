// tb_post_bf_rotation: for a 4-way rotation (radix-4 sizing) and the 2-way
// one used by the FFT, every input i must appear at dout[(i+rot) mod R].
module tb_post_bf_rotation;
  logic [1:0] rot4; logic [3:0][7:0] d4, o4;
  logic       rot2; logic [1:0][31:0] d2, o2;
  post_bf_rotation #(.R(4), .W(8))  dut4 (.rot(rot4), .din(d4), .dout(o4));
  post_bf_rotation #(.R(2), .W(32)) dut2 (.rot(rot2), .din(d2), .dout(o2));
  int checks = 0, failures = 0;
  initial begin
    #100000; failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int t = 0; t < 200; t++) begin
      rot4 = 2'($urandom); d4 = $urandom; rot2 = 1'($urandom); d2 = {$urandom, $urandom};
      #1;
      for (int i = 0; i < 4; i++) begin
        checks++; if (o4[(i + rot4) % 4] !== d4[i]) failures++;
      end
      for (int i = 0; i < 2; i++) begin
        checks++; if (o2[(i + rot2) % 2] !== d2[i]) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
