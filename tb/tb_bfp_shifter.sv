// tb_bfp_shifter: random 19-bit words and shift amounts from -12 to +3;
// each output must equal floor(x / 2^s) (or x * 2^-s for left shifts),
// clamped to the signed 16-bit range. Directed cases cover saturation.
module tb_bfp_shifter;
  localparam int LANES = 4, IW = 19, OW = 16, SW = 6;
  logic signed [SW-1:0] shamt;
  logic [LANES-1:0][IW-1:0] din;
  logic [LANES-1:0][OW-1:0] dout;
  bfp_shifter #(.LANES(LANES), .IW(IW), .OW(OW), .SW(SW)) dut (.*);
  int checks = 0, failures = 0;

  function automatic longint model(longint x, int s);
    longint v, hi, lo;
    hi = (64'sd1 <<< (OW - 1)) - 1; lo = -(64'sd1 <<< (OW - 1));
    if (s >= 0) v = (x >= 0) ? x / (64'sd1 <<< s) : -((-x + (64'sd1 <<< s) - 1) / (64'sd1 <<< s));
    else        v = x * (64'sd1 <<< (-s));
    return (v > hi) ? hi : (v < lo) ? lo : v;
  endfunction

  initial begin
    #100000; failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int t = 0; t < 500; t++) begin
      shamt = SW'($signed($urandom_range(15, 0)) - 12);
      for (int l = 0; l < LANES; l++) din[l] = IW'($urandom >> ($urandom_range(13, 0)));
      if (t == 0) begin shamt = 0; din[0] = IW'(40000); din[1] = IW'(-40000); end
      #1;
      for (int l = 0; l < LANES; l++) begin
        longint e;
        e = model(longint'($signed(din[l])), int'(shamt));
        checks++;
        if (longint'($signed(dout[l])) != e) begin
          failures++;
          if (failures < 5) $display("x=%0d s=%0d got %0d exp %0d", $signed(din[l]), shamt, $signed(dout[l]), e);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
