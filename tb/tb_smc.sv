// tb_smc: exhaustive check of the sign-magnitude conversion.
// Every 4-bit two's-complement code is applied; polarity must equal the sign
// and the magnitude the absolute value, with the dropped code -8 saturated
// to magnitude 7.
module tb_smc;
  localparam int T = 3;
  logic       clk = 1'b0;
  logic [T:0] s;
  logic       pol;
  logic [T-1:0] mag;
  int checks = 0, failures = 0, cycles = 0;

  smc #(.T(T)) dut (.s, .pol, .mag);

  always #5 clk = ~clk;
  always @(posedge clk) cycles++;

  initial begin : watchdog
    wait (cycles == 1000);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = -8; v < 8; v++) begin
      int exp_mag;
      s = (T+1)'(v);
      @(posedge clk); #1;
      exp_mag = (v < 0) ? -v : v;
      if (exp_mag > 7) exp_mag = 7;
      checks++;
      if (pol !== (v < 0) || int'(mag) != exp_mag) begin
        failures++;
        $display("FAIL s=%0d pol=%0b mag=%0d expected mag %0d", v, pol, mag, exp_mag);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
