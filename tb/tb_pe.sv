// tb_pe: the spike-driven dot product against sum_i s[i]*w[i].
// Spike values are drawn from the symmetric TC-LIF range [-7,7] (dense,
// sparse and all-zero vectors, and the extreme -7 x -8 case); the dropped
// code -8 is also applied once and must act as -7.
module tb_pe;
  localparam int K = 32, T = 3, WW = 4;
  logic clk = 1'b0;
  logic        [T:0]    s [K];
  logic signed [WW-1:0] w [K];
  logic signed [WW+$clog2(K)+T:0] x;
  int checks = 0, failures = 0, cycles = 0;

  pe #(.K(K), .T(T), .WW(WW)) dut (.s, .w, .x);

  always #5 clk = ~clk;
  always @(posedge clk) cycles++;

  initial begin : watchdog
    wait (cycles == 10000);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 2000; n++) begin
      int e;
      e = 0;
      for (int i = 0; i < K; i++) begin
        int sv, wv;
        wv = int'($urandom_range(15)) - 8;
        case (n)
          0:       sv = 0;
          1:       sv = -7;
          2:       sv = 7;
          3:       sv = (i == 5) ? -8 : 0;
          default: sv = ($urandom_range(3) == 0) ? int'($urandom_range(14)) - 7 : 0;
        endcase
        if (n < 2000 && n > 1000) sv = int'($urandom_range(14)) - 7;   // dense
        if (n == 1 || n == 2) wv = -8;
        s[i] = (T+1)'(sv);
        w[i] = WW'(wv);
        e += ((sv == -8) ? -7 : sv) * wv;
      end
      @(posedge clk); #1;
      checks++;
      if (int'(x) != e) begin
        failures++;
        $display("FAIL vector %0d: x=%0d expected %0d", n, x, e);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
