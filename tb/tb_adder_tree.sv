// tb_adder_tree: random and extreme vectors against a plain sum, for the
// PE's size (32 terms of 5 bits) and an odd size (5 terms) that needs padding.
module tb_adder_tree;
  logic clk = 1'b0;
  logic signed [4:0] a [32];
  logic signed [9:0] sa;
  logic signed [4:0] b [5];
  logic signed [7:0] sb;
  int checks = 0, failures = 0, cycles = 0;

  adder_tree #(.N(32), .IW(5)) dut_a (.in(a), .sum(sa));
  adder_tree #(.N(5),  .IW(5)) dut_b (.in(b), .sum(sb));

  always #5 clk = ~clk;
  always @(posedge clk) cycles++;

  initial begin : watchdog
    wait (cycles == 10000);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input int got, input int exp, input string what);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    for (int n = 0; n < 500; n++) begin
      int ea, eb;
      ea = 0; eb = 0;
      for (int i = 0; i < 32; i++) begin
        case (n)
          0:       a[i] = -5'sd16;
          1:       a[i] = 5'sd15;
          default: a[i] = 5'($urandom);
        endcase
        ea += int'(a[i]);
      end
      for (int i = 0; i < 5; i++) begin
        b[i] = (n == 0) ? -5'sd16 : 5'($urandom);
        eb += int'(b[i]);
      end
      @(posedge clk); #1;
      check(int'(sa), ea, "N=32");
      check(int'(sb), eb, "N=5");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
