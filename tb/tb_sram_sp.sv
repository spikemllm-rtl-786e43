// tb_sram_sp: write a reference pattern, read it back with one cycle of
// latency, and check that rdata holds between reads and is not changed by a
// write.
module tb_sram_sp;
  localparam int WIDTH = 24, DEPTH = 64;
  logic clk = 1'b0;
  logic en, we;
  logic [$clog2(DEPTH)-1:0] addr;
  logic [WIDTH-1:0] wdata, rdata;
  logic [WIDTH-1:0] ref_mem [DEPTH];
  int checks = 0, failures = 0, cycles = 0;

  sram_sp #(.WIDTH(WIDTH), .DEPTH(DEPTH)) dut (.clk, .en, .we, .addr, .wdata, .rdata);

  always #5 clk = ~clk;
  always @(posedge clk) cycles++;

  initial begin : watchdog
    wait (cycles == 5000);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input logic [WIDTH-1:0] got, exp, input string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s got %h expected %h", what, got, exp);
    end
  endtask

  initial begin
    en = 0; we = 0; addr = '0; wdata = '0;
    @(negedge clk);
    for (int a = 0; a < DEPTH; a++) begin
      en = 1; we = 1; addr = a[$clog2(DEPTH)-1:0];
      wdata = WIDTH'(a * 32'h9e3779b1);
      ref_mem[a] = wdata;
      @(negedge clk);
    end
    for (int n = 0; n < 300; n++) begin
      int a;
      a = $urandom_range(DEPTH-1);
      en = 1; we = 0; addr = a[$clog2(DEPTH)-1:0];
      @(negedge clk);
      check(rdata, ref_mem[a], "read");
      en = 0;                                   // idle: data holds
      @(negedge clk);
      check(rdata, ref_mem[a], "hold");
      if (n % 3 == 0) begin                     // write: rdata unchanged
        int b;
        logic [WIDTH-1:0] last_read;
        last_read = ref_mem[a];
        b = $urandom_range(DEPTH-1);
        en = 1; we = 1; addr = b[$clog2(DEPTH)-1:0]; wdata = WIDTH'($urandom);
        ref_mem[b] = wdata;
        @(negedge clk);
        check(rdata, last_read, "hold over write");
        we = 0; en = 0;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
