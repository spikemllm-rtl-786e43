// tb_memory_banks: host loading and compute-side reading of the input
// banks, compute-side writing and host read-back of the output banks, and the
// refusal of host requests while busy. Small banks keep the run short.
module tb_memory_banks;
  localparam int NBI = 4, IDP = 16, IWW = 16, NBO = 2, ODP = 8, OWW = 20;
  logic clk = 1'b0, rst_n = 1'b0, busy;
  logic                   in_en    [NBI];
  logic [$clog2(IDP)-1:0] in_addr  [NBI];
  logic [IWW-1:0]         in_rdata [NBI];
  logic                   out_we    [NBO];
  logic [$clog2(ODP)-1:0] out_addr  [NBO];
  logic [OWW-1:0]         out_wdata [NBO];
  logic host_in_we, host_in_ready, host_out_re, host_out_ready, host_out_rvalid;
  logic [$clog2(NBI)-1:0] host_in_bank;
  logic [$clog2(IDP)-1:0] host_in_addr;
  logic [IWW-1:0]         host_in_wdata;
  logic [$clog2(NBO)-1:0] host_out_bank;
  logic [$clog2(ODP)-1:0] host_out_addr;
  logic [OWW-1:0]         host_out_rdata;
  logic [IWW-1:0] ref_in  [NBI][IDP];
  logic [OWW-1:0] ref_out [NBO][ODP];
  int checks = 0, failures = 0, cycles = 0;

  memory_banks #(.NBI(NBI), .IDP(IDP), .IWW(IWW), .NBO(NBO), .ODP(ODP), .OWW(OWW)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycles++;

  initial begin : watchdog
    wait (cycles == 20000);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input logic [31:0] got, exp, input string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s got %h expected %h", what, got, exp);
    end
  endtask

  task automatic idle_compute();
    for (int b = 0; b < NBI; b++) begin in_en[b] = 0; in_addr[b] = '0; end
    for (int b = 0; b < NBO; b++) begin out_we[b] = 0; out_addr[b] = '0; out_wdata[b] = '0; end
  endtask

  initial begin
    busy = 0; host_in_we = 0; host_out_re = 0;
    host_in_bank = '0; host_in_addr = '0; host_in_wdata = '0;
    host_out_bank = '0; host_out_addr = '0;
    idle_compute();
    repeat (2) @(negedge clk);
    rst_n = 1;
    // host loads every input word
    check(32'(host_in_ready), 1, "host_in_ready idle");
    for (int b = 0; b < NBI; b++)
      for (int a = 0; a < IDP; a++) begin
        host_in_we = 1; host_in_bank = b[$clog2(NBI)-1:0]; host_in_addr = a[$clog2(IDP)-1:0];
        host_in_wdata = IWW'($urandom); ref_in[b][a] = host_in_wdata;
        @(negedge clk);
      end
    host_in_we = 0;
    // a host write while busy must be refused
    busy = 1;
    #1 check(32'(host_in_ready), 0, "host_in_ready busy");
    host_in_we = 1; host_in_bank = '0; host_in_addr = '0; host_in_wdata = ~ref_in[0][0];
    @(negedge clk);
    host_in_we = 0;
    // compute side: every bank reads a different address in the same cycle
    for (int n = 0; n < 50; n++) begin
      int ad [NBI];
      for (int b = 0; b < NBI; b++) begin
        ad[b] = $urandom_range(IDP-1);
        in_en[b] = 1; in_addr[b] = ad[b][$clog2(IDP)-1:0];
      end
      @(negedge clk);
      for (int b = 0; b < NBI; b++) check(32'(in_rdata[b]), 32'(ref_in[b][ad[b]]), "compute read");
    end
    idle_compute();
    // compute side writes every output word
    for (int a = 0; a < ODP; a++) begin
      for (int b = 0; b < NBO; b++) begin
        out_we[b] = 1; out_addr[b] = a[$clog2(ODP)-1:0];
        out_wdata[b] = OWW'($urandom); ref_out[b][a] = out_wdata[b];
      end
      @(negedge clk);
    end
    idle_compute();
    // host read while busy is refused
    host_out_re = 1;
    @(negedge clk);
    check(32'(host_out_rvalid), 0, "no rvalid while busy");
    host_out_re = 0;
    busy = 0;
    // host reads back everything, data one cycle later
    for (int b = 0; b < NBO; b++)
      for (int a = 0; a < ODP; a++) begin
        host_out_re = 1; host_out_bank = b[$clog2(NBO)-1:0]; host_out_addr = a[$clog2(ODP)-1:0];
        @(negedge clk);
        host_out_re = 0;
        check(32'(host_out_rvalid), 1, "rvalid");
        check(32'(host_out_rdata), 32'(ref_out[b][a]), "host read");
      end
    // the refused write did not land: read bank 0 word 0 through the compute side
    busy = 1; in_en[0] = 1; in_addr[0] = '0;
    @(negedge clk);
    check(32'(in_rdata[0]), 32'(ref_in[0][0]), "refused write");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
