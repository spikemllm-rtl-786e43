// memory_banks: banked on-chip storage of activations, weights and results.
//
// NB_IN input banks (WORD_W-bit words: one K-element operand vector each)
// hold spike activations and weights; NB_OUT output banks (ROW_W-bit words:
// one row of COLS partial sums each) hold results. Every bank is a single-port
// SRAM (sram_sp), so all banks can be accessed in the same cycle, which is how
// the array gets its 16 spike and 16 weight vectors per cycle.
//
// Each bank has two requesters: the compute side (through the bank select
// unit) and a host port standing in for the off-chip memory interface. While
// busy is high the compute side owns every bank and host requests are refused
// (host_in_ready / host_out_ready low); while it is low the host may write one
// input bank word and read one output bank word per cycle. Reads return data
// one cycle after the request (host_out_rvalid).
// The 44 MiB total follows the published design; the bank counts, widths,
// depths and the host arbitration are this design's choices.
module memory_banks
  import spk_pkg::*;
#(
  parameter int unsigned NBI  = NB_IN,
  parameter int unsigned IDP  = IN_DEPTH,
  parameter int unsigned IWW  = WORD_W,
  parameter int unsigned NBO  = NB_OUT,
  parameter int unsigned ODP  = OUT_DEPTH,
  parameter int unsigned OWW  = ROW_W
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      busy,
  // compute side, input banks
  input  logic                      in_en    [NBI],
  input  logic [$clog2(IDP)-1:0]    in_addr  [NBI],
  output logic [IWW-1:0]            in_rdata [NBI],
  // compute side, output banks
  input  logic                      out_we    [NBO],
  input  logic [$clog2(ODP)-1:0]    out_addr  [NBO],
  input  logic [OWW-1:0]            out_wdata [NBO],
  // host side
  input  logic                      host_in_we,
  input  logic [$clog2(NBI)-1:0]    host_in_bank,
  input  logic [$clog2(IDP)-1:0]    host_in_addr,
  input  logic [IWW-1:0]            host_in_wdata,
  output logic                      host_in_ready,
  input  logic                      host_out_re,
  input  logic [$clog2(NBO)-1:0]    host_out_bank,
  input  logic [$clog2(ODP)-1:0]    host_out_addr,
  output logic                      host_out_ready,
  output logic [OWW-1:0]            host_out_rdata,
  output logic                      host_out_rvalid
);
  logic [OWW-1:0]            ob_rdata [NBO];
  logic [$clog2(NBO)-1:0]    rd_bank_q;

  assign host_in_ready  = !busy;
  assign host_out_ready = !busy;

  for (genvar b = 0; b < NBI; b++) begin : g_in
    logic                   en, we;
    logic [$clog2(IDP)-1:0] addr;
    always_comb begin
      if (busy) begin
        en   = in_en[b];
        we   = 1'b0;
        addr = in_addr[b];
      end else begin
        en   = host_in_we && (32'(host_in_bank) == b);
        we   = 1'b1;
        addr = host_in_addr;
      end
    end
    sram_sp #(.WIDTH(IWW), .DEPTH(IDP)) u_bank (
      .clk, .en, .we, .addr, .wdata(host_in_wdata), .rdata(in_rdata[b]));
  end

  for (genvar b = 0; b < NBO; b++) begin : g_out
    logic                   en, we;
    logic [$clog2(ODP)-1:0] addr;
    always_comb begin
      if (busy) begin
        en   = out_we[b];
        we   = 1'b1;
        addr = out_addr[b];
      end else begin
        en   = host_out_re && (32'(host_out_bank) == b);
        we   = 1'b0;
        addr = host_out_addr;
      end
    end
    sram_sp #(.WIDTH(OWW), .DEPTH(ODP)) u_bank (
      .clk, .en, .we, .addr, .wdata(out_wdata[b]), .rdata(ob_rdata[b]));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      host_out_rvalid <= 1'b0;
      rd_bank_q       <= '0;
    end else begin
      host_out_rvalid <= host_out_re && !busy;
      if (host_out_re && !busy)
        rd_bank_q <= host_out_bank;
    end
  end

  assign host_out_rdata = ob_rdata[rd_bank_q];
endmodule
