// bram_512x64: one FPGA block RAM (36 Kb) in its 512 x 64-bit configuration.
//
// The encoder keeps level hypervectors and the seed ID in these memories. It
// is written as an array with two ports so that FPGA synthesis maps it onto a
// block RAM. Port A reads or writes, port B only reads; both reads are
// registered (one cycle latency, as the paper states for its BRAMs). A port
// that is not enabled keeps its previous output, which is how the encoder
// leaves the BRAMs it does not address idle. Write-only-on-A and read-first
// behaviour are this design's choices.
module bram_512x64 #(
  parameter int unsigned ROWS  = 512,
  parameter int unsigned WIDTH = 64,
  localparam int unsigned AW   = $clog2(ROWS)
) (
  input  logic             clk,
  input  logic             a_en,
  input  logic             a_we,
  input  logic [AW-1:0]    a_addr,
  input  logic [WIDTH-1:0] a_wdata,
  output logic [WIDTH-1:0] a_rdata,
  input  logic             b_en,
  input  logic [AW-1:0]    b_addr,
  output logic [WIDTH-1:0] b_rdata
);
  logic [WIDTH-1:0] mem [ROWS];

  always_ff @(posedge clk) begin
    if (a_en) begin
      a_rdata <= mem[a_addr];
      if (a_we) mem[a_addr] <= a_wdata;
    end
  end

  always_ff @(posedge clk)
    if (b_en) b_rdata <= mem[b_addr];
endmodule
