// sram_buffer: one on-chip SRAM buffer bank, 512 KB by default.
//
// The accelerator places 142 such banks (71 MB) around its PE arrays to hold
// weights, inputs and activations. The capacity and count come from the
// paper; the organisation (DEPTH words of WIDTH bits, one synchronous port,
// one-cycle read latency, no reset of contents) is this design's choice, as
// the paper gives none. Written as an array so that a memory compiler macro
// can replace it.
//
// Timing: a read with en=1, we=0 in cycle t returns rdata in cycle t+1;
// rdata holds its value until the next read.
module sram_buffer #(
  parameter int unsigned WIDTH = 1024,   // bits per word (128 bytes)
  parameter int unsigned DEPTH = 4096    // words: 4096 x 128 B = 512 KB
) (
  input  logic                     clk,
  input  logic                     en,
  input  logic                     we,
  input  logic [$clog2(DEPTH)-1:0] addr,
  input  logic [WIDTH-1:0]         wdata,
  output logic [WIDTH-1:0]         rdata
);
  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (en) begin
      if (we) mem[addr] <= wdata;
      else    rdata     <= mem[addr];
    end
  end
endmodule
