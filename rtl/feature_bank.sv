// feature_bank: single-port store of the 64x64 Boolean feature map.
//
// One word holds one OG-BCSR block, i.e. two feature rows (this design's
// organisation): bits [63:0] are row 2*addr, bits [127:64] row 2*addr+1.
// Bit j of a row is frame j, frame 0 the oldest. Writes come in half words
// (one feature row) from the feature extractor; reads return a whole block
// one clock after `en` with `we` low, so the distributor can load both of its
// row scratch pads at once.
module feature_bank
  import tkws_pkg::*;
(
  input  logic                   clk,
  input  logic                   en,
  input  logic                   we,
  input  logic [4:0]             addr,
  input  logic                   whalf,
  input  logic [NFRAMES-1:0]     wdata,
  output logic [2*NFRAMES-1:0]   rdata
);
  logic [2*NFRAMES-1:0] mem [NBLOCKS];

  always_ff @(posedge clk) begin
    if (en) begin
      if (we) begin
        if (whalf) mem[addr][2*NFRAMES-1:NFRAMES] <= wdata;
        else       mem[addr][NFRAMES-1:0]         <= wdata;
      end else begin
        rdata <= mem[addr];
      end
    end
  end
endmodule
