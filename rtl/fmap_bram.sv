// fmap_bram: one feature-map buffer (C channels of H x W Q20 words) in BRAM.
//
// The buffer is split into P banks by channel: channel c lives in bank
// c % P at bank address (c / P) * H * W + pixel. All banks share one read
// address and one write address; each bank has its own write enable. This
// lets the P convolution lanes write P output channels of one pixel in a
// single cycle, while a single-channel reader addresses everything and picks
// bank c % P from rd_data. Reads are synchronous (data one cycle after the
// address), as in a Xilinx block RAM in read-first mode. The paper keeps "input and
// output feature maps for all the channels" in BRAM; the banking is this
// design's own choice.
module fmap_bram
  import ode_pkg::*;
#(
  parameter int unsigned C = 64,
  parameter int unsigned H = 8,
  parameter int unsigned W = 8,
  parameter int unsigned P = 16,
  localparam int unsigned DEPTH = (C / P) * H * W,
  localparam int unsigned AW    = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic          clk,
  input  logic [AW-1:0] rd_addr,
  output q20_t          rd_data [P],
  input  logic [P-1:0]  wr_mask,
  input  logic [AW-1:0] wr_addr,
  input  q20_t          wr_data [P]
);
  initial begin
    assert (C % P == 0) else $fatal(1, "fmap_bram: C must be a multiple of P");
  end

  for (genvar b = 0; b < P; b++) begin : g_bank
    q20_t mem [DEPTH];
    always_ff @(posedge clk) begin
      if (wr_mask[b]) mem[wr_addr] <= wr_data[b];
      rd_data[b] <= mem[rd_addr];
    end
  end
endmodule
