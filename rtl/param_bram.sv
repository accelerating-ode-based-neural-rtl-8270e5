// param_bram: the parameter memory theta of the ODEBlock in BRAM.
//
// Holds the weights of both 3x3 convolutions and the scale (gamma) and shift
// (beta) of both batch normalisations. Weights are split into P banks by
// output channel so that the P multiply-add lanes, which work on output
// channels g*P .. g*P+P-1, each read their own weight in the same cycle at
// one shared address
//   conv*(C/P)*C*9 + (oc/P)*C*9 + ic*9 + k      (k = 3*dy + dx of the tap).
// The host writes weights by the flat index conv*C*C*9 + oc*C*9 + ic*9 + k
// and BN parameters by bn*2C + {gamma 0, beta 1}*C + c. All reads are
// synchronous (one cycle). The paper stores theta in BRAM (Fig. 3); the
// layout is this design's own.
module param_bram
  import ode_pkg::*;
#(
  parameter int unsigned C = 64,
  parameter int unsigned P = 16,
  localparam int unsigned WDEPTH = 2 * (C / P) * C * 9,   // per bank
  localparam int unsigned WAW    = $clog2(WDEPTH),
  localparam int unsigned WIDXW  = $clog2(2 * C * C * 9),
  localparam int unsigned BDEPTH = 4 * C,
  localparam int unsigned BAW    = $clog2(BDEPTH)
) (
  input  logic             clk,
  // host write side
  input  logic             w_we,
  input  logic [WIDXW-1:0] w_idx,
  input  q20_t             w_data,
  input  logic             bn_we,
  input  logic [BAW-1:0]   bn_widx,
  input  q20_t             bn_wdata,
  // convolution read side
  input  logic [WAW-1:0]   w_rd_addr,
  output q20_t             w_rd_data [P],
  // batch-normalisation read side
  input  logic [BAW-1:0]   bn_rd_idx,
  output q20_t             bn_rd_data
);
  localparam int unsigned KW = C * 9;   // words per output channel per conv

  // Decode the flat host index into (bank, bank address).
  int unsigned conv_i, oc_i, rest_i;
  logic [WAW-1:0] wr_bank_addr;
  int unsigned    wr_bank;
  always_comb begin
    conv_i       = int'(w_idx) / (C * KW);
    oc_i         = (int'(w_idx) % (C * KW)) / KW;
    rest_i       = int'(w_idx) % KW;
    wr_bank      = oc_i % P;
    wr_bank_addr = WAW'(conv_i * (C / P) * KW + (oc_i / P) * KW + rest_i);
  end

  for (genvar b = 0; b < P; b++) begin : g_bank
    q20_t mem [WDEPTH];
    always_ff @(posedge clk) begin
      if (w_we && wr_bank == b) mem[wr_bank_addr] <= w_data;
      w_rd_data[b] <= mem[w_rd_addr];
    end
  end

  q20_t bn_mem [BDEPTH];
  always_ff @(posedge clk) begin
    if (bn_we) bn_mem[bn_widx] <= bn_wdata;
    bn_rd_data <= bn_mem[bn_rd_idx];
  end
endmodule
