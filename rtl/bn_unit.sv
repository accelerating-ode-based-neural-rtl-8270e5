// bn_unit: the batch-normalisation step of the ODEBlock, optionally fused
// with the ReLU step (after the first BN) or with the Euler update (after
// the second BN).
//
// The paper computes the mean, variance and standard deviation with
// multiply-add, division and square-root units, i.e. the statistics are
// taken from the feature map being normalised (one image, per channel). For
// each channel c this unit
//   1. reads the H*W values once; two multiply-add units accumulate
//      S1 = sum(x * 1.0) and S2 = sum(x * x) in Q40,
//   2. mean  = (S1 >> 20) / N,  ex2 = (S2 >> 20) / N     (divider, N = H*W),
//      var   = max(0, ex2 - (mean*mean >> 20)) + eps,
//      sigma = isqrt(var << 20)                           (square-root unit),
//      scale = (gamma << 20) / sigma                      (divider),
//   3. reads the values again and writes back in place
//      y = ((x - mean) * scale >> 20) + beta, then relu(y) if relu_en, or
//      z + (h * y >> 20) if euler_en, where z is the block input at the same
//      position.
// All shifts are arithmetic (truncating) and results saturate to 32 bits.
// Computing one scale per channel, so that the per-element work is one
// multiply-add, is this design's choice; so is eps = 1e-5.
//
// Interface: start (one cycle, while idle) with bn_sel (parameter set 0/1),
// relu_en, euler_en and h. The unit reads the buffer through src_addr /
// src_data (and the block input through the same address, z_data), writes
// back through dst_* one word per cycle, and reads gamma/beta from the
// parameter BRAM (one cycle latency). done pulses once after the last
// channel. A channel takes about 2*H*W + 240 cycles.
module bn_unit
  import ode_pkg::*;
#(
  parameter int unsigned C = 64,
  parameter int unsigned H = 8,
  parameter int unsigned W = 8,
  parameter int unsigned P = 16,
  localparam int unsigned HW  = H * W,
  localparam int unsigned FAW = ((C / P) * HW > 1) ? $clog2((C / P) * HW) : 1,
  localparam int unsigned BAW = $clog2(4 * C)
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           start,
  input  logic           bn_sel,
  input  logic           relu_en,
  input  logic           euler_en,
  input  q20_t           h,
  output logic           busy,
  output logic           done,
  // buffer being normalised (read and written in place)
  output logic [FAW-1:0] src_addr,
  input  q20_t           src_data [P],
  input  q20_t           z_data   [P],
  output logic [P-1:0]   dst_mask,
  output logic [FAW-1:0] dst_addr,
  output q20_t           dst_data [P],
  // gamma / beta
  output logic [BAW-1:0] prm_idx,
  input  q20_t           prm_data
);
  typedef enum logic [3:0] {
    S_IDLE, S_STAT, S_STAT_W1, S_STAT_W2, S_MEAN, S_EX2, S_SQRT,
    S_GAMMA, S_BETA, S_SCALE, S_NORM, S_NORM_W, S_NEXT
  } state_e;

  state_e      st;
  logic        sel, do_relu, do_euler;
  q20_t        hstep;
  int unsigned c, pix;
  q20_t        mean, ex2, sigma, gamma, beta, scale;
  logic        sub_go;    // one-cycle start of divider / sqrt

  // ---------------- read side ----------------
  logic rd_act;           // a read is issued this cycle
  assign rd_act   = (st == S_STAT) || (st == S_NORM);
  assign src_addr = FAW'((c / P) * HW + pix);

  logic        rv;        // read data valid (one cycle later)
  logic        rv_norm;
  int unsigned rbank;
  logic [FAW-1:0] raddr;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rv <= 1'b0; rv_norm <= 1'b0; rbank <= 0; raddr <= '0;
    end else begin
      rv      <= rd_act;
      rv_norm <= (st == S_NORM);
      rbank   <= c % P;
      raddr   <= src_addr;
    end
  end

  q20_t xv, zv;
  assign xv = src_data[rbank];
  assign zv = z_data[rbank];

  // ---------------- statistics: two multiply-add units ----------------
  acc_t s1, s2;
  logic stat_en, stat_first;
  assign stat_en    = rv && !rv_norm;
  mac_unit u_sum   (.clk, .rst_n, .en(stat_en), .first(stat_first),
                    .a(xv), .b(Q20_ONE), .acc(s1));
  mac_unit u_sumsq (.clk, .rst_n, .en(stat_en), .first(stat_first),
                    .a(xv), .b(xv), .acc(s2));

  logic first_pend;
  assign stat_first = first_pend;

  // ---------------- divider and square root ----------------
  acc_t div_num;
  q20_t div_den;
  logic div_busy, div_done;
  q20_t div_q;
  fx_divider u_div (.clk, .rst_n, .start(sub_go && (st == S_MEAN || st == S_EX2 || st == S_SCALE)),
                    .num(div_num), .den(div_den), .busy(div_busy), .done(div_done),
                    .quot(div_q));

  logic [ACC_W-1:0]  sq_x;
  logic              sq_busy, sq_done;
  logic [DATA_W-1:0] sq_root;
  fx_sqrt u_sqrt (.clk, .rst_n, .start(sub_go && st == S_SQRT), .x(sq_x),
                  .busy(sq_busy), .done(sq_done), .root(sq_root));

  acc_t var_q20;
  always_comb begin
    unique case (st)
      S_MEAN:  begin div_num = s1 >>> FRAC_W;          div_den = q20_t'(HW); end
      S_EX2:   begin div_num = s2 >>> FRAC_W;          div_den = q20_t'(HW); end
      default: begin div_num = acc_t'(gamma) <<< FRAC_W; div_den = sigma;     end
    endcase
    var_q20 = acc_t'(ex2) - ((acc_t'(mean) * acc_t'(mean)) >>> FRAC_W);
    if (var_q20 < 0) var_q20 = '0;
    var_q20 = var_q20 + acc_t'(BN_EPS);
    sq_x    = ACC_W'(var_q20) << FRAC_W;
  end

  // gamma at bn_sel*2C + c, beta at bn_sel*2C + C + c
  assign prm_idx = BAW'((sel ? 2 * C : 0) + ((st == S_GAMMA) ? 0 : C) + c);

  // ---------------- normalise, ReLU, Euler ----------------
  q20_t y_bn, y_relu, y_out;
  always_comb y_bn = sat32(((acc_t'(xv) - acc_t'(mean)) * acc_t'(scale) >>> FRAC_W)
                           + acc_t'(beta));
  relu         u_relu  (.en(do_relu),  .x(y_bn),  .y(y_relu));
  euler_update u_euler (.en(do_euler), .z(zv), .h(hstep), .f(y_relu), .y(y_out));

  always_comb begin
    dst_addr = raddr;
    dst_mask = '0;
    if (rv && rv_norm) dst_mask[rbank] = 1'b1;
    for (int b = 0; b < P; b++) dst_data[b] = y_out;
  end

  // ---------------- control ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; sel <= 1'b0; do_relu <= 1'b0; do_euler <= 1'b0; hstep <= '0;
      c <= 0; pix <= 0; mean <= '0; ex2 <= '0; sigma <= '0; gamma <= '0;
      beta <= '0; scale <= '0; sub_go <= 1'b0; done <= 1'b0; first_pend <= 1'b0;
    end else begin
      done   <= 1'b0;
      sub_go <= 1'b0;
      if (stat_en) first_pend <= 1'b0;
      unique case (st)
        S_IDLE: if (start) begin
          sel <= bn_sel; do_relu <= relu_en; do_euler <= euler_en; hstep <= h;
          c <= 0; pix <= 0; first_pend <= 1'b1; st <= S_STAT;
        end
        S_STAT: begin
          if (pix == HW - 1) begin pix <= 0; st <= S_STAT_W1; end
          else pix <= pix + 1;
        end
        S_STAT_W1: st <= S_STAT_W2;                       // last data into MACs
        S_STAT_W2: begin st <= S_MEAN; sub_go <= 1'b1; end
        S_MEAN: if (div_done) begin mean <= div_q; st <= S_EX2; sub_go <= 1'b1; end
        S_EX2:  if (div_done) begin ex2  <= div_q; st <= S_SQRT; sub_go <= 1'b1; end
        S_SQRT: if (sq_done)  begin sigma <= q20_t'(sq_root); st <= S_GAMMA; end
        S_GAMMA: st <= S_BETA;                            // gamma read issued
        S_BETA: begin gamma <= prm_data; st <= S_SCALE; sub_go <= 1'b1; end
        S_SCALE: begin
          if (sub_go) beta <= prm_data;                   // beta read arrives
          if (div_done) begin scale <= div_q; st <= S_NORM; end
        end
        S_NORM: begin
          if (pix == HW - 1) begin pix <= 0; st <= S_NORM_W; end
          else pix <= pix + 1;
        end
        S_NORM_W: st <= S_NEXT;
        S_NEXT: begin
          if (c == C - 1) begin st <= S_IDLE; done <= 1'b1; end
          else begin c <= c + 1; first_pend <= 1'b1; st <= S_STAT; end
        end
        default: st <= S_IDLE;
      endcase
    end
  end
  assign busy = (st != S_IDLE);
endmodule
