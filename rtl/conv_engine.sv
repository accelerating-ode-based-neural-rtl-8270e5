// conv_engine: 3x3, stride-1 convolution with C input and C output channels
// over an H x W feature map, computed by P multiply-add lanes in parallel.
//
// The P lanes work on a group of P output channels (g*P .. g*P+P-1) at a
// time. For each output pixel the engine walks all C input channels and the
// nine taps of the kernel, one (channel, tap) per cycle: the input value is
// read once and broadcast to all lanes, and each lane reads its own weight
// from its bank of the parameter BRAM. Taps that fall outside the image
// (zero padding of one pixel, which keeps the H x W size) feed a zero. After
// the last tap each lane's Q40 sum is truncated to Q20, saturated, and all P
// outputs are written in one cycle. A convolution therefore takes
//   (C/P) * H * W * C * 9 + 3 cycles
// from start to done, i.e. it scales inversely with the number of lanes, as
// the paper reports for its conv_xN variants. The two-stage pipeline (BRAM
// read, then multiply-add) and the loop order are this design's own; the
// paper's own cycle counts (about 5 cycles per multiply-add) are not
// reproduced. There is no bias: each convolution is followed by batch
// normalisation.
//
// Interface: start (one cycle, while idle) with conv_sel choosing the weight
// set; done pulses one cycle when the last output is written. The source
// buffer is read through src_addr/src_data (read latency one cycle), the
// weights through w_addr/w_data (one cycle), results go to dst_*.
module conv_engine
  import ode_pkg::*;
#(
  parameter int unsigned C = 64,
  parameter int unsigned H = 8,
  parameter int unsigned W = 8,
  parameter int unsigned P = 16,
  localparam int unsigned HW  = H * W,
  localparam int unsigned FAW = ((C / P) * HW > 1) ? $clog2((C / P) * HW) : 1,
  localparam int unsigned WAW = $clog2(2 * (C / P) * C * 9)
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           start,
  input  logic           conv_sel,   // 0: first convolution, 1: second
  output logic           busy,
  output logic           done,
  // source feature map
  output logic [FAW-1:0] src_addr,
  input  q20_t           src_data [P],
  // weights
  output logic [WAW-1:0] w_addr,
  input  q20_t           w_data [P],
  // destination feature map
  output logic [P-1:0]   dst_mask,
  output logic [FAW-1:0] dst_addr,
  output q20_t           dst_data [P]
);
  // ---------------- issue stage: loop counters ----------------
  logic        run, sel;
  int unsigned g, y, x, ic, ky, kx;
  logic        last_issue;

  assign last_issue = (ky == 2) && (kx == 2) && (ic == C - 1) &&
                      (x == W - 1) && (y == H - 1) && (g == C / P - 1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run <= 1'b0; sel <= 1'b0;
      g <= 0; y <= 0; x <= 0; ic <= 0; ky <= 0; kx <= 0;
    end else if (start && !busy) begin
      run <= 1'b1; sel <= conv_sel;
      g <= 0; y <= 0; x <= 0; ic <= 0; ky <= 0; kx <= 0;
    end else if (run) begin
      if (last_issue) run <= 1'b0;
      if (kx != 2) kx <= kx + 1;
      else begin
        kx <= 0;
        if (ky != 2) ky <= ky + 1;
        else begin
          ky <= 0;
          if (ic != C - 1) ic <= ic + 1;
          else begin
            ic <= 0;
            if (x != W - 1) x <= x + 1;
            else begin
              x <= 0;
              if (y != H - 1) y <= y + 1;
              else begin
                y <= 0;
                g <= g + 1;
              end
            end
          end
        end
      end
    end
  end

  // Address generation for the current (pixel, channel, tap).
  int iy, ix;
  logic inb;
  always_comb begin
    iy  = int'(y) + int'(ky) - 1;
    ix  = int'(x) + int'(kx) - 1;
    inb = (iy >= 0) && (iy < int'(H)) && (ix >= 0) && (ix < int'(W));
    src_addr = inb ? FAW'((ic / P) * HW + unsigned'(iy) * W + unsigned'(ix)) : '0;
    w_addr   = WAW'((sel ? (C / P) * C * 9 : 0) + g * C * 9 + ic * 9 + ky * 3 + kx);
  end

  // ---------------- stage 1: BRAM read in flight ----------------
  logic        v1, first1, last1, inb1;
  int unsigned bank1;
  logic [FAW-1:0] oaddr1;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1 <= 1'b0; first1 <= 1'b0; last1 <= 1'b0; inb1 <= 1'b0;
      bank1 <= 0; oaddr1 <= '0;
    end else begin
      v1     <= run;
      first1 <= (ic == 0) && (ky == 0) && (kx == 0);
      last1  <= (ic == C - 1) && (ky == 2) && (kx == 2);
      inb1   <= inb;
      bank1  <= ic % P;
      oaddr1 <= FAW'(g * HW + y * W + x);
    end
  end

  // ---------------- stage 2: multiply-add lanes ----------------
  q20_t xin;
  assign xin = inb1 ? src_data[bank1] : q20_t'(0);

  acc_t acc [P];
  for (genvar l = 0; l < P; l++) begin : g_lane
    mac_unit u_mac (
      .clk, .rst_n,
      .en   (v1),
      .first(first1),
      .a    (xin),
      .b    (w_data[l]),
      .acc  (acc[l])
    );
  end

  logic v2;
  logic [FAW-1:0] oaddr2;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v2 <= 1'b0; oaddr2 <= '0;
    end else begin
      v2     <= v1 && last1;
      oaddr2 <= oaddr1;
    end
  end

  always_comb begin
    dst_mask = v2 ? '1 : '0;
    dst_addr = oaddr2;
    for (int l = 0; l < P; l++) dst_data[l] = q40_to_q20(acc[l]);
  end

  // ---------------- completion ----------------
  logic drain1, drain2;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      drain1 <= 1'b0; drain2 <= 1'b0; done <= 1'b0;
    end else begin
      drain1 <= run && last_issue;
      drain2 <= drain1;
      done   <= drain2;
    end
  end
  assign busy = run || drain1 || drain2 || done;
endmodule
