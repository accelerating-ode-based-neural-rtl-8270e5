// odeblock_top: the ODEBlock accelerator, the part of an ODENet that is
// offloaded to the programmable logic.
//
// It computes M steps of the Euler method on a C-channel H x W feature map,
//   z <- z + h * f(z),  f = BN2(conv2(ReLU(BN1(conv1(z))))),
// with one set of weights theta reused by all steps. Defaults are the
// configuration the paper evaluates most: layer3_2 of ResNet/ODENet for
// CIFAR (64 channels, 8 x 8) with 16 multiply-add lanes (conv_x16).
// Three feature-map BRAMs (input z, temporary T, result R) and the parameter
// BRAM hold everything on chip; ode_ctrl sequences conv_engine and bn_unit
// over them. See the sub-modules for the arithmetic (32-bit Q20 throughout).
//
// Host port (stands in for the processor-side AXI/DMA link, which is not part
// of this design): word-addressed, addr = {region, offset}, see region_e in
// ode_pkg; the offset is wide enough for the weights and for a whole map. Writes (host_we) load z, weights and BN parameters; reads
// (host_re) of z or the result return host_rdata with host_rvalid one cycle
// later. The host port is used only while busy is low; accesses during a run
// are ignored. Operation: pulse start with iters = M and h (Q20 step size);
// done pulses at the end and cycles gives the run length in clock cycles.
// After the run the result z(t_M) is in region RG_RESULT.
module odeblock_top
  import ode_pkg::*;
#(
  parameter int unsigned C = 64,
  parameter int unsigned H = 8,
  parameter int unsigned W = 8,
  parameter int unsigned P = 16,
  localparam int unsigned HW   = H * W,
  localparam int unsigned DEPTH = (C / P) * HW,
  localparam int unsigned FAW  = (DEPTH > 1) ? $clog2(DEPTH) : 1,
  localparam int unsigned WAW  = $clog2(2 * (C / P) * C * 9),
  localparam int unsigned BAW  = $clog2(4 * C),
  localparam int unsigned NW   = 2 * C * C * 9,          // weight words
  localparam int unsigned OFFW = $clog2((NW > C * HW) ? NW : C * HW),
  localparam int unsigned WIW  = $clog2(NW),
  localparam int unsigned AW   = OFFW + 2
) (
  input  logic          clk,
  input  logic          rst_n,
  // host load/store port
  input  logic          host_we,
  input  logic          host_re,
  input  logic [AW-1:0] host_addr,
  input  q20_t          host_wdata,
  output q20_t          host_rdata,
  output logic          host_rvalid,
  // control
  input  logic          start,
  input  logic [15:0]   iters,
  input  q20_t          h,
  output logic          busy,
  output logic          done,
  output logic [15:0]   iter,      // current Euler step (0-based)
  output logic [31:0]   cycles
);
  // ---------------- controller ----------------
  phase_e         phase;
  logic           conv_start, conv_sel, conv_done, conv_busy;
  logic           bn_start, bn_sel, relu_en, euler_en, bn_done, bn_busy;
  logic [FAW-1:0] cp_rd_addr, cp_wr_addr;
  logic           cp_we;

  ode_ctrl #(.C(C), .H(H), .W(W), .P(P)) u_ctrl (
    .clk, .rst_n, .start, .iters, .busy, .done, .phase, .iter, .cycles,
    .conv_start, .conv_sel, .conv_done,
    .bn_start, .bn_sel, .relu_en, .euler_en, .bn_done,
    .cp_rd_addr, .cp_we, .cp_wr_addr
  );

  // ---------------- host address decode ----------------
  region_e        h_rg;
  logic [OFFW-1:0] h_off;
  int unsigned    h_ch, h_pix;
  logic [FAW-1:0] h_faddr;
  logic [P-1:0]   h_fmask;
  logic           h_ok;
  always_comb begin
    h_rg    = region_e'(host_addr[AW-1 -: 2]);
    h_off   = host_addr[OFFW-1:0];
    h_ch    = (int'(h_off) / HW) % C;
    h_pix   = int'(h_off) % HW;
    h_faddr = FAW'((h_ch / P) * HW + h_pix);
    h_fmask = '0;
    h_fmask[h_ch % P] = 1'b1;
    h_ok    = !busy;
  end

  // ---------------- buffers ----------------
  logic [FAW-1:0] z_ra, t_ra, r_ra, z_wa, t_wa, r_wa;
  q20_t           z_rd [P], t_rd [P], r_rd [P];
  q20_t           z_wd [P], t_wd [P], r_wd [P];
  logic [P-1:0]   z_wm, t_wm, r_wm;

  fmap_bram #(.C(C), .H(H), .W(W), .P(P)) u_zbuf (
    .clk, .rd_addr(z_ra), .rd_data(z_rd), .wr_mask(z_wm), .wr_addr(z_wa), .wr_data(z_wd));
  fmap_bram #(.C(C), .H(H), .W(W), .P(P)) u_tbuf (
    .clk, .rd_addr(t_ra), .rd_data(t_rd), .wr_mask(t_wm), .wr_addr(t_wa), .wr_data(t_wd));
  fmap_bram #(.C(C), .H(H), .W(W), .P(P)) u_rbuf (
    .clk, .rd_addr(r_ra), .rd_data(r_rd), .wr_mask(r_wm), .wr_addr(r_wa), .wr_data(r_wd));

  logic [WAW-1:0] w_rd_addr;
  q20_t           w_rd_data [P];
  logic [BAW-1:0] prm_idx;
  q20_t           prm_data;

  param_bram #(.C(C), .P(P)) u_param (
    .clk,
    .w_we     (host_we && h_ok && h_rg == RG_WEIGHT),
    .w_idx    (WIW'(h_off)),
    .w_data   (host_wdata),
    .bn_we    (host_we && h_ok && h_rg == RG_BN),
    .bn_widx  (BAW'(h_off)),
    .bn_wdata (host_wdata),
    .w_rd_addr(w_rd_addr),
    .w_rd_data(w_rd_data),
    .bn_rd_idx(prm_idx),
    .bn_rd_data(prm_data)
  );

  // ---------------- datapath units ----------------
  logic [FAW-1:0] cv_src_addr, cv_dst_addr;
  q20_t           cv_src_data [P], cv_dst_data [P];
  logic [P-1:0]   cv_dst_mask;

  conv_engine #(.C(C), .H(H), .W(W), .P(P)) u_conv (
    .clk, .rst_n, .start(conv_start), .conv_sel, .busy(conv_busy), .done(conv_done),
    .src_addr(cv_src_addr), .src_data(cv_src_data),
    .w_addr(w_rd_addr), .w_data(w_rd_data),
    .dst_mask(cv_dst_mask), .dst_addr(cv_dst_addr), .dst_data(cv_dst_data)
  );

  logic [FAW-1:0] bn_src_addr, bn_dst_addr;
  q20_t           bn_src_data [P], bn_dst_data [P];
  logic [P-1:0]   bn_dst_mask;

  bn_unit #(.C(C), .H(H), .W(W), .P(P)) u_bn (
    .clk, .rst_n, .start(bn_start), .bn_sel, .relu_en, .euler_en, .h,
    .busy(bn_busy), .done(bn_done),
    .src_addr(bn_src_addr), .src_data(bn_src_data), .z_data(z_rd),
    .dst_mask(bn_dst_mask), .dst_addr(bn_dst_addr), .dst_data(bn_dst_data),
    .prm_idx, .prm_data
  );

  // ---------------- buffer port steering by phase ----------------
  always_comb begin
    // defaults: host owns z and R, nothing writes
    z_ra = h_faddr;  t_ra = '0;  r_ra = h_faddr;
    z_wa = h_faddr;  t_wa = cv_dst_addr;  r_wa = cv_dst_addr;
    z_wm = (host_we && h_ok && h_rg == RG_Z) ? h_fmask : '0;
    t_wm = '0;  r_wm = '0;
    for (int b = 0; b < P; b++) begin
      z_wd[b] = host_wdata;
      t_wd[b] = cv_dst_data[b];
      r_wd[b] = cv_dst_data[b];
      cv_src_data[b] = z_rd[b];
      bn_src_data[b] = t_rd[b];
    end
    unique case (phase)
      PH_CONV1: begin
        z_ra = cv_src_addr;
        t_wm = cv_dst_mask;
      end
      PH_BN1: begin
        t_ra = bn_src_addr;
        t_wa = bn_dst_addr;
        t_wm = bn_dst_mask;
        for (int b = 0; b < P; b++) t_wd[b] = bn_dst_data[b];
      end
      PH_CONV2: begin
        t_ra = cv_src_addr;
        r_wm = cv_dst_mask;
        for (int b = 0; b < P; b++) cv_src_data[b] = t_rd[b];
      end
      PH_BN2: begin
        r_ra = bn_src_addr;
        z_ra = bn_src_addr;       // block input for the Euler update
        r_wa = bn_dst_addr;
        r_wm = bn_dst_mask;
        for (int b = 0; b < P; b++) begin
          r_wd[b] = bn_dst_data[b];
          bn_src_data[b] = r_rd[b];
        end
      end
      PH_COPY: begin
        r_ra = cp_rd_addr;
        z_wa = cp_wr_addr;
        z_wm = cp_we ? '1 : '0;
        for (int b = 0; b < P; b++) z_wd[b] = r_rd[b];
      end
      default: ;
    endcase
  end

  // ---------------- host read return ----------------
  logic        hr_v;
  region_e     hr_rg;
  int unsigned hr_bank;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      hr_v <= 1'b0; hr_rg <= RG_Z; hr_bank <= 0;
    end else begin
      hr_v    <= host_re && h_ok;
      hr_rg   <= h_rg;
      hr_bank <= h_ch % P;
    end
  end
  assign host_rvalid = hr_v;
  assign host_rdata  = (hr_rg == RG_RESULT) ? r_rd[hr_bank] : z_rd[hr_bank];

  // ---------------- protocol checks ----------------
  // The sub-units are only started while idle, and never both at once.
  a_conv_idle: assert property (@(posedge clk) disable iff (!rst_n)
                                conv_start |-> !conv_busy);
  a_bn_idle:   assert property (@(posedge clk) disable iff (!rst_n)
                                bn_start |-> !bn_busy);
  a_one_unit:  assert property (@(posedge clk) disable iff (!rst_n)
                                !(conv_busy && bn_busy));
endmodule
