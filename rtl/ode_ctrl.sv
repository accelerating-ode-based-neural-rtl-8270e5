// ode_ctrl: sequencer of the ODEBlock (Euler method, M iterations).
//
// One iteration runs the paper's five steps in order, with the Euler update
// folded into the last one and a copy back to the input buffer, the
// "Iteration: M" loop of the block diagram:
//   CONV1  convolution of the input z into the temporary buffer T
//   BN1    batch normalisation + ReLU of T, in place
//   CONV2  convolution of T into the result buffer R
//   BN2    batch normalisation of R and Euler update R := z + h*BN(R)
//   COPY   R -> z (all P banks per cycle), skipped after the last iteration
// The sub-units are started with a one-cycle pulse and report back with a
// done pulse. The copy is done here: read address cp_rd_addr, one cycle later
// a write of all banks at cp_wr_addr with cp_we.
//
// Interface: start (one cycle, while idle) with iters = M. iters = 0 ends at
// once and leaves both buffers unchanged. done pulses once at the end;
// cycles holds the cycle count of the last run from start to done, the
// figure the paper reports per layer. The order of the steps follows the
// paper; the copy step and the handshakes are this design's own.
module ode_ctrl
  import ode_pkg::*;
#(
  parameter int unsigned C = 64,
  parameter int unsigned H = 8,
  parameter int unsigned W = 8,
  parameter int unsigned P = 16,
  localparam int unsigned DEPTH = (C / P) * H * W,
  localparam int unsigned FAW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           start,
  input  logic [15:0]    iters,
  output logic           busy,
  output logic           done,
  output phase_e         phase,
  output logic [15:0]    iter,        // current iteration, 0-based
  output logic [31:0]    cycles,
  // convolution engine
  output logic           conv_start,
  output logic           conv_sel,
  input  logic           conv_done,
  // batch-normalisation unit
  output logic           bn_start,
  output logic           bn_sel,
  output logic           relu_en,
  output logic           euler_en,
  input  logic           bn_done,
  // copy R -> z
  output logic [FAW-1:0] cp_rd_addr,
  output logic           cp_we,
  output logic [FAW-1:0] cp_wr_addr
);
  logic [15:0] m;
  logic [31:0] cnt;
  int unsigned cp;
  logic        cp_run;

  assign busy     = (phase != PH_IDLE);
  assign conv_sel = (phase == PH_CONV2);
  assign bn_sel   = (phase == PH_BN2);
  assign relu_en  = (phase == PH_BN1);
  assign euler_en = (phase == PH_BN2);
  assign cp_rd_addr = FAW'(cp);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      phase <= PH_IDLE; m <= '0; iter <= '0; cnt <= '0; cycles <= '0;
      conv_start <= 1'b0; bn_start <= 1'b0; done <= 1'b0;
      cp <= 0; cp_run <= 1'b0; cp_we <= 1'b0; cp_wr_addr <= '0;
    end else begin
      conv_start <= 1'b0;
      bn_start   <= 1'b0;
      done       <= 1'b0;
      cp_we      <= cp_run;
      cp_wr_addr <= FAW'(cp);
      if (phase != PH_IDLE) cnt <= cnt + 1;
      unique case (phase)
        PH_IDLE: if (start) begin
          m    <= iters;
          iter <= '0;
          cnt  <= 32'd1;
          if (iters == 16'd0) begin
            done <= 1'b1; cycles <= 32'd1;
          end else begin
            phase <= PH_CONV1; conv_start <= 1'b1;
          end
        end
        PH_CONV1: if (conv_done) begin phase <= PH_BN1;   bn_start   <= 1'b1; end
        PH_BN1:   if (bn_done)   begin phase <= PH_CONV2; conv_start <= 1'b1; end
        PH_CONV2: if (conv_done) begin phase <= PH_BN2;   bn_start   <= 1'b1; end
        PH_BN2: if (bn_done) begin
          if (iter == m - 16'd1) begin
            phase <= PH_IDLE; done <= 1'b1; cycles <= cnt + 1;
          end else begin
            phase <= PH_COPY; cp <= 0; cp_run <= 1'b1;
          end
        end
        PH_COPY: begin
          if (cp_run) begin
            if (cp == DEPTH - 1) cp_run <= 1'b0;
            else cp <= cp + 1;
          end else if (!cp_we) begin
            // last write has landed
            phase <= PH_CONV1; conv_start <= 1'b1; iter <= iter + 16'd1;
          end
        end
        default: phase <= PH_IDLE;
      endcase
    end
  end
endmodule
