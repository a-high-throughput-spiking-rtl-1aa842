// sce: one Spiking Computation Engine channel.
//
// A small configurable datapath (multiplier, truncation, shift, saturating
// adder/subtractor, comparator, delay unit) that performs one of the three
// per-neuron operations of the leaky integrate-and-fire model, chosen by mode:
//   SCE_LEAK : r = (u * lambda) >>> LEAK_SHIFT          (lambda unsigned /256)
//   SCE_INTEG: s = window[(head + d) mod 16]  (the delay unit)
//              r = sat(u + (s ? sign_extend(w) : 0))  (spike x weight, TRUNCT)
//   SCE_FIRE : spike = (u > vth); r = spike ? sat(u - vth) : u
// Inputs are combinational; r and spike are registered (one cycle latency),
// which is the FF stage of the engine.  The three modes, the 1x8 spike-weight
// product, the ">" comparison and the subtraction of the threshold on a spike
// follow the processor's datapath figures.  The saturation on overflow and the
// shift by 8 are this design's choices.  The reset is applied in the same
// phase that fires, so the next timestep leaks the reset value.
module sce
  import snn_pkg::*;
(
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    en,
  input  sce_mode_e               mode,
  input  logic signed [U_W-1:0]   u,
  input  logic signed [W_W-1:0]   w,
  input  logic [D_W-1:0]          d,
  input  logic [SRB_DEPTH-1:0]    window,
  input  logic [D_W-1:0]          head,
  input  logic [W_W-1:0]          lambda,
  input  logic signed [U_W-1:0]   vth,
  output logic signed [U_W-1:0]   r,
  output logic                    spike
);
  localparam logic signed [U_W:0] UMAX = (1 <<< (U_W-1)) - 1;
  localparam logic signed [U_W:0] UMIN = -(1 <<< (U_W-1));

  logic [D_W-1:0]               ptr;
  logic                         s;
  logic signed [U_W-1:0]        trunc;     // spike x weight
  logic signed [U_W+W_W:0]      prod;      // u x lambda
  logic signed [U_W-1:0]        leak_r;
  logic signed [U_W:0]          operand;
  logic signed [U_W:0]          sum;
  logic                         fire;
  logic signed [U_W-1:0]        r_nx;

  function automatic logic signed [U_W-1:0] sat(input logic signed [U_W:0] x);
    if (x > UMAX)      return UMAX[U_W-1:0];
    else if (x < UMIN) return UMIN[U_W-1:0];
    else               return x[U_W-1:0];
  endfunction

  always_comb begin
    ptr     = head + d;                       // spike pointer
    s       = window[ptr];
    trunc   = s ? U_W'(w) : '0;               // sign-extended by the cast
    prod    = u * $signed({1'b0, lambda});
    leak_r  = U_W'(prod >>> LEAK_SHIFT);
    fire    = (u > vth);
    operand = '0;
    unique case (mode)
      SCE_INTEG: operand = (U_W+1)'(trunc);
      SCE_FIRE:  operand = fire ? -(U_W+1)'(vth) : '0;
      default:   operand = '0;
    endcase
    sum = (U_W+1)'(u) + operand;
    unique case (mode)
      SCE_LEAK: r_nx = leak_r;
      default:  r_nx = sat(sum);
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      r     <= '0;
      spike <= 1'b0;
    end else if (en) begin
      r     <= r_nx;
      spike <= (mode == SCE_FIRE) && fire;
    end
  end
endmodule
