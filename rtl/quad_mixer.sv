// quad_mixer: digital quadrature mixer (first step of down-conversion).
//
// The sampled MR signal x[n] = zi cos(w n + th) - zq sin(w n + th) is
// multiplied with a cosine and a sine local oscillator of the same frequency
// and phase: I = x * cos, Q = -x * sin. After low-pass filtering these give
// zi/2 and zq/2, the in-phase and quadrature baseband components.
// Products are 28 bits; the top bits are kept as I = (x*cos) >>> 12,
// Q = -(x*sin) >>> 12 (truncation, 16-bit result, cannot overflow).
// Timing: one register stage; out_valid follows in_valid by 1 cycle.
// The mixing equations follow the design; the output scaling is this
// design's choice.
module quad_mixer #(
  parameter int IN_W  = 14,
  parameter int LO_W  = 14,
  parameter int OUT_W = 16
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  logic signed [IN_W-1:0]  x,
  input  logic signed [LO_W-1:0]  lo_cos,
  input  logic signed [LO_W-1:0]  lo_sin,
  output logic                    out_valid,
  output logic signed [OUT_W-1:0] i,
  output logic signed [OUT_W-1:0] q
);
  localparam int PW = IN_W + LO_W;
  localparam int SH = PW - OUT_W;
  logic signed [PW-1:0] pi_, pq_;
  logic signed [PW:0]   nq;
  assign pi_ = x * lo_cos;
  assign pq_ = x * lo_sin;
  assign nq  = -(PW+1)'(pq_);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      i <= '0;
      q <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        i <= OUT_W'(pi_ >>> SH);
        q <= OUT_W'(nq >>> SH);
      end
    end
  end
endmodule
