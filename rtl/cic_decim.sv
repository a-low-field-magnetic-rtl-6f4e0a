// cic_decim: cascaded integrator-comb decimator.
//
// N integrators y[n] = y[n-1] + x[n] run at the input sample rate; every R-th
// integrator output is passed to N combs y[m] = x[m] - x[m-M] at the output
// rate, which realises H(z) = ((1 - z^-RM) / (1 - z^-1))^N followed by
// down-sampling by R. The internal width is W + N*log2(R*M) bits so that the
// two's-complement wrap-around of the integrators cancels in the combs. The DC
// gain (R*M)^N is removed by an arithmetic shift, so R*M must be a power of
// two. The output is truncated back to W bits.
// Timing: one output per R accepted inputs (in_valid strobes); out_valid is
// one cycle after the in_valid that completes the group.
// The structure follows the design; N, R and M are this design's choices for
// the two CIC stages (N = 3, R = 8 and 4, M = 1).
module cic_decim #(
  parameter int N = 3,
  parameter int R = 8,
  parameter int M = 1,
  parameter int W = 16
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                in_valid,
  input  logic signed [W-1:0] x,
  output logic                out_valid,
  output logic signed [W-1:0] y
);
  localparam int GROW = N * $clog2(R * M);
  localparam int IW   = W + GROW;
  localparam int RW   = (R > 1) ? $clog2(R) : 1;

  initial begin
    if ((1 << $clog2(R * M)) != R * M) $error("cic_decim: R*M must be a power of two");
  end

  logic signed [IW-1:0] integ [N];
  logic signed [IW-1:0] dline [N][M];   // comb delay lines
  logic signed [IW-1:0] comb  [N+1];    // comb chain, combinational
  logic [RW-1:0]        phase;
  logic                 dec_strobe;

  assign dec_strobe = in_valid && (phase == RW'(R - 1));
  logic signed [IW-1:0] integ_next [N];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < N; s++) integ[s] <= '0;
      phase <= '0;
    end else if (in_valid) begin
      for (int s = 0; s < N; s++) integ[s] <= integ_next[s];
      phase <= (phase == RW'(R - 1)) ? '0 : phase + 1'b1;
    end
  end

  // Integrator chain after this cycle's input; it is both the next register
  // state and the comb input for the sample that completes a group.
  always_comb begin
    integ_next[0] = integ[0] + IW'(x);
    for (int s = 1; s < N; s++) integ_next[s] = integ[s] + integ_next[s-1];
  end

  always_comb begin
    comb[0] = integ_next[N-1];
    for (int s = 0; s < N; s++) comb[s+1] = comb[s] - dline[s][M-1];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < N; s++)
        for (int d = 0; d < M; d++) dline[s][d] <= '0;
      out_valid <= 1'b0;
      y         <= '0;
    end else begin
      out_valid <= dec_strobe;
      if (dec_strobe) begin
        for (int s = 0; s < N; s++) begin
          dline[s][0] <= comb[s];
          for (int d = 1; d < M; d++) dline[s][d] <= dline[s][d-1];
        end
        y <= W'(comb[N] >>> GROW);
      end
    end
  end
endmodule
