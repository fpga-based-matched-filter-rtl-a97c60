// fft_engine: pipelined N-point FFT engine that takes and delivers P points per cycle.
//
// This is the "N_OLS-FT-point FFT engine" of a Fourier-domain overlap-save unit, sized
// by default for N_OLS-FT = 4096 and a 4-point engine (P = 4 points processed in
// parallel). It transforms back to the time domain (INVERSE = 1, exponent +2*pi*i/N, no
// 1/N scaling: the scale can be folded into the Fourier-transformed coefficients).
// Frames enter in natural order, beat b carrying points b*P .. b*P+P-1, and leave in
// natural order. Inside, log2(N) radix-2 decimation-in-frequency stages (fft_stage) are
// chained, each with a double frame buffer, followed by a bit-reversal buffer
// (fft_reorder). Frames may follow each other back to back: the engine accepts one
// beat per cycle without stalls (stream mode, initiation interval 1).
//
// Timing: every stage holds a whole frame, so the first output beat of a frame leaves
// log2(N)*(N/P + 1) + 2 cycles after the last input beat of that frame (12*1025 + 2
// cycles at the defaults); in steady state one frame leaves every N/P cycles.
// `out_beat` numbers the output beats of a frame.
//
// The engine's length, its points per cycle and its stream-mode use follow the paper;
// the radix-2 stage structure inside is this design's own.
module fft_engine
  import mfg_pkg::*;
#(
  parameter int unsigned N       = 4096,  // N_OLS-FT
  parameter int unsigned P       = 4,     // points per cycle
  parameter bit          INVERSE = 1'b1
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  cplx_t                   in_data[P],
  output logic                    out_valid,
  output logic [$clog2(N/P)-1:0]  out_beat,
  output cplx_t                   out_data[P]
);

  localparam int unsigned LOGN = $clog2(N);
  localparam int unsigned BW   = $clog2(N / P);

  logic                 sv[LOGN+1];
  logic [LOGN-1:0]      sidx[LOGN+1][P];
  cplx_t                sdat[LOGN+1][P];
  logic [BW-1:0]        in_beat;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) in_beat <= '0;
    else if (in_valid) in_beat <= in_beat + BW'(1);
  end

  always_comb begin
    sv[0] = in_valid;
    for (int q = 0; q < P; q++) begin
      sidx[0][q] = LOGN'(in_beat) * LOGN'(P) + LOGN'(q);
      sdat[0][q] = in_data[q];
    end
  end

  for (genvar s = 0; s < LOGN; s++) begin : g_stage
    fft_stage #(.N(N), .P(P), .S(s), .INVERSE(INVERSE)) u_stage (
      .clk, .rst_n,
      .in_valid(sv[s]), .in_idx(sidx[s]), .in_data(sdat[s]),
      .out_valid(sv[s+1]), .out_idx(sidx[s+1]), .out_data(sdat[s+1])
    );
  end

  fft_reorder #(.N(N), .P(P)) u_reorder (
    .clk, .rst_n,
    .in_valid(sv[LOGN]), .in_idx(sidx[LOGN]), .in_data(sdat[LOGN]),
    .out_valid, .out_beat, .out_data
  );

endmodule
