// ols_controller: chunk sequencer of the Fourier-domain overlap-save (FD-OLS) node.
//
// One launch filters one padded input set with up to N_PU filters at once, one filter
// per unit: unit u works on filter filt_base + u. The padded input set holds n_chunk
// chunks of N points, already Fourier transformed by the host; chunk c starts at point
// in_base + c*N. Consecutive chunks overlap by `ovl` input points, the length of the
// longest filter of the sub-group sharing this input set (shorter filters are treated
// as zero padded to that length), so ceil(N_input / (N - ovl)) chunks cover the input.
// For every chunk the controller streams the N points of the chunk once, P per cycle,
// to all active units (shared input) and each unit's Fourier-transformed coefficients
// (filter f at point (f-1)*N). It then writes what the units return: of each output
// chunk the first `ovl` points are discarded and point m >= ovl is written to
// y_f[c*(N - ovl) + m - ovl] in filter f's output array, lane by lane under
// `out_wr_mask`.
//
// Timing: a memory read returns its data the next cycle. Chunks are streamed back to
// back, one beat per cycle, N/P cycles per chunk, and the units never stall. `done`
// pulses when the last beat of the last chunk has been written.
//
// What follows the paper: units sharing one padded input chunk, coefficients read from
// off-chip memory, overlap equal to the (padded) filter length with the first points of
// every chunk discarded, the chunk count. This design's own: the memory layout and
// discarding in the node rather than in the host.
module ols_controller
  import mfg_pkg::*;
#(
  parameter int unsigned N_PU   = 3,     // N_pu-OLS
  parameter int unsigned N      = 4096,  // N_OLS-FT
  parameter int unsigned P      = 4,     // points per cycle
  parameter int unsigned FILT_W = 10
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // launch
  input  logic                     start,
  input  logic [ADDR_W-1:0]        in_base,
  input  logic [ADDR_W-1:0]        n_chunk,
  input  logic [$clog2(N)-1:0]     ovl,
  input  logic [FILT_W-1:0]        filt_base,
  input  logic [$clog2(N_PU+1)-1:0] n_active,
  output logic                     busy,
  output logic                     done,
  // shared padded input (Fourier transformed)
  output logic                     in_rd_en,
  output logic [ADDR_W-1:0]        in_rd_addr,
  input  cplx_t                    in_rd_data[P],
  // coefficients (Fourier transformed), one read port per unit
  output logic [N_PU-1:0]          coef_rd_en,
  output logic [ADDR_W-1:0]        coef_rd_addr[N_PU],
  input  cplx_t                    coef_rd_data[N_PU][P],
  // to the units
  output logic [N_PU-1:0]          pu_in_valid,
  output cplx_t                    pu_x[P],
  output cplx_t                    pu_h[N_PU][P],
  // from the units (they run in lockstep; unit 0's beat number is used)
  input  logic                     pu_out_valid,
  input  logic [$clog2(N/P)-1:0]   pu_out_beat,
  // output array writes
  output logic [N_PU-1:0]          out_wr_en,
  output logic [P-1:0]             out_wr_mask,
  output logic [ADDR_W-1:0]        out_wr_addr,   // address of lane 0; lane q at +q
  output logic [FILT_W-1:0]        out_wr_filter[N_PU],
  // event count for observation
  output logic [ADDR_W-1:0]        n_discard      // output points discarded (overlap)
);

  localparam int unsigned BEATS = N / P;
  localparam int unsigned BW    = $clog2(BEATS);

  typedef enum logic [1:0] {S_IDLE, S_STREAM, S_WAIT} state_t;
  state_t state;

  logic [ADDR_W-1:0] c, oc, obase;
  logic [BW-1:0]     b;
  logic [N_PU-1:0]   act;
  logic              rd_d;

  always_comb begin
    for (int u = 0; u < N_PU; u++) act[u] = (u < int'(n_active));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; busy <= 1'b0; done <= 1'b0;
      c <= '0; b <= '0; oc <= '0; obase <= '0; rd_d <= 1'b0;
      n_discard <= '0;
    end else begin
      done <= 1'b0;
      rd_d <= (state == S_STREAM);
      unique case (state)
        S_IDLE: if (start && n_chunk != '0) begin
          busy  <= 1'b1;
          c     <= '0; b <= '0; oc <= '0; obase <= '0;
          n_discard <= '0;
          state <= S_STREAM;
        end
        S_STREAM: begin
          b <= b + BW'(1);
          if (b == BW'(BEATS - 1)) begin
            c <= c + ADDR_W'(1);
            if (c == n_chunk - ADDR_W'(1)) state <= S_WAIT;
          end
        end
        default: ;
      endcase
      if (state != S_IDLE && pu_out_valid) begin
        n_discard <= n_discard + ADDR_W'($countones(~out_wr_mask));
        if (pu_out_beat == BW'(BEATS - 1)) begin
          oc    <= oc + ADDR_W'(1);
          obase <= obase + ADDR_W'(N) - ADDR_W'(ovl);
          if (oc == n_chunk - ADDR_W'(1)) begin
            busy  <= 1'b0;
            done  <= 1'b1;
            state <= S_IDLE;
          end
        end
      end
    end
  end

  always_comb begin
    in_rd_en   = (state == S_STREAM);
    in_rd_addr = in_base + c * ADDR_W'(N) + ADDR_W'(b) * ADDR_W'(P);
    for (int u = 0; u < N_PU; u++) begin
      coef_rd_en[u]   = (state == S_STREAM) && act[u];
      coef_rd_addr[u] = ADDR_W'(filt_base + FILT_W'(u) - FILT_W'(1)) * ADDR_W'(N) + ADDR_W'(b) * ADDR_W'(P);
      pu_in_valid[u]  = rd_d && act[u];
      out_wr_en[u]    = (state != S_IDLE) && pu_out_valid && act[u];
      out_wr_filter[u] = filt_base + FILT_W'(u);
      pu_h[u]         = coef_rd_data[u];
    end
    pu_x = in_rd_data;
    for (int q = 0; q < P; q++)
      out_wr_mask[q] = (ADDR_W'(pu_out_beat) * ADDR_W'(P) + ADDR_W'(q)) >= ADDR_W'(ovl);
    out_wr_addr = obase + ADDR_W'(pu_out_beat) * ADDR_W'(P) - ADDR_W'(ovl);
  end

  // the overlap (the longest filter of the sub-group) must be shorter than a chunk
  assert property (@(posedge clk) disable iff (!rst_n) start |-> (ADDR_W'(ovl) < ADDR_W'(N)));

endmodule
