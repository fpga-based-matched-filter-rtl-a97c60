// ola_controller: launch sequencer of the time-domain overlap-add (TD-OLA) node.
//
// Runs a whole matched filter group MF-(N_filter, N_inc, Tap_1) on N_PU sub-filter
// processors (ola_fir) of L taps. First the built-in lpt_scheduler allocates the
// filters to the units (longest first, to the least loaded unit); the allocation is
// stored per unit. The group is then processed in launch rounds. In a round every unit
// that still has work runs one launch of one sub-filter of its current filter, and all
// units consume the same input stream x[p] in lockstep. A round has three phases:
//   1. coefficient load: L taps of sub-filter s of filter j are read from the
//      coefficient array (address (j-1)*TAP_STRIDE + s*L + k); taps past Tap_j are
//      zero, which is the zero padding of the last sub-filter;
//   2. stream: for p = 0 .. LEN-1 the input x[p] (zero past N_input) is read once and
//      shared, each unit reads its intermediate array at p-L and writes its result at p;
//   3. drain of the two-cycle memory/processor pipeline.
// The sub-filters of a filter are launched from the last (s = nsub-1) to the first
// (s = 0). With w_s[p] = z_s[p] + w_{s+1}[p-L], z_s being sub-filter s applied to x,
// the last launch leaves w_0[p] = sum_s z_s[p - s*L], the full convolution. Reading at
// a fixed offset of L lets all units share one input stream. The first launch of a
// filter reads nothing (zero), the last one writes to the output plane of filter j
// instead of an intermediate array. Each unit has two intermediate arrays (a/b) and
// alternates between them from launch to launch, so it never reads and writes the
// same array in one launch. LEN = N_input + ceil(Tap_N_filter/L)*L - 1, the length of
// the longest output.
//
// Timing: a memory read returns its data the cycle after the request. A round takes
// L + LEN + 5 cycles; a job takes N_filter + 2 cycles of allocation, then one round per
// launch of the most loaded unit (the LPT makespan), then one cycle to finish.
//
// What follows the paper: L-tap sub-filters on N_pu units, LPT allocation, shared
// streamed input, two off-chip intermediate buffers per unit, zero-padded last
// sub-filter. This design's own choices: the reverse sub-filter order with the fixed
// read offset, the fixed stream length, the memory layout and the two-cycle pipeline.
module ola_controller
  import mfg_pkg::*;
#(
  parameter int unsigned N_PU       = 7,     // N_pu-OLA
  parameter int unsigned L          = 32,    // N_OLA-tap
  parameter int unsigned FILT_W     = 10,
  parameter int unsigned TAP_W      = 14,
  parameter int unsigned MAX_FILT   = 1000,  // largest N_filter
  parameter int unsigned TAP_STRIDE = 1024   // coefficient words reserved per filter
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // job
  input  logic                     start,
  input  logic [FILT_W-1:0]        n_filter,
  input  logic [3:0]               n_inc,
  input  logic [TAP_W-1:0]         tap1,
  input  logic [ADDR_W-1:0]        n_input,
  output logic                     busy,
  output logic                     done,
  output logic [15:0]              rounds,       // launch rounds of the last job
  // shared input array
  output logic                     x_rd_en,
  output logic [ADDR_W-1:0]        x_rd_addr,
  input  cplx_t                    x_rd_data,
  // coefficient arrays, one read port per unit
  output logic [N_PU-1:0]          coef_rd_en,
  output logic [ADDR_W-1:0]        coef_rd_addr[N_PU],
  input  cplx_t                    coef_rd_data[N_PU],
  // intermediate arrays, one read port per unit
  output logic [N_PU-1:0]          acc_rd_en,
  output logic [N_PU-1:0]          acc_rd_buf,
  output logic [ADDR_W-1:0]        acc_rd_addr,
  input  cplx_t                    acc_rd_data[N_PU],
  // to the sub-filter processors
  output logic                     pu_clear,
  output logic [N_PU-1:0]          pu_coef_we,
  output logic [$clog2(L)-1:0]     pu_coef_idx,
  output cplx_t                    pu_coef[N_PU],
  output logic [N_PU-1:0]          pu_in_valid,
  output cplx_t                    pu_x,
  output cplx_t                    pu_acc[N_PU],
  // write tags, aligned with the processors' outputs
  output logic [N_PU-1:0]          wr_en,
  output logic [N_PU-1:0]          wr_final,     // 1: output plane, 0: intermediate array
  output logic [N_PU-1:0]          wr_buf,
  output logic [FILT_W-1:0]        wr_filter[N_PU],
  output logic [ADDR_W-1:0]        wr_addr,
  // event counts for observation
  output logic [15:0]              n_pad_launch,  // launches whose last taps were zero padded
  output logic [15:0]              n_idle_slot    // unit-rounds with no work (load imbalance)
);

  localparam int unsigned LOG_L = $clog2(L);
  localparam int unsigned PU_W  = $clog2(N_PU);
  localparam int unsigned IDX_W = $clog2(MAX_FILT + 1);

  typedef enum logic [2:0] {S_IDLE, S_ALLOC, S_SETUP, S_COEF, S_STREAM, S_DRAIN, S_END} state_t;
  state_t state;

  // allocation
  logic              lpt_busy, asg_valid, lpt_done;
  logic [FILT_W-1:0] asg_filter;
  logic [PU_W-1:0]   asg_pu;
  logic [TAP_W-1:0]  asg_nsub, asg_tap;
  logic [15:0]       makespan;

  lpt_scheduler #(.N_PU(N_PU), .L(L), .FILT_W(FILT_W), .TAP_W(TAP_W), .LOAD_W(16)) u_lpt (
    .clk, .rst_n, .start(start && state == S_IDLE), .n_filter, .n_inc, .tap1,
    .busy(lpt_busy), .asg_valid, .asg_filter, .asg_pu, .asg_nsub, .asg_tap,
    .done(lpt_done), .makespan
  );

  logic [FILT_W-1:0] lst_f[N_PU][MAX_FILT];
  logic [TAP_W-1:0]  lst_tap[N_PU][MAX_FILT];
  logic [IDX_W-1:0]  cnt[N_PU], ptr[N_PU];
  logic [TAP_W-1:0]  s[N_PU];
  logic [N_PU-1:0]   newf, wsel, act;
  logic [FILT_W-1:0] cur_f[N_PU];
  logic [TAP_W-1:0]  cur_tap[N_PU], cur_nsub[N_PU];

  logic [N_PU-1:0]   pad_vec;   // unit runs the zero-padded last sub-filter of its filter
  logic [ADDR_W-1:0] len, p;
  logic [LOG_L:0]    k;
  logic [TAP_W-1:0]  tapmax;

  always_comb begin
    for (int u = 0; u < N_PU; u++) begin
      act[u]      = (ptr[u] < cnt[u]);
      cur_f[u]    = lst_f[u][act[u] ? ptr[u] : '0];
      cur_tap[u]  = lst_tap[u][act[u] ? ptr[u] : '0];
      cur_nsub[u] = (cur_tap[u] + TAP_W'(L - 1)) >> LOG_L;
      pad_vec[u]  = act[u] && (s[u] == cur_nsub[u] - TAP_W'(1)) && (cur_tap[u][LOG_L-1:0] != '0);
    end
  end

  // allocation list writes
  always_ff @(posedge clk) begin
    if (asg_valid) begin
      lst_f[asg_pu][cnt[asg_pu]]   <= asg_filter;
      lst_tap[asg_pu][cnt[asg_pu]] <= asg_tap;
    end
  end

  // one-cycle-delayed request flags (memory data arrives then)
  logic              coef_phase_d;
  logic [LOG_L-1:0]  k_d;
  logic [N_PU-1:0]   coef_ok_d, stream_act_d, acc_ok_d, stream_act_d2;
  logic              x_ok_d;
  logic [ADDR_W-1:0] p_d, p_d2;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      busy <= 1'b0; done <= 1'b0; rounds <= '0;
      len <= '0; p <= '0; k <= '0; tapmax <= '0;
      newf <= '0; wsel <= '0;
      n_pad_launch <= '0; n_idle_slot <= '0;
      for (int u = 0; u < N_PU; u++) begin
        cnt[u] <= '0; ptr[u] <= '0; s[u] <= '0;
      end
    end else begin
      done <= 1'b0;
      if (asg_valid) cnt[asg_pu] <= cnt[asg_pu] + IDX_W'(1);
      unique case (state)
        S_IDLE: if (start) begin
          busy   <= 1'b1;
          rounds <= '0;
          n_pad_launch <= '0; n_idle_slot <= '0;
          tapmax <= tap1 + TAP_W'(n_inc * (n_filter - FILT_W'(1)));
          for (int u = 0; u < N_PU; u++) begin
            cnt[u] <= '0; ptr[u] <= '0;
          end
          newf  <= '1;
          wsel  <= '0;
          state <= S_ALLOC;
        end
        S_ALLOC: begin
          len <= n_input + ADDR_W'(((tapmax + TAP_W'(L - 1)) >> LOG_L) << LOG_L) - ADDR_W'(1);
          if (lpt_done) state <= S_SETUP;
        end
        S_SETUP: begin
          if (act == '0) begin
            busy  <= 1'b0;
            done  <= 1'b1;
            state <= S_IDLE;
          end else begin
            for (int u = 0; u < N_PU; u++) begin
              if (act[u] && newf[u]) s[u] <= cur_nsub[u] - TAP_W'(1);
            end
            n_idle_slot <= n_idle_slot + 16'(N_PU) - 16'($countones(act));
            newf   <= '0;
            rounds <= rounds + 16'(1);
            k      <= '0;
            state  <= S_COEF;
          end
        end
        S_COEF: begin
          k <= k + 1'b1;
          if (k == (LOG_L+1)'(L)) begin
            p     <= '0;
            state <= S_STREAM;
          end
        end
        S_STREAM: begin
          p <= p + ADDR_W'(1);
          if (p == len - ADDR_W'(1)) begin
            k     <= '0;
            state <= S_DRAIN;
          end
        end
        S_DRAIN: begin
          k <= k + 1'b1;
          if (k == 1) state <= S_END;
        end
        S_END: begin
          for (int u = 0; u < N_PU; u++) begin
            if (act[u]) begin
              wsel[u] <= ~wsel[u];
              if (s[u] == '0) begin
                ptr[u]  <= ptr[u] + IDX_W'(1);
                newf[u] <= 1'b1;
              end else begin
                s[u] <= s[u] - TAP_W'(1);
              end
            end
          end
          n_pad_launch <= n_pad_launch + 16'($countones(pad_vec));
          state <= S_SETUP;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // ------------------------------------------------------------ memory requests
  logic [TAP_W-1:0] tap_pos[N_PU];
  always_comb begin
    x_rd_en     = (state == S_STREAM) && (p < n_input);
    x_rd_addr   = p;
    acc_rd_addr = p - ADDR_W'(L);
    pu_clear    = (state == S_SETUP);
    for (int u = 0; u < N_PU; u++) begin
      tap_pos[u]         = TAP_W'((s[u] << LOG_L) + TAP_W'(k[LOG_L-1:0]));
      coef_rd_en[u]      = (state == S_COEF) && (k < (LOG_L+1)'(L)) && act[u] && (tap_pos[u] < cur_tap[u]);
      coef_rd_addr[u]    = ADDR_W'(cur_f[u] - FILT_W'(1)) * ADDR_W'(TAP_STRIDE) + ADDR_W'(tap_pos[u]);
      acc_rd_en[u]       = (state == S_STREAM) && act[u] && (p >= ADDR_W'(L)) && (s[u] != cur_nsub[u] - TAP_W'(1));
      acc_rd_buf[u]      = ~wsel[u];
    end
  end

  // ------------------------------------------------------------ returned data
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      coef_phase_d <= 1'b0; k_d <= '0; coef_ok_d <= '0;
      stream_act_d <= '0; acc_ok_d <= '0; stream_act_d2 <= '0; x_ok_d <= 1'b0;
      p_d <= '0; p_d2 <= '0;
    end else begin
      coef_phase_d  <= (state == S_COEF) && (k < (LOG_L+1)'(L));
      k_d           <= k[LOG_L-1:0];
      coef_ok_d     <= coef_rd_en;
      x_ok_d        <= x_rd_en;
      acc_ok_d      <= acc_rd_en;
      stream_act_d  <= (state == S_STREAM) ? act : '0;
      stream_act_d2 <= stream_act_d;
      p_d           <= p;
      p_d2          <= p_d;
    end
  end

  always_comb begin
    pu_coef_idx = k_d;
    pu_x        = x_ok_d ? x_rd_data : CZERO;
    pu_in_valid = stream_act_d;
    wr_en       = stream_act_d2;
    wr_addr     = p_d2;
    for (int u = 0; u < N_PU; u++) begin
      pu_coef_we[u] = coef_phase_d && act[u];
      pu_coef[u]    = coef_ok_d[u] ? coef_rd_data[u] : CZERO;
      pu_acc[u]     = acc_ok_d[u] ? acc_rd_data[u] : CZERO;
      wr_final[u]   = (s[u] == '0);
      wr_buf[u]     = wsel[u];
      wr_filter[u]  = cur_f[u];
    end
  end

  // a round may only start when the allocation has finished
  assert property (@(posedge clk) disable iff (!rst_n) (state == S_SETUP) |-> !lpt_busy);

endmodule
