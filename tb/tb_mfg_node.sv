// tb_mfg_node: end-to-end test of the matched filter group node, at reduced sizes.
//
// Runs one matched filter group MF-(N_FILTER, N_INC, TAP1) through both halves of the
// node and compares every output of every filter with the direct time-domain
// convolution computed here in double precision:
//   1. a TD-OLA job (mode 0): the node allocates the filters with the LPT rule and runs
//      all launch rounds against behavioural off-chip memories (input, coefficients,
//      two intermediate arrays per unit, output plane);
//   2. FD-OLS launches (mode 1): the testbench plays the host. It splits the group into
//      sub-groups of N_SHARE*N_PU_OLS filters (longest first), pads each sub-group's
//      filters to its longest one, builds that sub-group's padded input set (chunks of
//      N points overlapping by the padded length), Fourier transforms chunks and filters,
//      and issues N_SHARE launches per input set, one filter per unit.
// Cycle counts of the TD job and of every FD launch are compared with the node's
// timing. Each mechanism must happen at least once: both modes and a switch between
// them, zero-padded last sub-filters, a filter spread over several sub-filter launches
// (intermediate arrays), an idle unit in a launch round, discarded overlap points, and
// an input set shared by several FD launches.
module tb_mfg_node;
  import mfg_pkg::*;
  import tb_fp_pkg::*;

  // node sizes used here
  localparam int N_PU_OLA = 3, L = 4, N_PU_OLS = 2, N = 32, P = 4, LOGN = 5;
  localparam int MAX_FILT = 16, TAP_STRIDE = 64, FILT_W = 10, TAP_W = 14;
  // workload
  localparam int N_FILTER = 6, N_INC = 3, TAP1 = 2, N_IN = 50, N_SHARE = 2, FD_MAX_GROUPS = 8;
  localparam int TAPMAX = TAP1 + N_INC * (N_FILTER - 1);
  localparam int TD_LEN = N_IN + ((TAPMAX + L - 1) / L) * L - 1;
  localparam int MAXCH = (N_IN + (N - TAPMAX) - 1) / (N - TAPMAX);
  localparam int NSETS = 8;
  localparam int BEATS = N / P;
  localparam int WATCHDOG = 200000;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  // ---------------------------------------------------------------- node ports
  logic start, mode, busy, done;
  logic [FILT_W-1:0] n_filter;
  logic [3:0] n_inc;
  logic [TAP_W-1:0] tap1;
  logic [ADDR_W-1:0] n_input;
  logic [15:0] td_rounds, td_pad_launches, td_idle_slots;
  logic td_x_rd_en;
  logic [ADDR_W-1:0] td_x_rd_addr, td_acc_rd_addr, td_wr_addr;
  cplx_t td_x_rd_data;
  logic [N_PU_OLA-1:0] td_coef_rd_en, td_acc_rd_en, td_acc_rd_buf, td_wr_en, td_wr_final, td_wr_buf;
  logic [ADDR_W-1:0] td_coef_rd_addr[N_PU_OLA];
  cplx_t td_coef_rd_data[N_PU_OLA], td_acc_rd_data[N_PU_OLA], td_wr_data[N_PU_OLA];
  logic [FILT_W-1:0] td_wr_filter[N_PU_OLA];
  logic [ADDR_W-1:0] fd_in_base, fd_n_chunk, fd_discarded, fd_in_rd_addr, fd_out_wr_addr;
  logic [$clog2(N)-1:0] fd_ovl;
  logic [FILT_W-1:0] fd_filt_base;
  logic [$clog2(N_PU_OLS+1)-1:0] fd_n_active;
  logic fd_in_rd_en;
  cplx_t fd_in_rd_data[P];
  logic [N_PU_OLS-1:0] fd_coef_rd_en, fd_out_wr_en;
  logic [ADDR_W-1:0] fd_coef_rd_addr[N_PU_OLS];
  cplx_t fd_coef_rd_data[N_PU_OLS][P], fd_out_wr_data[N_PU_OLS][P];
  logic [P-1:0] fd_out_wr_mask;
  logic [FILT_W-1:0] fd_out_wr_filter[N_PU_OLS];

  mfg_node #(
    .N_PU_OLA(N_PU_OLA), .N_OLA_TAP(L), .N_PU_OLS(N_PU_OLS), .N_OLS_FT(N), .FFT_P(P),
    .FILT_W(FILT_W), .TAP_W(TAP_W), .MAX_FILT(MAX_FILT), .TAP_STRIDE(TAP_STRIDE)
  ) dut (.*);

  // ---------------------------------------------------------------- behavioural off-chip memory
  cplx_t td_xmem[TD_LEN + 1];
  cplx_t td_cmem[MAX_FILT * TAP_STRIDE];
  cplx_t td_amem[N_PU_OLA][2][TD_LEN + 1];
  cplx_t td_omem[N_FILTER + 1][TD_LEN + 1];
  cplx_t fd_imem[NSETS * MAXCH * N];
  cplx_t fd_cmem[N_FILTER * N];
  cplx_t fd_omem[N_FILTER + 1][MAXCH * N];
  bit    fd_owritten[N_FILTER + 1][MAXCH * N];
  int    n_intermediate_wr = 0;

  always_ff @(posedge clk) begin
    td_x_rd_data <= td_xmem[td_x_rd_addr % (TD_LEN + 1)];
    for (int u = 0; u < N_PU_OLA; u++) begin
      td_coef_rd_data[u] <= td_cmem[td_coef_rd_addr[u] % (MAX_FILT * TAP_STRIDE)];
      td_acc_rd_data[u]  <= td_amem[u][td_acc_rd_buf[u]][td_acc_rd_addr % (TD_LEN + 1)];
      if (td_wr_en[u]) begin
        if (td_wr_final[u]) td_omem[td_wr_filter[u] % (N_FILTER + 1)][td_wr_addr % (TD_LEN + 1)] <= td_wr_data[u];
        else begin
          td_amem[u][td_wr_buf[u]][td_wr_addr % (TD_LEN + 1)] <= td_wr_data[u];
          n_intermediate_wr <= n_intermediate_wr + 1;
        end
      end
    end
    for (int q = 0; q < P; q++) fd_in_rd_data[q] <= fd_imem[(fd_in_rd_addr + q) % (NSETS * MAXCH * N)];
    for (int u = 0; u < N_PU_OLS; u++)
      for (int q = 0; q < P; q++) fd_coef_rd_data[u][q] <= fd_cmem[(fd_coef_rd_addr[u] + q) % (N_FILTER * N)];
    for (int u = 0; u < N_PU_OLS; u++)
      if (fd_out_wr_en[u])
        for (int q = 0; q < P; q++)
          if (fd_out_wr_mask[q]) begin
            fd_omem[fd_out_wr_filter[u] % (N_FILTER + 1)][(fd_out_wr_addr + q) % (MAXCH * N)] <= fd_out_wr_data[u][q];
            fd_owritten[fd_out_wr_filter[u] % (N_FILTER + 1)][(fd_out_wr_addr + q) % (MAXCH * N)] <= 1'b1;
          end
  end

  int checks = 0, failures = 0;

  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------------------------------------------------------- reference data
  real xr[N_IN], xi[N_IN];
  real hr[N_FILTER + 1][TAPMAX], hi[N_FILTER + 1][TAPMAX];
  real cs[N], sn[N];

  function automatic int tap_of(input int f);
    return TAP1 + N_INC * (f - 1);
  endfunction

  function automatic bit check_y(input cplx_t got, input int f, input int n);
    real er, ei, sc;
    er = 0.0; ei = 0.0; sc = 0.0;
    for (int k = 0; k < tap_of(f); k++)
      if (n - k >= 0 && n - k < N_IN) begin
        er += hr[f][k] * xr[n-k] - hi[f][k] * xi[n-k];
        ei += hr[f][k] * xi[n-k] + hi[f][k] * xr[n-k];
        sc += rabs(hr[f][k]) + rabs(hi[f][k]);
      end
    return close(f2r(got.re), er, sc + 1.0, 3e-5) && close(f2r(got.im), ei, sc + 1.0, 3e-5);
  endfunction

  // forward DFT of tr/ti scaled by s into binary32 words at dst
  task automatic dft(input real tr[N], input real ti[N], input real s, input int base, input bit to_coef);
    for (int k = 0; k < N; k++) begin
      real er, ei;
      er = 0.0; ei = 0.0;
      for (int n = 0; n < N; n++) begin
        int a;
        a = (k * n) % N;
        er += tr[n] * cs[a] + ti[n] * sn[a];
        ei += ti[n] * cs[a] - tr[n] * sn[a];
      end
      if (to_coef) fd_cmem[base + k] = '{re: r2f(er * s), im: r2f(ei * s)};
      else         fd_imem[base + k] = '{re: r2f(er * s), im: r2f(ei * s)};
    end
  endtask

  task automatic pulse_start(input bit m);
    @(negedge clk);
    mode = m;
    start = 1;
    @(negedge clk);
    start = 0;
  endtask

  // ---------------------------------------------------------------- test
  int n_td_jobs = 0, n_fd_launches = 0, n_mode_switch = 0, n_shared_launch = 0;
  int n_discarded = 0;
  bit last_mode = 1'b0;

  initial begin
    int ms, cyc, bad, load[N_PU_OLA];
    start = 0; mode = 0;
    n_filter = FILT_W'(N_FILTER); n_inc = 4'(N_INC); tap1 = TAP_W'(TAP1); n_input = ADDR_W'(N_IN);
    fd_in_base = '0; fd_n_chunk = '0; fd_ovl = '0; fd_filt_base = '0; fd_n_active = '0;
    for (int i = 0; i < N; i++) begin
      cs[i] = $cos(2.0 * 3.14159265358979323846 * real'(i) / real'(N));
      sn[i] = $sin(2.0 * 3.14159265358979323846 * real'(i) / real'(N));
    end
    for (int n = 0; n <= TD_LEN; n++) begin
      td_xmem[n] = CZERO;
      for (int u = 0; u < N_PU_OLA; u++) begin
        td_amem[u][0][n] = '{re: r2f(5.0), im: r2f(5.0)};
        td_amem[u][1][n] = '{re: r2f(5.0), im: r2f(5.0)};
      end
    end
    for (int f = 0; f <= N_FILTER; f++)
      for (int n = 0; n < MAXCH * N; n++) fd_owritten[f][n] = 1'b0;
    for (int n = 0; n < N_IN; n++) begin
      xr[n] = rnd(); xi[n] = rnd();
      td_xmem[n] = '{re: r2f(xr[n]), im: r2f(xi[n])};
    end
    for (int f = 1; f <= N_FILTER; f++)
      for (int k = 0; k < TAPMAX; k++) begin
        hr[f][k] = (k < tap_of(f)) ? rnd() : 0.0;
        hi[f][k] = (k < tap_of(f)) ? rnd() : 0.0;
      end
    for (int f = 1; f <= N_FILTER; f++)
      for (int t = 0; t < TAP_STRIDE; t++)
        td_cmem[(f-1)*TAP_STRIDE + t] = (t < tap_of(f)) ? '{re: r2f(hr[f][t]), im: r2f(hi[f][t])}
                                                        : '{re: r2f(9.0), im: r2f(9.0)};
    repeat (3) @(posedge clk);
    rst_n = 1;

    // ------------------------------------------------ TD-OLA job
    pulse_start(1'b0);
    n_td_jobs++;
    cyc = 1;
    while (!done) begin
      @(negedge clk);
      cyc++;
    end
    for (int u = 0; u < N_PU_OLA; u++) load[u] = 0;
    for (int f = N_FILTER; f >= 1; f--) begin
      int mi;
      mi = 0;
      for (int u = 1; u < N_PU_OLA; u++) if (load[u] < load[mi]) mi = u;
      load[mi] += (tap_of(f) + L - 1) / L;
    end
    ms = 0;
    for (int u = 0; u < N_PU_OLA; u++) if (load[u] > ms) ms = load[u];
    checks++;
    if (int'(td_rounds) != ms || cyc != N_FILTER + 2 + ms * (L + TD_LEN + 5) + 1) begin
      failures++;
      $display("TD job: %0d rounds in %0d cycles, expected %0d rounds in %0d", td_rounds, cyc, ms,
               N_FILTER + 2 + ms * (L + TD_LEN + 5) + 1);
    end
    bad = 0;
    for (int f = 1; f <= N_FILTER; f++)
      for (int n = 0; n < N_IN + tap_of(f) - 1; n++) begin
        checks++;
        if (!check_y(td_omem[f][n], f, n)) begin
          failures++;
          if (bad++ < 5) $display("TD filter %0d y[%0d]: got %f %f", f, n, f2r(td_omem[f][n].re), f2r(td_omem[f][n].im));
        end
      end
    $display("TD-OLA: %0d rounds, %0d cycles, %0d padded launches, %0d idle unit-rounds, %0d intermediate writes",
             td_rounds, cyc, td_pad_launches, td_idle_slots, n_intermediate_wr);
    last_mode = 1'b0;

    // ------------------------------------------------ FD-OLS launches
    begin
      int grp, top_f, lo_f, ov, nch, set_base;
      grp = 0;
      top_f = N_FILTER;
      while (top_f >= 1 && grp < FD_MAX_GROUPS) begin
        lo_f = top_f - N_SHARE * N_PU_OLS + 1;
        if (lo_f < 1) lo_f = 1;
        ov = tap_of(top_f);
        nch = (N_IN + (N - ov) - 1) / (N - ov);
        set_base = (grp % NSETS) * MAXCH * N;
        // host: padded input set of this sub-group and the filter spectra
        for (int c = 0; c < nch; c++) begin
          real tr[N], ti[N];
          for (int i = 0; i < N; i++) begin
            int n;
            n = c * (N - ov) - ov + i;
            tr[i] = (n >= 0 && n < N_IN) ? xr[n] : 0.0;
            ti[i] = (n >= 0 && n < N_IN) ? xi[n] : 0.0;
          end
          dft(tr, ti, 1.0, set_base + c * N, 1'b0);
        end
        for (int f = lo_f; f <= top_f; f++) begin
          real tr[N], ti[N];
          for (int k = 0; k < N; k++) begin
            tr[k] = (k < tap_of(f)) ? hr[f][k] : 0.0;
            ti[k] = (k < tap_of(f)) ? hi[f][k] : 0.0;
          end
          dft(tr, ti, 1.0 / real'(N), (f - 1) * N, 1'b1);
        end
        // launches sharing this input set
        for (int fb = lo_f, nl = 0; fb <= top_f; fb += N_PU_OLS, nl++) begin
          int nact, c2;
          nact = (top_f - fb + 1 < N_PU_OLS) ? top_f - fb + 1 : N_PU_OLS;
          fd_in_base = ADDR_W'(set_base); fd_n_chunk = ADDR_W'(nch); fd_ovl = ($clog2(N))'(ov);
          fd_filt_base = FILT_W'(fb); fd_n_active = ($clog2(N_PU_OLS+1))'(nact);
          pulse_start(1'b1);
          if (last_mode != 1'b1) n_mode_switch++;
          last_mode = 1'b1;
          n_fd_launches++;
          if (nl > 0) n_shared_launch++;
          c2 = 1;
          while (!done) begin
            @(negedge clk);
            c2++;
          end
          n_discarded += int'(fd_discarded);
          checks++;
          if (c2 != nch * BEATS + 1 + LOGN * (BEATS + 1) + 3 + BEATS || int'(fd_discarded) != nch * ov) begin
            failures++;
            $display("FD launch filters %0d..: %0d cycles, %0d discarded; expected %0d and %0d", fb, c2, fd_discarded,
                     nch * BEATS + 1 + LOGN * (BEATS + 1) + 3 + BEATS, nch * ov);
          end
        end
        // outputs of the sub-group
        bad = 0;
        for (int f = lo_f; f <= top_f; f++)
          for (int n = 0; n < N_IN + tap_of(f) - 1 && n < nch * (N - ov); n++) begin
            checks++;
            if (!fd_owritten[f][n] || !check_y(fd_omem[f][n], f, n)) begin
              failures++;
              if (bad++ < 5) $display("FD filter %0d y[%0d]: written %0d got %f %f", f, n, fd_owritten[f][n],
                                      f2r(fd_omem[f][n].re), f2r(fd_omem[f][n].im));
            end
          end
        $display("FD-OLS sub-group filters %0d..%0d: overlap %0d, %0d chunks", lo_f, top_f, ov, nch);
        top_f = lo_f - 1;
        grp++;
      end
    end

    // ------------------------------------------------ back to TD: the mode switches again
    pulse_start(1'b0);
    n_mode_switch++;
    n_td_jobs++;
    while (!done) @(negedge clk);
    checks++;
    if (!check_y(td_omem[N_FILTER][N_IN / 2], N_FILTER, N_IN / 2)) begin
      failures++;
      $display("second TD job produced a wrong output");
    end

    // ------------------------------------------------ mechanism coverage
    $display("coverage: TD jobs %0d, FD launches %0d, mode switches %0d, padded launches %0d, idle unit-rounds %0d,",
             n_td_jobs, n_fd_launches, n_mode_switch, td_pad_launches, td_idle_slots);
    $display("          intermediate writes %0d, discarded overlap points %0d, launches on a shared input set %0d",
             n_intermediate_wr, n_discarded, n_shared_launch);
    checks++;
    if (n_td_jobs == 0 || n_fd_launches == 0 || n_mode_switch < 2 || td_pad_launches == 0 || td_idle_slots == 0
        || n_intermediate_wr == 0 || n_discarded == 0 || n_shared_launch == 0) begin
      failures++;
      $display("a mechanism of the design was never exercised");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
