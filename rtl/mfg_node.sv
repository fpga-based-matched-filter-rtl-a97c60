// mfg_node: FPGA node of the matched filter group engine.
//
// A matched filter group convolves one long complex input signal with N_filter complex
// filters of growing length (Tap_j = Tap_1 + N_inc*(j-1)). The node holds the two
// kinds of filter processor of the design and runs a job on one of them, chosen by
// `mode` when `start` is pulsed:
//   MODE_TD: time-domain overlap-add. N_PU_OLA units of N_OLA_TAP taps (ola_fir) run
//     a whole group: ola_controller allocates the filters to the units with the LPT
//     rule and drives launch rounds of one sub-filter per unit over the shared input
//     stream, with two intermediate arrays per unit in off-chip memory.
//   MODE_FD: Fourier-domain overlap-save. N_PU_OLS units (ols_pu: dot product and an
//     N_OLS_FT-point FFT engine of FFT_P points per cycle) filter one padded,
//     Fourier-transformed input set with up to N_PU_OLS filters at once; the host
//     issues one such launch per group of units, N_share launches per shared input set.
// All arrays (input, coefficients, intermediate, output) live in off-chip memory; the
// node's memory ports are plain request/response ports whose read data must arrive on
// the cycle after the request. One job runs at a time; `busy` is high while it does.
//
// Defaults follow the Arria 10 configurations evaluated for the design: 7 units of 32
// taps (TD-OLA) and 3 units with 4096-point, 4-point FFT engines (FD-OLS). Holding
// both kinds of processor in one node behind a mode input is this design's choice;
// the original builds one FPGA image per kind.
module mfg_node
  import mfg_pkg::*;
#(
  parameter int unsigned N_PU_OLA   = 7,
  parameter int unsigned N_OLA_TAP  = 32,
  parameter int unsigned N_PU_OLS   = 3,
  parameter int unsigned N_OLS_FT   = 4096,
  parameter int unsigned FFT_P      = 4,
  parameter int unsigned FILT_W     = 10,
  parameter int unsigned TAP_W      = 14,
  parameter int unsigned MAX_FILT   = 1000,
  parameter int unsigned TAP_STRIDE = 1024
) (
  input  logic                         clk,
  input  logic                         rst_n,
  // job control
  input  logic                         start,
  input  logic                         mode,        // 0: TD-OLA group, 1: FD-OLS launch
  output logic                         busy,
  output logic                         done,
  // TD-OLA job: MF-(n_filter, n_inc, tap1) over n_input samples
  input  logic [FILT_W-1:0]            n_filter,
  input  logic [3:0]                   n_inc,
  input  logic [TAP_W-1:0]             tap1,
  input  logic [ADDR_W-1:0]            n_input,
  output logic [15:0]                  td_rounds,
  output logic [15:0]                  td_pad_launches,
  output logic [15:0]                  td_idle_slots,
  // TD-OLA memory ports
  output logic                         td_x_rd_en,
  output logic [ADDR_W-1:0]            td_x_rd_addr,
  input  cplx_t                        td_x_rd_data,
  output logic [N_PU_OLA-1:0]          td_coef_rd_en,
  output logic [ADDR_W-1:0]            td_coef_rd_addr[N_PU_OLA],
  input  cplx_t                        td_coef_rd_data[N_PU_OLA],
  output logic [N_PU_OLA-1:0]          td_acc_rd_en,
  output logic [N_PU_OLA-1:0]          td_acc_rd_buf,
  output logic [ADDR_W-1:0]            td_acc_rd_addr,
  input  cplx_t                        td_acc_rd_data[N_PU_OLA],
  output logic [N_PU_OLA-1:0]          td_wr_en,
  output logic [N_PU_OLA-1:0]          td_wr_final,
  output logic [N_PU_OLA-1:0]          td_wr_buf,
  output logic [FILT_W-1:0]            td_wr_filter[N_PU_OLA],
  output logic [ADDR_W-1:0]            td_wr_addr,
  output cplx_t                        td_wr_data[N_PU_OLA],
  // FD-OLS launch
  input  logic [ADDR_W-1:0]            fd_in_base,
  input  logic [ADDR_W-1:0]            fd_n_chunk,
  input  logic [$clog2(N_OLS_FT)-1:0]  fd_ovl,
  input  logic [FILT_W-1:0]            fd_filt_base,
  input  logic [$clog2(N_PU_OLS+1)-1:0] fd_n_active,
  output logic [ADDR_W-1:0]            fd_discarded,
  // FD-OLS memory ports
  output logic                         fd_in_rd_en,
  output logic [ADDR_W-1:0]            fd_in_rd_addr,
  input  cplx_t                        fd_in_rd_data[FFT_P],
  output logic [N_PU_OLS-1:0]          fd_coef_rd_en,
  output logic [ADDR_W-1:0]            fd_coef_rd_addr[N_PU_OLS],
  input  cplx_t                        fd_coef_rd_data[N_PU_OLS][FFT_P],
  output logic [N_PU_OLS-1:0]          fd_out_wr_en,
  output logic [FFT_P-1:0]             fd_out_wr_mask,
  output logic [ADDR_W-1:0]            fd_out_wr_addr,
  output logic [FILT_W-1:0]            fd_out_wr_filter[N_PU_OLS],
  output cplx_t                        fd_out_wr_data[N_PU_OLS][FFT_P]
);

  localparam bit MODE_TD = 1'b0;
  localparam bit MODE_FD = 1'b1;

  logic td_busy, td_done, fd_busy, fd_done;
  logic td_start, fd_start;

  assign td_start = start && !busy && (mode == MODE_TD);
  assign fd_start = start && !busy && (mode == MODE_FD);
  assign busy     = td_busy | fd_busy;
  assign done     = td_done | fd_done;

  // ------------------------------------------------------------------ TD-OLA
  logic                         pu_clear;
  logic [N_PU_OLA-1:0]          pu_coef_we, pu_in_valid, td_y_valid;
  logic [$clog2(N_OLA_TAP)-1:0] pu_coef_idx;
  cplx_t                        pu_coef[N_PU_OLA], pu_acc[N_PU_OLA];
  cplx_t                        pu_x;

  ola_controller #(
    .N_PU(N_PU_OLA), .L(N_OLA_TAP), .FILT_W(FILT_W), .TAP_W(TAP_W),
    .MAX_FILT(MAX_FILT), .TAP_STRIDE(TAP_STRIDE)
  ) u_ola_ctrl (
    .clk, .rst_n, .start(td_start), .n_filter, .n_inc, .tap1, .n_input,
    .busy(td_busy), .done(td_done), .rounds(td_rounds),
    .x_rd_en(td_x_rd_en), .x_rd_addr(td_x_rd_addr), .x_rd_data(td_x_rd_data),
    .coef_rd_en(td_coef_rd_en), .coef_rd_addr(td_coef_rd_addr), .coef_rd_data(td_coef_rd_data),
    .acc_rd_en(td_acc_rd_en), .acc_rd_buf(td_acc_rd_buf), .acc_rd_addr(td_acc_rd_addr),
    .acc_rd_data(td_acc_rd_data),
    .pu_clear, .pu_coef_we, .pu_coef_idx, .pu_coef, .pu_in_valid, .pu_x, .pu_acc,
    .wr_en(td_wr_en), .wr_final(td_wr_final), .wr_buf(td_wr_buf), .wr_filter(td_wr_filter),
    .wr_addr(td_wr_addr), .n_pad_launch(td_pad_launches), .n_idle_slot(td_idle_slots)
  );

  for (genvar u = 0; u < N_PU_OLA; u++) begin : g_ola
    ola_fir #(.L(N_OLA_TAP)) u_fir (
      .clk, .rst_n, .clear(pu_clear), .coef_we(pu_coef_we[u]), .coef_idx(pu_coef_idx),
      .coef_in(pu_coef[u]), .in_valid(pu_in_valid[u]), .x_in(pu_x), .acc_in(pu_acc[u]),
      .out_valid(td_y_valid[u]), .y_out(td_wr_data[u])
    );
  end

  // ------------------------------------------------------------------ FD-OLS
  logic [N_PU_OLS-1:0]           ols_in_valid, ols_out_valid;
  cplx_t                         ols_x[FFT_P];
  cplx_t                         ols_h[N_PU_OLS][FFT_P];
  logic [$clog2(N_OLS_FT/FFT_P)-1:0] ols_out_beat[N_PU_OLS];

  ols_controller #(.N_PU(N_PU_OLS), .N(N_OLS_FT), .P(FFT_P), .FILT_W(FILT_W)) u_ols_ctrl (
    .clk, .rst_n, .start(fd_start), .in_base(fd_in_base), .n_chunk(fd_n_chunk), .ovl(fd_ovl),
    .filt_base(fd_filt_base), .n_active(fd_n_active), .busy(fd_busy), .done(fd_done),
    .in_rd_en(fd_in_rd_en), .in_rd_addr(fd_in_rd_addr), .in_rd_data(fd_in_rd_data),
    .coef_rd_en(fd_coef_rd_en), .coef_rd_addr(fd_coef_rd_addr), .coef_rd_data(fd_coef_rd_data),
    .pu_in_valid(ols_in_valid), .pu_x(ols_x), .pu_h(ols_h),
    .pu_out_valid(ols_out_valid[0]), .pu_out_beat(ols_out_beat[0]),
    .out_wr_en(fd_out_wr_en), .out_wr_mask(fd_out_wr_mask), .out_wr_addr(fd_out_wr_addr),
    .out_wr_filter(fd_out_wr_filter), .n_discard(fd_discarded)
  );

  // all units run in lockstep on unit 0's valid; units beyond fd_n_active compute on
  // whatever their idle coefficient port returns, and their writes stay disabled
  for (genvar u = 0; u < N_PU_OLS; u++) begin : g_ols
    ols_pu #(.N(N_OLS_FT), .P(FFT_P)) u_pu (
      .clk, .rst_n, .in_valid(ols_in_valid[0]), .x(ols_x), .h(ols_h[u]),
      .out_valid(ols_out_valid[u]), .out_beat(ols_out_beat[u]), .out_data(fd_out_wr_data[u])
    );
  end

  // the TD-OLA processors' outputs coincide with their write tags
  assert property (@(posedge clk) disable iff (!rst_n) td_y_valid == td_wr_en);
  // the two controllers never run at once
  assert property (@(posedge clk) disable iff (!rst_n) !(td_busy && fd_busy));

endmodule
