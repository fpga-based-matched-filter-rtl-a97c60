// lpt_scheduler: longest-processing-time-first allocation of filters to TD-OLA units.
//
// A matched filter group MF-(N_filter, N_inc, Tap_1) holds filters of lengths
// Tap_j = Tap_1 + N_inc*(j-1). Filter j needs ceil(Tap_j / L) launches of an L-tap
// sub-filter processor. Because the lengths grow with j, visiting the filters from
// j = N_filter down to 1 is already the LPT order; each filter goes to the processing
// unit with the fewest launches allocated so far (the lowest index wins a tie). This is
// the inner loop of the paper's search for the best sub-filter size, and gives the
// processing order of its figure of the LPT schedule.
//
// Interface: pulse `start` with the group description held steady; one allocation per
// clock cycle then leaves on `asg_valid` (filter, unit, launches), N_filter cycles in
// all. `done` pulses together with the last allocation, and from then `makespan`
// holds the largest number of launches of any unit (the launch rounds the group needs).
//
// The allocation rule is the paper's. Running it in hardware, one filter per cycle,
// and the lowest-index tie rule are this design's choices; the paper leaves the
// allocation to the host.
module lpt_scheduler #(
  parameter int unsigned N_PU    = 7,     // N_pu-OLA
  parameter int unsigned L       = 32,    // N_OLA-tap (a power of two)
  parameter int unsigned FILT_W  = 10,    // N_filter up to 1000
  parameter int unsigned TAP_W   = 14,    // Tap up to 1000 (headroom for Tap_1 + N_inc*(N_filter-1))
  parameter int unsigned LOAD_W  = 16
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      start,
  input  logic [FILT_W-1:0]         n_filter,
  input  logic [3:0]                n_inc,
  input  logic [TAP_W-1:0]          tap1,
  output logic                      busy,
  output logic                      asg_valid,
  output logic [FILT_W-1:0]         asg_filter,  // 1-based filter index j
  output logic [$clog2(N_PU)-1:0]   asg_pu,
  output logic [TAP_W-1:0]          asg_nsub,    // ceil(Tap_j / L)
  output logic [TAP_W-1:0]          asg_tap,     // Tap_j
  output logic                      done,
  output logic [LOAD_W-1:0]         makespan
);

  localparam int unsigned LOG_L = $clog2(L);
  localparam int unsigned PU_W  = $clog2(N_PU);

  logic [LOAD_W-1:0] load[N_PU];
  logic [FILT_W-1:0] j;
  logic [TAP_W-1:0]  tap_j;
  logic [PU_W-1:0]   min_idx;
  logic [LOAD_W-1:0] min_load, max_load;
  logic [TAP_W-1:0]  nsub_j;

  // argmin and max over the unit loads
  always_comb begin
    min_idx  = '0;
    min_load = load[0];
    max_load = load[0];
    for (int p = 1; p < N_PU; p++) begin
      if (load[p] < min_load) begin
        min_load = load[p];
        min_idx  = PU_W'(p);
      end
      if (load[p] > max_load) max_load = load[p];
    end
  end

  assign nsub_j = (tap_j + TAP_W'(L - 1)) >> LOG_L;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy       <= 1'b0;
      j          <= '0;
      tap_j      <= '0;
      asg_valid  <= 1'b0;
      asg_filter <= '0;
      asg_pu     <= '0;
      asg_nsub   <= '0;
      asg_tap    <= '0;
      done       <= 1'b0;
      makespan   <= '0;
      for (int p = 0; p < N_PU; p++) load[p] <= '0;
    end else begin
      asg_valid <= 1'b0;
      done      <= 1'b0;
      if (start && !busy) begin
        busy  <= (n_filter != '0);
        done  <= (n_filter == '0);
        j     <= n_filter;
        tap_j <= tap1 + TAP_W'(n_inc * (n_filter - FILT_W'(1)));
        for (int p = 0; p < N_PU; p++) load[p] <= '0;
        makespan <= '0;
      end else if (busy) begin
        asg_valid     <= 1'b1;
        asg_filter    <= j;
        asg_pu        <= min_idx;
        asg_nsub      <= nsub_j;
        asg_tap       <= tap_j;
        load[min_idx] <= min_load + LOAD_W'(nsub_j);
        j             <= j - FILT_W'(1);
        tap_j         <= tap_j - TAP_W'(n_inc);
        if (j == FILT_W'(1)) begin
          busy <= 1'b0;
          done <= 1'b1;
          makespan <= (max_load > min_load + LOAD_W'(nsub_j)) ? max_load : min_load + LOAD_W'(nsub_j);
        end
      end
    end
  end

endmodule
