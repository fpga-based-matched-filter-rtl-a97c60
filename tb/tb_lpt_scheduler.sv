// tb_lpt_scheduler: self-checking test of the LPT filter allocation.
//
// For a set of matched filter groups, including the paper's MF-(42,10,1), the testbench
// runs its own LPT allocation in software and compares every (filter, unit, launches)
// triple the block emits, the makespan, and the time taken: one filter per clock cycle.
module tb_lpt_scheduler;

  localparam int N_PU = 7, L = 32, FILT_W = 10, TAP_W = 14, LOAD_W = 16;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start, busy, asg_valid, done;
  logic [FILT_W-1:0] n_filter, asg_filter;
  logic [3:0] n_inc;
  logic [TAP_W-1:0] tap1, asg_nsub, asg_tap;
  logic [$clog2(N_PU)-1:0] asg_pu;
  logic [LOAD_W-1:0] makespan;

  lpt_scheduler #(.N_PU(N_PU), .L(L)) dut (.*);

  int checks = 0, failures = 0;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_group(input int nf, input int ninc, input int t1);
    int load[N_PU];
    int exp_j, exp_pu, exp_nsub, nseen, cyc, ms;
    for (int p = 0; p < N_PU; p++) load[p] = 0;
    @(negedge clk);
    n_filter = FILT_W'(nf); n_inc = 4'(ninc); tap1 = TAP_W'(t1);
    start = 1;
    @(negedge clk);
    start = 0;
    nseen = 0; cyc = 0;
    exp_j = nf;
    while (1) begin
      @(posedge clk); #1;
      cyc++;
      if (asg_valid) begin
        int tap, mi;
        tap = t1 + ninc * (exp_j - 1);
        exp_nsub = (tap + L - 1) / L;
        mi = 0;
        for (int p = 1; p < N_PU; p++) if (load[p] < load[mi]) mi = p;
        load[mi] += exp_nsub;
        checks++;
        if (int'(asg_filter) != exp_j || int'(asg_pu) != mi || int'(asg_nsub) != exp_nsub || int'(asg_tap) != tap) begin
          failures++;
          $display("MF(%0d,%0d,%0d) filter %0d: got j=%0d pu=%0d nsub=%0d, expected pu=%0d nsub=%0d",
                   nf, ninc, t1, exp_j, asg_filter, asg_pu, asg_nsub, mi, exp_nsub);
        end
        exp_j--;
        nseen++;
      end
      if (done) break;
      if (cyc > nf + 10) break;
    end
    ms = 0;
    for (int p = 0; p < N_PU; p++) if (load[p] > ms) ms = load[p];
    checks++;
    if (nseen != nf || int'(makespan) != ms) begin
      failures++;
      $display("MF(%0d,%0d,%0d): %0d allocations, makespan %0d, expected %0d and %0d", nf, ninc, t1, nseen, makespan, nf, ms);
    end
    // rate: one filter per cycle, done with the last one
    checks++;
    if (cyc != nf) begin
      failures++;
      $display("MF(%0d,%0d,%0d): took %0d cycles, expected %0d", nf, ninc, t1, cyc, nf);
    end
  endtask

  initial begin
    start = 0; n_filter = '0; n_inc = '0; tap1 = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    check_group(42, 10, 1);
    check_group(100, 10, 1);
    check_group(5, 1, 1);
    check_group(1, 3, 17);
    for (int t = 0; t < 10; t++)
      check_group($urandom_range(1, 200), $urandom_range(1, 10), $urandom_range(1, 100));
    check_group(1000, 1, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
