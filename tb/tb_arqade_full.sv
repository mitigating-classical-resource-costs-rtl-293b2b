// tb_arqade_full -- the predecoder at its default size (distance 15, all
// six stages, 224-bit two-round syndrome blocks), end to end.
//
// The stream holds every single error of
// a two-round block (each data qubit in each round, each measurement
// error), the empty block, and random blocks of 1..4 errors, with random
// idle cycles in between.  Single errors must be fully predecoded with the
// true observable flip; every block's result is compared with the
// sequential reference of surface_ref_pkg, and the latency must be
// KEEP_STAGES+1 clocks.  Counted mechanisms, each of which must occur:
// full predecoding with a correction, deferral to the second level,
// a hit in every stage and back-to-back blocks.  Stage removal is
// exercised by tb_arqade_predecoder at a smaller size.
`timescale 1ns/1ps
module tb_arqade_full;
  import arqade_pkg::*;
  import surface_ref_pkg::*;

  localparam int D       = 15;
  localparam int NSYN    = sc_nsyn(D);
  localparam int NOBS    = sc_nobs(D);
  localparam int NST     = sc_nstages(D);
  localparam int NRAND   = 10000;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic            in_valid;
  logic [NSYN-1:0] in_syn;
  logic            f_valid, f_complex;
  logic [NOBS-1:0] f_obs;
  logic [NSYN-1:0] f_l2;
  logic [NST-1:0]  f_hit;

  arqade_predecoder dut_full (
    .clk, .rst_n, .in_valid, .in_syn,
    .out_valid(f_valid), .out_complex(f_complex), .out_obs(f_obs),
    .out_l2_syn(f_l2), .stage_hit(f_hit));

  typedef struct {
    vec_t syn;
    bit   obs;
    bit   cplx;
    bit   truth_known;
    bit   truth_obs;
    longint t_in;
  } exp_t;

  exp_t qf[$];
  int checks = 0, failures = 0, cycle = 0;
  int n_predecoded = 0, n_deferred = 0, n_b2b = 0;
  int n_hit[NST];
  bit last_valid = 0;

  always @(posedge clk) cycle <= cycle + 1;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL @%0d: %s", cycle, what);
    end
  endtask

  // Inputs change on the falling edge; a block is presented for one cycle.
  task automatic send(vec_t v, bit truth_known, bit truth_obs);
    exp_t e;
    e.syn = v;
    predecode(D, NST, v, e.obs, e.cplx);
    e.truth_known = truth_known;
    e.truth_obs   = truth_obs;
    @(negedge clk);
    e.t_in = $time;
    qf.push_back(e);
    in_valid = 1'b1;
    in_syn   = v[NSYN-1:0];
    if (last_valid) n_b2b++;
    last_valid = 1;
    if ($urandom_range(0, 3) == 0) begin
      @(negedge clk);
      in_valid  = 1'b0;
      last_valid = 0;
      repeat ($urandom_range(0, 2)) @(negedge clk);
    end
  endtask

  // clock cycles from a block being presented to its result being visible
  function automatic int lat(longint t_in);
    return int'(($time - t_in - 5) / 10);
  endfunction

  // output monitors
  always @(posedge clk) if (rst_n) begin
    for (int s = 0; s < NST; s++) if (f_hit[s]) n_hit[s]++;
    if (f_valid) begin
      exp_t e;
      if (qf.size() == 0) check(0, "full: unexpected output");
      else begin
        e = qf.pop_front();
        check(lat(e.t_in) == NST + 1, $sformatf("full: latency %0d", lat(e.t_in)));
        check(f_complex == e.cplx, "full: complex flag");
        check(f_obs == e.obs, "full: observable correction");
        check(f_l2 == (e.cplx ? e.syn[NSYN-1:0] : '0), "full: second-level syndrome");
        if (e.truth_known) begin
          check(!f_complex && f_obs == e.truth_obs, "full: single error not corrected");
        end
        if (!f_complex && f_obs != 0) n_predecoded++;
        if (f_complex) n_deferred++;
      end
    end
  end

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    vec_t v;
    int nc;
    nc = nchk(D);
    for (int s = 0; s < NST; s++) n_hit[s] = 0;
    in_valid = 0;
    in_syn   = '0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    send('0, 1, 0);
    for (int r = 0; r < 2; r++)
      for (int i = 0; i < D; i++)
        for (int j = 0; j < D; j++)
          send(data_error(D, i, j, r), 1, (j == 0));
    for (int c = 0; c < nc; c++) send(meas_error(D, c), 1, 0);
    for (int n = 0; n < NRAND; n++) begin
      v = '0;
      repeat ($urandom_range(1, 6)) begin
        if ($urandom_range(0, 2) == 0) v ^= meas_error(D, $urandom_range(0, nc - 1));
        else v ^= data_error(D, $urandom_range(0, D - 1), $urandom_range(0, D - 1),
                             $urandom_range(0, 1));
      end
      send(v, 0, 0);
    end
    @(negedge clk);
    in_valid = 1'b0;
    repeat (NST + 4) @(posedge clk);
    check(qf.size() == 0, "outputs missing");
    $display("mechanisms: predecoded=%0d deferred=%0d back_to_back=%0d",
             n_predecoded, n_deferred, n_b2b);
    for (int s = 0; s < NST; s++) begin
      $display("  stage %0d hits=%0d", s, n_hit[s]);
      check(n_hit[s] > 0, $sformatf("stage %0d never fired", s));
    end
    check(n_predecoded > 0, "no block predecoded with a correction");
    check(n_deferred > 0, "no block deferred");
    check(n_b2b > 0, "no back-to-back blocks");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
