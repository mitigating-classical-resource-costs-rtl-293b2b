// tb_predecode_stage -- every stage of a distance-5 table, side by side.
//
// All six stages get the same random block (1..5 random errors) and a
// random incoming observable value.  One clock later each stage's
// syndrome and observable outputs must equal the reference stage of
// surface_ref_pkg applied to the input, the original syndrome must pass
// unchanged, and hit must show whether anything in the stage fired.
`timescale 1ns/1ps
module tb_predecode_stage;
  import arqade_pkg::*;
  import surface_ref_pkg::*;

  localparam int D    = 5;
  localparam int NSYN = sc_nsyn(D);
  localparam int NST  = sc_nstages(D);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic            in_valid;
  logic [NSYN-1:0] in_syn, in_orig;
  logic [0:0]      in_obs;
  logic            hit       [NST];
  logic            out_valid [NST];
  logic [NSYN-1:0] out_syn   [NST];
  logic [0:0]      out_obs   [NST];
  logic [NSYN-1:0] out_orig  [NST];

  for (genvar s = 0; s < NST; s++) begin : g_st
    predecode_stage #(.D(D), .STAGE(s)) dut (
      .clk, .rst_n, .in_valid, .in_syn, .in_obs, .in_orig,
      .hit(hit[s]), .out_valid(out_valid[s]), .out_syn(out_syn[s]),
      .out_obs(out_obs[s]), .out_orig(out_orig[s]));
  end

  int checks = 0, failures = 0;
  int n_hit [NST];
  bit done = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL @%0t: %s", $time, what);
    end
  endtask

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    if (!done) begin
      failures++;
      $display("watchdog expired");
      $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
      $finish;
    end
  end

  initial begin
    vec_t v, s;
    bit   o, o0;
    int   nc;
    nc = nchk(D);
    for (int st = 0; st < NST; st++) n_hit[st] = 0;
    in_valid = 0; in_syn = '0; in_orig = '0; in_obs = '0;
    @(negedge clk); @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 3000; n++) begin
      v = '0;
      repeat ($urandom_range(1, 5)) begin
        if ($urandom_range(0, 2) == 0) v ^= meas_error(D, $urandom_range(0, nc - 1));
        else v ^= data_error(D, $urandom_range(0, D - 1), $urandom_range(0, D - 1),
                             $urandom_range(0, 1));
      end
      o0 = 1'($urandom);
      in_valid = 1; in_syn = v[NSYN-1:0]; in_orig = ~v[NSYN-1:0]; in_obs = o0;
      #1;
      for (int st = 0; st < NST; st++) begin
        s = v; o = o0;
        apply_stage(D, st, s, o);
        check(hit[st] == (s != v), $sformatf("hit of stage %0d", st));
        if (hit[st]) n_hit[st]++;
      end
      @(posedge clk); #1;
      for (int st = 0; st < NST; st++) begin
        s = v; o = o0;
        apply_stage(D, st, s, o);
        check(out_valid[st], "valid");
        check(out_syn[st] == s[NSYN-1:0], $sformatf("syndrome of stage %0d", st));
        check(out_obs[st] == o, $sformatf("observable of stage %0d", st));
        check(out_orig[st] == ~v[NSYN-1:0], "original syndrome");
      end
      @(negedge clk);
    end
    for (int st = 0; st < NST; st++) check(n_hit[st] > 0, "stage never fired");
    done = 1;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
