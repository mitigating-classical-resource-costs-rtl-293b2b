// tb_stage_removal_sweep -- coverage against pipeline depth at full size.
//
// Four distance-15 predecoders keep 3, 4, 5 and all 6 stages (removing up
// to half of the pipeline from its tail).  They receive the same stream of
// two-round blocks with independent phenomenological noise: every data
// qubit in every round suffers an X error, and every check a measurement
// error, with probability p, for p = 0.001, 0.003 and 0.01.  For each
// block and each depth the result is compared with the sequential
// reference, and a block that a shorter pipeline fully predecodes must get
// the same correction from the full pipeline.  Printed per p: coverage
// (share of blocks fully predecoded) for each depth.  Coverage must never
// rise when stages are removed.  Removing tail stages to trade coverage
// for hardware follows the original work; the noise model, the rates and
// the depths tried are this testbench's own choice.
`timescale 1ns/1ps
module tb_stage_removal_sweep;
  import arqade_pkg::*;
  import surface_ref_pkg::*;

  localparam int D      = 15;
  localparam int NSYN   = sc_nsyn(D);
  localparam int NST    = sc_nstages(D);
  localparam int NBLK   = 3000;
  localparam int NK     = 4;
  localparam int KEEP [NK] = '{3, 4, 5, 6};

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic            in_valid;
  logic [NSYN-1:0] in_syn;
  logic            o_valid   [NK];
  logic            o_complex [NK];
  logic [0:0]      o_obs     [NK];
  logic [NSYN-1:0] o_l2      [NK];

  for (genvar x = 0; x < NK; x++) begin : g_dut
    logic [KEEP[x]-1:0] hit;
    arqade_predecoder #(.D(D), .KEEP_STAGES(KEEP[x])) dut (
      .clk, .rst_n, .in_valid, .in_syn,
      .out_valid(o_valid[x]), .out_complex(o_complex[x]), .out_obs(o_obs[x]),
      .out_l2_syn(o_l2[x]), .stage_hit(hit));
  end

  int checks = 0, failures = 0;
  int covered [NK];
  bit done = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL @%0t: %s", $time, what);
    end
  endtask

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    if (!done) begin
      failures++;
      $display("watchdog expired");
      $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
      $finish;
    end
  end

  initial begin
    real    plist [3] = '{0.001, 0.003, 0.01};
    int     nc;
    longint thr;
    vec_t   v;
    bit     eo   [NK];
    bit     ec   [NK];
    nc = nchk(D);
    in_valid = 0; in_syn = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    foreach (plist[pi]) begin
      thr = longint'(plist[pi] * 4294967296.0);
      for (int x = 0; x < NK; x++) covered[x] = 0;
      for (int n = 0; n < NBLK; n++) begin
        v = '0;
        for (int r = 0; r < 2; r++)
          for (int i = 0; i < D; i++)
            for (int j = 0; j < D; j++)
              if (longint'($urandom) < thr) v ^= data_error(D, i, j, r);
        for (int c = 0; c < nc; c++)
          if (longint'($urandom) < thr) v ^= meas_error(D, c);
        for (int x = 0; x < NK; x++) predecode(D, KEEP[x], v, eo[x], ec[x]);
        @(negedge clk);
        in_valid = 1; in_syn = v[NSYN-1:0];
        // each result is visible KEEP_STAGES+1 clocks after its block
        for (int k = 1; k <= NST + 1; k++) begin
          @(negedge clk);
          in_valid = 0;
          for (int x = 0; x < NK; x++) if (KEEP[x] + 1 == k) begin
            check(o_valid[x], $sformatf("result missing, %0d stages", KEEP[x]));
            check(o_complex[x] == ec[x], $sformatf("complex flag, %0d stages", KEEP[x]));
            check(o_obs[x] == eo[x], $sformatf("correction, %0d stages", KEEP[x]));
            check(o_l2[x] == (ec[x] ? v[NSYN-1:0] : '0), "second-level syndrome");
            if (!ec[x]) begin
              covered[x]++;
              check(!ec[NK-1] && eo[x] == eo[NK-1], "stage removal changed a correction");
            end
          end
        end
      end
      $display("p=%0.3f coverage over %0d blocks:", plist[pi], NBLK);
      for (int x = 0; x < NK; x++) begin
        $display("  %0d of %0d stages: %0.2f%%", KEEP[x], NST,
                 100.0 * covered[x] / NBLK);
        if (x > 0) check(covered[x] >= covered[x-1], "coverage rose when stages were removed");
      end
      check(covered[NK-1] > covered[0], "removing half the stages changed nothing");
    end
    done = 1;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
