// tb_complexity_detector -- random blocks with an empty or non-empty
// residual syndrome.  One clock later: out_complex must be set exactly
// for a valid block with residual bits, out_obs must carry the corrections
// only for a valid block without, out_l2_syn the original syndrome only
// for a complex block.  Also checks reset and invalid cycles.
`timescale 1ns/1ps
module tb_complexity_detector;
  localparam int NSYN = 24;
  localparam int NOBS = 2;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic            in_valid, out_valid, out_complex;
  logic [NSYN-1:0] in_syn, in_orig, out_l2_syn;
  logic [NOBS-1:0] in_obs, out_obs;

  complexity_detector #(.NSYN(NSYN), .NOBS(NOBS)) dut (.*);

  int checks = 0, failures = 0, n_cplx = 0, n_ok = 0;
  bit done = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL @%0t: %s", $time, what);
    end
  endtask

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    if (!done) begin
      failures++;
      $display("watchdog expired");
      $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
      $finish;
    end
  end

  initial begin
    logic            v, res;
    logic [NSYN-1:0] s, o;
    logic [NOBS-1:0] b;
    in_valid = 1; in_syn = '1; in_orig = '1; in_obs = '1;
    @(negedge clk); @(negedge clk);
    check(!out_valid && !out_complex && out_obs == '0 && out_l2_syn == '0, "reset");
    rst_n = 1;
    for (int n = 0; n < 2000; n++) begin
      v = ($urandom_range(0, 4) != 0);
      res = 1'($urandom);
      // a residual of a single random bit, or none
      s = res ? (NSYN'(1) << $urandom_range(0, NSYN - 1)) : '0;
      o = NSYN'({$urandom, $urandom});
      b = NOBS'($urandom);
      in_valid = v; in_syn = s; in_orig = o; in_obs = b;
      @(posedge clk); #1;
      check(out_valid == v, "valid");
      check(out_complex == (v && res), "complex");
      check(out_obs == ((v && !res) ? b : '0), "obs");
      check(out_l2_syn == ((v && res) ? o : '0), "l2 syndrome");
      if (v && res) n_cplx++;
      if (v && !res) n_ok++;
      @(negedge clk);
    end
    check(n_cplx > 0 && n_ok > 0, "both outcomes seen");
    done = 1;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
