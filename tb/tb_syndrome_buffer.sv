// tb_syndrome_buffer -- the pipeline register: reset clears everything,
// then every field appears unchanged exactly one clock after it is
// presented, every cycle, for random data.
`timescale 1ns/1ps
module tb_syndrome_buffer;
  localparam int NSYN = 40;
  localparam int NOBS = 3;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic            d_valid, q_valid;
  logic [NSYN-1:0] d_syn, d_orig, q_syn, q_orig;
  logic [NOBS-1:0] d_obs, q_obs;

  syndrome_buffer #(.NSYN(NSYN), .NOBS(NOBS)) dut (.*);

  int checks = 0, failures = 0;
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
    logic            pv;
    logic [NSYN-1:0] ps, po;
    logic [NOBS-1:0] pb;
    d_valid = 1; d_syn = '1; d_orig = '1; d_obs = '1;
    @(negedge clk); @(negedge clk);
    check(!q_valid && q_syn == '0 && q_orig == '0 && q_obs == '0, "reset");
    rst_n = 1;
    for (int n = 0; n < 1000; n++) begin
      pv = 1'($urandom);
      ps = {$urandom, $urandom};
      po = {$urandom, $urandom};
      pb = 3'($urandom);
      d_valid = pv; d_syn = ps; d_orig = po; d_obs = pb;
      @(posedge clk); #1;
      check(q_valid == pv, "valid");
      check(q_syn == ps, "syn");
      check(q_orig == po, "orig");
      check(q_obs == pb, "obs");
      @(negedge clk);
    end
    done = 1;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
