// syndrome_buffer -- pipeline register between predecoder stages.
//
// Holds, for the two-round syndrome block currently in a stage, the global
// syndrome buffer (bits still to be explained), the global logical
// observable buffer (corrections accumulated so far) and an unmodified copy
// of the incoming syndrome, which is what gets forwarded to the second-level
// decoder if predecoding fails.  The paper names the two global buffers and
// says the original syndrome is deferred; keeping the copy in the pipeline
// next to the working buffer is this design's choice.
//
// Timing: one register stage, loads every cycle (the predecoder has no
// back-pressure: a new block may enter on every clock).  Synchronous,
// active-low reset clears the valid bit and all data.
module syndrome_buffer #(
  parameter int NSYN = 8,
  parameter int NOBS = 1
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            d_valid,
  input  logic [NSYN-1:0] d_syn,
  input  logic [NOBS-1:0] d_obs,
  input  logic [NSYN-1:0] d_orig,
  output logic            q_valid,
  output logic [NSYN-1:0] q_syn,
  output logic [NOBS-1:0] q_obs,
  output logic [NSYN-1:0] q_orig
);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      q_valid <= 1'b0;
      q_syn   <= '0;
      q_obs   <= '0;
      q_orig  <= '0;
    end else begin
      q_valid <= d_valid;
      q_syn   <= d_syn;
      q_obs   <= d_obs;
      q_orig  <= d_orig;
    end
  end

endmodule
