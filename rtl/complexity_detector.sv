// complexity_detector -- end of the predecoding pipeline.
//
// After the last stage, any syndrome bit still set means the primitives did
// not explain every detection event: the block is "complex" and its
// original, unmodified syndrome goes to the second-level decoder, while the
// predecoder's own corrections are dropped.  Otherwise the block is fully
// predecoded and the accumulated observable flips are the correction (a
// Pauli-frame update); nothing is sent to the second level.  This is the
// paper's rule; the output format is this design's choice.
//
// Interface: in_* is the last stage's registered block.  One register
// stage: out_valid marks a result, out_complex says which of the two cases
// it is, out_obs is the correction (zero for a complex block) and
// out_l2_syn the syndrome for the second level (zero unless complex).
// Synchronous active-low reset.
module complexity_detector #(
  parameter int NSYN = 8,
  parameter int NOBS = 1
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            in_valid,
  input  logic [NSYN-1:0] in_syn,
  input  logic [NOBS-1:0] in_obs,
  input  logic [NSYN-1:0] in_orig,
  output logic            out_valid,
  output logic            out_complex,
  output logic [NOBS-1:0] out_obs,
  output logic [NSYN-1:0] out_l2_syn
);

  logic residual;
  assign residual = |in_syn;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_valid   <= 1'b0;
      out_complex <= 1'b0;
      out_obs     <= '0;
      out_l2_syn  <= '0;
    end else begin
      out_valid   <= in_valid;
      out_complex <= in_valid && residual;
      out_obs     <= (in_valid && !residual) ? in_obs : '0;
      out_l2_syn  <= (in_valid && residual) ? in_orig : '0;
    end
  end

endmodule
