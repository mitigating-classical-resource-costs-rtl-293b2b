// arqade_predecoder -- pipelined non-syndrome-modifying predecoder.
//
// The predecoder sits in front of a slow second-level decoder (BP-OSD,
// RelayBP, matching) and fully decodes the common, sparse error patterns on
// its own, so that the second level is invoked only for the rare complex
// ones.  Its logic is a set of predecoding primitives, one per edge of the
// decoding graph (see predecoding_primitive), scheduled into a pipeline by
// colouring their conflict graph: primitives that share a syndrome bit sit
// in different stages, and stages run in priority order (time-like first,
// then space-like, with subset primitives after their supersets).
//
// Structure: KEEP_STAGES predecode_stage instances in a chain, then a
// complexity_detector.  Stage removal: the table defines NSTAGES stages;
// keeping only the first KEEP_STAGES drops the lowest-priority tail.  This
// lowers coverage (more blocks are deferred) but never changes a
// correction that is made, because the priority order of the kept stages
// is unchanged.
//
// Interface: one two-round syndrome block (2*NCHK bits, see arqade_pkg)
// may enter on every clock with in_valid.  The result appears
// KEEP_STAGES+1 clocks later with out_valid: either a correction
// (out_complex = 0, observable flips in out_obs) or a deferral
// (out_complex = 1, the original block on out_l2_syn for the second-level
// decoder).  stage_hit[s] is high in the cycle in which a primitive of
// stage s fires.  Synchronous active-low reset.
//
// The default table is the distance-15 rotated surface code under a
// phenomenological noise model (6 stages).  The paper's own surface-code
// tables come from a circuit-level error model and have 9 stages; those
// tables need the detector error model of a specific circuit and are not
// reproduced here.
module arqade_predecoder
  import arqade_pkg::*;
#(
  parameter int D           = 15,
  parameter int KEEP_STAGES = sc_nstages(D),
  parameter int NSYN        = sc_nsyn(D),
  parameter int NOBS        = sc_nobs(D)
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   in_valid,
  input  logic [NSYN-1:0]        in_syn,
  output logic                   out_valid,
  output logic                   out_complex,
  output logic [NOBS-1:0]        out_obs,
  output logic [NSYN-1:0]        out_l2_syn,
  output logic [KEEP_STAGES-1:0] stage_hit
);

  localparam int NSTAGES = sc_nstages(D);

  if (KEEP_STAGES < 1 || KEEP_STAGES > NSTAGES) begin : g_bad_keep
    $error("KEEP_STAGES must be between 1 and the table's stage count");
  end

  logic            v    [KEEP_STAGES+1];
  logic [NSYN-1:0] syn  [KEEP_STAGES+1];
  logic [NOBS-1:0] obs  [KEEP_STAGES+1];
  logic [NSYN-1:0] orig [KEEP_STAGES+1];

  assign v[0]    = in_valid;
  assign syn[0]  = in_syn;
  assign obs[0]  = '0;
  assign orig[0] = in_syn;

  for (genvar s = 0; s < KEEP_STAGES; s++) begin : g_stage
    predecode_stage #(.D(D), .STAGE(s), .NSYN(NSYN), .NOBS(NOBS)) u_stage (
      .clk       (clk),
      .rst_n     (rst_n),
      .in_valid  (v[s]),
      .in_syn    (syn[s]),
      .in_obs    (obs[s]),
      .in_orig   (orig[s]),
      .hit       (stage_hit[s]),
      .out_valid (v[s+1]),
      .out_syn   (syn[s+1]),
      .out_obs   (obs[s+1]),
      .out_orig  (orig[s+1])
    );
  end

  complexity_detector #(.NSYN(NSYN), .NOBS(NOBS)) u_detect (
    .clk         (clk),
    .rst_n       (rst_n),
    .in_valid    (v[KEEP_STAGES]),
    .in_syn      (syn[KEEP_STAGES]),
    .in_obs      (obs[KEEP_STAGES]),
    .in_orig     (orig[KEEP_STAGES]),
    .out_valid   (out_valid),
    .out_complex (out_complex),
    .out_obs     (out_obs),
    .out_l2_syn  (out_l2_syn)
  );

endmodule
