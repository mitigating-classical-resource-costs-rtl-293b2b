// predecoding_primitive -- one predecoding primitive.
//
// The primitive watches the syndrome bits of its set S.  When every one of
// them is active it "fires": it asks for those bits to be cleared in the
// global syndrome buffer and for the observables of its set O to be flipped
// in the global observable buffer.  This is the paper's update rule.  The
// sets come in as the parameter P (see arqade_pkg::prim_t); the circuit is
// an AND of |S| inputs and two constant masks gated by it.
//
// Interface: syn_in is the whole syndrome buffer as seen by the primitive's
// pipeline stage; clr is the mask of bits to clear, flip the observables to
// toggle, fire the AND itself.  Purely combinational; the stage that holds
// the primitive merges the masks of all its primitives and registers the
// result.
module predecoding_primitive
  import arqade_pkg::*;
#(
  parameter int    NSYN = 8,
  parameter int    NOBS = 1,
  parameter prim_t P    = '{n_syn: 4'd2, syn: {{(MAX_S-2)*IDX_W{1'b0}}, 16'd3, 16'd1},
                            obs: 16'h0001, stage: 8'd0, cls: CLS_SPACE}
) (
  input  logic [NSYN-1:0] syn_in,
  output logic            fire,
  output logic [NSYN-1:0] clr,
  output logic [NOBS-1:0] flip
);

  // One bit per element of S, fixed at elaboration.
  function automatic logic [NSYN-1:0] set_mask(logic [MAX_S-1:0][IDX_W-1:0] syn, int n);
    logic [NSYN-1:0] m = '0;
    for (int b = 0; b < NSYN; b++)
      for (int i = 0; i < MAX_S; i++)
        if (i < n && int'(syn[i]) == b) m[b] = 1'b1;
    return m;
  endfunction

  localparam logic [NSYN-1:0] S_MASK = set_mask(P.syn, int'(P.n_syn));

  assign fire = ((syn_in & S_MASK) == S_MASK);
  assign clr  = fire ? S_MASK : '0;
  assign flip = fire ? P.obs[NOBS-1:0] : '0;

endmodule
