// arqade_pkg -- shared types and the primitive table of the predecoder.
//
// A predecoding primitive is defined by two sets: S, the syndrome bits at
// the ends of one decoding-graph edge (hyperedge), and O, the logical
// observables that a correction on that edge flips.  The predecoder is a
// pipeline; every primitive is assigned to exactly one stage, and primitives
// in one stage never share a syndrome bit.  Primitives of higher priority
// sit in earlier stages.
//
// The table itself is normally produced offline from a code's detector
// error model.  This package computes it in closed form for one code: the
// rotated distance-d surface code in a Z-basis memory experiment, under a
// phenomenological noise model (X errors on data qubits and measurement
// errors on Z checks).  The predecoder always looks at a block of two
// syndrome-measurement rounds, so a syndrome vector has 2*NCHK bits:
// bit c is check c in the first round, bit NCHK+c the same check in the
// second round.
//
// Geometry.  Data qubits are (i,j), 0 <= i,j < d.  A plaquette (a,b),
// -1 <= a,b <= d-1, touches qubits (a..a+1, b..b+1).  It is a Z check when
// a+b is even and either it lies in the bulk (0 <= a,b <= d-2) or it is a
// weight-2 plaquette on the top or bottom edge (a = -1 or a = d-1,
// 0 <= b <= d-2).  Every row a holds (d-1)/2 Z checks, so check (a,b) has
// index (a+1)*(d-1)/2 + b/2.  The logical observable is Z on column 0;
// an X error on qubit (i,0) flips it.
//
// Table order and stages (priority high to low):
//   stage 0      time-like: {c, NCHK+c}, a measurement error on check c.
//   stages 1..4  space-like: an X error on a qubit with two Z checks
//                (columns 1..d-2), in either round; the stage is
//                1 + 2*(i mod 2) + (j mod 2).  The four qubits of a check
//                have four different parities, so a stage is conflict free.
//   stage 5      space-like boundary errors (columns 0 and d-1), whose
//                syndrome set is a single check.  These are subsets of
//                the two-check primitives, so they get the lowest priority.
//                Both boundary qubits of one check have the same S and O
//                and share one primitive.
// The time-like and space-like classes and the subset rule follow the
// paper; spacetime-like and hook-like primitives only arise under
// circuit-level noise and are absent from this phenomenological table.
package arqade_pkg;

  localparam int MAX_S   = 8;   // largest syndrome set a primitive may have
  localparam int MAX_OBS = 16;  // largest number of logical observables
  localparam int IDX_W   = 16;  // width of a syndrome-bit index

  // Primitive classes, in the paper's level-1 priority order.
  typedef enum logic [2:0] {
    CLS_TIME      = 3'd0,
    CLS_SPACE     = 3'd1,
    CLS_SPACETIME = 3'd2,
    CLS_HOOK      = 3'd3,
    CLS_SUBSET    = 3'd4
  } prim_class_e;

  typedef struct packed {
    logic [3:0]                   n_syn;  // |S|, 1..MAX_S
    logic [MAX_S-1:0][IDX_W-1:0]  syn;    // S: syndrome-bit indices
    logic [MAX_OBS-1:0]           obs;    // O: observable flip mask
    logic [7:0]                   stage;  // pipeline stage
    prim_class_e                  cls;
  } prim_t;

  localparam prim_t PRIM_NONE = '{n_syn: 4'd1, syn: '0, obs: '0,
                                  stage: 8'd0, cls: CLS_TIME};

  // ---- surface code, phenomenological noise, two-round block ------------

  function automatic int sc_nchk(input int d);
    return (d * d - 1) / 2;
  endfunction

  function automatic int sc_nsyn(input int d);
    return 2 * sc_nchk(d);
  endfunction

  // one logical qubit, one observable (a valid code needs d >= 3)
  function automatic int sc_nobs(input int d);
    return (d >= 3) ? 1 : 0;
  endfunction

  // time-like + two-check space-like (both rounds) + boundary (both rounds)
  function automatic int sc_nprim(input int d);
    return sc_nchk(d) + 2 * d * (d - 2) + 2 * (d + 1);
  endfunction

  // stage 0, stages 1..4, stage 5 (see above); d >= 3
  function automatic int sc_nstages(input int d);
    return (d >= 3) ? 6 : 0;
  endfunction

  // Index of Z check (a,b); only valid for an existing Z check.
  function automatic int sc_chk(input int d, input int a, input int b);
    return (a + 1) * ((d - 1) / 2) + b / 2;
  endfunction

  // The k-th primitive of the table.
  function automatic prim_t sc_prim(input int d, input int k);
    prim_t p;
    int nchk, q2, k2, k3, r, q, i, j, m, half, a, b;
    nchk = sc_nchk(d);
    q2   = d * (d - 2);
    half = (d + 1) / 2;
    p    = PRIM_NONE;
    if (k < nchk) begin
      p.n_syn  = 4'd2;
      p.syn[0] = IDX_W'(k);
      p.syn[1] = IDX_W'(nchk + k);
      p.stage  = 8'd0;
      p.cls    = CLS_TIME;
    end else if (k < nchk + 2 * q2) begin
      k2 = k - nchk;
      r  = k2 / q2;
      q  = k2 % q2;
      i  = q / (d - 2);
      j  = 1 + q % (d - 2);
      // of the plaquettes (i-1,j-1),(i,j) and (i-1,j),(i,j-1) exactly one
      // diagonal pair has even a+b
      p.n_syn = 4'd2;
      if (((i + j) % 2) == 0) begin
        p.syn[0] = IDX_W'(r * nchk + sc_chk(d, i - 1, j - 1));
        p.syn[1] = IDX_W'(r * nchk + sc_chk(d, i, j));
      end else begin
        p.syn[0] = IDX_W'(r * nchk + sc_chk(d, i - 1, j));
        p.syn[1] = IDX_W'(r * nchk + sc_chk(d, i, j - 1));
      end
      p.stage = 8'(1 + 2 * (i % 2) + (j % 2));
      p.cls   = CLS_SPACE;
    end else begin
      k3 = k - nchk - 2 * q2;
      r  = k3 / (d + 1);
      m  = k3 % (d + 1);
      if (m < half) begin
        a = 2 * m;               // left column: checks (0,0),(2,0)..(d-1,0)
        b = 0;
        p.obs[0] = 1'b1;
      end else begin
        a = 2 * (m - half) - 1;  // right column: checks (-1,d-2)..(d-2,d-2)
        b = d - 2;
      end
      p.n_syn  = 4'd1;
      p.syn[0] = IDX_W'(r * nchk + sc_chk(d, a, b));
      p.stage  = 8'd5;
      p.cls    = CLS_SPACE;
    end
    return p;
  endfunction

endpackage
