// predecode_stage -- one stage of the predecoding pipeline.
//
// A stage holds every primitive of the table whose stage number is STAGE.
// Those primitives share no syndrome bit (they have different colours in
// the conflict graph), so their read-modify-write operations on the global
// syndrome buffer can all happen in the same cycle: each primitive reads the
// incoming buffer, and the stage clears the union of the bits of the
// primitives that fired and XORs their observable masks into the observable
// buffer.  The result is registered in a syndrome_buffer.
//
// The table comes from arqade_pkg (sc_prim for a distance-D surface code).
// At elaboration the stage collects its own primitives, builds for every
// syndrome bit the one primitive that may clear it, and stops with an
// error if two primitives of the stage share a bit: conflict freedom is a
// property of the colouring, so it is checked when the design is built.
// The merge is therefore a per-bit select, and the observable flips of
// all firing primitives are XORed.
//
// Interface: in_* is the block entering the stage, out_* the registered
// block leaving it one clock later.  hit is high (combinationally, in the
// cycle the block is in front of the stage) when at least one primitive of
// the stage fires on a valid block.
module predecode_stage
  import arqade_pkg::*;
#(
  parameter int D     = 15,
  parameter int STAGE = 1,
  parameter int NSYN  = sc_nsyn(D),
  parameter int NOBS  = sc_nobs(D)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            in_valid,
  input  logic [NSYN-1:0] in_syn,
  input  logic [NOBS-1:0] in_obs,
  input  logic [NSYN-1:0] in_orig,
  output logic            hit,
  output logic            out_valid,
  output logic [NSYN-1:0] out_syn,
  output logic [NOBS-1:0] out_obs,
  output logic [NSYN-1:0] out_orig
);

  localparam int NPRIM = sc_nprim(D);

  // Table indices of this stage's primitives, in table order.
  function automatic int count_in_stage();
    int n = 0;
    for (int k = 0; k < NPRIM; k++)
      if (int'(sc_prim(D, k).stage) == STAGE) n++;
    return n;
  endfunction

  localparam int NK = count_in_stage();
  localparam int NKA = (NK > 0) ? NK : 1;   // array size, at least 1

  function automatic logic [NKA-1:0][15:0] stage_list();
    logic [NKA-1:0][15:0] l = '0;
    int n = 0;
    for (int k = 0; k < NPRIM; k++)
      if (int'(sc_prim(D, k).stage) == STAGE) begin
        l[n] = 16'(k);
        n++;
      end
    return l;
  endfunction

  localparam logic [NKA-1:0][15:0] LIST = stage_list();

  // For every syndrome bit: which primitive of the stage (local index)
  // reads and clears it, and how many do.  More than one is a conflict.
  function automatic logic [NSYN-1:0][15:0] owner_map(input bit want_count);
    logic [NSYN-1:0][15:0] own = '0, cnt = '0;
    logic [MAX_S-1:0][IDX_W-1:0] sidx;
    int ns;
    for (int n = 0; n < NK; n++) begin
      sidx = sc_prim(D, int'(LIST[n])).syn;
      ns   = int'(sc_prim(D, int'(LIST[n])).n_syn);
      for (int i = 0; i < MAX_S; i++)
        if (i < ns && int'(sidx[i]) < NSYN) begin
          own[sidx[i]] = 16'(n);
          cnt[sidx[i]] = cnt[sidx[i]] + 16'd1;
        end
    end
    return want_count ? cnt : own;
  endfunction

  localparam logic [NSYN-1:0][15:0] OWNER = owner_map(1'b0);
  localparam logic [NSYN-1:0][15:0] NOWN  = owner_map(1'b1);

  // The colouring must never put two primitives that share a syndrome bit
  // into the same stage; this is checked when the design is elaborated.
  for (genvar b = 0; b < NSYN; b++) begin : g_conflict
    if (int'(NOWN[b]) > 1) begin : g_err
      $error("two primitives of stage %0d share syndrome bit %0d", STAGE, b);
    end
  end

  logic [NKA-1:0]  fire;
  logic [NSYN-1:0] clr  [NKA];
  logic [NOBS-1:0] flip [NKA];

  if (NK == 0) begin : g_empty
    assign fire[0] = 1'b0;
    assign clr[0]  = '0;
    assign flip[0] = '0;
  end
  for (genvar n = 0; n < NK; n++) begin : g_prim
    predecoding_primitive #(.NSYN(NSYN), .NOBS(NOBS),
                            .P(sc_prim(D, int'(LIST[n])))) u_prim (
      .syn_in (in_syn),
      .fire   (fire[n]),
      .clr    (clr[n]),
      .flip   (flip[n])
    );
  end

  // Each cleared bit comes from its single owner; observables XOR together.
  logic [NSYN-1:0] clr_all;
  logic [NOBS-1:0] flip_all;

  for (genvar b = 0; b < NSYN; b++) begin : g_clr
    if (int'(NOWN[b]) > 0) begin : g_own
      localparam int OW = int'(OWNER[b]);
      assign clr_all[b] = clr[OW][b];
    end else begin : g_none
      assign clr_all[b] = 1'b0;
    end
  end

  always_comb begin
    flip_all = '0;
    for (int n = 0; n < NK; n++) flip_all = flip_all ^ flip[n];
  end

  assign hit = in_valid && (|fire);

  syndrome_buffer #(.NSYN(NSYN), .NOBS(NOBS)) u_buf (
    .clk     (clk),
    .rst_n   (rst_n),
    .d_valid (in_valid),
    .d_syn   (in_syn & ~clr_all),
    .d_obs   (in_obs ^ flip_all),
    .d_orig  (in_orig),
    .q_valid (out_valid),
    .q_syn   (out_syn),
    .q_obs   (out_obs),
    .q_orig  (out_orig)
  );

endmodule
