// tb_predecoding_primitive -- exhaustive test of single primitives.
//
// Three primitives on an 8-bit syndrome buffer: S={1,3} with O={0},
// S={0,4,6} with O={1} and S={5} with no observable (two observables).
// Every one of the 256 syndrome values is applied; fire must be the AND
// of the bits of S, clr must be S exactly when firing, flip must be O
// exactly when firing.
`timescale 1ns/1ps
module tb_predecoding_primitive;
  import arqade_pkg::*;

  localparam int NSYN = 8;
  localparam int NOBS = 2;

  localparam prim_t P0 = '{n_syn: 4'd2, syn: {{(MAX_S-2)*IDX_W{1'b0}}, 16'd3, 16'd1},
                           obs: 16'h0001, stage: 8'd0, cls: CLS_SPACE};
  localparam prim_t P1 = '{n_syn: 4'd3, syn: {{(MAX_S-3)*IDX_W{1'b0}}, 16'd6, 16'd4, 16'd0},
                           obs: 16'h0002, stage: 8'd1, cls: CLS_HOOK};
  localparam prim_t P2 = '{n_syn: 4'd1, syn: {{(MAX_S-1)*IDX_W{1'b0}}, 16'd5},
                           obs: 16'h0000, stage: 8'd2, cls: CLS_TIME};

  logic [NSYN-1:0] syn;
  logic [2:0]      fire;
  logic [NSYN-1:0] clr [3];
  logic [NOBS-1:0] flip [3];

  predecoding_primitive #(.NSYN(NSYN), .NOBS(NOBS), .P(P0)) u0 (syn, fire[0], clr[0], flip[0]);
  predecoding_primitive #(.NSYN(NSYN), .NOBS(NOBS), .P(P1)) u1 (syn, fire[1], clr[1], flip[1]);
  predecoding_primitive #(.NSYN(NSYN), .NOBS(NOBS), .P(P2)) u2 (syn, fire[2], clr[2], flip[2]);

  int checks = 0, failures = 0;
  bit done = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL syn=%b: %s", syn, what);
    end
  endtask

  initial begin : watchdog
    #100000;
    if (!done) begin
      failures++;
      $display("watchdog expired");
      $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
      $finish;
    end
  end

  initial begin
    bit e0, e1, e2;
    for (int v = 0; v < 256; v++) begin
      syn = 8'(v);
      #1;
      e0 = syn[1] && syn[3];
      e1 = syn[0] && syn[4] && syn[6];
      e2 = syn[5];
      check(fire[0] == e0, "fire 0");
      check(fire[1] == e1, "fire 1");
      check(fire[2] == e2, "fire 2");
      check(clr[0] == (e0 ? 8'b0000_1010 : 8'h00), "clr 0");
      check(clr[1] == (e1 ? 8'b0101_0001 : 8'h00), "clr 1");
      check(clr[2] == (e2 ? 8'b0010_0000 : 8'h00), "clr 2");
      check(flip[0] == (e0 ? 2'b01 : 2'b00), "flip 0");
      check(flip[1] == (e1 ? 2'b10 : 2'b00), "flip 1");
      check(flip[2] == 2'b00, "flip 2");
    end
    done = 1;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
