// bbuf: B buffer of one PE column.
//
// Holds D (= 3) consecutive B rows of this column (K0 entries each) as read
// from the B SRAM.  In conf.B and conf.AB the rows are the compressed,
// preprocessed B (value + metadata per entry), already shuffled offline.  In
// dense mode and conf.A the rows are plain dense B, one per K-step; only the
// values are used, and they go through the same rotation shuffler as A so that
// A/B pairs stay in one lane.  Rows at or past limit read as empty.
//
// bview gives the five BMUX inputs of every lane k:
//   0..2 = rows 0..2 of lane k,  3..4 = rows 1..2 of lane k+1 (da2 in conf.A).
// conf.AB uses inputs 0..2, conf.B and dense only input 0, as in the paper
// ("BMUX indices are fixed to 0").  The input order is this design's choice.
// Purely combinational.
module bbuf
  import griffin_pkg::*;
#(
  parameter int unsigned K0 = 16,
  parameter int unsigned D  = BBUF_D
) (
  input  mode_e                         mode,
  input  logic                          shuffle_en,
  input  logic [TW-1:0]                 base,
  input  logic [TW-1:0]                 limit,
  input  bent_t [D-1:0][K0-1:0]         win,
  output bent_t [D-1:0][K0-1:0]         ent,
  output logic  [D-1:0][K0-1:0]         bnz,
  output logic  [BMUX_N-1:0][K0-1:0][DW-1:0] bview
);
  logic raw;
  assign raw = (mode == MODE_DENSE) || (mode == MODE_A);

  logic [D-1:0][K0-1:0][DW-1:0] vin, vsh;

  for (genvar j = 0; j < D; j++) begin : g_shuf
    logic [1:0] t;  // rotation = K-step mod 4
    assign t = base[1:0] + 2'(j);
    always_comb for (int unsigned k = 0; k < K0; k++) vin[j][k] = win[j][k].val;
    shuffler #(.K0(K0), .W(DW)) u_shuf (
      .en(shuffle_en && raw), .rot(t[1:0]), .din(vin[j]), .dout(vsh[j]));
  end

  always_comb begin
    for (int unsigned j = 0; j < D; j++) begin
      for (int unsigned k = 0; k < K0; k++) begin
        if (base + TW'(j) >= limit) begin
          ent[j][k] = '0;
        end else if (raw) begin
          ent[j][k] = '{val: vsh[j][k], aoff: 4'd0, col: 1'b0};
        end else begin
          ent[j][k] = win[j][k];
        end
        bnz[j][k] = ent[j][k].val != '0;
      end
    end
    bview = '0;
    for (int unsigned k = 0; k < K0; k++) begin
      for (int unsigned j = 0; j < D && j < 3; j++) bview[j][k] = ent[j][k].val;
      if (k + 1 < K0 && D >= 3) begin
        bview[3][k] = ent[1][k+1].val;
        bview[4][k] = ent[2][k+1].val;
      end
    end
  end
endmodule
