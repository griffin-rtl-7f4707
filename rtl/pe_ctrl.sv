// pe_ctrl: per-PE control unit for dual sparsity (conf.AB = Sparse.AB(2,0,0,2,0,1)).
//
// Every PE sees the same A row (ABUF of its row) but its own B column (BBUF),
// so the effectual A/B pairs differ per PE and each PE needs this unit.  It
// follows the paper's steps 2-6:
//   2/3  the ABUF non-zero mask is looked up at the A position that each
//        BBUF entry's metadata points to, and cleared where the B entry is
//        empty ("filtered zero mask");
//   4/5  per lane, the list of three bit-index pairs (one per BBUF row) goes
//        through a priority encoder that picks the first effectual pair not
//        used yet, nearest row first;
//   6    the chosen pair gives the AMUX index (row offset + metadata offset),
//        the BMUX index (BBUF row) and the adder tree (metadata column bit).
// A lane with no pair stays idle (product forced to zero).
//
// Used bits (BBUF row x lane) are registered here.  done[j] says that row j
// has no effectual pair left after this cycle; the controller retires rows
// from the front (b_adv) and the used bits shift with them.  off[j] is the
// K-step distance of BBUF row j from ABUF slot 0, computed by the controller
// from the rows' advance headers.
module pe_ctrl
  import griffin_pkg::*;
#(
  parameter int unsigned K0 = 16
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          en,      // conf.AB and running
  input  logic                          clr,     // start of a tile
  input  bent_t [BBUF_D-1:0][K0-1:0]    ent,
  input  logic  [BBUF_D-1:0][K0-1:0]    bnz,
  input  logic  [ABUF_D-1:0][K0-1:0]    anz,
  input  logic  [BBUF_D-1:0][3:0]       off,
  input  logic  [1:0]                   b_adv,
  output lsel_t [K0-1:0]                sel,
  output logic  [BBUF_D-1:0]            done
);
  logic [BBUF_D-1:0][K0-1:0] used_q, used_n, eff;
  logic [BBUF_D-1:0][K0-1:0][4:0] idx;

  always_comb begin
    used_n = used_q;
    for (int unsigned k = 0; k < K0; k++) begin
      sel[k] = '0;
      for (int unsigned j = 0; j < BBUF_D; j++) begin
        idx[j][k] = 5'(off[j]) + 5'(ent[j][k].aoff);
        eff[j][k] = bnz[j][k] && (idx[j][k] < 5'(ABUF_D)) && anz[4'(idx[j][k])][k];
      end
      // priority encoder over the bit-index pairs of lane k
      for (int unsigned j = 0; j < BBUF_D; j++) begin
        if (!sel[k].en && eff[j][k] && !used_q[j][k]) begin
          sel[k].en   = 1'b1;
          sel[k].asel = 4'(idx[j][k]);
          sel[k].bsel = 3'(j);
          sel[k].adt  = ent[j][k].col;
          used_n[j][k] = 1'b1;
        end
      end
      if (!en) sel[k] = '0;
    end
    for (int unsigned j = 0; j < BBUF_D; j++) done[j] = &(~eff[j] | used_n[j]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      used_q <= '0;
    end else if (clr) begin
      used_q <= '0;
    end else if (en) begin
      for (int unsigned j = 0; j < BBUF_D; j++)
        used_q[j] <= (j + 32'(b_adv) < BBUF_D) ? used_n[j + 32'(b_adv)] : '0;
    end
  end
endmodule
