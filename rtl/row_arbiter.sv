// row_arbiter: zero-skipping arbiter of one PE row in conf.A = Sparse.A(2,1,1).
//
// With dense B only A can be sparse, and all PEs of a row share the same A
// entries, so one arbiter per row decides for the whole row (the per-PE
// control units are idle).  Each cycle, for every lane k, it picks a non-zero
// A entry that has not been used yet, from this candidate list in priority
// order (slot = K-step offset in the window):
//   own row : (slot0,k) (slot1,k) (slot2,k)       da1 <= 2
//             (slot1,k+1) (slot2,k+1)             da2  = 1
//   next row: (slot1,k) (slot2,k)                 da3  = 1, only if no own
// Lanes are served in order, so a lane never takes an entry a lower lane
// took.  A borrowed entry of the next row is multiplied here and its product
// goes through the extra adder tree to the next row's accumulator.  The
// candidate list and its order are this design's choice within the paper's
// limits (five own entries, 5-input BMUX, one extra adder tree).
//
// Select encoding: own candidate c (0..4) -> asel = bsel = c; borrowed slot j
// -> asel = 4+j, bsel = j.  Used bits (slot x lane) are registered; entries
// taken by the row above (brw_in) are marked too.  done[j]: slot j holds no
// unused non-zero entry after this cycle.  The window shifts by adv.
// take and used feed the row above combinationally; nothing here depends on
// brw_in except the registered state and done, so there is no loop.
module row_arbiter
  import griffin_pkg::*;
#(
  parameter int unsigned K0 = 16
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       en,        // conf.A and running
  input  logic                       clr,       // start of a tile
  input  logic [2:0][K0-1:0]         nz,        // own ABUF slots 0..2
  input  logic [2:0][K0-1:0]         nbr_nz,    // next row (zero if none)
  input  logic [2:0][K0-1:0]         nbr_take,
  input  logic [2:0][K0-1:0]         nbr_used,
  input  logic [2:0][K0-1:0]         brw_in,    // taken from me by row above
  input  logic [1:0]                 adv,
  output lsel_t [K0-1:0]             sel,
  output logic [2:0][K0-1:0]         take,
  output logic [2:0][K0-1:0]         brw_out,
  output logic [2:0][K0-1:0]         used,
  output logic [2:0]                 done
);
  logic [2:0][K0-1:0] used_q, used_n;

  assign used = used_q;

  always_comb begin
    take    = '0;
    brw_out = '0;
    for (int unsigned k = 0; k < K0; k++) begin
      sel[k] = '0;
      for (int unsigned c = 0; c < 5; c++) begin
        int unsigned j, l;
        j = (c < 3) ? c : c - 2;
        l = (c < 3) ? k : k + 1;
        if (!sel[k].en && l < K0 && nz[j][l] && !used_q[j][l] && !take[j][l]) begin
          sel[k].en   = 1'b1;
          sel[k].asel = 4'(c);
          sel[k].bsel = 3'(c);
          take[j][l]  = 1'b1;
        end
      end
      for (int unsigned j = 1; j < 3; j++) begin
        if (!sel[k].en && nbr_nz[j][k] && !nbr_used[j][k] && !nbr_take[j][k]) begin
          sel[k].en     = 1'b1;
          sel[k].asel   = 4'(4 + j);
          sel[k].bsel   = 3'(j);
          sel[k].adt    = 1'b1;
          brw_out[j][k] = 1'b1;
        end
      end
    end
    if (!en) begin
      sel = '0; take = '0; brw_out = '0;
    end
    used_n = used_q | take | (en ? brw_in : '0);
    for (int unsigned j = 0; j < 3; j++) done[j] = &(~nz[j] | used_n[j]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      used_q <= '0;
    end else if (clr) begin
      used_q <= '0;
    end else if (en) begin
      for (int unsigned j = 0; j < 3; j++)
        used_q[j] <= (j + 32'(adv) < 3) ? used_n[j + 32'(adv)] : '0;
    end
  end
endmodule
