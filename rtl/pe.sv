// pe: one processing element of the Griffin core.
//
// A PE computes one element of the output tile C (output-stationary).  It has
// K0 INT8 multipliers.  The operands of lane k come from a 9-input AMUX over
// the row's ABUF view and a 5-input BMUX over the column's BBUF view; the
// indices come, per mode, from the B metadata (conf.B), the PE control unit
// (conf.AB), the row arbiter (conf.A) or are zero (dense).  Each product goes
// either to the own adder tree or to the extra adder tree, whose sum is sent
// to the neighbouring PE that owns the borrowed work (the next column for a
// db3 borrow, the next row for a da3 borrow).  The accumulator adds the own
// tree and the extra tree arriving from the neighbour (extra_in).
//
// Timing: selection, multiplication, both adder trees and the accumulation
// happen in the cycle in which acc_en is high; acc_clr clears the
// accumulator.  The single-cycle datapath is this design's choice; the paper
// does not give a pipeline.
module pe
  import griffin_pkg::*;
#(
  parameter int unsigned K0 = 16
) (
  input  logic                              clk,
  input  logic                              rst_n,
  input  logic [AMUX_N-1:0][K0-1:0][DW-1:0] aview,
  input  logic [BMUX_N-1:0][K0-1:0][DW-1:0] bview,
  input  lsel_t [K0-1:0]                    sel,
  input  logic                              acc_clr,
  input  logic                              acc_en,
  input  logic signed [ACCW-1:0]            extra_in,
  output logic signed [ACCW-1:0]            extra_out,
  output logic signed [ACCW-1:0]            acc
);
  logic signed [ACCW-1:0] own_sum, ext_sum;

  always_comb begin
    own_sum = '0;
    ext_sum = '0;
    for (int unsigned k = 0; k < K0; k++) begin
      logic signed [DW-1:0]   a, b;
      logic signed [ACCW-1:0] p;
      a = (sel[k].asel < 4'(AMUX_N)) ? aview[sel[k].asel][k] : '0;   // AMUX
      b = (sel[k].bsel < 3'(BMUX_N)) ? bview[sel[k].bsel][k] : '0;   // BMUX
      p = sel[k].en ? ACCW'(a) * ACCW'(b) : '0;                      // INT8 multiplier
      if (sel[k].adt) ext_sum = ext_sum + p;                         // extra ADT
      else            own_sum = own_sum + p;                         // own ADT
    end
  end

  assign extra_out = ext_sum;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)       acc <= '0;
    else if (acc_clr) acc <= '0;
    else if (acc_en)  acc <= acc + own_sum + extra_in;
  end
endmodule
