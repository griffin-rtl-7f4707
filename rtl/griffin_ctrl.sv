// griffin_ctrl: global controller of the Griffin core.
//
// Runs one output tile: on start it clears the accumulators and the used
// bits, spends one cycle priming the synchronous SRAM reads, then advances
// the A window (a_base, in K-steps) and the B window (b_base, in B rows)
// every cycle until the tile is consumed, and pulses done.
//
// How far the windows move per cycle depends on the mode:
//   dense   : one K-step of A and one raw B row;
//   conf.B  : one compressed B row; A moves by that row's advance header;
//   conf.A  : the number of leading window K-steps that every row arbiter
//             reports finished (0..3); B (raw) moves with A;
//   conf.AB : the number of leading BBUF rows that every PE control unit
//             reports finished (0..3); A moves by the sum of their headers.
// All PEs move together, so a PE that still has work in the head row stalls
// the others (a cycle with no advance).  off[j] is the K-step distance of
// BBUF row j from ABUF slot 0 (conf.AB).
//
// Timing: a_rbase/b_rbase are the window bases for the next cycle and go
// straight to the SRAM read ports.  cycles holds the number of run cycles of
// the last tile.  The FSM and the handshake are this design's choice.
module griffin_ctrl
  import griffin_pkg::*;
(
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    start,
  input  mode_e                   mode,
  input  logic [TW-1:0]           k1,       // K-steps of the tile
  input  logic [TW-1:0]           b_rows,   // compressed B rows (conf.B/AB)
  input  logic [BBUF_D-1:0][ADV_W-1:0] hdr, // advance headers of BBUF rows
  input  logic [2:0]              done_a,   // AND over row arbiters
  input  logic [BBUF_D-1:0]       done_ab,  // AND over PE control units
  output logic                    busy,
  output logic                    run,
  output logic                    clr,
  output logic [TW-1:0]           a_base,
  output logic [TW-1:0]           b_base,
  output logic [TW-1:0]           a_rbase,
  output logic [TW-1:0]           b_rbase,
  output logic [1:0]              a_adv,    // K-steps retired (conf.A)
  output logic [1:0]              b_adv,    // B rows retired (conf.AB)
  output logic [BBUF_D-1:0][3:0]  off,
  output logic                    stall,    // run cycle without advance
  output logic                    done,
  output logic [31:0]             cycles
);
  typedef enum logic [1:0] {S_IDLE, S_PRIME, S_RUN, S_FIN} state_e;
  state_e state;

  logic [TW-1:0] na, nb;
  logic [1:0]    lead;
  logic          last;

  function automatic logic [1:0] leading(input logic [2:0] d);
    return d[0] ? (d[1] ? (d[2] ? 2'd3 : 2'd2) : 2'd1) : 2'd0;
  endfunction

  always_comb begin
    logic [5:0] s1, s2;
    s1 = 6'(hdr[0]);
    s2 = 6'(hdr[0]) + 6'(hdr[1]);
    off[0] = 4'd0;
    off[1] = (s1 > 6'd15) ? 4'd15 : 4'(s1);
    off[2] = (s2 > 6'd15) ? 4'd15 : 4'(s2);
    lead = '0;
    na   = '0;
    nb   = '0;
    last = 1'b0;
    unique case (mode)
      MODE_DENSE: begin na = 1; nb = 1; last = a_base + 1 >= k1; end
      MODE_B:     begin na = TW'(hdr[0]); nb = 1; last = b_base + 1 >= b_rows; end
      MODE_A: begin
        lead = leading(done_a);
        na = TW'(lead); nb = TW'(lead);
        last = a_base + na >= k1;
      end
      MODE_AB: begin
        lead = leading(done_ab);
        nb = TW'(lead);
        for (int unsigned j = 0; j < BBUF_D; j++) if (j < 32'(lead)) na = na + TW'(hdr[j]);
        last = b_base + nb >= b_rows;
      end
      default: ;
    endcase
    run     = state == S_RUN;
    clr     = state == S_IDLE && start;
    busy    = state != S_IDLE;
    a_adv   = (run && mode == MODE_A)  ? lead : 2'd0;
    b_adv   = (run && mode == MODE_AB) ? lead : 2'd0;
    stall   = run && na == 0 && nb == 0;
    a_rbase = (state == S_RUN) ? a_base + na : '0;
    b_rbase = (state == S_RUN) ? b_base + nb : '0;
    done    = state == S_FIN;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= S_IDLE;
      a_base <= '0;
      b_base <= '0;
      cycles <= '0;
    end else begin
      unique case (state)
        S_IDLE:  if (start) begin
                   state  <= S_PRIME;
                   a_base <= '0;
                   b_base <= '0;
                   cycles <= '0;
                 end
        S_PRIME: state <= S_RUN;
        S_RUN: begin
          a_base <= a_rbase;
          b_base <= b_rbase;
          cycles <= cycles + 1;
          if (last) state <= S_FIN;
        end
        S_FIN:   state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
