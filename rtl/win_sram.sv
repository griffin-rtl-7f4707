// win_sram: on-chip SRAM bank with a windowed read port (ASRAM and BSRAM).
//
// The sparse modes consume several K-steps of A (or rows of B) per cycle, so
// the buffers in front of the PEs need the NWIN consecutive words
// rbase .. rbase+NWIN-1 in every cycle.  The array is split into NSUB
// interleaved sub-banks (word t lives in sub-bank t mod NSUB at row
// t / NSUB); with NSUB >= NWIN each sub-bank is read at most once per cycle,
// so every sub-bank is an ordinary single-read-port SRAM.  Addresses wrap
// modulo DEPTH.
//
// Timing: the window addressed in cycle c appears on rwin in cycle c+1
// (synchronous read).  One write port for the host (we/waddr/wdata), taking
// effect at the clock edge.
// Capacities follow the paper (512 kB of A, 32 kB of B); the banking scheme
// is this design's own choice.  The low SW bits of the per-sub-bank
// address t are unused by construction (they equal the sub-bank index).
module win_sram #(
  parameter int unsigned WIDTH = 128,
  parameter int unsigned DEPTH = 8192,
  parameter int unsigned NWIN  = 9,
  parameter int unsigned NSUB  = 16,
  localparam int unsigned AW   = $clog2(DEPTH),
  localparam int unsigned SW   = $clog2(NSUB)
) (
  input  logic                       clk,
  input  logic                       we,
  input  logic [AW-1:0]              waddr,
  input  logic [WIDTH-1:0]           wdata,
  input  logic [AW-1:0]              rbase,
  output logic [NWIN-1:0][WIDTH-1:0] rwin
);
  localparam int unsigned SDEPTH = DEPTH / NSUB;

  initial assert (NSUB >= NWIN && (NSUB & (NSUB - 1)) == 0 && DEPTH % NSUB == 0)
    else $error("win_sram: NSUB must be a power of two >= NWIN dividing DEPTH");

  logic [NSUB-1:0][WIDTH-1:0] q;       // sub-bank read registers
  logic [SW-1:0]              base_q;  // sub-bank of window slot 0

  for (genvar s = 0; s < NSUB; s++) begin : g_sub
    logic [WIDTH-1:0] mem [SDEPTH];
    logic [SW-1:0]    d;      // distance of this sub-bank from rbase
    logic [AW-1:0]    t;      // word this sub-bank serves this cycle
    always_comb begin
      d = SW'(s) - rbase[SW-1:0];
      t = rbase + AW'(d);
    end
    always_ff @(posedge clk) begin
      if (we && waddr[SW-1:0] == SW'(s)) mem[waddr[AW-1:SW]] <= wdata;
      q[s] <= mem[t[AW-1:SW]];
    end
  end

  always_ff @(posedge clk) base_q <= rbase[SW-1:0];

  always_comb begin
    for (int unsigned i = 0; i < NWIN; i++) rwin[i] = q[SW'(base_q + SW'(i))];
  end
endmodule
