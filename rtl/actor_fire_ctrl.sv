// actor_fire_ctrl -- firing rule and tag bookkeeping of a tagged dataflow actor.
//
// Every actor of the accelerator uses this controller. It implements the two
// rules the tagged-token model puts on actors:
//   * an actor fires only when each of its N_IN inputs holds a token of the
//     same thread (tag matching), and it consumes one token from each;
//   * every token it produces carries the tag of the tokens it consumed.
// The actor's datapath is a pipeline of STAGES registers that all advance on
// `en`; this controller keeps a valid bit and a tag next to each stage.
//
// When more than one thread could fire, a round-robin pointer picks the one
// after the thread that fired last (the paper does not say how an actor
// chooses between threads; round robin is this design's choice).
//
// Interface: avail[i][t] says input FIFO i has a token of thread t. fire and
// fire_tag are combinational: they drive the input FIFOs' rd_en/rd_tag, and
// stage 0 of the datapath loads the selected heads when en is high.
// out_full[t] is the downstream FIFO's per-thread full flag (ORed over all
// destinations for an actor with fan-out). out_wr writes the last stage into
// the downstream FIFO(s).
//
// Timing: one firing per cycle at most; a token fired in cycle n is at the
// output in cycle n+STAGES. The whole pipeline stalls (en low) while its last
// stage holds a token whose thread is full downstream.
module actor_fire_ctrl #(
  parameter int unsigned N_IN      = 2,
  parameter int unsigned N_THREADS = 2,
  parameter int unsigned STAGES    = 1,
  localparam int unsigned TAG_W    = (N_THREADS > 1) ? $clog2(N_THREADS) : 1
) (
  input  logic                              clk,
  input  logic                              rst_n,
  input  logic [N_IN-1:0][N_THREADS-1:0]    avail,
  input  logic [N_THREADS-1:0]              out_full,
  output logic                              fire,
  output logic [TAG_W-1:0]                  fire_tag,
  output logic                              en,
  output logic                              out_valid,
  output logic [TAG_W-1:0]                  out_tag,
  output logic                              out_wr
);

  logic [STAGES-1:0]             v;
  logic [STAGES-1:0][TAG_W-1:0]  tg;
  logic [TAG_W-1:0]              rr;     // first thread to consider
  logic [N_THREADS-1:0]          ready;  // all inputs hold a token of thread t

  always_comb begin
    for (int t = 0; t < N_THREADS; t++) begin
      ready[t] = 1'b1;
      for (int i = 0; i < N_IN; i++) ready[t] &= avail[i][t];
    end
  end

  assign out_valid = v[STAGES-1];
  assign out_tag   = tg[STAGES-1];
  assign en        = !(out_valid && out_full[out_tag]);
  assign out_wr    = out_valid && !out_full[out_tag];

  // round-robin choice among ready threads
  function automatic int unsigned rr_idx(input logic [TAG_W-1:0] base, input int unsigned k);
    return (int'(base) + k) % N_THREADS;
  endfunction

  always_comb begin
    fire     = 1'b0;
    fire_tag = '0;
    for (int k = N_THREADS - 1; k >= 0; k--) begin
      if (ready[rr_idx(rr, k)]) begin
        fire     = en;
        fire_tag = TAG_W'(rr_idx(rr, k));
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v  <= '0;
      tg <= '0;
      rr <= '0;
    end else if (en) begin
      v[0]  <= fire;
      tg[0] <= fire_tag;
      for (int s = 1; s < STAGES; s++) begin
        v[s]  <= v[s-1];
        tg[s] <= tg[s-1];
      end
      if (fire) rr <= (int'(fire_tag) == N_THREADS - 1) ? '0 : fire_tag + 1'b1;
    end
  end

endmodule
