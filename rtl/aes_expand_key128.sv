// aes_expand_key128 -- one stage of the AES-128 key-expansion chain.
//
// The key schedule is unrolled like the rounds: stage ROUND (1..10) takes
// round key ROUND-1 of a thread and produces round key ROUND
// (RotWord, SubWord and Rcon[ROUND] on the last word, then the running XOR of
// the four words). Its output token goes both to the round that uses it and to
// the next stage of the chain; the caller ORs the per-thread full flags of
// both destinations into out_full, so the token is written to both at once.
// Interface: in_* is the input FIFO read side, out_* the (broadcast) write port.
// Timing: one key per cycle. The key is computed in the first pipeline
// stage; the stage count (1 for stage 1, 4 for the middle stages, 8 for the
// last one, which also covers the final SubBytes and ShiftRows actors)
// makes a key reach its round in the same cycle as the state it goes with.
// The key and state paths fork at the inputs and join at every round, so any
// difference in their latencies would have to be buffered in the FIFOs at the
// join; with shallow FIFOs it would cut the throughput instead. The balancing
// is this design's choice; the paper only pipelines the key expansion.
// One stage per round follows the paper's dataflow figure; the stage's
// contents are the AES standard's key schedule.
//
// Lint note: the controller's out_valid pin is left open; the outputs are
// written with out_wr, which already includes the full check.
module aes_expand_key128
  import aes_mt_pkg::*;
#(
  parameter int unsigned N_THREADS = 2,
  parameter int unsigned ROUND     = 1,
  localparam int unsigned TAG_W    = (N_THREADS > 1) ? $clog2(N_THREADS) : 1,
  // pipeline depth balancing the key path against the state path
  localparam int unsigned STAGES   = (ROUND == 1) ? 1 : (ROUND == NR_128) ? 8 : 4
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [N_THREADS-1:0] in_avail,
  input  block_t               in_data,
  output logic                 rd_en,
  output logic [TAG_W-1:0]     rd_tag,
  input  logic [N_THREADS-1:0] out_full,
  output logic                 out_wr,
  output logic [TAG_W-1:0]     out_tag,
  output block_t               out_data
);

  localparam byte_t RC = rcon(ROUND);

  logic en;

  actor_fire_ctrl #(.N_IN(1), .N_THREADS(N_THREADS), .STAGES(STAGES)) u_ctrl (
    .clk, .rst_n,
    .avail    (in_avail),
    .out_full,
    .fire     (rd_en),
    .fire_tag (rd_tag),
    .en, .out_valid(), .out_tag, .out_wr
  );

  block_t pipe [STAGES];

  always_ff @(posedge clk) begin
    if (en) begin
      pipe[0] <= expand128(in_data, RC);
      for (int s = 1; s < STAGES; s++) pipe[s] <= pipe[s-1];
    end
  end

  assign out_data = pipe[STAGES-1];

endmodule
