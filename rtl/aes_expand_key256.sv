// aes_expand_key256 -- one stage of the AES-256 key-expansion chain.
//
// AES-256 derives each round key from the two before it, so the token passed
// along the chain is a 256-bit window {rk[i-2], rk[i-1]}. Stage ROUND = i
// (2..14) computes rk[i] (RotWord+SubWord+Rcon[i/2] for even i, SubWord only
// for odd i, then the running XOR) and outputs it on out_rk for round i, and
// the shifted window {rk[i-1], rk[i]} on out_win for stage i+1. Stage 1 only
// splits the cipher key: rk[1] is its low half, and the window passes unchanged.
// The last stage's out_win is left unconnected by the caller.
// Interface: in_* is the input FIFO read side; out_wr/out_tag write both
// destinations at once, out_full is the OR of their per-thread full flags.
// Timing: one key per cycle. The key is computed in the first pipeline
// stage; the stage count (1 for stage 1, 4 for the middle stages, 8 for the
// last one, which also covers the final SubBytes and ShiftRows actors)
// makes a key reach its round in the same cycle as the state it goes with,
// as in aes_expand_key128 (see there). The balancing is this design's choice.
// One stage per round follows the paper's dataflow figure; the stage's
// contents are the AES standard's key schedule.
//
// Lint note: the controller's out_valid pin is left open; the outputs are
// written with out_wr, which already includes the full check.
module aes_expand_key256
  import aes_mt_pkg::*;
#(
  parameter int unsigned N_THREADS = 2,
  parameter int unsigned ROUND     = 2,
  localparam int unsigned TAG_W    = (N_THREADS > 1) ? $clog2(N_THREADS) : 1,
  // pipeline depth balancing the key path against the state path
  localparam int unsigned STAGES   = (ROUND == 1) ? 1 : (ROUND == NR_256) ? 8 : 4
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [N_THREADS-1:0] in_avail,
  input  key256_t              in_data,
  output logic                 rd_en,
  output logic [TAG_W-1:0]     rd_tag,
  input  logic [N_THREADS-1:0] out_full,
  output logic                 out_wr,
  output logic [TAG_W-1:0]     out_tag,
  output block_t               out_rk,
  output key256_t              out_win
);

  logic   en;
  block_t rk_next;

  actor_fire_ctrl #(.N_IN(1), .N_THREADS(N_THREADS), .STAGES(STAGES)) u_ctrl (
    .clk, .rst_n,
    .avail    (in_avail),
    .out_full,
    .fire     (rd_en),
    .fire_tag (rd_tag),
    .en, .out_valid(), .out_tag, .out_wr
  );

  always_comb begin
    if (ROUND == 1) rk_next = in_data[127:0];
    else            rk_next = expand256(in_data, ROUND);
  end

  block_t  pipe_rk  [STAGES];
  key256_t pipe_win [STAGES];

  always_ff @(posedge clk) begin
    if (en) begin
      pipe_rk[0]  <= rk_next;
      pipe_win[0] <= (ROUND == 1) ? in_data : {in_data[127:0], rk_next};
      for (int s = 1; s < STAGES; s++) begin
        pipe_rk[s]  <= pipe_rk[s-1];
        pipe_win[s] <= pipe_win[s-1];
      end
    end
  end

  assign out_rk  = pipe_rk[STAGES-1];
  assign out_win = pipe_win[STAGES-1];

endmodule
