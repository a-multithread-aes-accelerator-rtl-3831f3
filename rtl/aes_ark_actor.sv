// aes_ark_actor -- AddRoundKey actor: XORs a state token with a round-key token
// of the same thread.
//
// In the merged dataflow it appears twice: before round 1 (whitening with the
// first round key) and as the last actor of the final round. It fires when
// both its state input and its key input hold a token of one thread (tag
// matching in actor_fire_ctrl), pops both, and one cycle later offers
// state ^ key, tagged with that thread, to the downstream FIFO.
//
// Interface: s_* and k_* are the read sides of the state and key FIFOs (or of
// the switching boxes in front of them); both are read with the same rd_tag and
// rd_en. out_wr/out_tag/out_data write the downstream FIFO, whose per-thread
// full flags come back on out_full; out_valid says the output stage holds a
// token (used where the actor drives the accelerator's output port).
// Timing: single pipeline stage, one token per cycle.
// The step itself is the AES standard's; the one-stage actor is this design's.
module aes_ark_actor
  import aes_mt_pkg::*;
#(
  parameter int unsigned N_THREADS = 2,
  localparam int unsigned TAG_W    = (N_THREADS > 1) ? $clog2(N_THREADS) : 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [N_THREADS-1:0] s_avail,
  input  block_t               s_data,
  input  logic [N_THREADS-1:0] k_avail,
  input  block_t               k_data,
  output logic                 rd_en,
  output logic [TAG_W-1:0]     rd_tag,
  input  logic [N_THREADS-1:0] out_full,
  output logic                 out_valid,
  output logic                 out_wr,
  output logic [TAG_W-1:0]     out_tag,
  output block_t               out_data
);

  logic en;

  actor_fire_ctrl #(.N_IN(2), .N_THREADS(N_THREADS), .STAGES(1)) u_ctrl (
    .clk, .rst_n,
    .avail    ({k_avail, s_avail}),
    .out_full,
    .fire     (rd_en),
    .fire_tag (rd_tag),
    .en, .out_valid, .out_tag, .out_wr
  );

  always_ff @(posedge clk) begin
    if (en) out_data <= s_data ^ k_data;
  end

endmodule
