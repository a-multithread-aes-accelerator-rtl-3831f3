// aes_round_actor -- one full AES round as a tagged dataflow actor with a
// four-stage inner pipeline.
//
// As in the paper, each pipeline stage performs one step of the round:
//   stage 1 SubBytes, stage 2 ShiftRows, stage 3 MixColumns, stage 4 AddRoundKey.
// The actor fires when its state input and its round-key input both hold a
// token of the same thread; the round key travels beside the state through
// stages 1-3 and is added in stage 4. The output token keeps the thread tag.
// The same actor serves AES-128 and AES-256 threads: rounds 1..Nr-1 are
// identical in both standards, only the round key differs.
//
// Interface: as aes_ark_actor (state and key FIFO read sides, shared
// rd_en/rd_tag, downstream write port with per-thread full).
// Timing: latency 4 cycles from firing to out_wr, one token per cycle; the
// whole pipeline holds while its last stage cannot be written downstream.
//
// Lint note: the controller's out_valid is left unused here; the output
// FIFO is written with out_wr, which already includes the full check.
module aes_round_actor
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
  output logic                 out_wr,
  output logic [TAG_W-1:0]     out_tag,
  output block_t               out_data
);

  logic   en, out_valid;
  block_t st_sb, st_sr, st_mc;   // state after each step
  block_t k_sb, k_sr, k_mc;      // round key travelling with it

  actor_fire_ctrl #(.N_IN(2), .N_THREADS(N_THREADS), .STAGES(4)) u_ctrl (
    .clk, .rst_n,
    .avail    ({k_avail, s_avail}),
    .out_full,
    .fire     (rd_en),
    .fire_tag (rd_tag),
    .en, .out_valid, .out_tag, .out_wr
  );

  always_ff @(posedge clk) begin
    if (en) begin
      st_sb    <= sub_bytes(s_data);
      k_sb     <= k_data;
      st_sr    <= shift_rows(st_sb);
      k_sr     <= k_sb;
      st_mc    <= mix_columns(st_sr);
      k_mc     <= k_sr;
      out_data <= st_mc ^ k_mc;
    end
  end

endmodule
