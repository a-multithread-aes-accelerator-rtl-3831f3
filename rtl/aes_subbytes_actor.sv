// aes_subbytes_actor -- SubBytes actor of the final AES round.
//
// Single-input tagged actor: pops the head token of one thread from its input
// FIFO, replaces every byte with its S-box value and offers the result, with
// the same tag, to the downstream FIFO one cycle later. The S-box comes from
// aes_mt_pkg, where it is computed from its GF(2^8) definition.
// Interface: in_* is the input FIFO read side (per-thread avail, head data,
// rd_en/rd_tag); out_* writes the downstream FIFO, out_full its per-thread
// full flags. Timing: one stage, one token per cycle.
// The final round as separate SubBytes, ShiftRows and AddRoundKey actors
// follows the paper's dataflow figure; the single stage is this design's.
//
// Lint note: the controller's out_valid is left unused here; the output
// FIFO is written with out_wr, which already includes the full check.
module aes_subbytes_actor
  import aes_mt_pkg::*;
#(
  parameter int unsigned N_THREADS = 2,
  localparam int unsigned TAG_W    = (N_THREADS > 1) ? $clog2(N_THREADS) : 1
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

  logic en, out_valid;

  actor_fire_ctrl #(.N_IN(1), .N_THREADS(N_THREADS), .STAGES(1)) u_ctrl (
    .clk, .rst_n,
    .avail    (in_avail),
    .out_full,
    .fire     (rd_en),
    .fire_tag (rd_tag),
    .en, .out_valid, .out_tag, .out_wr
  );

  always_ff @(posedge clk) begin
    if (en) out_data <= sub_bytes(in_data);
  end

endmodule
