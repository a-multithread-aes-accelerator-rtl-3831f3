// mdc_sb_split -- switching box that sends an actor's output tokens down one
// of two dataflow paths, chosen per thread.
//
// It sits on the write side of two FIFOs. A token tagged t goes to FIFO a when
// conf[t] is 0 (AES-128) and to FIFO b when conf[t] is 1 (AES-256); the
// writer sees, per thread, the full flag of the FIFO that thread is routed to.
// In the accelerator it follows round 9: AES-128 tokens leave for the final
// round, AES-256 tokens continue to round 10. Steering by tag and per-thread
// configuration is the paper's; the write-side placement is this design's.
// Timing: purely combinational.
module mdc_sb_split #(
  parameter int unsigned N_THREADS = 2,
  localparam int unsigned TAG_W    = (N_THREADS > 1) ? $clog2(N_THREADS) : 1
) (
  input  logic [N_THREADS-1:0] conf,
  input  logic                 wr_en,
  input  logic [TAG_W-1:0]     wr_tag,
  output logic [N_THREADS-1:0] full,
  output logic                 a_wr_en,
  input  logic [N_THREADS-1:0] a_full,
  output logic                 b_wr_en,
  input  logic [N_THREADS-1:0] b_full
);

  always_comb begin
    for (int t = 0; t < N_THREADS; t++) full[t] = conf[t] ? b_full[t] : a_full[t];
    a_wr_en = wr_en && !conf[wr_tag];
    b_wr_en = wr_en &&  conf[wr_tag];
  end

endmodule
