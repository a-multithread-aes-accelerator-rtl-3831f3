// mdc_sb_merge -- switching box that joins two dataflow paths into one actor
// input, steered per thread.
//
// In the merged AES dataflow an actor shared by both applications can receive
// a token from either of two producers (for example the round-key input of a
// shared round, fed by the AES-128 or the AES-256 key chain). The box sits on
// the read side of the two FIFOs: for each thread t it presents FIFO a when
// conf[t] is 0 (AES-128) and FIFO b when conf[t] is 1 (AES-256), so the reader
// sees one augmented FIFO interface, and it routes the reader's pop to the
// FIFO that thread is configured for. The per-thread selection by the token's
// tag is the paper's (its switching boxes "match the token tag with the selected
// configuration for that thread"); placing the box on the FIFO read side is
// this design's choice.
// Timing: purely combinational.
module mdc_sb_merge #(
  parameter int unsigned W         = 128,
  parameter int unsigned N_THREADS = 2,
  localparam int unsigned TAG_W    = (N_THREADS > 1) ? $clog2(N_THREADS) : 1
) (
  input  logic [N_THREADS-1:0] conf,
  input  logic [N_THREADS-1:0] a_avail,
  input  logic [W-1:0]         a_data,
  output logic                 a_rd_en,
  input  logic [N_THREADS-1:0] b_avail,
  input  logic [W-1:0]         b_data,
  output logic                 b_rd_en,
  input  logic [TAG_W-1:0]     rd_tag,
  input  logic                 rd_en,
  output logic [N_THREADS-1:0] avail,
  output logic [W-1:0]         data
);

  always_comb begin
    for (int t = 0; t < N_THREADS; t++) avail[t] = conf[t] ? b_avail[t] : a_avail[t];
    data    = conf[rd_tag] ? b_data : a_data;
    a_rd_en = rd_en && !conf[rd_tag];
    b_rd_en = rd_en &&  conf[rd_tag];
  end

endmodule
