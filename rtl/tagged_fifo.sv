// tagged_fifo -- FIFO for tagged tokens with a semi-out-of-order read.
//
// Tokens of all threads share one FIFO, but each thread's tokens leave in
// their own arrival order, and the reader chooses which thread it pops
// (rd_tag). The reader sees, per thread, whether a token is waiting (avail)
// and the head token of the thread it selects (rd_data). This lets a reading
// actor skip past the tokens of a thread that cannot fire yet, which is what
// keeps threads from blocking one another.
//
// Following the paper, storage is split in two memories: a token memory
// (tok_mem, DEPTH slots of W bits) and an order memory (ord_mem) that keeps,
// per thread, a ring of slot indices in arrival order. A write takes the
// lowest free slot and appends its index to its thread's ring; a read pops the
// head index of the selected thread and frees that slot. How the order memory
// is organised is this design's choice; the paper only names the two memories.
//
// Each thread may hold at most QUOTA = DEPTH / N_THREADS tokens, and full is
// reported per thread. This reservation is this design's choice: with a purely
// shared capacity, one thread waiting for its other operand could fill the
// FIFO and starve the thread that would free it.
//
// Timing: a write is visible (avail, rd_data) from the next cycle; rd_data and
// avail depend only on registers and on rd_tag. A read and a write may happen
// in the same cycle, to the same thread or not, so a producer/consumer pair
// streams one token per cycle. full[] and avail[] are registered state.
//
// Lint note: rst_n is the asynchronous reset of the pointers and counters and
// also the synchronous disable of the two handshake assertions below; the
// flops themselves only use it asynchronously.
module tagged_fifo #(
  parameter int unsigned W         = 128,
  parameter int unsigned N_THREADS = 2,
  parameter int unsigned DEPTH     = 4,
  localparam int unsigned TAG_W    = (N_THREADS > 1) ? $clog2(N_THREADS) : 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // write side
  input  logic                 wr_en,
  input  logic [TAG_W-1:0]     wr_tag,
  input  logic [W-1:0]         wr_data,
  output logic [N_THREADS-1:0] full,
  // read side
  input  logic [TAG_W-1:0]     rd_tag,
  input  logic                 rd_en,
  output logic [W-1:0]         rd_data,
  output logic [N_THREADS-1:0] avail
);

  localparam int unsigned QUOTA  = DEPTH / N_THREADS;
  localparam int unsigned SLOT_W = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  localparam int unsigned QP_W   = (QUOTA > 1) ? $clog2(QUOTA) : 1;
  localparam int unsigned CNT_W  = $clog2(QUOTA + 1);

  // token memory and order memory
  logic [W-1:0]      tok_mem [DEPTH];
  logic [SLOT_W-1:0] ord_mem [N_THREADS][QUOTA];

  logic [DEPTH-1:0]  used;
  logic [QP_W-1:0]   head  [N_THREADS];
  logic [QP_W-1:0]   tail  [N_THREADS];
  logic [CNT_W-1:0]  count [N_THREADS];

  logic [SLOT_W-1:0] free_slot;
  logic [SLOT_W-1:0] rd_slot;
  logic              do_wr, do_rd;

  function automatic logic [QP_W-1:0] ptr_inc(input logic [QP_W-1:0] p);
    return (int'(p) == QUOTA - 1) ? '0 : p + 1'b1;
  endfunction

  always_comb begin
    for (int t = 0; t < N_THREADS; t++) begin
      avail[t] = (count[t] != '0);
      full[t]  = (count[t] == CNT_W'(QUOTA));
    end
  end

  // lowest free slot of the token memory
  always_comb begin
    free_slot = '0;
    for (int s = DEPTH - 1; s >= 0; s--)
      if (!used[s]) free_slot = SLOT_W'(s);
  end

  assign rd_slot = ord_mem[rd_tag][head[rd_tag]];
  assign rd_data = tok_mem[rd_slot];
  assign do_wr   = wr_en && !full[wr_tag];
  assign do_rd   = rd_en && avail[rd_tag];

  always_ff @(posedge clk) begin
    if (do_wr) begin
      tok_mem[free_slot]               <= wr_data;
      ord_mem[wr_tag][tail[wr_tag]]    <= free_slot;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      used <= '0;
      for (int t = 0; t < N_THREADS; t++) begin
        head[t]  <= '0;
        tail[t]  <= '0;
        count[t] <= '0;
      end
    end else begin
      if (do_rd) begin
        used[rd_slot] <= 1'b0;
        head[rd_tag]  <= ptr_inc(head[rd_tag]);
      end
      if (do_wr) begin
        used[free_slot] <= 1'b1;
        tail[wr_tag]    <= ptr_inc(tail[wr_tag]);
      end
      for (int t = 0; t < N_THREADS; t++) begin
        case ({do_wr && (wr_tag == TAG_W'(t)), do_rd && (rd_tag == TAG_W'(t))})
          2'b10:   count[t] <= count[t] + 1'b1;
          2'b01:   count[t] <= count[t] - 1'b1;
          default: ;
        endcase
      end
    end
  end

  // Handshake rules: never write a thread that is full, never pop a thread
  // that has nothing waiting.
  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) wr_en |-> !full[wr_tag]);
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) rd_en |-> avail[rd_tag]);

endmodule
