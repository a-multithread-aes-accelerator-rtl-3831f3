// thread_conf_regs -- per-thread configuration registers.
//
// Each thread has a register holding the ID of the configuration (the merged
// application) it runs: AES_128 or AES_256 (aes_mt_pkg::conf_id_e). Writing a
// thread's register is all it takes to move that thread to the other AES
// variant at run time; every switching box reads conf[tag] of the token it
// steers. One register per thread follows the paper; the write port, the ID
// encoding and the reset value (all threads AES-128) are this design's choices.
// A thread's register should only be written while that thread has no tokens
// in flight, since tokens already inside would be steered by the new value.
// Timing: a write in cycle n is seen on conf from cycle n+1.
module thread_conf_regs
  import aes_mt_pkg::*;
#(
  parameter int unsigned N_THREADS = 2,
  localparam int unsigned TAG_W    = (N_THREADS > 1) ? $clog2(N_THREADS) : 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 cfg_we,
  input  logic [TAG_W-1:0]     cfg_thread,
  input  conf_id_e             cfg_id,
  output logic [N_THREADS-1:0] conf
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) conf <= {N_THREADS{AES_128}};
    else if (cfg_we && int'(cfg_thread) < N_THREADS) conf[cfg_thread] <= cfg_id;
  end

endmodule
