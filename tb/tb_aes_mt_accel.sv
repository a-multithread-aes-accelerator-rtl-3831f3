// tb_aes_mt_accel -- end-to-end test of the two-thread AES accelerator at its
// default parameters (two threads, FIFO depth 4).
//
// Each port has a driver with one queue per thread; every cycle it offers the
// head of one thread's queue, alternating between threads that have tokens,
// so a thread whose FIFO share is full never blocks the other. Expected
// ciphertexts come from aes_ref_pkg. The phases are:
//   1. known-answer tests (FIPS-197 C.1 and C.3), one block per thread, with
//      the exact no-stall latency: 53 cycles for AES-128, 73 for AES-256;
//   2. "high 128" and "high 256": 100 blocks of one thread, checking that the
//      pipeline delivers one block per cycle once full;
//   3. "high both": 100 AES-128 blocks on thread 0 and 100 AES-256 blocks on
//      thread 1 at once, with random ciphertext back-pressure;
//   4. run-time reconfiguration: the threads swap configurations and run again;
//   5. key starvation: thread 0's keys are held back until thread 1 has
//      finished all its blocks, so thread 0's tokens sit in the shared FIFOs
//      while thread 1's tokens pass them.
// Mechanisms counted (each must occur): both threads in flight at once, an
// AES-128 block overtaking an earlier AES-256 one, output stall, input
// back-pressure, reconfiguration, thread bypass during starvation.
module tb_aes_mt_accel;
  import aes_mt_pkg::*;
  import aes_ref_pkg::*;

  localparam int NT = 2;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic             cfg_we = 0;
  logic             cfg_thread = 0;
  conf_id_e         cfg_id = AES_128;
  logic             pt_valid = 0, k128_valid = 0, k256_valid = 0;
  logic             pt_tag = 0, k128_tag = 0, k256_tag = 0;
  logic [127:0]     pt_data = 0, k128_data = 0;
  logic [255:0]     k256_data = 0;
  logic             pt_ready, k128_ready, k256_ready;
  logic             ct_valid, ct_tag, ct_ready;
  logic [127:0]     ct_data;

  aes_mt_accel dut (
    .clk, .rst_n, .cfg_we, .cfg_thread, .cfg_id,
    .pt_valid, .pt_tag, .pt_data, .pt_ready,
    .k128_valid, .k128_tag, .k128_data, .k128_ready,
    .k256_valid, .k256_tag, .k256_data, .k256_ready,
    .ct_valid, .ct_tag, .ct_data, .ct_ready
  );

  int checks = 0, failures = 0;
  longint cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  // ---- stimulus queues, one per port and thread ----
  logic [127:0] q_pt   [NT][$];
  logic [127:0] q_k128 [NT][$];
  logic [255:0] q_k256 [NT][$];
  logic [127:0] q_exp  [NT][$];   // expected ciphertexts, in order
  longint       q_t_in [NT][$];   // cycle each plaintext was accepted
  bit           key_hold [NT];    // hold back this thread's keys
  bit           random_ready = 0;

  int n_out [NT];
  int lat_last;

  // mechanism counters
  int n_concurrent = 0, n_overtake = 0, n_ct_stall = 0, n_in_backpressure = 0;
  int n_reconf = 0, n_bypass = 0;
  bit starving = 0;

  // ---- drivers: at each edge, consume what was accepted, present the next ----
  function automatic int pick(input bit last, input bit has0, input bit has1);
    if (has0 && has1) return last ? 0 : 1;
    if (has1) return 1;
    return 0;
  endfunction

  always @(posedge clk) begin
    int t;
    if (rst_n) begin
      if (pt_valid && pt_ready) begin
        void'(q_pt[pt_tag].pop_front());
        q_t_in[pt_tag].push_back(cycle);
      end
      if (pt_valid && !pt_ready) n_in_backpressure++;
      if (k128_valid && k128_ready) void'(q_k128[k128_tag].pop_front());
      if (k256_valid && k256_ready) void'(q_k256[k256_tag].pop_front());
    end
    t = pick(pt_tag, q_pt[0].size() > 0, q_pt[1].size() > 0);
    pt_valid <= q_pt[t].size() > 0;
    pt_tag   <= 1'(t);
    pt_data  <= (q_pt[t].size() > 0) ? q_pt[t][0] : '0;
    t = pick(k128_tag, q_k128[0].size() > 0 && !key_hold[0], q_k128[1].size() > 0 && !key_hold[1]);
    k128_valid <= q_k128[t].size() > 0 && !key_hold[t];
    k128_tag   <= 1'(t);
    k128_data  <= (q_k128[t].size() > 0) ? q_k128[t][0] : '0;
    t = pick(k256_tag, q_k256[0].size() > 0 && !key_hold[0], q_k256[1].size() > 0 && !key_hold[1]);
    k256_valid <= q_k256[t].size() > 0 && !key_hold[t];
    k256_tag   <= 1'(t);
    k256_data  <= (q_k256[t].size() > 0) ? q_k256[t][0] : '0;
    ct_ready   <= random_ready ? ($urandom_range(0, 3) != 0) : 1'b1;
  end

  // ---- scoreboard ----
  always @(posedge clk) begin
    if (rst_n) begin
      if (q_t_in[0].size() > 0 && q_t_in[1].size() > 0) n_concurrent++;
      if (ct_valid && !ct_ready) n_ct_stall++;
      if (ct_valid && ct_ready) begin
        int t;
        t = int'(ct_tag);
        checks++;
        if (q_exp[t].size() == 0 || q_t_in[t].size() == 0) begin
          failures++;
          $display("FAIL: unexpected ciphertext on thread %0d: %h", t, ct_data);
        end else begin
          logic [127:0] e;
          longint tin;
          e   = q_exp[t].pop_front();
          tin = q_t_in[t].pop_front();
          lat_last = int'(cycle - tin);
          if (ct_data !== e) begin
            failures++;
            $display("FAIL: thread %0d block %0d: got %h expected %h", t, n_out[t], ct_data, e);
          end
          // an older block of the other thread is still inside
          if (q_t_in[1-t].size() > 0 && q_t_in[1-t][0] < tin) n_overtake++;
          if (starving && t == 1 && q_exp[0].size() > 0) n_bypass++;
          n_out[t]++;
        end
      end
    end
  end

  // ---- helpers ----
  task automatic set_conf(input int t, input conf_id_e id);
    @(posedge clk);
    cfg_we <= 1; cfg_thread <= 1'(t); cfg_id <= id;
    @(posedge clk);
    cfg_we <= 0;
  endtask

  task automatic add_block(input int t, input conf_id_e id, input logic [127:0] pt, input logic [255:0] key);
    q_pt[t].push_back(pt);
    if (id == AES_128) begin
      q_k128[t].push_back(key[255:128]);
      q_exp[t].push_back(encrypt128(pt, key[255:128]));
    end else begin
      q_k256[t].push_back(key);
      q_exp[t].push_back(encrypt256(pt, key));
    end
  endtask

  function automatic logic [255:0] rnd256();
    return {$urandom(), $urandom(), $urandom(), $urandom(), $urandom(), $urandom(), $urandom(), $urandom()};
  endfunction

  task automatic wait_drained();
    while (q_exp[0].size() > 0 || q_exp[1].size() > 0) @(posedge clk);
    repeat (3) @(posedge clk);
  endtask

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic stream(input int t, input conf_id_e id, input int n);
    longint first, last;
    int got0;
    for (int i = 0; i < n; i++) add_block(t, id, {$urandom(), $urandom(), $urandom(), $urandom()}, rnd256());
    got0 = n_out[t];
    while (n_out[t] == got0) @(posedge clk);
    first = cycle;
    while (n_out[t] < got0 + n) @(posedge clk);
    last = cycle;
    // n blocks leave on n consecutive cycles: one 128-bit block per clock
    check(last - first == longint'(n - 1),
          $sformatf("throughput thread %0d: %0d blocks over %0d cycles", t, n, last - first + 1));
    $display("stream thread %0d (%s): %0d blocks in %0d cycles", t, id.name(), n, last - first + 1);
  endtask

  localparam logic [127:0] KAT_PT   = 128'h00112233445566778899aabbccddeeff;
  localparam logic [255:0] KAT_K256 = 256'h000102030405060708090a0b0c0d0e0f101112131415161718191a1b1c1d1e1f;

  initial begin
    key_hold[0] = 0;
    key_hold[1] = 0;
    n_out[0] = 0;
    n_out[1] = 0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    repeat (2) @(posedge clk);

    // 1. known answers and latency ("low": a single block)
    set_conf(1, AES_256);
    q_pt[0].push_back(KAT_PT);
    q_k128[0].push_back(KAT_K256[255:128]);
    q_exp[0].push_back(128'h69c4e0d86a7b0430d8cdb78070b4c55a);
    wait_drained();
    check(lat_last == 53, $sformatf("AES-128 latency %0d, expected 53", lat_last));
    q_pt[1].push_back(KAT_PT);
    q_k256[1].push_back(KAT_K256);
    q_exp[1].push_back(128'h8ea2b7ca516745bfeafc49904b496089);
    wait_drained();
    check(lat_last == 73, $sformatf("AES-256 latency %0d, expected 73", lat_last));

    // 2. full pipeline, one thread at a time ("high 128", "high 256")
    stream(0, AES_128, 100);
    wait_drained();
    stream(1, AES_256, 100);
    wait_drained();

    // 3. both threads at once with output back-pressure ("high both")
    random_ready = 1;
    for (int i = 0; i < 100; i++) begin
      add_block(0, AES_128, {$urandom(), $urandom(), $urandom(), $urandom()}, rnd256());
      add_block(1, AES_256, {$urandom(), $urandom(), $urandom(), $urandom()}, rnd256());
    end
    wait_drained();
    random_ready = 0;

    // 4. swap the configurations at run time
    set_conf(0, AES_256);
    set_conf(1, AES_128);
    n_reconf += 2;
    for (int i = 0; i < 30; i++) begin
      add_block(0, AES_256, {$urandom(), $urandom(), $urandom(), $urandom()}, rnd256());
      add_block(1, AES_128, {$urandom(), $urandom(), $urandom(), $urandom()}, rnd256());
    end
    wait_drained();

    // 5. thread 0 starved of keys while thread 1 runs
    key_hold[0] = 1;
    starving = 1;
    for (int i = 0; i < 20; i++) add_block(0, AES_256, {$urandom(), $urandom(), $urandom(), $urandom()}, rnd256());
    repeat (20) @(posedge clk);
    for (int i = 0; i < 20; i++) add_block(1, AES_128, {$urandom(), $urandom(), $urandom(), $urandom()}, rnd256());
    while (q_exp[1].size() > 0) @(posedge clk);
    starving = 0;
    key_hold[0] = 0;
    wait_drained();

    $display("mechanisms: concurrent=%0d overtake=%0d ct_stall=%0d in_backpressure=%0d reconf=%0d bypass=%0d",
             n_concurrent, n_overtake, n_ct_stall, n_in_backpressure, n_reconf, n_bypass);
    check(n_concurrent > 0, "both threads never in flight together");
    check(n_overtake > 0, "no AES-128 block ever overtook an AES-256 block");
    check(n_ct_stall > 0, "output never stalled");
    check(n_in_backpressure > 0, "input back-pressure never happened");
    check(n_reconf > 0, "no reconfiguration");
    check(n_bypass == 20, $sformatf("thread 1 passed the starved thread %0d times, expected 20", n_bypass));
    check(n_out[0] == 1 + 100 + 100 + 30 + 20, $sformatf("thread 0 produced %0d blocks", n_out[0]));
    check(n_out[1] == 1 + 100 + 100 + 30 + 20, $sformatf("thread 1 produced %0d blocks", n_out[1]));

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
