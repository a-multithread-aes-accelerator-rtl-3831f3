// aes_mt_accel -- two-thread reconfigurable AES-128 / AES-256 encryption
// accelerator built as a tagged dataflow network.
//
// The AES-128 and AES-256 encryption dataflows, both fully unrolled, are
// merged into one network. Actors common to both are instantiated once:
// the initial AddRoundKey, rounds 1..9 and the final round (SubBytes,
// ShiftRows, AddRoundKey). Rounds 10..13 exist only on the AES-256 path, and
// the two key-expansion chains (10 ExpandKey128 stages, 14 ExpandKey256
// stages) are kept apart since the schedules differ. Every edge of the
// network is a tagged_fifo; actors fire on tokens of one thread and tag their
// outputs with it. Switching boxes choose the path of each token from the
// configuration register of its thread (conf[tag]):
//   * key inputs of the initial AddRoundKey, rounds 1..9 and the final
//     AddRoundKey: merge of the AES-128 and AES-256 key FIFOs;
//   * after round 9: split, AES-128 to the final round, AES-256 to round 10;
//   * SubBytes input: merge of the round-9 and round-13 outputs.
// Two threads (N_THREADS) run at once, each in either configuration, and each
// thread's configuration is changed by writing its register.
//
// Ports. All token ports carry a tag (thread number) and use valid/ready:
// a token is taken in a cycle where valid and ready are both high.
//   pt_*   plaintext block, to the initial AddRoundKey;
//   k128_* AES-128 cipher key, one per block of a thread configured AES_128;
//   k256_* AES-256 cipher key, one per block of a thread configured AES_256;
//   ct_*   ciphertext block, tagged with the thread it belongs to.
//   cfg_we/cfg_thread/cfg_id write a thread's configuration register.
// Within one thread ciphertexts leave in plaintext order; between threads
// there is no ordering (an AES-128 block overtakes an earlier AES-256 one).
// Keys are consumed one per block, so a key change costs nothing; a host that
// keeps one key sends it again with every block. Sending a key on the port
// of the other configuration leaves it unused in the input FIFOs.
//
// Timing, no stalls: a block taken on pt in cycle 0 (its key no later) is on
// ct in cycle 5*Nr+3: 53 cycles for AES-128, 73 for AES-256. Each round is a
// FIFO cycle plus the round actor's four pipeline stages. One block per cycle
// enters and leaves once the pipeline is full, shared by both threads.
//
// Structure, sharing and per-thread steering follow the paper; FIFO depth,
// port handshakes, ID encoding and the single-stage actors around the rounds
// are this design's choices.
//
// Lint notes: rst_n is also the synchronous disable of the handshake
// assertion, hence the mixed sync/async report; the initial AddRoundKey's
// out_valid (a0_oval) is unused because its FIFO write uses out_wr.
module aes_mt_accel
  import aes_mt_pkg::*;
#(
  parameter int unsigned N_THREADS = 2,
  parameter int unsigned DEPTH     = 4,
  localparam int unsigned TAG_W    = (N_THREADS > 1) ? $clog2(N_THREADS) : 1
) (
  input  logic               clk,
  input  logic               rst_n,
  // configuration registers
  input  logic               cfg_we,
  input  logic [TAG_W-1:0]   cfg_thread,
  input  conf_id_e           cfg_id,
  // plaintext
  input  logic               pt_valid,
  input  logic [TAG_W-1:0]   pt_tag,
  input  block_t             pt_data,
  output logic               pt_ready,
  // AES-128 key
  input  logic               k128_valid,
  input  logic [TAG_W-1:0]   k128_tag,
  input  block_t             k128_data,
  output logic               k128_ready,
  // AES-256 key
  input  logic               k256_valid,
  input  logic [TAG_W-1:0]   k256_tag,
  input  key256_t            k256_data,
  output logic               k256_ready,
  // ciphertext
  output logic               ct_valid,
  output logic [TAG_W-1:0]   ct_tag,
  output block_t             ct_data,
  input  logic               ct_ready
);

  typedef logic [TAG_W-1:0]     tag_t;
  typedef logic [N_THREADS-1:0] tvec_t;

  localparam int unsigned NR128 = NR_128;        // 10
  localparam int unsigned NR256 = NR_256;        // 14
  localparam int unsigned NSHARED = NR128 - 1;   // full rounds shared: 1..9
  localparam int unsigned NFULL   = NR256 - 1;   // full rounds in all: 1..13

  tvec_t conf;

  thread_conf_regs #(.N_THREADS(N_THREADS)) u_conf (
    .clk, .rst_n, .cfg_we, .cfg_thread, .cfg_id, .conf
  );

  // ---------------------------------------------------------------------------
  // FIFO port bundles. Naming: <fifo>_{we,wt,wd,full} write side,
  // <fifo>_{re,rt,rd,av} read side.
  // ---------------------------------------------------------------------------

  // initial AddRoundKey inputs
  logic   a0s_we, a0s_re, a0k1_we, a0k1_re, a0k2_we, a0k2_re;
  tag_t   a0s_wt, a0s_rt, a0k1_wt, a0k2_wt;
  block_t a0s_wd, a0s_rd, a0k1_wd, a0k1_rd, a0k2_wd, a0k2_rd;
  tvec_t  a0s_full, a0s_av, a0k1_full, a0k1_av, a0k2_full, a0k2_av;

  // round state inputs (1..NFULL) and round key inputs
  logic   rs_we [1:NFULL];  tag_t rs_wt [1:NFULL];  block_t rs_wd [1:NFULL];  tvec_t rs_full [1:NFULL];
  logic   rs_re [1:NFULL];  tag_t rs_rt [1:NFULL];  block_t rs_rd [1:NFULL];  tvec_t rs_av   [1:NFULL];
  logic   rk1_we[1:NSHARED]; block_t rk1_wd[1:NSHARED]; tvec_t rk1_full[1:NSHARED];
  logic   rk1_re[1:NSHARED]; block_t rk1_rd[1:NSHARED]; tvec_t rk1_av  [1:NSHARED];
  logic   rk2_we[1:NFULL];   block_t rk2_wd[1:NFULL];   tvec_t rk2_full[1:NFULL];
  logic   rk2_re[1:NFULL];   block_t rk2_rd[1:NFULL];   tvec_t rk2_av  [1:NFULL];

  // key-expansion chain inputs
  logic    e1_we [1:NR128];  tag_t e1_wt [1:NR128];  block_t  e1_wd [1:NR128];  tvec_t e1_full [1:NR128];
  logic    e1_re [1:NR128];  tag_t e1_rt [1:NR128];  block_t  e1_rd [1:NR128];  tvec_t e1_av   [1:NR128];
  logic    e2_we [1:NR256];  tag_t e2_wt [1:NR256];  key256_t e2_wd [1:NR256];  tvec_t e2_full [1:NR256];
  logic    e2_re [1:NR256];  tag_t e2_rt [1:NR256];  key256_t e2_rd [1:NR256];  tvec_t e2_av   [1:NR256];
  // key-expansion stage outputs
  logic    e1_owr [1:NR128]; tag_t e1_otag [1:NR128]; block_t e1_ork [1:NR128]; tvec_t e1_ofull [1:NR128];
  logic    e2_owr [1:NR256]; tag_t e2_otag [1:NR256]; block_t e2_ork [1:NR256]; tvec_t e2_ofull [1:NR256];
  key256_t e2_owin[1:NR256];

  // final round
  logic   sb1_we, sb1_re, sb2_we, sb2_re, sr_we, sr_re, afs_we, afs_re;
  tag_t   sb1_wt, sb2_wt, sr_wt, sr_rt, afs_wt, afs_rt, sb_rt;
  block_t sb1_wd, sb1_rd, sb2_wd, sb2_rd, sr_wd, sr_rd, afs_wd, afs_rd;
  tvec_t  sb1_full, sb1_av, sb2_full, sb2_av, sr_full, sr_av, afs_full, afs_av;
  logic   afk1_we, afk1_re, afk2_we, afk2_re;
  tag_t   afk1_wt, afk2_wt;
  block_t afk1_wd, afk1_rd, afk2_wd, afk2_rd;
  tvec_t  afk1_full, afk1_av, afk2_full, afk2_av;

  // ---------------------------------------------------------------------------
  // Input ports. A key token is written to both of its consumers at once.
  // ---------------------------------------------------------------------------
  assign pt_ready   = !a0s_full[pt_tag];
  assign a0s_we     = pt_valid && pt_ready;
  assign a0s_wt     = pt_tag;
  assign a0s_wd     = pt_data;

  assign k128_ready = !a0k1_full[k128_tag] && !e1_full[1][k128_tag];
  assign a0k1_we    = k128_valid && k128_ready;
  assign a0k1_wt    = k128_tag;
  assign a0k1_wd    = k128_data;
  assign e1_we[1]   = a0k1_we;
  assign e1_wt[1]   = k128_tag;
  assign e1_wd[1]   = k128_data;

  assign k256_ready = !a0k2_full[k256_tag] && !e2_full[1][k256_tag];
  assign a0k2_we    = k256_valid && k256_ready;
  assign a0k2_wt    = k256_tag;
  assign a0k2_wd    = k256_data[255:128];   // round key 0
  assign e2_we[1]   = a0k2_we;
  assign e2_wt[1]   = k256_tag;
  assign e2_wd[1]   = k256_data;

  tagged_fifo #(.W(128), .N_THREADS(N_THREADS), .DEPTH(DEPTH)) u_f_a0s (
    .clk, .rst_n, .wr_en(a0s_we), .wr_tag(a0s_wt), .wr_data(a0s_wd), .full(a0s_full),
    .rd_tag(a0s_rt), .rd_en(a0s_re), .rd_data(a0s_rd), .avail(a0s_av));
  tagged_fifo #(.W(128), .N_THREADS(N_THREADS), .DEPTH(DEPTH)) u_f_a0k1 (
    .clk, .rst_n, .wr_en(a0k1_we), .wr_tag(a0k1_wt), .wr_data(a0k1_wd), .full(a0k1_full),
    .rd_tag(a0s_rt), .rd_en(a0k1_re), .rd_data(a0k1_rd), .avail(a0k1_av));
  tagged_fifo #(.W(128), .N_THREADS(N_THREADS), .DEPTH(DEPTH)) u_f_a0k2 (
    .clk, .rst_n, .wr_en(a0k2_we), .wr_tag(a0k2_wt), .wr_data(a0k2_wd), .full(a0k2_full),
    .rd_tag(a0s_rt), .rd_en(a0k2_re), .rd_data(a0k2_rd), .avail(a0k2_av));

  // ---------------------------------------------------------------------------
  // Initial AddRoundKey (shared), key through a merge switching box
  // ---------------------------------------------------------------------------
  tvec_t  a0k_av;
  block_t a0k_rd;
  logic   a0_re, a0_owr, a0_oval;
  tag_t   a0_otag;
  block_t a0_od;

  mdc_sb_merge #(.W(128), .N_THREADS(N_THREADS)) u_sb_a0k (
    .conf, .a_avail(a0k1_av), .a_data(a0k1_rd), .a_rd_en(a0k1_re),
    .b_avail(a0k2_av), .b_data(a0k2_rd), .b_rd_en(a0k2_re),
    .rd_tag(a0s_rt), .rd_en(a0_re), .avail(a0k_av), .data(a0k_rd));

  aes_ark_actor #(.N_THREADS(N_THREADS)) u_ark0 (
    .clk, .rst_n,
    .s_avail(a0s_av), .s_data(a0s_rd), .k_avail(a0k_av), .k_data(a0k_rd),
    .rd_en(a0_re), .rd_tag(a0s_rt),
    .out_full(rs_full[1]), .out_valid(a0_oval), .out_wr(a0_owr), .out_tag(a0_otag), .out_data(a0_od));
  assign a0s_re = a0_re;

  assign rs_we[1] = a0_owr;
  assign rs_wt[1] = a0_otag;
  assign rs_wd[1] = a0_od;

  // ---------------------------------------------------------------------------
  // AES-128 key-expansion chain: stage j feeds round j (final ARK for j = 10)
  // and stage j+1.
  // ---------------------------------------------------------------------------
  for (genvar j = 1; j <= NR128; j++) begin : g_ek128
    tagged_fifo #(.W(128), .N_THREADS(N_THREADS), .DEPTH(DEPTH)) u_fifo (
      .clk, .rst_n, .wr_en(e1_we[j]), .wr_tag(e1_wt[j]), .wr_data(e1_wd[j]), .full(e1_full[j]),
      .rd_tag(e1_rt[j]), .rd_en(e1_re[j]), .rd_data(e1_rd[j]), .avail(e1_av[j]));

    aes_expand_key128 #(.N_THREADS(N_THREADS), .ROUND(j)) u_stage (
      .clk, .rst_n, .in_avail(e1_av[j]), .in_data(e1_rd[j]), .rd_en(e1_re[j]), .rd_tag(e1_rt[j]),
      .out_full(e1_ofull[j]), .out_wr(e1_owr[j]), .out_tag(e1_otag[j]), .out_data(e1_ork[j]));

    if (j < NR128) begin : g_mid
      assign e1_ofull[j]  = rk1_full[j] | e1_full[j+1];
      assign rk1_we[j]    = e1_owr[j];
      assign rk1_wd[j]    = e1_ork[j];
      assign e1_we[j+1]   = e1_owr[j];
      assign e1_wt[j+1]   = e1_otag[j];
      assign e1_wd[j+1]   = e1_ork[j];
    end else begin : g_last
      assign e1_ofull[j]  = afk1_full;
      assign afk1_we      = e1_owr[j];
      assign afk1_wt      = e1_otag[j];
      assign afk1_wd      = e1_ork[j];
    end
  end

  // ---------------------------------------------------------------------------
  // AES-256 key-expansion chain
  // ---------------------------------------------------------------------------
  for (genvar j = 1; j <= NR256; j++) begin : g_ek256
    tagged_fifo #(.W(256), .N_THREADS(N_THREADS), .DEPTH(DEPTH)) u_fifo (
      .clk, .rst_n, .wr_en(e2_we[j]), .wr_tag(e2_wt[j]), .wr_data(e2_wd[j]), .full(e2_full[j]),
      .rd_tag(e2_rt[j]), .rd_en(e2_re[j]), .rd_data(e2_rd[j]), .avail(e2_av[j]));

    aes_expand_key256 #(.N_THREADS(N_THREADS), .ROUND(j)) u_stage (
      .clk, .rst_n, .in_avail(e2_av[j]), .in_data(e2_rd[j]), .rd_en(e2_re[j]), .rd_tag(e2_rt[j]),
      .out_full(e2_ofull[j]), .out_wr(e2_owr[j]), .out_tag(e2_otag[j]),
      .out_rk(e2_ork[j]), .out_win(e2_owin[j]));

    if (j < NR256) begin : g_mid
      assign e2_ofull[j]  = rk2_full[j] | e2_full[j+1];
      assign rk2_we[j]    = e2_owr[j];
      assign rk2_wd[j]    = e2_ork[j];
      assign e2_we[j+1]   = e2_owr[j];
      assign e2_wt[j+1]   = e2_otag[j];
      assign e2_wd[j+1]   = e2_owin[j];
    end else begin : g_last
      assign e2_ofull[j]  = afk2_full;
      assign afk2_we      = e2_owr[j];
      assign afk2_wt      = e2_otag[j];
      assign afk2_wd      = e2_ork[j];
    end
  end

  // ---------------------------------------------------------------------------
  // Rounds 1..13. Rounds 1..9 are shared and take their key through a merge
  // switching box; rounds 10..13 are on the AES-256 path only.
  // ---------------------------------------------------------------------------
  logic   r_owr  [1:NFULL];
  tag_t   r_otag [1:NFULL];
  block_t r_od   [1:NFULL];
  tvec_t  r_ofull[1:NFULL];

  for (genvar i = 1; i <= NFULL; i++) begin : g_round
    tvec_t  k_av;
    block_t k_rd;
    logic   re;

    tagged_fifo #(.W(128), .N_THREADS(N_THREADS), .DEPTH(DEPTH)) u_fifo_s (
      .clk, .rst_n, .wr_en(rs_we[i]), .wr_tag(rs_wt[i]), .wr_data(rs_wd[i]), .full(rs_full[i]),
      .rd_tag(rs_rt[i]), .rd_en(rs_re[i]), .rd_data(rs_rd[i]), .avail(rs_av[i]));

    // AES-256 round-key FIFO; written with the key chain's tag
    tagged_fifo #(.W(128), .N_THREADS(N_THREADS), .DEPTH(DEPTH)) u_fifo_k256 (
      .clk, .rst_n, .wr_en(rk2_we[i]), .wr_tag(e2_otag[i]), .wr_data(rk2_wd[i]), .full(rk2_full[i]),
      .rd_tag(rs_rt[i]), .rd_en(rk2_re[i]), .rd_data(rk2_rd[i]), .avail(rk2_av[i]));

    if (i <= NSHARED) begin : g_shared_key
      tagged_fifo #(.W(128), .N_THREADS(N_THREADS), .DEPTH(DEPTH)) u_fifo_k128 (
        .clk, .rst_n, .wr_en(rk1_we[i]), .wr_tag(e1_otag[i]), .wr_data(rk1_wd[i]), .full(rk1_full[i]),
        .rd_tag(rs_rt[i]), .rd_en(rk1_re[i]), .rd_data(rk1_rd[i]), .avail(rk1_av[i]));

      mdc_sb_merge #(.W(128), .N_THREADS(N_THREADS)) u_sb_key (
        .conf, .a_avail(rk1_av[i]), .a_data(rk1_rd[i]), .a_rd_en(rk1_re[i]),
        .b_avail(rk2_av[i]), .b_data(rk2_rd[i]), .b_rd_en(rk2_re[i]),
        .rd_tag(rs_rt[i]), .rd_en(re), .avail(k_av), .data(k_rd));
    end else begin : g_256_key
      assign k_av      = rk2_av[i];
      assign k_rd      = rk2_rd[i];
      assign rk2_re[i] = re;
    end

    aes_round_actor #(.N_THREADS(N_THREADS)) u_round (
      .clk, .rst_n,
      .s_avail(rs_av[i]), .s_data(rs_rd[i]), .k_avail(k_av), .k_data(k_rd),
      .rd_en(re), .rd_tag(rs_rt[i]),
      .out_full(r_ofull[i]), .out_wr(r_owr[i]), .out_tag(r_otag[i]), .out_data(r_od[i]));
    assign rs_re[i] = re;

    if (i == NSHARED) begin : g_split
      // after round 9: AES-128 to the final round, AES-256 to round 10
      mdc_sb_split #(.N_THREADS(N_THREADS)) u_sb_split (
        .conf, .wr_en(r_owr[i]), .wr_tag(r_otag[i]), .full(r_ofull[i]),
        .a_wr_en(sb1_we), .a_full(sb1_full), .b_wr_en(rs_we[i+1]), .b_full(rs_full[i+1]));
      assign sb1_wt     = r_otag[i];
      assign sb1_wd     = r_od[i];
      assign rs_wt[i+1] = r_otag[i];
      assign rs_wd[i+1] = r_od[i];
    end else if (i < NFULL) begin : g_next
      assign r_ofull[i] = rs_full[i+1];
      assign rs_we[i+1] = r_owr[i];
      assign rs_wt[i+1] = r_otag[i];
      assign rs_wd[i+1] = r_od[i];
    end else begin : g_last
      assign r_ofull[i] = sb2_full;
      assign sb2_we     = r_owr[i];
      assign sb2_wt     = r_otag[i];
      assign sb2_wd     = r_od[i];
    end
  end

  // ---------------------------------------------------------------------------
  // Final round (shared): SubBytes -> ShiftRows -> AddRoundKey
  // ---------------------------------------------------------------------------
  tagged_fifo #(.W(128), .N_THREADS(N_THREADS), .DEPTH(DEPTH)) u_f_sb1 (
    .clk, .rst_n, .wr_en(sb1_we), .wr_tag(sb1_wt), .wr_data(sb1_wd), .full(sb1_full),
    .rd_tag(sb_rt), .rd_en(sb1_re), .rd_data(sb1_rd), .avail(sb1_av));
  tagged_fifo #(.W(128), .N_THREADS(N_THREADS), .DEPTH(DEPTH)) u_f_sb2 (
    .clk, .rst_n, .wr_en(sb2_we), .wr_tag(sb2_wt), .wr_data(sb2_wd), .full(sb2_full),
    .rd_tag(sb_rt), .rd_en(sb2_re), .rd_data(sb2_rd), .avail(sb2_av));

  tvec_t  sb_av;
  block_t sb_rd;
  logic   sb_re;

  mdc_sb_merge #(.W(128), .N_THREADS(N_THREADS)) u_sb_final (
    .conf, .a_avail(sb1_av), .a_data(sb1_rd), .a_rd_en(sb1_re),
    .b_avail(sb2_av), .b_data(sb2_rd), .b_rd_en(sb2_re),
    .rd_tag(sb_rt), .rd_en(sb_re), .avail(sb_av), .data(sb_rd));

  aes_subbytes_actor #(.N_THREADS(N_THREADS)) u_subbytes (
    .clk, .rst_n, .in_avail(sb_av), .in_data(sb_rd), .rd_en(sb_re), .rd_tag(sb_rt),
    .out_full(sr_full), .out_wr(sr_we), .out_tag(sr_wt), .out_data(sr_wd));

  tagged_fifo #(.W(128), .N_THREADS(N_THREADS), .DEPTH(DEPTH)) u_f_sr (
    .clk, .rst_n, .wr_en(sr_we), .wr_tag(sr_wt), .wr_data(sr_wd), .full(sr_full),
    .rd_tag(sr_rt), .rd_en(sr_re), .rd_data(sr_rd), .avail(sr_av));

  aes_shiftrows_actor #(.N_THREADS(N_THREADS)) u_shiftrows (
    .clk, .rst_n, .in_avail(sr_av), .in_data(sr_rd), .rd_en(sr_re), .rd_tag(sr_rt),
    .out_full(afs_full), .out_wr(afs_we), .out_tag(afs_wt), .out_data(afs_wd));

  tagged_fifo #(.W(128), .N_THREADS(N_THREADS), .DEPTH(DEPTH)) u_f_afs (
    .clk, .rst_n, .wr_en(afs_we), .wr_tag(afs_wt), .wr_data(afs_wd), .full(afs_full),
    .rd_tag(afs_rt), .rd_en(afs_re), .rd_data(afs_rd), .avail(afs_av));
  tagged_fifo #(.W(128), .N_THREADS(N_THREADS), .DEPTH(DEPTH)) u_f_afk1 (
    .clk, .rst_n, .wr_en(afk1_we), .wr_tag(afk1_wt), .wr_data(afk1_wd), .full(afk1_full),
    .rd_tag(afs_rt), .rd_en(afk1_re), .rd_data(afk1_rd), .avail(afk1_av));
  tagged_fifo #(.W(128), .N_THREADS(N_THREADS), .DEPTH(DEPTH)) u_f_afk2 (
    .clk, .rst_n, .wr_en(afk2_we), .wr_tag(afk2_wt), .wr_data(afk2_wd), .full(afk2_full),
    .rd_tag(afs_rt), .rd_en(afk2_re), .rd_data(afk2_rd), .avail(afk2_av));

  tvec_t  afk_av;
  block_t afk_rd;
  logic   af_re, af_owr;

  mdc_sb_merge #(.W(128), .N_THREADS(N_THREADS)) u_sb_afk (
    .conf, .a_avail(afk1_av), .a_data(afk1_rd), .a_rd_en(afk1_re),
    .b_avail(afk2_av), .b_data(afk2_rd), .b_rd_en(afk2_re),
    .rd_tag(afs_rt), .rd_en(af_re), .avail(afk_av), .data(afk_rd));

  // The output port has no per-thread back-pressure: ct_ready low holds all.
  aes_ark_actor #(.N_THREADS(N_THREADS)) u_ark_final (
    .clk, .rst_n,
    .s_avail(afs_av), .s_data(afs_rd), .k_avail(afk_av), .k_data(afk_rd),
    .rd_en(af_re), .rd_tag(afs_rt),
    .out_full({N_THREADS{!ct_ready}}), .out_valid(ct_valid), .out_wr(af_owr),
    .out_tag(ct_tag), .out_data(ct_data));
  assign afs_re = af_re;

  // An accepted ciphertext is one the final actor wrote out.
  a_ct_handshake: assert property (@(posedge clk) disable iff (!rst_n)
                                   (ct_valid && ct_ready) == af_owr);

endmodule
