// tascade_package_tb: end-to-end test of the package running a histogram.
//
// A 2x2 package of 2x2-tile dies (16 tiles, 4x4 grid) with small caches runs
// a histogram of 4096 hist (256 per tile) with proxy regions of 2x2 tiles.
// Each tile's PU (pu_model) sends NUPD updates, half straight to the owner
// on a channel proxies may grab (selective cascading), half to the proxy in
// its region; proxies merge updates in the P$ and evict displaced hist to
// the owners; owners add them into their D$-cached array, whose misses go to
// a per-die HBM model. The X dimension is a torus (wrap link between the
// two die columns), Y a mesh. After the network is quiet the proxies flush
// their P$, and after that every owner reads back its hist, which must equal
// a reference histogram computed here from the same update formula.
//
// Mechanisms counted, each of which must happen at least once: cascades,
// P$ evictions, P$ hits and default-value misses, D$ miss stalls, OQ
// back-pressure, die-to-die crossings, torus wrap traffic, HBM reads and
// write-backs. Traffic must never leave through the mesh edges in Y.
module tascade_package_tb;
  import tascade_pkg::*;
  localparam int DX = 2, DY = 2, TX = 2, TY = 2;
  localparam int GX = DX*TX, GY = DY*TY, NTOT = GX*GY, ND = DX*DY, NTD = TX*TY;
  localparam int HBM_CH = 2, REGION_LW = 8;
  localparam int TAG_W = 2, CHB = 1, ADDR_W = TAG_W + REGION_LW - CHB;
  localparam int NUPD = 48, BPT = 256, NBINS = NTOT * BPT;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  tile_cfg_t cfg;
  pu_out_t   pu_o [NTOT];
  pu_in_t    pu_i [NTOT];
  link_fwd_t io_n_in_fwd [NUM_NOCS][GX], io_n_out_fwd [NUM_NOCS][GX];
  link_bwd_t io_n_in_bwd [NUM_NOCS][GX], io_n_out_bwd [NUM_NOCS][GX];
  link_fwd_t io_s_in_fwd [NUM_NOCS][GX], io_s_out_fwd [NUM_NOCS][GX];
  link_bwd_t io_s_in_bwd [NUM_NOCS][GX], io_s_out_bwd [NUM_NOCS][GX];
  link_fwd_t io_w_in_fwd [NUM_NOCS][GY], io_w_out_fwd [NUM_NOCS][GY];
  link_bwd_t io_w_in_bwd [NUM_NOCS][GY], io_w_out_bwd [NUM_NOCS][GY];
  link_fwd_t io_e_in_fwd [NUM_NOCS][GY], io_e_out_fwd [NUM_NOCS][GY];
  link_bwd_t io_e_in_bwd [NUM_NOCS][GY], io_e_out_bwd [NUM_NOCS][GY];
  logic [HBM_CH-1:0]    hbm_req_valid [ND], hbm_req_ready [ND], hbm_resp_valid [ND];
  logic                 hbm_req_we    [ND][HBM_CH];
  logic [ADDR_W-1:0]    hbm_req_addr  [ND][HBM_CH];
  logic [LINE_BITS-1:0] hbm_req_wdata [ND][HBM_CH], hbm_resp_data [ND][HBM_CH];
  logic [TAG_W-1:0]     hbm_req_tag   [ND][HBM_CH], hbm_resp_tag  [ND][HBM_CH];
  logic [NUM_NOCS-1:0]  ev_cascade [NTOT];
  logic [NTOT-1:0]      ev_evict, init_done;

  tascade_package #(
    .DX(DX), .DY(DY), .TX(TX), .TY(TY), .IQ_DEPTH(256), .OQ_DEPTH(16),
    .PC_LINES(8), .DC_LINES(8), .RBUF(4), .HBM_CH(HBM_CH), .REGION_LW(REGION_LW),
    .D2D_LAT(4)
  ) dut (.*);

  // ---------------- HBM stacks ----------------
  int hbm_rd [ND], hbm_wr [ND];
  for (genvar d = 0; d < ND; d++) begin : g_hbm
    hbm_model #(.HBM_CH(HBM_CH), .ADDR_W(ADDR_W), .TAG_W(TAG_W), .LAT(20)) u_hbm (
      .clk, .rst_n,
      .req_valid(hbm_req_valid[d]), .req_ready(hbm_req_ready[d]),
      .req_we(hbm_req_we[d]), .req_addr(hbm_req_addr[d]), .req_wdata(hbm_req_wdata[d]),
      .req_tag(hbm_req_tag[d]),
      .resp_valid(hbm_resp_valid[d]), .resp_tag(hbm_resp_tag[d]), .resp_data(hbm_resp_data[d]),
      .n_reads(hbm_rd[d]), .n_writes(hbm_wr[d])
    );
  end

  // ---------------- processing units ----------------
  logic [1:0] phase = 0;
  logic [NTOT-1:0] gen_done, flushed, verified, idle;
  int dc_stall [NTOT], pc_hits [NTOT], pc_misses [NTOT], oq_refused [NTOT], tasks [NTOT];
  logic [31:0] hist [NTOT][BPT];
  for (genvar g = 0; g < NTOT; g++) begin : g_pu
    pu_model #(.ID(g), .NUPD(NUPD), .NBINS(NBINS), .BPT(BPT)) u_pu (
      .clk, .rst_n, .pu_i(pu_i[g]), .pu_o(pu_o[g]), .phase,
      .gen_done(gen_done[g]), .flushed(flushed[g]), .verified(verified[g]), .idle(idle[g]),
      .dc_stall(dc_stall[g]), .pc_hits(pc_hits[g]), .pc_misses(pc_misses[g]),
      .oq_refused(oq_refused[g]), .tasks(tasks[g]), .hist(hist[g])
    );
  end

  // ---------------- event counters ----------------
  int n_cascade = 0, n_evict = 0, n_wrap = 0, n_d2d = 0, n_edge = 0;
  logic [NUM_NOCS*2*GY-1:0] wrap_v, d2d_v;
  for (genvar dy = 0; dy < DY; dy++) begin : g_pdy
    for (genvar n = 0; n < NUM_NOCS; n++) begin : g_pn
      for (genvar r = 0; r < TY; r++) begin : g_pr
        localparam int B = (n*GY + dy*TY + r) * 2;
        // die column 1 to column 0 is the torus wrap, column 0 to 1 an inner link
        assign wrap_v[B]   = dut.g_dy[dy].g_dx[1].g_n[n].g_r[r].u_east.out_fwd.valid;
        assign wrap_v[B+1] = dut.g_dy[dy].g_dx[1].g_n[n].g_r[r].u_west.out_fwd.valid;
        assign d2d_v[B]    = dut.g_dy[dy].g_dx[0].g_n[n].g_r[r].u_east.out_fwd.valid;
        assign d2d_v[B+1]  = dut.g_dy[dy].g_dx[0].g_n[n].g_r[r].u_west.out_fwd.valid;
      end
    end
  end

  always @(posedge clk) if (rst_n) begin
    for (int g = 0; g < NTOT; g++) begin
      n_cascade += $countones(ev_cascade[g]);
      n_evict   += int'(ev_evict[g]);
    end
    n_wrap += $countones(wrap_v);
    n_d2d  += $countones(d2d_v);
    for (int n = 0; n < NUM_NOCS; n++)
      for (int c = 0; c < GX; c++)
        n_edge += int'(io_n_out_fwd[n][c].valid) + int'(io_s_out_fwd[n][c].valid);
  end

  // ---------------- reference ----------------
  function automatic int unsigned bin_of(int unsigned id, int unsigned k);
    if (k % 4 == 1) return ((k / 4) % 4) * 1031 % NBINS;   // hot bins, via proxies
    if (k % 4 == 2) return (10 * 256 + (k / 4) % 8) % NBINS; // hot owner tile
    return (id * 977 + k * 1231 + k * k * 7) % NBINS;
  endfunction
  function automatic int unsigned val_of(int unsigned id, int unsigned k);
    return 1 + ((id + k) % 3);
  endfunction

  task automatic wait_quiet(input int cycles);
    int q;
    q = 0;
    while (q < cycles) begin
      @(posedge clk);
      if (&idle && &gen_done) begin
        q++;
        for (int g = 0; g < NTOT; g++) if (pu_i[g].busy) q = 0;
      end else q = 0;
    end
  endtask

  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("watchdog: phase %0d gen %b idle %b", phase, gen_done, idle);
    for (int g = 0; g < NTOT; g++) $display("  tile %0d busy %b tasks %0d refused %0d", g, pu_i[g].busy, tasks[g], oq_refused[g]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int unsigned ref_h [NBINS];
  int tot_stall, tot_hit, tot_miss, tot_ref, tot_rd, tot_wr, tot_tasks;

  initial begin
    cfg = '0;
    cfg.grid = '{log2x: 2, log2y: 2, torus_x: 1'b1, torus_y: 1'b0};
    cfg.chan[0] = '{enc_shift: 8, to_proxy: 0, proxy_en: 1, prx_log2x: 1, prx_log2y: 1,
                    noc: 0, dest_task: 2, cascade_task: 1, weight: 1};
    cfg.chan[1] = '{enc_shift: 8, to_proxy: 1, proxy_en: 0, prx_log2x: 1, prx_log2y: 1,
                    noc: 1, dest_task: 1, cascade_task: 1, weight: 1};
    // evictions share NoC 0 with the owner-bound updates: both end in task 2,
    // which spawns nothing, so NoC 0 always drains and NoC 1 (proxy-bound,
    // whose task spawns evictions) only waits on NoC 0
    cfg.chan[2] = '{enc_shift: 8, to_proxy: 0, proxy_en: 0, prx_log2x: 1, prx_log2y: 1,
                    noc: 0, dest_task: 2, cascade_task: 1, weight: 1};
    cfg.chan[3] = '{enc_shift: 8, to_proxy: 0, proxy_en: 0, prx_log2x: 1, prx_log2y: 1,
                    noc: 0, dest_task: 3, cascade_task: 1, weight: 1};
    cfg.tsk[1] = '{arr_base: 0, arr2_base: 0, arr2_en: 0, pf_en: 0, pf_stream: 0, out_chan: 2};
    cfg.tsk[2] = '{arr_base: 0, arr2_base: 0, arr2_en: 0, pf_en: 1, pf_stream: 0, out_chan: 3};
    cfg.pc[1]  = '{base: 0, log2_lines: 3, dflt: 0, evict_chan: 2};
    // small queues during the run phase so that the network congests
    for (int t = 0; t < NUM_TASKS; t++) cfg.iq_size[t] = 16'd4;
    for (int c = 0; c < NUM_CHANNELS; c++) cfg.oq_size[c] = 16'd2;
    cfg.dc_scratch = 0;
    cfg.dc_log2_lines = 5'd3;
    for (int n = 0; n < NUM_NOCS; n++) begin
      for (int c = 0; c < GX; c++) begin
        io_n_in_fwd[n][c] = '0; io_s_in_fwd[n][c] = '0;
        io_n_out_bwd[n][c] = '0; io_s_out_bwd[n][c] = '0;
      end
      for (int r = 0; r < GY; r++) begin
        io_w_in_fwd[n][r] = '0; io_e_in_fwd[n][r] = '0;
        io_w_out_bwd[n][r] = '0; io_e_out_bwd[n][r] = '0;
      end
    end
    for (int b = 0; b < NBINS; b++) ref_h[b] = 0;
    for (int g = 0; g < NTOT; g++)
      for (int k = 0; k < NUPD; k++) ref_h[bin_of(g, k)] += val_of(g, k);

    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (&init_done);
    check(1'b1, "all tiles initialised");
    phase = 2'd1;
    wait_quiet(200);
    $display("run phase done at %0t", $time);
    // room for every eviction before the flush, in which all PUs are busy
    for (int t = 0; t < NUM_TASKS; t++) cfg.iq_size[t] = 16'd256;
    phase = 2'd2;
    wait (&flushed);
    wait_quiet(200);
    $display("flush phase done at %0t", $time);
    phase = 2'd3;
    wait (&verified);

    for (int g = 0; g < NTOT; g++)
      for (int b = 0; b < BPT; b++)
        check(hist[g][b] == ref_h[g*BPT + b],
              $sformatf("bin %0d: got %0d expected %0d", g*BPT + b, hist[g][b], ref_h[g*BPT + b]));

    tot_stall = 0; tot_hit = 0; tot_miss = 0; tot_ref = 0; tot_rd = 0; tot_wr = 0; tot_tasks = 0;
    for (int g = 0; g < NTOT; g++) begin
      tot_stall += dc_stall[g]; tot_hit += pc_hits[g]; tot_miss += pc_misses[g];
      tot_ref += oq_refused[g]; tot_tasks += tasks[g];
    end
    for (int d = 0; d < ND; d++) begin tot_rd += hbm_rd[d]; tot_wr += hbm_wr[d]; end
    $display("tasks %0d cascades %0d evictions %0d P$ hits %0d misses %0d D$ stall cycles %0d",
             tot_tasks, n_cascade, n_evict, tot_hit, tot_miss, tot_stall);
    $display("OQ refusals %0d d2d crossings %0d torus wrap %0d HBM reads %0d writes %0d",
             tot_ref, n_d2d, n_wrap, tot_rd, tot_wr);
    check(n_cascade > 0, "selective cascading happened");
    check(n_evict > 0,   "P$ evictions happened");
    check(tot_hit > 0,   "P$ hits happened");
    check(tot_miss > 0,  "P$ misses returned the default value");
    check(tot_stall > 0, "D$ miss stalls happened");
    check(tot_ref > 0,   "OQ back-pressure happened");
    check(n_d2d > 0,     "die-to-die crossings happened");
    check(n_wrap > 0,    "torus wrap-around traffic happened");
    check(tot_rd > 0 && tot_wr > 0, "HBM fills and write-backs happened");
    check(n_edge == 0,   "nothing left through a mesh edge");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
