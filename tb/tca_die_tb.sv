// tca_die_tb: one 2x2-tile TCA die running a histogram on its own.
//
// The die's edge links are left open (a 2x2 mesh: nothing may leave), its
// HBM channels go to an HBM model. Each tile's PU model sends NUPD updates
// of 1024 bins (256 per tile), half to the owner, half to the proxy, with
// the whole die as one proxy region; then the proxies flush and each owner
// reads its bins back, which must match a reference histogram computed here.
// P$ evictions, D$ miss stalls and HBM traffic must all have happened.
module tca_die_tb;
  import tascade_pkg::*;
  localparam int TX = 2, TY = 2, NT = TX*TY;
  localparam int HBM_CH = 2, REGION_LW = 8;
  localparam int TAG_W = 2, ADDR_W = TAG_W + REGION_LW - 1;
  localparam int NUPD = 64, BPT = 256, NBINS = NT * BPT;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  tile_cfg_t cfg;
  pu_out_t   pu_o [NT];
  pu_in_t    pu_i [NT];
  link_fwd_t n_in_fwd [NUM_NOCS][TX], n_out_fwd [NUM_NOCS][TX];
  link_bwd_t n_in_bwd [NUM_NOCS][TX], n_out_bwd [NUM_NOCS][TX];
  link_fwd_t s_in_fwd [NUM_NOCS][TX], s_out_fwd [NUM_NOCS][TX];
  link_bwd_t s_in_bwd [NUM_NOCS][TX], s_out_bwd [NUM_NOCS][TX];
  link_fwd_t w_in_fwd [NUM_NOCS][TY], w_out_fwd [NUM_NOCS][TY];
  link_bwd_t w_in_bwd [NUM_NOCS][TY], w_out_bwd [NUM_NOCS][TY];
  link_fwd_t e_in_fwd [NUM_NOCS][TY], e_out_fwd [NUM_NOCS][TY];
  link_bwd_t e_in_bwd [NUM_NOCS][TY], e_out_bwd [NUM_NOCS][TY];
  logic [HBM_CH-1:0]    ch_req_valid, ch_req_ready, ch_resp_valid;
  logic                 ch_req_we   [HBM_CH];
  logic [ADDR_W-1:0]    ch_req_addr [HBM_CH];
  logic [LINE_BITS-1:0] ch_req_wdata[HBM_CH], ch_resp_data[HBM_CH];
  logic [TAG_W-1:0]     ch_req_tag  [HBM_CH], ch_resp_tag [HBM_CH];
  logic [NUM_NOCS-1:0]  ev_cascade [NT];
  logic [NT-1:0]        ev_evict, init_done;
  logic [COORD_W-1:0]   origin_x = '0, origin_y = '0;

  tca_die #(
    .TX(TX), .TY(TY), .IQ_DEPTH(256), .OQ_DEPTH(16), .PC_LINES(8), .DC_LINES(8),
    .RBUF(4), .HBM_CH(HBM_CH), .REGION_LW(REGION_LW)
  ) dut (.*);

  int hbm_rd, hbm_wr;
  hbm_model #(.HBM_CH(HBM_CH), .ADDR_W(ADDR_W), .TAG_W(TAG_W), .LAT(20)) u_hbm (
    .clk, .rst_n,
    .req_valid(ch_req_valid), .req_ready(ch_req_ready), .req_we(ch_req_we),
    .req_addr(ch_req_addr), .req_wdata(ch_req_wdata), .req_tag(ch_req_tag),
    .resp_valid(ch_resp_valid), .resp_tag(ch_resp_tag), .resp_data(ch_resp_data),
    .n_reads(hbm_rd), .n_writes(hbm_wr)
  );

  logic [1:0] phase = 0;
  logic [NT-1:0] gen_done, flushed, verified, idle;
  int dc_stall [NT], pc_hits [NT], pc_misses [NT], oq_refused [NT], tasks [NT];
  logic [31:0] hist [NT][BPT];
  for (genvar g = 0; g < NT; g++) begin : g_pu
    pu_model #(.ID(g), .NUPD(NUPD), .NBINS(NBINS), .BPT(BPT)) u_pu (
      .clk, .rst_n, .pu_i(pu_i[g]), .pu_o(pu_o[g]), .phase,
      .gen_done(gen_done[g]), .flushed(flushed[g]), .verified(verified[g]), .idle(idle[g]),
      .dc_stall(dc_stall[g]), .pc_hits(pc_hits[g]), .pc_misses(pc_misses[g]),
      .oq_refused(oq_refused[g]), .tasks(tasks[g]), .hist(hist[g])
    );
  end

  int n_evict = 0, n_edge = 0;
  always @(posedge clk) if (rst_n) begin
    n_evict += $countones(ev_evict);
    for (int n = 0; n < NUM_NOCS; n++) begin
      for (int i = 0; i < TX; i++) n_edge += int'(n_out_fwd[n][i].valid) + int'(s_out_fwd[n][i].valid);
      for (int i = 0; i < TY; i++) n_edge += int'(w_out_fwd[n][i].valid) + int'(e_out_fwd[n][i].valid);
    end
  end

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
        for (int g = 0; g < NT; g++) if (pu_i[g].busy) q = 0;
      end else q = 0;
    end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int unsigned ref_h [NBINS];
  int tot_stall, tot_hit;

  initial begin
    cfg = '0;
    cfg.grid = '{log2x: 1, log2y: 1, torus_x: 1'b0, torus_y: 1'b0};
    cfg.chan[0] = '{enc_shift: 8, to_proxy: 0, proxy_en: 1, prx_log2x: 1, prx_log2y: 1,
                    noc: 0, dest_task: 2, cascade_task: 1, weight: 1};
    cfg.chan[1] = '{enc_shift: 8, to_proxy: 1, proxy_en: 0, prx_log2x: 1, prx_log2y: 1,
                    noc: 1, dest_task: 1, cascade_task: 1, weight: 1};
    cfg.chan[2] = '{enc_shift: 8, to_proxy: 0, proxy_en: 0, prx_log2x: 1, prx_log2y: 1,
                    noc: 0, dest_task: 2, cascade_task: 1, weight: 1};
    cfg.chan[3] = '{enc_shift: 8, to_proxy: 0, proxy_en: 0, prx_log2x: 1, prx_log2y: 1,
                    noc: 0, dest_task: 3, cascade_task: 1, weight: 1};
    cfg.tsk[1] = '{arr_base: 0, arr2_base: 0, arr2_en: 0, pf_en: 0, pf_stream: 0, out_chan: 2};
    cfg.tsk[2] = '{arr_base: 0, arr2_base: 0, arr2_en: 0, pf_en: 1, pf_stream: 0, out_chan: 3};
    cfg.pc[1]  = '{base: 0, log2_lines: 3, dflt: 0, evict_chan: 2};
    for (int t = 0; t < NUM_TASKS; t++) cfg.iq_size[t] = 16'd256;
    for (int c = 0; c < NUM_CHANNELS; c++) cfg.oq_size[c] = 16'd16;
    cfg.dc_log2_lines = 5'd3;
    for (int n = 0; n < NUM_NOCS; n++) begin
      for (int i = 0; i < TX; i++) begin
        n_in_fwd[n][i] = '0; s_in_fwd[n][i] = '0; n_out_bwd[n][i] = '0; s_out_bwd[n][i] = '0;
      end
      for (int i = 0; i < TY; i++) begin
        w_in_fwd[n][i] = '0; e_in_fwd[n][i] = '0; w_out_bwd[n][i] = '0; e_out_bwd[n][i] = '0;
      end
    end
    for (int b = 0; b < NBINS; b++) ref_h[b] = 0;
    for (int g = 0; g < NT; g++)
      for (int k = 0; k < NUPD; k++) ref_h[bin_of(g, k)] += val_of(g, k);
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (&init_done);
    phase = 2'd1;
    wait_quiet(100);
    phase = 2'd2;
    wait (&flushed);
    wait_quiet(100);
    phase = 2'd3;
    wait (&verified);
    for (int g = 0; g < NT; g++)
      for (int b = 0; b < BPT; b++)
        check(hist[g][b] == ref_h[g*BPT + b],
              $sformatf("bin %0d: got %0d expected %0d", g*BPT + b, hist[g][b], ref_h[g*BPT + b]));
    tot_stall = 0; tot_hit = 0;
    for (int g = 0; g < NT; g++) begin tot_stall += dc_stall[g]; tot_hit += pc_hits[g]; end
    $display("evictions %0d P$ hits %0d D$ stall cycles %0d HBM reads %0d writes %0d",
             n_evict, tot_hit, tot_stall, hbm_rd, hbm_wr);
    check(n_evict > 0, "P$ evictions happened");
    check(tot_hit > 0, "P$ hits happened");
    check(tot_stall > 0, "D$ miss stalls happened");
    check(hbm_rd > 0 && hbm_wr > 0, "HBM fills and write-backs happened");
    check(n_edge == 0, "nothing left through the open die edges");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
