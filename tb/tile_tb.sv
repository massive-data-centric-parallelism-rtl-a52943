// tile_tb: a single tile running a histogram against itself.
//
// The tile is a 1x1 grid, so every message it sends comes back through its
// own routers into its own IQs; its four link directions are left open and
// must stay silent. Its D$ (8 lines) is backed by a line memory model with a
// 20-cycle latency. The PU model sends NUPD updates of 256 bins, half to the
// owner task and half to the proxy task (P$ of 8 lines); after the tile is
// quiet the P$ is flushed and the bins are read back and compared with a
// reference histogram. P$ hits, P$ evictions, D$ miss stalls of at least the
// memory latency and both NoCs must all have been used.
module tile_tb;
  import tascade_pkg::*;
  localparam int NUPD = 96, BPT = 256, NBINS = 256, MLAT = 20;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  tile_cfg_t cfg;
  pu_out_t   pu_o;
  pu_in_t    pu_i;
  link_fwd_t net_in_fwd [NUM_NOCS][4], net_out_fwd [NUM_NOCS][4];
  link_bwd_t net_in_bwd [NUM_NOCS][4], net_out_bwd [NUM_NOCS][4];
  logic      mem_req_valid, mem_req_ready, mem_resp_valid;
  mem_req_t  mem_req;
  logic [LINE_BITS-1:0] mem_resp_data;
  logic [NUM_NOCS-1:0]  ev_cascade;
  logic      ev_evict, init_done;
  logic [COORD_W-1:0] my_x = '0, my_y = '0;

  tile #(.IQ_DEPTH(256), .OQ_DEPTH(16), .PC_LINES(8), .DC_LINES(8), .RBUF(4)) dut (.*);

  // line memory: one request at a time is all a D$ issues
  logic [LINE_BITS-1:0] lmem [int];
  int pend_due = -1, pend_line = 0, cyc = 0, n_fill = 0, n_wb = 0;
  assign mem_req_ready = 1'b1;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    mem_resp_valid <= 1'b0;
    if (rst_n && mem_req_valid) begin
      if (mem_req.we) begin lmem[int'(mem_req.line)] = mem_req.wdata; n_wb++; end
      else begin pend_due = cyc + MLAT - 1; pend_line = int'(mem_req.line); n_fill++; end
    end
    if (pend_due >= 0 && cyc >= pend_due) begin
      mem_resp_valid <= 1'b1;
      mem_resp_data  <= lmem.exists(pend_line) ? lmem[pend_line] : '0;
      pend_due = -1;
    end
  end

  logic [1:0] phase = 0;
  logic gen_done, flushed, verified, idle;
  int dc_stall, pc_hits, pc_misses, oq_refused, tasks;
  logic [31:0] hist [BPT];
  pu_model #(.ID(0), .NUPD(NUPD), .NBINS(NBINS), .BPT(BPT)) u_pu (.*);

  int n_evict = 0, n_edge = 0, noc_use [NUM_NOCS], max_stall = 0, stall_run = 0;
  always @(posedge clk) if (rst_n) begin
    n_evict += int'(ev_evict);
    for (int n = 0; n < NUM_NOCS; n++) begin
      for (int d = 0; d < 4; d++) n_edge += int'(net_out_fwd[n][d].valid);
      noc_use[n] += int'(dut.inj_fwd[n].valid && dut.inj_bwd[n].ready1);
    end
    if (pu_o.dc_valid && !pu_i.dc_ready) stall_run++;
    else begin if (stall_run > max_stall) max_stall = stall_run; stall_run = 0; end
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
      if (idle && gen_done && !pu_i.busy) q++; else q = 0;
    end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int unsigned ref_h [NBINS];
  initial begin
    noc_use[0] = 0; noc_use[1] = 0;
    mem_resp_data = '0;
    cfg = '0;
    cfg.grid = '{log2x: 0, log2y: 0, torus_x: 1'b0, torus_y: 1'b0};
    cfg.chan[0] = '{enc_shift: 8, to_proxy: 0, proxy_en: 1, prx_log2x: 0, prx_log2y: 0,
                    noc: 0, dest_task: 2, cascade_task: 1, weight: 1};
    cfg.chan[1] = '{enc_shift: 8, to_proxy: 1, proxy_en: 0, prx_log2x: 0, prx_log2y: 0,
                    noc: 1, dest_task: 1, cascade_task: 1, weight: 1};
    cfg.chan[2] = '{enc_shift: 8, to_proxy: 0, proxy_en: 0, prx_log2x: 0, prx_log2y: 0,
                    noc: 0, dest_task: 2, cascade_task: 1, weight: 1};
    cfg.chan[3] = '{enc_shift: 8, to_proxy: 0, proxy_en: 0, prx_log2x: 0, prx_log2y: 0,
                    noc: 0, dest_task: 3, cascade_task: 1, weight: 1};
    cfg.tsk[1] = '{arr_base: 0, arr2_base: 0, arr2_en: 0, pf_en: 0, pf_stream: 0, out_chan: 2};
    cfg.tsk[2] = '{arr_base: 0, arr2_base: 0, arr2_en: 0, pf_en: 1, pf_stream: 0, out_chan: 3};
    cfg.pc[1]  = '{base: 0, log2_lines: 3, dflt: 0, evict_chan: 2};
    for (int t = 0; t < NUM_TASKS; t++) cfg.iq_size[t] = 16'd256;
    for (int c = 0; c < NUM_CHANNELS; c++) cfg.oq_size[c] = 16'd16;
    cfg.dc_log2_lines = 5'd3;
    for (int n = 0; n < NUM_NOCS; n++)
      for (int d = 0; d < 4; d++) begin net_in_fwd[n][d] = '0; net_out_bwd[n][d] = '0; end
    for (int b = 0; b < NBINS; b++) ref_h[b] = 0;
    for (int k = 0; k < NUPD; k++) ref_h[bin_of(0, k)] += val_of(0, k);
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (init_done);
    phase = 2'd1;
    wait_quiet(50);
    phase = 2'd2;
    wait (flushed);
    wait_quiet(50);
    phase = 2'd3;
    wait (verified);
    for (int b = 0; b < BPT; b++)
      check(hist[b] == ref_h[b], $sformatf("bin %0d: got %0d expected %0d", b, hist[b], ref_h[b]));
    $display("tasks %0d evictions %0d P$ hits %0d D$ fills %0d write-backs %0d longest stall %0d",
             tasks, n_evict, pc_hits, n_fill, n_wb, max_stall);
    check(tasks >= NUPD, "every update ran as a task");
    check(n_evict > 0, "P$ evictions happened");
    check(pc_hits > 0 && pc_misses > 0, "P$ hits and misses happened");
    check(n_fill > 0 && n_wb > 0, "D$ fills and write-backs happened");
    check(max_stall >= MLAT, $sformatf("a D$ miss stalls at least the memory latency (%0d)", max_stall));
    check(noc_use[0] > 0 && noc_use[1] > 0, "both NoCs carried messages");
    check(n_edge == 0, "nothing left through the open links");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
