// router_tb: self-checking test of the tile-NoC router.
// The router sits at (2,3) of an 8x8 grid with 16 elements per tile. For
// random indices injected on random input ports the output port is
// predicted by an independent XY model, for both torus and mesh; the
// ejection queue number is checked on local deliveries. Then the bubble
// rule (ring entry needs two free slots downstream, staying in the ring
// one) and selective cascading (grab only when this tile is the proxy, the
// proxy IQ is free and the way on is blocked) are exercised directly.
module router_tb;
  import tascade_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, n_casc = 0;

  grid_cfg_t grid;
  chan_cfg_t chan_cfg [NUM_CHANNELS];
  logic [COORD_W-1:0] my_x = 2, my_y = 3;
  logic [NUM_TASKS-1:0] cascade_free, eject_ready;
  link_fwd_t in_fwd [NUM_PORTS], out_fwd [NUM_PORTS];
  link_bwd_t in_bwd [NUM_PORTS], out_bwd [NUM_PORTS];
  logic [TASK_W-1:0] eject_task;
  logic cascaded;

  router #(.RBUF(4)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // reference XY route
  function automatic int ref_port(input logic [31:0] idx, input bit torus);
    int t, x, y, d;
    t = idx >> 4; x = t % 8; y = (t / 8) % 8;
    if (x != 2) begin
      if (!torus) return (x > 2) ? 1 : 3;
      d = (x - 2 + 8) % 8;
      return (d <= 4) ? 1 : 3;
    end
    if (y != 3) begin
      if (!torus) return (y > 3) ? 2 : 0;
      d = (y - 3 + 8) % 8;
      return (d <= 4) ? 2 : 0;
    end
    return 4;
  endfunction

  // send one message on input p, wait for it on some output, return which
  task automatic send(input int p, input msg_t m, output int o, output int tsk, input int max_wait = 20);
    @(negedge clk);
    in_fwd[p] = '{valid: 1'b1, msg: m};
    @(negedge clk);
    in_fwd[p] = '0;
    o = -1;
    for (int k = 0; k < max_wait && o < 0; k++) begin
      if (k > 0) @(negedge clk);
      #1;
      for (int q = 0; q < NUM_PORTS; q++)
        if (out_fwd[q].valid) begin
          o = q; tsk = int'(eject_task);
          if (cascaded) n_casc++;
          check(out_fwd[q].msg == m, "message unchanged");
        end
    end
    if (o >= 0) @(negedge clk);
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int o, tk;
    grid = '{log2x: 3, log2y: 3, torus_x: 1, torus_y: 1};
    for (int c = 0; c < NUM_CHANNELS; c++)
      chan_cfg[c] = '{enc_shift: 4, to_proxy: 0, proxy_en: 0, prx_log2x: 2, prx_log2y: 2,
                      noc: 0, dest_task: 2'(c), cascade_task: 2'd3, weight: 1};
    chan_cfg[1].proxy_en = 1;
    cascade_free = '0; eject_ready = '1;
    for (int p = 0; p < NUM_PORTS; p++) begin
      in_fwd[p] = '0; out_bwd[p] = '{ready1: 1, ready2: 1};
    end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int tor = 1; tor >= 0; tor--) begin
      grid.torus_x = tor[0]; grid.torus_y = tor[0];
      for (int i = 0; i < 150; i++) begin
        msg_t m;
        int p;
        m = '{chan: 2'($urandom % 4), idx: $urandom % 1024, val: $urandom};
        p = $urandom % NUM_PORTS;
        send(p, m, o, tk);
        check(o == ref_port(m.idx, tor[0]), $sformatf("idx %0d torus %0d: port %0d vs %0d",
              m.idx, tor, o, ref_port(m.idx, tor[0])));
        if (o == 4) check(tk == int'(m.chan), "eject task = channel's dest_task");
      end
    end
    grid.torus_x = 1; grid.torus_y = 1;
    // bubble: east output has one free slot only
    out_bwd[P_EAST] = '{ready1: 1, ready2: 0};
    send(P_LOCAL, '{chan: 0, idx: 4*16, val: 1}, o, tk, 6);     // injection into X ring
    check(o == -1, "injection waits for two free slots");
    out_bwd[P_EAST] = '{ready1: 1, ready2: 1};
    repeat (3) @(posedge clk);
    out_bwd[P_EAST] = '{ready1: 1, ready2: 0};
    send(P_WEST, '{chan: 0, idx: 4*16, val: 2}, o, tk, 6);      // stays in X ring
    check(o == P_EAST, "message in its ring needs one slot");
    out_bwd[P_SOUTH] = '{ready1: 1, ready2: 0};
    send(P_WEST, '{chan: 0, idx: (5*8+2)*16, val: 3}, o, tk, 6); // turn X -> Y
    check(o == -1, "turn into Y ring waits for two free slots");
    out_bwd[P_SOUTH] = '{ready1: 1, ready2: 1};
    out_bwd[P_EAST]  = '{ready1: 1, ready2: 1};
    repeat (5) @(posedge clk);
    // cascading. Proxy of idx in region of (2,3): lt = idx>>6, px = lt%4, py = (lt/4)%4.
    // idx = (3*4+2)*64 = 896 -> proxy (2,3) here; owner tile 56 = (0,7).
    out_bwd[P_WEST] = '{ready1: 0, ready2: 0};
    cascade_free = 4'b1000;
    send(P_EAST, '{chan: 1, idx: 896, val: 9}, o, tk, 6);
    check(o == P_LOCAL && tk == 3, "blocked owner-bound message grabbed by proxy");
    cascade_free = 4'b0000;
    send(P_EAST, '{chan: 1, idx: 896, val: 10}, o, tk, 6);
    check(o == -1, "no grab when the proxy tile is busy");
    out_bwd[P_WEST] = '{ready1: 1, ready2: 1};
    repeat (3) @(posedge clk);
    out_bwd[P_WEST] = '{ready1: 0, ready2: 0};
    cascade_free = 4'b1000;
    send(P_EAST, '{chan: 0, idx: 896, val: 11}, o, tk, 6);
    check(o == -1, "no grab on a channel without proxy");
    out_bwd[P_WEST] = '{ready1: 1, ready2: 1};
    repeat (3) @(posedge clk);
    send(P_EAST, '{chan: 1, idx: 900 + 64, val: 12}, o, tk, 6);
    check(o == ref_port(964, 1), "not this tile's element: passes on");
    check(n_casc == 1, $sformatf("cascade strobe count %0d", n_casc));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
