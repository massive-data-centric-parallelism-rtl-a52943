// proxy_cache_tb: self-checking test of the proxy cache (P$).
// Two logical P$ share a 64-line SRAM: task 1 uses lines 0..15 with default
// "infinity" (SSSP), task 2 lines 16..23 with default 0 (histogram). A
// reference model (associative arrays of what each line holds) predicts
// hits, default values on misses, and which element each write evicts;
// evicted messages are collected with random back-pressure and compared.
// A final flush must write back exactly the lines still valid.
module proxy_cache_tb;
  import tascade_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  pcache_cfg_t cfg [NUM_TASKS];
  logic req_valid, req_ready, resp_valid, resp_hit, ev_valid, ev_ready, init_done;
  logic [1:0] req_op;
  logic [TASK_W-1:0] req_task;
  logic [IDX_W-1:0] req_idx;
  logic [VAL_W-1:0] req_val, resp_val;
  msg_t ev_msg;

  proxy_cache #(.LINES(64)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // reference: per task, line -> {valid, tag, val}
  bit          rv [NUM_TASKS][64];
  logic [31:0] rt [NUM_TASKS][64];
  logic [31:0] rval [NUM_TASKS][64];
  msg_t        exp_ev[$];
  int          n_ev = 0;

  always_ff @(posedge clk) ev_ready <= ($urandom % 3) != 0;

  always @(posedge clk) if (rst_n && ev_valid && ev_ready) begin
    n_ev++;
    if (exp_ev.size() == 0) check(0, "unexpected eviction");
    else begin
      msg_t e;
      e = exp_ev.pop_front();
      check(ev_msg == e, $sformatf("eviction %h vs %h", ev_msg, e));
    end
  end

  task automatic op(input int o, input int t, input logic [31:0] idx, input logic [31:0] v);
    int ln;
    ln = int'(idx & ((32'd1 << cfg[t].log2_lines) - 1));
    @(negedge clk);
    req_valid = 1; req_op = 2'(o); req_task = TASK_W'(t); req_idx = idx; req_val = v;
    #1;
    while (!req_ready) @(negedge clk);
    @(negedge clk);
    req_valid = 0;
    if (o == 0) begin
      bit h;
      h = rv[t][ln] && rt[t][ln] == idx;
      while (!resp_valid) @(negedge clk);
      check(resp_hit == h, "read hit flag");
      check(resp_val == (h ? rval[t][ln] : cfg[t].dflt), $sformatf("read value %0d", resp_val));
    end else if (o == 1) begin
      if (rv[t][ln] && rt[t][ln] != idx)
        exp_ev.push_back('{chan: cfg[t].evict_chan, idx: rt[t][ln], val: rval[t][ln]});
      rv[t][ln] = 1; rt[t][ln] = idx; rval[t][ln] = v;
      while (!resp_valid) @(negedge clk);
    end else begin
      for (int l = 0; l < (1 << cfg[t].log2_lines); l++)
        if (rv[t][l]) begin
          exp_ev.push_back('{chan: cfg[t].evict_chan, idx: rt[t][l], val: rval[t][l]});
          rv[t][l] = 0;
        end
      while (!resp_valid) @(negedge clk);
    end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < NUM_TASKS; t++) cfg[t] = '0;
    cfg[1] = '{base: 0,  log2_lines: 4, dflt: 32'hFFFF_FFFF, evict_chan: 2'd2};
    cfg[2] = '{base: 16, log2_lines: 3, dflt: 32'd0,         evict_chan: 2'd3};
    req_valid = 0; req_op = 0; req_task = 0; req_idx = 0; req_val = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    wait (init_done);
    check(1, "init sweep finished");
    op(0, 1, 5, 0);                      // miss -> infinity
    op(1, 1, 5, 100);
    op(0, 1, 5, 0);                      // hit -> 100
    op(1, 1, 21, 40);                    // same line, other element: evicts 5
    op(0, 2, 21, 0);                     // other logical P$: miss -> 0
    for (int i = 0; i < 150; i++) begin
      int t;
      logic [31:0] idx;
      t = ($urandom % 2) ? 1 : 2;
      idx = $urandom % 48;
      op($urandom % 2, t, idx, $urandom % 1000);
    end
    op(2, 1, 0, 0);                      // flush task 1
    op(2, 2, 0, 0);                      // flush task 2
    repeat (20) @(negedge clk);
    check(exp_ev.size() == 0, $sformatf("%0d evictions missing", exp_ev.size()));
    check(n_ev > 10, "evictions happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
