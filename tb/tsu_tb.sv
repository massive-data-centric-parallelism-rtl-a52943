// tsu_tb: self-checking test of the task scheduling unit.
// Queue occupancies, sizes and OQ states are driven directly; an
// independent model of the priority rule (IQ >= 3/4 full, then OQ empty,
// then occupancy, then lower number; never a task whose OQ is full)
// predicts the dispatched task for many random situations. The look-ahead
// prefetch must ask for arr_base+idx and, if enabled, arr2_base+idx once
// per IQ head.
module tsu_tb;
  import tascade_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  task_cfg_t task_cfg [NUM_TASKS];
  logic [8:0] iq_size [NUM_TASKS], iq_count [NUM_TASKS];
  msg_t iq_head [NUM_TASKS];
  logic [NUM_TASKS-1:0] iq_pop;
  logic [NUM_CHANNELS-1:0] oq_empty, oq_full;
  logic disp_valid, disp_ready, pf_valid, pf_ready;
  dispatch_t disp;
  logic [IDX_W-1:0] pf_addr;

  tsu #(.IQ_DEPTH(256)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic int ref_pick();
    int best = -1, bs = -1;
    for (int t = 0; t < NUM_TASKS; t++) begin
      int s;
      if (iq_count[t] == 0 || oq_full[task_cfg[t].out_chan]) continue;
      s = (4 * iq_count[t] >= 3 * iq_size[t]) ? 2000 : 0;
      s += oq_empty[task_cfg[t].out_chan] ? 1000 : 0;
      s += iq_count[t];
      if (s > bs) begin bs = s; best = t; end
    end
    return best;
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int exp_t;
    for (int t = 0; t < NUM_TASKS; t++) begin
      task_cfg[t] = '{arr_base: 1000 * (t + 1), arr2_base: 50000 + t, arr2_en: (t == 2),
                      pf_en: (t != 0), pf_stream: (t == 3), out_chan: 2'(t)};
      iq_count[t] = 0; iq_size[t] = 16;
      iq_head[t] = '{chan: 0, idx: 32'(10 + t), val: 32'(t)};
    end
    oq_empty = '1; oq_full = '0; disp_ready = 0; pf_ready = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    check(!disp_valid, "nothing to dispatch when all IQs are empty");
    for (int i = 0; i < 300; i++) begin
      for (int t = 0; t < NUM_TASKS; t++) begin
        iq_size[t]  = 9'(1 + $urandom % 64);
        iq_count[t] = ($urandom % 3 == 0) ? 0 : 9'($urandom % (iq_size[t] + 1));
      end
      oq_empty = 4'($urandom); oq_full = 4'($urandom) & ~oq_empty & 4'($urandom);
      disp_ready = 1;
      #1;
      exp_t = ref_pick();
      check(disp_valid == (exp_t >= 0), "dispatch valid");
      if (exp_t >= 0) begin
        check(int'(disp.task_id) == exp_t, $sformatf("picked %0d vs %0d", disp.task_id, exp_t));
        check(disp.idx == iq_head[exp_t].idx && disp.val == iq_head[exp_t].val, "task parameters");
        check(disp.pf_stream == (exp_t == 3), "streaming-prefetch bit");
        check(iq_pop == (4'b1 << exp_t), "pop of the chosen IQ");
      end else check(iq_pop == 0, "no pop");
      @(negedge clk);
    end
    // prefetch: only task 2 holds work; it has two arrays
    disp_ready = 0;
    for (int t = 0; t < NUM_TASKS; t++) iq_count[t] = 0;
    iq_count[2] = 5; iq_size[2] = 16;
    @(negedge clk);
    check(pf_valid && pf_addr == 3000 + 12, "prefetch of the first array");
    pf_ready = 1;
    @(negedge clk);
    check(pf_valid && pf_addr == 50002 + 12, "prefetch of the second array");
    @(negedge clk);
    check(!pf_valid, "head prefetched only once");
    disp_ready = 1;
    @(negedge clk);                  // pop: new head
    disp_ready = 0;
    #1;
    check(pf_valid && pf_addr == 3000 + 12, "next head prefetched again");
    pf_ready = 0;
    iq_count[2] = 0; iq_count[0] = 4;
    @(negedge clk);
    check(!pf_valid, "no prefetch for a task without pf_en");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
