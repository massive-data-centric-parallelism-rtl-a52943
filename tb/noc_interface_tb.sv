// noc_interface_tb: self-checking test of the channel-to-NoC mapping.
// Channels 0 and 1 share NoC 0 with weights 2 and 1, channels 2 and 3 share
// NoC 1 with weight 1. With every OQ always holding work, NoC 0 must carry
// channel 0 and channel 1 in a 2:1 pattern and NoC 1 must alternate; a
// stalled NoC must send nothing. On the ejection side, ready vectors and
// the IQ write-port strobes are checked against the two-port rule.
module noc_interface_tb;
  import tascade_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  chan_cfg_t chan_cfg [NUM_CHANNELS];
  msg_t oq_head [NUM_CHANNELS];
  logic [NUM_CHANNELS-1:0] oq_empty, oq_pop;
  link_fwd_t inj_fwd [NUM_NOCS], ej_fwd [NUM_NOCS];
  link_bwd_t inj_bwd [NUM_NOCS];
  logic [TASK_W-1:0] ej_task [NUM_NOCS];
  logic [NUM_TASKS-1:0] ej_ready [NUM_NOCS];
  logic [NUM_TASKS-1:0] iq_full, iq_free2;
  logic [NUM_TASKS-1:0] iq_push [NUM_NOCS];
  msg_t iq_push_msg [NUM_NOCS];

  noc_interface dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  int seq0[$], seq1[$];
  int pops [NUM_CHANNELS];

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int c = 0; c < NUM_CHANNELS; c++) begin
      chan_cfg[c] = '{enc_shift: 0, to_proxy: 0, proxy_en: 0, prx_log2x: 0, prx_log2y: 0,
                      noc: (c >= 2), dest_task: 2'(c), cascade_task: 0, weight: 1};
      oq_head[c] = '{chan: 2'(c), idx: 32'(c), val: 32'(100 + c)};
      pops[c] = 0;
    end
    chan_cfg[0].weight = 2;
    oq_empty = '0;
    for (int n = 0; n < NUM_NOCS; n++) begin
      inj_bwd[n] = '{ready1: 1, ready2: 1};
      ej_fwd[n] = '0; ej_task[n] = '0;
    end
    iq_full = '0; iq_free2 = '1;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 30; i++) begin
      #1;
      if (inj_fwd[0].valid) seq0.push_back(int'(inj_fwd[0].msg.chan));
      if (inj_fwd[1].valid) seq1.push_back(int'(inj_fwd[1].msg.chan));
      for (int c = 0; c < NUM_CHANNELS; c++) if (oq_pop[c]) pops[c]++;
      check(inj_fwd[0].valid && inj_fwd[1].valid, "both NoCs send every cycle");
      @(negedge clk);
    end
    // steady state from the 3rd message on: NoC 0 is 0,0,1 repeating
    for (int i = 3; i < 27; i++)
      check(seq0[i] == seq0[i-3], $sformatf("NoC0 pattern at %0d", i));
    check(pops[0] == 2 * pops[1] || pops[0] == 2 * pops[1] + 1 || pops[0] == 2 * pops[1] - 1 ||
          pops[0] == 2 * pops[1] + 2, $sformatf("2:1 ratio: %0d vs %0d", pops[0], pops[1]));
    for (int i = 1; i < 30; i++) check(seq1[i] != seq1[i-1], "NoC1 alternates");
    check(pops[2] + pops[3] == 30 && pops[0] + pops[1] == 30, "one message per NoC per cycle");
    // stalled NoC sends nothing, channel 0 empty leaves channel 1 alone
    inj_bwd[1] = '{ready1: 0, ready2: 0};
    oq_empty = 4'b0001;
    repeat (3) begin
      #1;
      check(!inj_fwd[1].valid && oq_pop[3:2] == 0, "stalled NoC sends nothing");
      check(inj_fwd[0].valid && inj_fwd[0].msg.chan == 1 && oq_pop[1:0] == 2'b10, "only channel 1 left on NoC 0");
      @(negedge clk);
    end
    // ejection
    iq_full = 4'b0010; iq_free2 = 4'b1001;
    #1;
    check(ej_ready[0] == 4'b1101, "NoC 0 may write any IQ that is not full");
    check(ej_ready[1] == 4'b1001, "NoC 1 needs two free slots");
    ej_fwd[0] = '{valid: 1, msg: '{chan: 0, idx: 5, val: 6}}; ej_task[0] = 2'd3;
    ej_fwd[1] = '{valid: 1, msg: '{chan: 1, idx: 7, val: 8}}; ej_task[1] = 2'd3;
    #1;
    check(iq_push[0] == 4'b1000 && iq_push[1] == 4'b1000, "both write IQ 3 through its two ports");
    check(iq_push_msg[0].idx == 5 && iq_push_msg[1].idx == 7, "write data per port");
    ej_fwd[1].valid = 0;
    #1;
    check(iq_push[1] == 0, "no strobe without a message");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
