// d2d_phy_tb: checks the die-to-die link model's latency, order and flow
// control. Single messages must arrive exactly LAT cycles after they were
// sent; a stream of one message per cycle must arrive in order at one per
// cycle; with the receiver stalled the link must fill to DEPTH, drop
// ready1/ready2 at the right occupancy, lose nothing, and drain in order.
module d2d_phy_tb;
  import tascade_pkg::*;
  localparam int LAT = 4, DEPTH = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  link_fwd_t in_fwd, out_fwd;
  link_bwd_t in_bwd, out_bwd;

  d2d_phy #(.LAT(LAT), .DEPTH(DEPTH)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;
  int sent_at [int];
  int exp_q [$];
  int n_recv = 0;

  // receiver: check order and latency at each accepted message
  always @(posedge clk) if (rst_n && out_fwd.valid) begin
    int idx;
    idx = int'(out_fwd.msg.idx);
    check(exp_q.size() > 0 && exp_q[0] == idx, $sformatf("order: got %0d", idx));
    if (exp_q.size() > 0) void'(exp_q.pop_front());
    check(cyc - sent_at[idx] >= LAT, $sformatf("msg %0d after %0d cycles", idx, cyc - sent_at[idx]));
    if (out_bwd.ready1 && sent_at[idx] >= 0 && idx < 100)
      check(cyc - sent_at[idx] == LAT, $sformatf("unloaded msg %0d latency %0d", idx, cyc - sent_at[idx]));
    n_recv++;
  end

  task automatic send(input int idx);
    in_fwd = '{valid: 1, msg: '{chan: 0, idx: 32'(idx), val: 32'(idx * 3)}};
    sent_at[idx] = cyc;
    exp_q.push_back(idx);
    @(negedge clk);
    in_fwd.valid = 0;
  endtask

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_fwd = '0;
    out_bwd = '{ready1: 1, ready2: 1};
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    // single messages
    for (int i = 0; i < 5; i++) begin send(i); repeat (6) @(negedge clk); end
    check(n_recv == 5, "five single messages arrived");
    // back-to-back stream
    for (int i = 10; i < 30; i++) send(i);
    repeat (LAT + 2) @(negedge clk);
    check(n_recv == 25, $sformatf("stream arrived, %0d", n_recv));
    // receiver stalled: fill up
    out_bwd = '{ready1: 0, ready2: 0};
    for (int i = 100; i < 100 + DEPTH; i++) begin
      #1;
      check(in_bwd.ready1, "room while filling");
      check(in_bwd.ready2 == (i - 100 <= DEPTH - 2), $sformatf("ready2 at occupancy %0d", i - 100));
      send(i);
    end
    #1;
    check(!in_bwd.ready1 && !in_bwd.ready2, "full link refuses");
    repeat (5) @(negedge clk);
    check(n_recv == 25, "nothing leaves while the receiver stalls");
    out_bwd = '{ready1: 1, ready2: 1};
    repeat (DEPTH + 2) @(negedge clk);
    check(n_recv == 25 + DEPTH, "all buffered messages drained");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
