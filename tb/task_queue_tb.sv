// task_queue_tb: self-checking test of the configurable task queue.
// Uses an 8-entry queue set to a run-time size of 5 and checks ordering,
// the full/free2 flags at that size, simultaneous push and pop, the second
// write port and wrap-around of the pointers, against a reference queue
// kept in the testbench.
module task_queue_tb;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [3:0]  cfg_size;
  logic        push, pop, push2;
  logic [15:0] pd, pd2, head;
  logic        empty, full, free2;
  logic [3:0]  count;
  logic [15:0] ref_q[$];

  task_queue #(.DEPTH(8), .DATA_W(16)) dut (
    .clk, .rst_n, .cfg_size, .push, .push_data(pd), .push2, .push2_data(pd2),
    .pop, .head, .empty, .full, .free2, .count);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic cyc(input bit pu, input bit po, input bit pu2 = 0);
    logic [15:0] v1, v2;
    v1 = 16'($urandom); v2 = 16'($urandom);
    push = pu; pop = po; push2 = pu2; pd = v1; pd2 = v2;
    @(negedge clk);
    // reference: pop first (head leaves), then pushes append
    if (po && ref_q.size() > 0) void'(ref_q.pop_front());
    if (pu) ref_q.push_back(v1);
    if (pu2) ref_q.push_back(v2);
    push = 0; pop = 0; push2 = 0;
    check(int'(count) == ref_q.size(), $sformatf("count %0d vs %0d", count, ref_q.size()));
    check(empty == (ref_q.size() == 0), "empty flag");
    check(full == (ref_q.size() >= 5), "full flag at size 5");
    check(free2 == (ref_q.size() + 2 <= 5), "free2 flag");
    if (ref_q.size() > 0) check(head == ref_q[0], $sformatf("head %h vs %h", head, ref_q[0]));
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    cfg_size = 4'd5; push = 0; pop = 0; push2 = 0; pd = 0; pd2 = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int i = 0; i < 5; i++) cyc(1, 0);          // fill to the configured size
    check(full, "full after 5 pushes");
    for (int i = 0; i < 3; i++) cyc(0, 1);
    cyc(1, 0, 1);                                    // two writers at once
    for (int i = 0; i < 40; i++) begin               // random traffic with wrap-around
      bit pu, po, pu2;
      pu  = ($urandom % 2) && !full;
      pu2 = ($urandom % 3 == 0) && free2 && (ref_q.size() + 3 <= 5);
      po  = ($urandom % 2) && !empty;
      cyc(pu, po, pu2);
    end
    while (!empty) cyc(0, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
