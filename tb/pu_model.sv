// pu_model: behavioural processing unit running a histogram with proxies.
//
// Behavioural model, for testbenches only. The tile's PU is a small
// programmable core whose instruction set is not specified; this model plays
// the program a histogram would run on it, through the same pu_o/pu_i ports:
//
//   generator   NUPD updates per tile, bin = bin_of(ID, k), value val_of(ID, k);
//               even k go straight to the owner (channel 0, which proxies may
//               grab by cascading), odd k go to the proxy of the bin in the
//               own proxy region (channel 1).
//   task 1      proxy update: read the bin from the P$ (a miss gives the
//               default 0), write back the sum. A displaced bin leaves as an
//               eviction on channel 2 to its owner.
//   task 2      owner update: read the bin from the D$, write back the sum.
//               A D$ miss stalls the model until the line arrives.
//
// phase: 0 wait, 1 run (generate and serve tasks), 2 flush the P$ of task 1
// once and keep serving tasks, 3 read the BPT hist this tile owns into hist[].
// The generator pushes in bursts of up to 8 between tasks and gives up a push
// the OQ refuses, so that a full network never blocks task service.
// Signals are driven just after a clock edge and sampled 1 time unit later,
// so a combinational ready is seen before the edge that takes the request.
module pu_model
  import tascade_pkg::*;
#(
  parameter int ID    = 0,
  parameter int NUPD  = 32,
  parameter int NBINS = 4096,
  parameter int BPT   = 256
) (
  input  logic        clk,
  input  logic        rst_n,
  input  pu_in_t      pu_i,
  output pu_out_t     pu_o,
  input  logic [1:0]  phase,
  output logic        gen_done,
  output logic        flushed,
  output logic        verified,
  output logic        idle,
  output int          dc_stall,    // cycles a D$ access waited
  output int          pc_hits,
  output int          pc_misses,
  output int          oq_refused,  // pushes the OQ refused
  output int          tasks,
  output logic [31:0] hist [BPT]
);
  function automatic int unsigned bin_of(int unsigned id, int unsigned k);
    if (k % 4 == 1) return ((k / 4) % 4) * 1031 % NBINS;   // hot bins, via proxies
    if (k % 4 == 2) return (10 * 256 + (k / 4) % 8) % NBINS; // hot owner tile
    return (id * 977 + k * 1231 + k * k * 7) % NBINS;
  endfunction
  function automatic int unsigned val_of(int unsigned id, int unsigned k);
    return 1 + ((id + k) % 3);
  endfunction

  task automatic dc_access(input bit we, input logic [31:0] a, input logic [31:0] wd,
                           output logic [31:0] rd);
    pu_o.dc_valid = 1'b1; pu_o.dc_we = we; pu_o.dc_addr = a; pu_o.dc_wdata = wd;
    #1;
    while (!pu_i.dc_ready) begin dc_stall++; @(posedge clk); #1; end
    @(posedge clk); #1;
    pu_o.dc_valid = 1'b0;
    rd = '0;
    if (!we) begin
      while (!pu_i.dc_rvalid) begin @(posedge clk); #1; end
      rd = pu_i.dc_rdata;
    end
  endtask

  task automatic pc_access(input logic [1:0] op, input logic [31:0] i, input logic [31:0] v,
                           output logic hit, output logic [31:0] rd);
    pu_o.pc_valid = 1'b1; pu_o.pc_op = op; pu_o.pc_task = 2'd1;
    pu_o.pc_idx = i; pu_o.pc_val = v;
    #1;
    while (!pu_i.pc_ready) begin @(posedge clk); #1; end
    @(posedge clk); #1;
    pu_o.pc_valid = 1'b0;
    while (!pu_i.pc_rvalid) begin @(posedge clk); #1; end
    hit = pu_i.pc_hit;
    rd  = pu_i.pc_rdata;
  endtask

  task automatic run_task(input dispatch_t d);
    logic [31:0] v, unused;
    logic        hit;
    if (d.task_id == 2'd1) begin
      pc_access(2'd0, d.idx, 0, hit, v);
      if (hit) pc_hits++; else pc_misses++;
      pc_access(2'd1, d.idx, v + d.val, hit, unused);
    end else begin
      dc_access(1'b0, d.idx, 0, v);
      dc_access(1'b1, d.idx, v + d.val, unused);
    end
    tasks++;
  endtask

  initial begin
    dispatch_t   d;
    int unsigned k;
    logic        hit;
    logic [31:0] v;
    pu_o = '0;
    gen_done = 0; flushed = 0; verified = 0; idle = 1;
    dc_stall = 0; pc_hits = 0; pc_misses = 0; oq_refused = 0; tasks = 0;
    for (int b = 0; b < BPT; b++) hist[b] = '0;
    k = 0;
    @(posedge rst_n);
    forever begin
      @(posedge clk); #1;
      if (phase == 2'd3) begin
        if (!verified) begin
          idle = 0;
          for (int b = 0; b < BPT; b++) dc_access(1'b0, 32'(ID * BPT + b), 0, hist[b]);
          verified = 1; idle = 1;
        end
      end else if (phase != 2'd0) begin
        // generator first, in bursts that end when the OQ refuses a push
        if (phase == 2'd1 && k < NUPD) begin
          bit refused;
          refused = 0;
          for (int b = 0; b < 8 && k < NUPD && !refused; b++) begin
            pu_o.push_valid = 1'b1;
            pu_o.push_msg   = '{chan: (k % 2 == 0) ? 2'd0 : 2'd1,
                                idx: bin_of(ID, k), val: val_of(ID, k)};
            #1;
            if (pu_i.push_ready) begin
              @(posedge clk); #1;
              k++;
            end else begin
              oq_refused++;
              refused = 1;
            end
            pu_o.push_valid = 1'b0;
          end
          if (k == NUPD) gen_done = 1;
        end
        pu_o.disp_ready = 1'b1;
        #1;
        if (pu_i.disp_valid) begin
          d = pu_i.disp;
          idle = 0;
          @(posedge clk); #1;
          pu_o.disp_ready = 1'b0;
          run_task(d);
          idle = 1;
        end else begin
          pu_o.disp_ready = 1'b0;
          if (phase == 2'd2 && !flushed) begin
            idle = 0;
            pc_access(2'd2, 0, 0, hit, v);
            flushed = 1; idle = 1;
          end
        end
      end
    end
  end
endmodule
