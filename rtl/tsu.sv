// tsu: task scheduling unit of a tile.
//
// There is no global orchestration of tasks: each tile decides from local
// queue occupancy which task its PU runs next. Following the paper, the TSU
// favours a task whose input queue (IQ) is highly populated, or whose output
// queue (OQ) is empty, so that a tile relieves network pressure when it is
// high and adds to it when it is low. A task whose OQ is full is not
// dispatched, since its PU would stall on the first push.
//
// Priority used here (this design's reading of that rule), highest first:
// IQ at least 3/4 full; OQ empty; larger IQ occupancy; lower task number.
//
// The TSU also holds the per-task table the paper describes for prefetching:
// the base of the array that the task's first parameter indexes, a second
// array pointer used with the same index, an enable, and a bit telling the
// PU to keep prefetching while the task runs. For every IQ whose head has
// not yet been prefetched, the TSU asks the D$ for the element(s) ahead of
// dispatch (one request per cycle on pf_*).
//
// Interface: disp_valid/disp_ready hand one task to the PU; the chosen IQ is
// popped in the same cycle. Selection is combinational from the occupancies.
module tsu
  import tascade_pkg::*;
#(
  parameter int IQ_DEPTH = 256
) (
  input  logic               clk,
  input  logic               rst_n,
  input  task_cfg_t          task_cfg [NUM_TASKS],
  input  logic [$clog2(IQ_DEPTH+1)-1:0] iq_size  [NUM_TASKS],
  input  logic [$clog2(IQ_DEPTH+1)-1:0] iq_count [NUM_TASKS],
  input  msg_t               iq_head  [NUM_TASKS],
  output logic [NUM_TASKS-1:0] iq_pop,
  input  logic [NUM_CHANNELS-1:0] oq_empty,
  input  logic [NUM_CHANNELS-1:0] oq_full,
  // dispatch to the PU
  output logic               disp_valid,
  input  logic               disp_ready,
  output dispatch_t          disp,
  // prefetch to the D$
  output logic               pf_valid,
  input  logic               pf_ready,
  output logic [IDX_W-1:0]   pf_addr
);
  localparam int CW = $clog2(IQ_DEPTH+1);
  localparam int SW = CW + 2;

  logic [NUM_TASKS-1:0] elig;
  logic [SW-1:0]        score [NUM_TASKS];
  logic [TASK_W-1:0]    pick;

  always_comb begin
    logic [SW-1:0] best;
    logic          high;
    best       = '0;
    pick       = '0;
    disp_valid = 1'b0;
    for (int t = 0; t < NUM_TASKS; t++) begin
      elig[t]  = (iq_count[t] != '0) && !oq_full[task_cfg[t].out_chan];
      high     = ((CW+2)'(iq_count[t]) * (CW+2)'(4)) >= ((CW+2)'(iq_size[t]) * (CW+2)'(3));
      score[t] = {high, oq_empty[task_cfg[t].out_chan], iq_count[t]};
      if (elig[t] && (!disp_valid || score[t] > best)) begin
        disp_valid = 1'b1;
        best       = score[t];
        pick       = TASK_W'(t);
      end
    end
    disp.task_id   = pick;
    disp.idx       = iq_head[pick].idx;
    disp.val       = iq_head[pick].val;
    disp.pf_stream = task_cfg[pick].pf_stream;
    iq_pop         = '0;
    if (disp_valid && disp_ready) iq_pop[pick] = 1'b1;
  end

  // Look-ahead prefetch of IQ heads: pf_step[t] counts the requests already
  // made for the current head of IQ t (0, 1 = first array done, 2 = done).
  logic [1:0] pf_step [NUM_TASKS];
  logic [TASK_W-1:0] pf_t;
  logic              pf_second;

  always_comb begin
    pf_valid  = 1'b0;
    pf_t      = '0;
    pf_second = 1'b0;
    for (int t = NUM_TASKS-1; t >= 0; t--) begin
      if (iq_count[t] != '0 && task_cfg[t].pf_en && !iq_pop[t] &&
          (pf_step[t] == 2'd0 || (pf_step[t] == 2'd1 && task_cfg[t].arr2_en))) begin
        pf_valid  = 1'b1;
        pf_t      = TASK_W'(t);
        pf_second = (pf_step[t] == 2'd1);
      end
    end
    pf_addr = (pf_second ? task_cfg[pf_t].arr2_base : task_cfg[pf_t].arr_base)
            + iq_head[pf_t].idx;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int t = 0; t < NUM_TASKS; t++) pf_step[t] <= 2'd0;
    end else begin
      for (int t = 0; t < NUM_TASKS; t++) begin
        if (iq_pop[t])
          pf_step[t] <= 2'd0;
        else if (pf_valid && pf_ready && pf_t == TASK_W'(t))
          pf_step[t] <= pf_second ? 2'd2 : (task_cfg[t].arr2_en ? 2'd1 : 2'd2);
      end
    end
  end
endmodule
