// task_queue: input queue (IQ) or output queue (OQ) of a tile.
//
// A first-in first-out buffer of task messages whose capacity is set by
// software at run time (cfg_size, 1..DEPTH), so the same storage serves the
// small queues that staleness-sensitive workloads prefer and the deep queues
// that absorb bursts. The paper makes queue sizes software-configurable and
// lets the scheduler read their occupancy; the storage as a plain circular
// buffer with a single write and a single read port is this design's choice.
//
// Interface: push/push_data is accepted when !full; pop removes the head
// (head is valid when !empty). Push and pop may happen in the same cycle.
// count is the occupancy, free2 says at least two slots are free (used by
// bubble flow control). A second writer (push2) may push in the same cycle
// as the first, but only when free2 is set; its entry goes behind the first. Head data is available combinationally.
module task_queue #(
  parameter int DEPTH  = 256,   // maximum entries (storage)
  parameter int DATA_W = 68
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic [$clog2(DEPTH+1)-1:0] cfg_size,
  input  logic                      push,
  input  logic [DATA_W-1:0]         push_data,
  input  logic                      push2,      // second writer, needs free2
  input  logic [DATA_W-1:0]         push2_data,
  input  logic                      pop,
  output logic [DATA_W-1:0]         head,
  output logic                      empty,
  output logic                      full,
  output logic                      free2,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  localparam int CW = $clog2(DEPTH+1);

  logic [DATA_W-1:0] mem [DEPTH];
  logic [AW-1:0]     wr_ptr, rd_ptr;
  logic [CW-1:0]     size_eff;

  // A size of 0 or above DEPTH is clamped to the storage.
  assign size_eff = (cfg_size == '0 || cfg_size > CW'(DEPTH)) ? CW'(DEPTH) : cfg_size;
  assign empty    = (count == '0);
  assign full     = (count >= size_eff);
  assign free2    = (CW'(count + CW'(2)) <= size_eff);
  assign head     = mem[rd_ptr];

  logic do_push, do_push2, do_pop;
  assign do_push  = push && !full;
  assign do_push2 = push2 && free2;
  assign do_pop   = pop && !empty;

  function automatic logic [AW-1:0] inc(input logic [AW-1:0] p);
    return (p == AW'(DEPTH-1)) ? '0 : AW'(p + AW'(1));
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_ptr <= '0;
      rd_ptr <= '0;
      count  <= '0;
    end else begin
      if (do_push && do_push2) wr_ptr <= inc(inc(wr_ptr));
      else if (do_push || do_push2) wr_ptr <= inc(wr_ptr);
      if (do_pop)  rd_ptr <= inc(rd_ptr);
      count <= CW'(count + CW'(do_push) + CW'(do_push2) - CW'(do_pop));
    end
  end

  always_ff @(posedge clk) begin
    if (do_push)  mem[wr_ptr] <= push_data;
    if (do_push2) mem[do_push ? inc(wr_ptr) : wr_ptr] <= push2_data;
  end

// A push into a full queue or a pop of an empty one is a protocol error.
  always_ff @(posedge clk) begin
    if (rst_n) begin
      a_no_overflow:  assert (!(push && full))  else $error("push into a full queue");
      a_no_overflow2: assert (!(push2 && !free2)) else $error("second push without two free slots");
      a_no_underflow: assert (!(pop && empty))  else $error("pop of an empty queue");
    end
  end
endmodule
