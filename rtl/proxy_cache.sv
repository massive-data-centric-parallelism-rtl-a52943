// proxy_cache: the tile's proxy cache (P$).
//
// A proxy tile holds copies of elements of a data array that is owned by
// other tiles, so that updates coming from its proxy region can be merged
// locally before one merged update travels to the owner. Following the
// paper, the P$ is direct-mapped, holds one element per line, keeps tag and
// valid bit in the same SRAM as the data, returns a predefined default value
// on a miss (0 for a histogram, "infinity" for SSSP), and is write-back: a
// write that displaces another element sends the displaced element as a new
// task message towards its owner by pushing into an output queue.
//
// Several proxy tasks may each configure their own logical P$ (a base line
// and a power-of-two number of lines in the shared SRAM, a default value and
// the channel evictions leave on); all of them share this one comparator.
// A flush operation, which writes every valid line of one logical P$ back to
// the owners, is this design's addition so that a program can reach
// eventual consistency at its end.
//
// Interface: one request at a time (req_valid/req_ready). READ answers in
// the next cycle with resp_hit and resp_val. WRITE stores the value and, if
// a different valid element is displaced, offers it on ev_* until ev_ready;
// the request completes (resp_valid) once the eviction is accepted. FLUSH
// walks the logical P$, one line per cycle plus one cycle per eviction.
// After reset the SRAM is swept once to clear the valid bits (LINES cycles,
// init_done shows the end); requests wait for it.
module proxy_cache
  import tascade_pkg::*;
#(
  parameter int LINES = 32768            // SRAM lines (elements)
) (
  input  logic               clk,
  input  logic               rst_n,
  input  pcache_cfg_t        cfg [NUM_TASKS],
  // request from the PU
  input  logic               req_valid,
  output logic               req_ready,
  input  logic [1:0]         req_op,     // 0 read, 1 write, 2 flush
  input  logic [TASK_W-1:0]  req_task,
  input  logic [IDX_W-1:0]   req_idx,
  input  logic [VAL_W-1:0]   req_val,
  output logic               resp_valid,
  output logic               resp_hit,
  output logic [VAL_W-1:0]   resp_val,
  // write-back to the owner, into an output queue
  output logic               ev_valid,
  output msg_t               ev_msg,
  input  logic               ev_ready,
  output logic               init_done
);
  localparam int AW = $clog2(LINES);
  localparam logic [1:0] OP_READ = 2'd0, OP_WRITE = 2'd1, OP_FLUSH = 2'd2;

  typedef struct packed {
    logic             valid;
    logic [IDX_W-1:0] tag;
    logic [VAL_W-1:0] val;
  } line_t;

  typedef enum logic [2:0] {S_INIT, S_IDLE, S_EVICT, S_FLUSH, S_FLUSH_EV} state_e;

  line_t         mem [LINES];
  state_e        state;
  logic [AW-1:0] ptr;          // init sweep / flush pointer
  logic [AW:0]   flush_left;
  line_t         ev_line;
  logic [TASK_W-1:0] cur_task;

  function automatic logic [AW-1:0] line_of(input logic [IDX_W-1:0] idx,
                                           input pcache_cfg_t c);
    logic [IDX_W-1:0] mask;
    mask = (IDX_W'(1) << c.log2_lines) - IDX_W'(1);
    return AW'(c.base + (idx & mask));
  endfunction

  pcache_cfg_t   c_req;
  logic [AW-1:0] a_req;
  line_t         l_req;
  assign c_req = cfg[req_task];
  assign a_req = line_of(req_idx, c_req);
  assign l_req = mem[a_req];

  assign req_ready = (state == S_IDLE);
  assign init_done = (state != S_INIT);
  assign ev_valid  = (state == S_EVICT) || (state == S_FLUSH_EV);
  assign ev_msg    = '{chan: cfg[cur_task].evict_chan, idx: ev_line.tag, val: ev_line.val};

  logic  wr_en;
  logic [AW-1:0] wr_addr;
  line_t wr_line;

  always_comb begin
    wr_en   = 1'b0;
    wr_addr = a_req;
    wr_line = '{valid: 1'b1, tag: req_idx, val: req_val};
    unique case (state)
      S_INIT: begin
        wr_en   = 1'b1;
        wr_addr = ptr;
        wr_line = '0;
      end
      S_IDLE: wr_en = req_valid && (req_op == OP_WRITE);
      S_FLUSH: begin
        wr_addr = ptr;
        wr_line = '0;
        wr_en   = (flush_left != 0) && mem[ptr].valid;  // invalidate while handing it out
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_line;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_INIT;
      ptr        <= '0;
      flush_left <= '0;
      ev_line    <= '0;
      cur_task   <= '0;
      resp_valid <= 1'b0;
      resp_hit   <= 1'b0;
      resp_val   <= '0;
    end else begin
      resp_valid <= 1'b0;
      unique case (state)
        S_INIT: begin
          ptr <= AW'(ptr + AW'(1));
          if (ptr == AW'(LINES-1)) state <= S_IDLE;
        end
        S_IDLE: if (req_valid) begin
          cur_task <= req_task;
          unique case (req_op)
            OP_READ: begin
              resp_valid <= 1'b1;
              resp_hit   <= l_req.valid && (l_req.tag == req_idx);
              resp_val   <= (l_req.valid && (l_req.tag == req_idx)) ? l_req.val : c_req.dflt;
            end
            OP_WRITE: begin
              if (l_req.valid && (l_req.tag != req_idx)) begin
                ev_line <= l_req;
                state   <= S_EVICT;
              end else begin
                resp_valid <= 1'b1;
                resp_hit   <= l_req.valid;
                resp_val   <= req_val;
              end
            end
            default: begin   // flush
              ptr        <= c_req.base[AW-1:0];
              flush_left <= (AW+1)'(1) << c_req.log2_lines;
              state      <= S_FLUSH;
            end
          endcase
        end
        S_EVICT: if (ev_ready) begin
          state      <= S_IDLE;
          resp_valid <= 1'b1;
          resp_hit   <= 1'b0;
          resp_val   <= ev_line.val;
        end
        S_FLUSH: begin
          if (flush_left == '0) begin
            state      <= S_IDLE;
            resp_valid <= 1'b1;
            resp_hit   <= 1'b0;
            resp_val   <= '0;
          end else begin
            ptr        <= AW'(ptr + AW'(1));
            flush_left <= flush_left - (AW+1)'(1);
            if (mem[ptr].valid) begin
              ev_line <= mem[ptr];
              state   <= S_FLUSH_EV;
            end
          end
        end
        S_FLUSH_EV: if (ev_ready) state <= S_FLUSH;
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
