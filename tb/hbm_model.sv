// hbm_model: behavioural model of the HBM stack attached to one TCA die.
//
// Behavioural model, for testbenches only. The stacked DRAM is a vendor part;
// what the tiles see of it is kept here: HBM_CH independent channels, each
// taking one 64-byte line request per cycle and answering a read LAT cycles
// later with the line and the tag it was given. Writes are stored at once and
// need no answer. Lines never written read as zero, which is also the initial
// value of every array in the tests. The memory is an associative array keyed
// by channel and line, so only touched lines cost simulator memory.
//
// Interface: the ch_* ports of the die's memory controller, with the
// direction of each signal reversed. Counters: reads and writes seen.
module hbm_model
  import tascade_pkg::*;
#(
  parameter int HBM_CH = 8,
  parameter int ADDR_W = 16,
  parameter int TAG_W  = 8,
  parameter int LAT    = 20
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic [HBM_CH-1:0]     req_valid,
  output logic [HBM_CH-1:0]     req_ready,
  input  logic                  req_we   [HBM_CH],
  input  logic [ADDR_W-1:0]     req_addr [HBM_CH],
  input  logic [LINE_BITS-1:0]  req_wdata[HBM_CH],
  input  logic [TAG_W-1:0]      req_tag  [HBM_CH],
  output logic [HBM_CH-1:0]     resp_valid,
  output logic [TAG_W-1:0]      resp_tag [HBM_CH],
  output logic [LINE_BITS-1:0]  resp_data[HBM_CH],
  output int                    n_reads,
  output int                    n_writes
);
  typedef struct {
    longint              due;
    logic [TAG_W-1:0]    tag;
    logic [LINE_BITS-1:0] data;
  } pend_t;

  logic [LINE_BITS-1:0] mem [longint];
  pend_t                q [HBM_CH][$];
  longint               now;

  assign req_ready = '1;

  initial begin
    now = 0; n_reads = 0; n_writes = 0;
    resp_valid = '0;
    for (int c = 0; c < HBM_CH; c++) begin resp_tag[c] = '0; resp_data[c] = '0; end
  end

  always @(posedge clk) begin
    now <= now + 1;
    for (int c = 0; c < HBM_CH; c++) begin
      longint key;
      key = longint'(req_addr[c]) * HBM_CH + c;
      if (rst_n && req_valid[c]) begin
        if (req_we[c]) begin
          mem[key] = req_wdata[c];
          n_writes++;
        end else begin
          pend_t p;
          p.due  = now + LAT - 1;
          p.tag  = req_tag[c];
          p.data = mem.exists(key) ? mem[key] : '0;
          q[c].push_back(p);
          n_reads++;
        end
      end
      if (q[c].size() > 0 && q[c][0].due <= now) begin
        pend_t p;
        p = q[c].pop_front();
        resp_valid[c] <= 1'b1;
        resp_tag[c]   <= p.tag;
        resp_data[c]  <= p.data;
      end else begin
        resp_valid[c] <= 1'b0;
      end
    end
  end
endmodule
