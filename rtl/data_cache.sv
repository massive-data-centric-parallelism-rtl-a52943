// data_cache: the tile's data SRAM, used as a scratchpad or as the D$.
//
// When a tile's share of the dataset fits in its SRAM, the PU addresses the
// SRAM directly as a scratchpad and the DRAM path stays idle. When it does
// not, the same SRAM becomes a direct-mapped, write-back data cache (D$) in
// front of the tile's private region of the die's DRAM. As the paper
// describes, a line is as wide as the DRAM controller's bitline (512 bits),
// tag, valid bit and one dirty bit per line live in the SRAM, a miss fetches
// the full line with no coherence check (only this tile ever touches its
// region), and a dirty victim is written back on eviction. The PU stalls on
// a miss. The TSU may ask for a line ahead of time through the prefetch
// port; a prefetch that hits is dropped.
//
// Choices of this design: word (32-bit) accesses; the number of lines in use
// is set at run time (cfg_log2_lines) up to LINES; the tag is the full line
// address; one miss is handled at a time.
//
// Interface and timing: a PU request is accepted (req_ready) in the cycle it
// hits, and the read data appears one cycle later on resp_valid/resp_rdata.
// A miss holds req_ready low through the write-back and the fill, then the
// request hits. After reset the SRAM is swept once to clear valid bits.
module data_cache
  import tascade_pkg::*;
#(
  parameter int LINES = 16384           // 16384 x 64 B = 1 MiB
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 cfg_scratch,     // 1: scratchpad, 0: D$
  input  logic [4:0]           cfg_log2_lines,  // D$ lines in use
  // PU port
  input  logic                 req_valid,
  output logic                 req_ready,
  input  logic                 req_we,
  input  logic [IDX_W-1:0]     req_addr,        // word address
  input  logic [VAL_W-1:0]     req_wdata,
  output logic                 resp_valid,
  output logic [VAL_W-1:0]     resp_rdata,
  // prefetch port (from the TSU)
  input  logic                 pf_valid,
  output logic                 pf_ready,
  input  logic [IDX_W-1:0]     pf_addr,
  // DRAM port (to the memory controller)
  output logic                 mem_req_valid,
  input  logic                 mem_req_ready,
  output mem_req_t             mem_req,
  input  logic                 mem_resp_valid,
  input  logic [LINE_BITS-1:0] mem_resp_data,
  output logic                 init_done,
  output logic [31:0]          miss_count
);
  localparam int AW    = $clog2(LINES);
  localparam int WPL   = LINE_BITS / VAL_W;     // words per line (16)
  localparam int OFF_W = $clog2(WPL);
  localparam int TAG_W = IDX_W - OFF_W;

  typedef struct packed {
    logic                 valid;
    logic                 dirty;
    logic [TAG_W-1:0]     tag;     // line address
    logic [LINE_BITS-1:0] data;
  } line_t;

  typedef enum logic [2:0] {S_INIT, S_IDLE, S_WB, S_FILL, S_WAIT} state_e;

  line_t  mem [LINES];
  state_e state;
  logic [AW-1:0]    ptr;
  logic [TAG_W-1:0] miss_tag;      // line being fetched
  logic [AW-1:0]    miss_set;

  function automatic logic [AW-1:0] set_of(input logic [TAG_W-1:0] lad, input logic [4:0] l2);
    logic [TAG_W-1:0] mask;
    mask = (TAG_W'(1) << l2) - TAG_W'(1);
    return AW'(lad & mask);
  endfunction

  logic [TAG_W-1:0] r_lad, p_lad;
  logic [OFF_W-1:0] r_off;
  logic [AW-1:0]    r_set, p_set;
  line_t            r_line, p_line;
  logic             r_hit, p_hit;

  assign r_lad  = req_addr[IDX_W-1:OFF_W];
  assign r_off  = req_addr[OFF_W-1:0];
  assign r_set  = cfg_scratch ? AW'(r_lad) : set_of(r_lad, cfg_log2_lines);
  assign r_line = mem[r_set];
  assign r_hit  = cfg_scratch || (r_line.valid && r_line.tag == r_lad);
  assign p_lad  = pf_addr[IDX_W-1:OFF_W];
  assign p_set  = set_of(p_lad, cfg_log2_lines);
  assign p_line = mem[p_set];
  assign p_hit  = p_line.valid && p_line.tag == p_lad;

  assign init_done = (state != S_INIT);
  assign req_ready = (state == S_IDLE) && req_valid && r_hit;
  assign pf_ready  = (state == S_IDLE) && !req_valid && !cfg_scratch;

  // a miss starts from IDLE: a PU miss, else a prefetch miss
  logic start_miss;
  logic [TAG_W-1:0] start_tag;
  logic [AW-1:0]    start_set;
  line_t            start_line;
  always_comb begin
    start_miss = 1'b0;
    start_tag  = r_lad;
    start_set  = r_set;
    start_line = r_line;
    if (state == S_IDLE && !cfg_scratch) begin
      if (req_valid && !r_hit) begin
        start_miss = 1'b1;
      end else if (!req_valid && pf_valid && !p_hit) begin
        start_miss = 1'b1;
        start_tag  = p_lad;
        start_set  = p_set;
        start_line = p_line;
      end
    end
  end

  assign mem_req_valid = (state == S_WB) || (state == S_FILL);
  always_comb begin
    mem_req = '0;
    if (state == S_WB) begin
      mem_req.we    = 1'b1;
      mem_req.line  = IDX_W'(mem[miss_set].tag);
      mem_req.wdata = mem[miss_set].data;
    end else begin
      mem_req.we    = 1'b0;
      mem_req.line  = IDX_W'(miss_tag);
    end
  end

  // SRAM write port
  logic  wr_en;
  line_t wr_line;
  logic [AW-1:0] wr_addr;
  always_comb begin
    wr_en   = 1'b0;
    wr_addr = r_set;
    wr_line = r_line;
    if (state == S_INIT) begin
      wr_en   = 1'b1;
      wr_addr = ptr;
      wr_line = '0;
    end else if (state == S_WAIT) begin
      wr_en   = mem_resp_valid;
      wr_addr = miss_set;
      wr_line = '{valid: 1'b1, dirty: 1'b0, tag: miss_tag, data: mem_resp_data};
    end else if (req_ready && req_we) begin
      wr_en = 1'b1;
      wr_line.data[r_off*VAL_W +: VAL_W] = req_wdata;
      wr_line.dirty = 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_line;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_INIT;
      ptr        <= '0;
      miss_tag   <= '0;
      miss_set   <= '0;
      resp_valid <= 1'b0;
      resp_rdata <= '0;
      miss_count <= '0;
    end else begin
      resp_valid <= req_ready && !req_we;
      if (req_ready) resp_rdata <= r_line.data[r_off*VAL_W +: VAL_W];
      unique case (state)
        S_INIT: begin
          ptr <= AW'(ptr + AW'(1));
          if (ptr == AW'(LINES-1)) state <= S_IDLE;
        end
        S_IDLE: if (start_miss) begin
          miss_tag   <= start_tag;
          miss_set   <= start_set;
          miss_count <= miss_count + 32'd1;
          state      <= (start_line.valid && start_line.dirty) ? S_WB : S_FILL;
        end
        S_WB:   if (mem_req_ready) state <= S_FILL;
        S_FILL: if (mem_req_ready) state <= S_WAIT;
        S_WAIT: if (mem_resp_valid) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
