// memory_controller: the TCA die's DRAM controller front end.
//
// Every tile of a die owns an exclusive slice of the stacked DRAM next to
// the die: DRAM capacity / tiles per die (8 GiB / 256 = 32 MiB, i.e. 2^19
// lines of 64 bytes, in the evaluated package). A tile's D$ sends line
// fills and write-backs for its own slice; the controller turns the tile
// number and the local line into a global line address, spreads lines
// over the HBM channels by the low bits of that address, and returns each
// fill to the tile that asked for it. No coherence is needed because no two
// tiles share a line.
//
// The paper only places the controller on the die (and counts it as dark
// silicon when no DRAM is packaged); its insides are this design's: one
// round-robin arbiter per channel over the tiles whose next request maps to
// that channel, so up to HBM_CH requests leave per cycle; responses carry
// the tile number as a tag. DRAM timing (the 50 ns access of the evaluated
// HBM2E) belongs to the channel model on the other side of the ch_* ports.
//
// Interface: per tile, a mem_req_t with valid/ready and a response strobe
// with the line data; per channel, a request with tag and a tagged response.
module memory_controller
  import tascade_pkg::*;
#(
  parameter int NT        = 256,   // tiles per die
  parameter int HBM_CH    = 8,     // HBM channels per die
  parameter int REGION_LW = 19,    // log2(lines per tile slice)
  localparam int TAG_W    = (NT > 1) ? $clog2(NT) : 1,
  localparam int CHB      = (HBM_CH > 1) ? $clog2(HBM_CH) : 0,
  localparam int GLW      = TAG_W + REGION_LW,        // global line address
  localparam int ADDR_W   = GLW - CHB                 // line address in a channel
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // tile side
  input  logic [NT-1:0]         t_req_valid,
  output logic [NT-1:0]         t_req_ready,
  input  mem_req_t              t_req [NT],
  output logic [NT-1:0]         t_resp_valid,
  output logic [LINE_BITS-1:0]  t_resp_data [NT],
  // channel side
  output logic [HBM_CH-1:0]     ch_req_valid,
  input  logic [HBM_CH-1:0]     ch_req_ready,
  output logic                  ch_req_we   [HBM_CH],
  output logic [ADDR_W-1:0]     ch_req_addr [HBM_CH],
  output logic [LINE_BITS-1:0]  ch_req_wdata[HBM_CH],
  output logic [TAG_W-1:0]      ch_req_tag  [HBM_CH],
  input  logic [HBM_CH-1:0]     ch_resp_valid,
  input  logic [TAG_W-1:0]      ch_resp_tag [HBM_CH],
  input  logic [LINE_BITS-1:0]  ch_resp_data[HBM_CH]
);

  logic [GLW-1:0] gline [NT];
  logic [CHB:0]   chan_of [NT];
  logic [TAG_W-1:0] last [HBM_CH];
  logic [TAG_W-1:0] win  [HBM_CH];
  logic [HBM_CH-1:0] found;

  always_comb begin
    for (int t = 0; t < NT; t++) begin
      gline[t]   = {TAG_W'(t), t_req[t].line[REGION_LW-1:0]};
      chan_of[t] = (CHB == 0) ? '0 : (CHB+1)'(gline[t] % GLW'(HBM_CH));
    end
  end

  // per-channel round-robin over tiles
  always_comb begin
    t_req_ready = '0;
    for (int c = 0; c < HBM_CH; c++) begin
      found[c] = 1'b0;
      win[c]   = '0;
      for (int k = 1; k <= NT; k++) begin
        logic [TAG_W-1:0] t;
        t = TAG_W'((int'(last[c]) + k) % NT);
        if (!found[c] && t_req_valid[t] && chan_of[t] == (CHB+1)'(c)) begin
          found[c] = 1'b1;
          win[c]   = t;
        end
      end
      ch_req_valid[c] = found[c];
      ch_req_we[c]    = t_req[win[c]].we;
      ch_req_addr[c]  = ADDR_W'(gline[win[c]] >> CHB);
      ch_req_wdata[c] = t_req[win[c]].wdata;
      ch_req_tag[c]   = win[c];
      if (found[c] && ch_req_ready[c]) t_req_ready[win[c]] = 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int c = 0; c < HBM_CH; c++) last[c] <= TAG_W'(NT-1);
    end else begin
      for (int c = 0; c < HBM_CH; c++)
        if (found[c] && ch_req_ready[c]) last[c] <= win[c];
    end
  end

  // responses back to the requesting tile
  always_comb begin
    t_resp_valid = '0;
    for (int t = 0; t < NT; t++) t_resp_data[t] = ch_resp_data[0];
    for (int c = 0; c < HBM_CH; c++) begin
      if (ch_resp_valid[c]) begin
        t_resp_valid[ch_resp_tag[c]] = 1'b1;
        t_resp_data[ch_resp_tag[c]]  = ch_resp_data[c];
      end
    end
  end
endmodule
