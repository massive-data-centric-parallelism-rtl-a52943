// tca_die: the tiled compute array (TCA) chiplet.
//
// A TCA die is a 16x16 array of tiles joined by the tile-NoC (one router
// per tile and physical NoC, neighbour links inside the die) plus the DRAM
// memory controller that serves the tiles' data caches. It is designed
// once and combined at packaging time: the links on its four edges leave
// through die-to-die PHYs towards neighbouring dies or I/O dies, and its
// DRAM port goes to an HBM stack on the silicon interposer, or stays unused
// when the package carries no DRAM (the controller is then dark silicon).
//
// Tile (x,y) of the die sits at global position (origin_x + x, origin_y + y);
// the package gives each die its origin, which plays the role of the
// tile IDs that the paper says are microcoded when a workload is loaded.
// The second NoC of the paper, the die-NoC that hops once per die through
// radix-9 routers at die edges, is not part of this RTL.
//
// Interface: pu_o/pu_i per tile (row-major, index y*TX + x); edge links per
// NoC, north/south indexed by x, west/east indexed by y; ch_* are the HBM
// channels of the die.
module tca_die
  import tascade_pkg::*;
#(
  parameter int TX        = 16,
  parameter int TY        = 16,
  parameter int IQ_DEPTH  = 256,
  parameter int OQ_DEPTH  = 16,
  parameter int PC_LINES  = 32768,
  parameter int DC_LINES  = 16384,
  parameter int RBUF      = 4,
  parameter int HBM_CH    = 8,
  parameter int REGION_LW = 19,
  localparam int NT       = TX * TY,
  localparam int TAG_W    = (NT > 1) ? $clog2(NT) : 1,
  localparam int CHB      = (HBM_CH > 1) ? $clog2(HBM_CH) : 0,
  localparam int ADDR_W   = TAG_W + REGION_LW - CHB
) (
  input  logic               clk,
  input  logic               rst_n,
  input  tile_cfg_t          cfg,
  input  logic [COORD_W-1:0] origin_x,
  input  logic [COORD_W-1:0] origin_y,
  // processing units
  input  pu_out_t            pu_o [NT],
  output pu_in_t             pu_i [NT],
  // edge links
  input  link_fwd_t          n_in_fwd  [NUM_NOCS][TX],
  output link_bwd_t          n_in_bwd  [NUM_NOCS][TX],
  output link_fwd_t          n_out_fwd [NUM_NOCS][TX],
  input  link_bwd_t          n_out_bwd [NUM_NOCS][TX],
  input  link_fwd_t          s_in_fwd  [NUM_NOCS][TX],
  output link_bwd_t          s_in_bwd  [NUM_NOCS][TX],
  output link_fwd_t          s_out_fwd [NUM_NOCS][TX],
  input  link_bwd_t          s_out_bwd [NUM_NOCS][TX],
  input  link_fwd_t          w_in_fwd  [NUM_NOCS][TY],
  output link_bwd_t          w_in_bwd  [NUM_NOCS][TY],
  output link_fwd_t          w_out_fwd [NUM_NOCS][TY],
  input  link_bwd_t          w_out_bwd [NUM_NOCS][TY],
  input  link_fwd_t          e_in_fwd  [NUM_NOCS][TY],
  output link_bwd_t          e_in_bwd  [NUM_NOCS][TY],
  output link_fwd_t          e_out_fwd [NUM_NOCS][TY],
  input  link_bwd_t          e_out_bwd [NUM_NOCS][TY],
  // HBM channels
  output logic [HBM_CH-1:0]     ch_req_valid,
  input  logic [HBM_CH-1:0]     ch_req_ready,
  output logic                  ch_req_we   [HBM_CH],
  output logic [ADDR_W-1:0]     ch_req_addr [HBM_CH],
  output logic [LINE_BITS-1:0]  ch_req_wdata[HBM_CH],
  output logic [TAG_W-1:0]      ch_req_tag  [HBM_CH],
  input  logic [HBM_CH-1:0]     ch_resp_valid,
  input  logic [TAG_W-1:0]      ch_resp_tag [HBM_CH],
  input  logic [LINE_BITS-1:0]  ch_resp_data[HBM_CH],
  // event strobes
  output logic [NUM_NOCS-1:0]   ev_cascade [NT],
  output logic [NT-1:0]         ev_evict,
  output logic [NT-1:0]         init_done
);
  // links as seen by each tile: [tile][noc][dir N,E,S,W]
  link_fwd_t t_in_fwd  [NT][NUM_NOCS][4];
  link_bwd_t t_in_bwd  [NT][NUM_NOCS][4];
  link_fwd_t t_out_fwd [NT][NUM_NOCS][4];
  link_bwd_t t_out_bwd [NT][NUM_NOCS][4];

  logic [NT-1:0]        m_req_valid, m_req_ready, m_resp_valid;
  mem_req_t             m_req       [NT];
  logic [LINE_BITS-1:0] m_resp_data [NT];

  for (genvar y = 0; y < TY; y++) begin : g_y
    for (genvar x = 0; x < TX; x++) begin : g_x
      localparam int T = y*TX + x;
      for (genvar n = 0; n < NUM_NOCS; n++) begin : g_n
        // north
        if (y == 0) begin : g_nedge
          assign t_in_fwd[T][n][0]  = n_in_fwd[n][x];
          assign n_in_bwd[n][x]     = t_in_bwd[T][n][0];
          assign n_out_fwd[n][x]    = t_out_fwd[T][n][0];
          assign t_out_bwd[T][n][0] = n_out_bwd[n][x];
        end else begin : g_nin
          assign t_in_fwd[T][n][0]  = t_out_fwd[T-TX][n][2];
          assign t_out_bwd[T][n][0] = t_in_bwd[T-TX][n][2];
        end
        // south
        if (y == TY-1) begin : g_sedge
          assign t_in_fwd[T][n][2]  = s_in_fwd[n][x];
          assign s_in_bwd[n][x]     = t_in_bwd[T][n][2];
          assign s_out_fwd[n][x]    = t_out_fwd[T][n][2];
          assign t_out_bwd[T][n][2] = s_out_bwd[n][x];
        end else begin : g_sin
          assign t_in_fwd[T][n][2]  = t_out_fwd[T+TX][n][0];
          assign t_out_bwd[T][n][2] = t_in_bwd[T+TX][n][0];
        end
        // west
        if (x == 0) begin : g_wedge
          assign t_in_fwd[T][n][3]  = w_in_fwd[n][y];
          assign w_in_bwd[n][y]     = t_in_bwd[T][n][3];
          assign w_out_fwd[n][y]    = t_out_fwd[T][n][3];
          assign t_out_bwd[T][n][3] = w_out_bwd[n][y];
        end else begin : g_win
          assign t_in_fwd[T][n][3]  = t_out_fwd[T-1][n][1];
          assign t_out_bwd[T][n][3] = t_in_bwd[T-1][n][1];
        end
        // east
        if (x == TX-1) begin : g_eedge
          assign t_in_fwd[T][n][1]  = e_in_fwd[n][y];
          assign e_in_bwd[n][y]     = t_in_bwd[T][n][1];
          assign e_out_fwd[n][y]    = t_out_fwd[T][n][1];
          assign t_out_bwd[T][n][1] = e_out_bwd[n][y];
        end else begin : g_ein
          assign t_in_fwd[T][n][1]  = t_out_fwd[T+1][n][3];
          assign t_out_bwd[T][n][1] = t_in_bwd[T+1][n][3];
        end
      end

      tile #(
        .IQ_DEPTH(IQ_DEPTH), .OQ_DEPTH(OQ_DEPTH), .PC_LINES(PC_LINES),
        .DC_LINES(DC_LINES), .RBUF(RBUF)
      ) u_tile (
        .clk, .rst_n,
        .cfg,
        .my_x          (COORD_W'(origin_x + COORD_W'(x))),
        .my_y          (COORD_W'(origin_y + COORD_W'(y))),
        .pu_o          (pu_o[T]),
        .pu_i          (pu_i[T]),
        .net_in_fwd    (t_in_fwd[T]),
        .net_in_bwd    (t_in_bwd[T]),
        .net_out_fwd   (t_out_fwd[T]),
        .net_out_bwd   (t_out_bwd[T]),
        .mem_req_valid (m_req_valid[T]),
        .mem_req_ready (m_req_ready[T]),
        .mem_req       (m_req[T]),
        .mem_resp_valid(m_resp_valid[T]),
        .mem_resp_data (m_resp_data[T]),
        .ev_cascade    (ev_cascade[T]),
        .ev_evict      (ev_evict[T]),
        .init_done     (init_done[T])
      );
    end
  end

  memory_controller #(.NT(NT), .HBM_CH(HBM_CH), .REGION_LW(REGION_LW)) u_mc (
    .clk, .rst_n,
    .t_req_valid (m_req_valid),
    .t_req_ready (m_req_ready),
    .t_req       (m_req),
    .t_resp_valid(m_resp_valid),
    .t_resp_data (m_resp_data),
    .ch_req_valid, .ch_req_ready, .ch_req_we, .ch_req_addr, .ch_req_wdata,
    .ch_req_tag, .ch_resp_valid, .ch_resp_tag, .ch_resp_data
  );
endmodule
