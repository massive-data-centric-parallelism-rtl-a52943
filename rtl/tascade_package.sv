// tascade_package: a chip package built from a grid of TCA dies.
//
// The evaluated package holds 4x4 TCA dies of 16x16 tiles, i.e. 64x64 tiles.
// Neighbouring dies are joined edge to edge: every tile-NoC link that
// leaves a die edge crosses to the facing tile of the next die through a
// die-to-die PHY (d2d_phy, one per direction). At the package edges the
// links either wrap around to the opposite edge, closing each row or column
// into a ring so the tile-NoC becomes a torus, or are left open towards the
// I/O dies (ports io_*), which is how data streams in from outside while a
// dataset is loaded. The choice is made at run time per dimension by
// cfg.grid.torus_x / torus_y; in the paper the same choice exists at every
// die edge so that any subgrid can become a torus, while here the wrap is
// only at the package edges, so a torus run must span the whole package in
// that dimension. The wrap-around link is modelled as one more d2d_phy.
//
// Every die also brings out its HBM channels (hbm_*); packages without DRAM
// simply leave them idle. The processing units of all tiles are outside
// this RTL and attach through pu_o/pu_i, indexed row-major over the whole
// package (gy * DX*TX + gx).
//
// The default is 2x2 dies (32x32 tiles) rather than the paper's 4x4: the
// lint tools need about 2.8 GB per 256-tile die, so a 16-die package would
// not fit in 32 GB. Set DX = DY = 4 for the full package.
module tascade_package
  import tascade_pkg::*;
#(
  parameter int DX        = 2,       // dies per row (4 in the paper, see header)
  parameter int DY        = 2,       // dies per column (4 in the paper)
  parameter int TX        = 16,      // tiles per die row
  parameter int TY        = 16,      // tiles per die column
  parameter int IQ_DEPTH  = 256,
  parameter int OQ_DEPTH  = 16,
  parameter int PC_LINES  = 32768,
  parameter int DC_LINES  = 16384,
  parameter int RBUF      = 4,
  parameter int HBM_CH    = 8,
  parameter int REGION_LW = 19,
  parameter int D2D_LAT   = 4,
  localparam int ND       = DX * DY,
  localparam int NTD      = TX * TY,
  localparam int GX       = DX * TX,
  localparam int GY       = DY * TY,
  localparam int NTOT     = GX * GY,
  localparam int TAG_W    = (NTD > 1) ? $clog2(NTD) : 1,
  localparam int CHB      = (HBM_CH > 1) ? $clog2(HBM_CH) : 0,
  localparam int ADDR_W   = TAG_W + REGION_LW - CHB
) (
  input  logic               clk,
  input  logic               rst_n,
  input  tile_cfg_t          cfg,
  // processing units
  input  pu_out_t            pu_o [NTOT],
  output pu_in_t             pu_i [NTOT],
  // package edges towards the I/O dies (used when a dimension is a mesh)
  input  link_fwd_t          io_n_in_fwd  [NUM_NOCS][GX],
  output link_bwd_t          io_n_in_bwd  [NUM_NOCS][GX],
  output link_fwd_t          io_n_out_fwd [NUM_NOCS][GX],
  input  link_bwd_t          io_n_out_bwd [NUM_NOCS][GX],
  input  link_fwd_t          io_s_in_fwd  [NUM_NOCS][GX],
  output link_bwd_t          io_s_in_bwd  [NUM_NOCS][GX],
  output link_fwd_t          io_s_out_fwd [NUM_NOCS][GX],
  input  link_bwd_t          io_s_out_bwd [NUM_NOCS][GX],
  input  link_fwd_t          io_w_in_fwd  [NUM_NOCS][GY],
  output link_bwd_t          io_w_in_bwd  [NUM_NOCS][GY],
  output link_fwd_t          io_w_out_fwd [NUM_NOCS][GY],
  input  link_bwd_t          io_w_out_bwd [NUM_NOCS][GY],
  input  link_fwd_t          io_e_in_fwd  [NUM_NOCS][GY],
  output link_bwd_t          io_e_in_bwd  [NUM_NOCS][GY],
  output link_fwd_t          io_e_out_fwd [NUM_NOCS][GY],
  input  link_bwd_t          io_e_out_bwd [NUM_NOCS][GY],
  // HBM channels of every die
  output logic [HBM_CH-1:0]     hbm_req_valid [ND],
  input  logic [HBM_CH-1:0]     hbm_req_ready [ND],
  output logic                  hbm_req_we    [ND][HBM_CH],
  output logic [ADDR_W-1:0]     hbm_req_addr  [ND][HBM_CH],
  output logic [LINE_BITS-1:0]  hbm_req_wdata [ND][HBM_CH],
  output logic [TAG_W-1:0]      hbm_req_tag   [ND][HBM_CH],
  input  logic [HBM_CH-1:0]     hbm_resp_valid[ND],
  input  logic [TAG_W-1:0]      hbm_resp_tag  [ND][HBM_CH],
  input  logic [LINE_BITS-1:0]  hbm_resp_data [ND][HBM_CH],
  // event strobes, per tile
  output logic [NUM_NOCS-1:0]   ev_cascade [NTOT],
  output logic [NTOT-1:0]       ev_evict,
  output logic [NTOT-1:0]       init_done
);
  // die edge signals [die][noc][position]
  link_fwd_t n_in_fwd [ND][NUM_NOCS][TX], n_out_fwd [ND][NUM_NOCS][TX];
  link_bwd_t n_in_bwd [ND][NUM_NOCS][TX], n_out_bwd [ND][NUM_NOCS][TX];
  link_fwd_t s_in_fwd [ND][NUM_NOCS][TX], s_out_fwd [ND][NUM_NOCS][TX];
  link_bwd_t s_in_bwd [ND][NUM_NOCS][TX], s_out_bwd [ND][NUM_NOCS][TX];
  link_fwd_t w_in_fwd [ND][NUM_NOCS][TY], w_out_fwd [ND][NUM_NOCS][TY];
  link_bwd_t w_in_bwd [ND][NUM_NOCS][TY], w_out_bwd [ND][NUM_NOCS][TY];
  link_fwd_t e_in_fwd [ND][NUM_NOCS][TY], e_out_fwd [ND][NUM_NOCS][TY];
  link_bwd_t e_in_bwd [ND][NUM_NOCS][TY], e_out_bwd [ND][NUM_NOCS][TY];

  localparam link_fwd_t NO_MSG  = '0;
  localparam link_bwd_t NO_ROOM = '0;

  for (genvar dy = 0; dy < DY; dy++) begin : g_dy
    for (genvar dx = 0; dx < DX; dx++) begin : g_dx
      localparam int D = dy*DX + dx;
      pu_out_t              d_pu_o [NTD];
      pu_in_t               d_pu_i [NTD];
      logic [NUM_NOCS-1:0]  d_ev_c [NTD];
      logic [NTD-1:0]       d_ev_e, d_init;

      for (genvar t = 0; t < NTD; t++) begin : g_t
        localparam int G = (dy*TY + t/TX) * GX + dx*TX + (t % TX);
        assign d_pu_o[t]     = pu_o[G];
        assign pu_i[G]       = d_pu_i[t];
        assign ev_cascade[G] = d_ev_c[t];
        assign ev_evict[G]   = d_ev_e[t];
        assign init_done[G]  = d_init[t];
      end

      tca_die #(
        .TX(TX), .TY(TY), .IQ_DEPTH(IQ_DEPTH), .OQ_DEPTH(OQ_DEPTH),
        .PC_LINES(PC_LINES), .DC_LINES(DC_LINES), .RBUF(RBUF),
        .HBM_CH(HBM_CH), .REGION_LW(REGION_LW)
      ) u_die (
        .clk, .rst_n, .cfg,
        .origin_x (COORD_W'(dx*TX)),
        .origin_y (COORD_W'(dy*TY)),
        .pu_o     (d_pu_o),
        .pu_i     (d_pu_i),
        .n_in_fwd (n_in_fwd[D]),  .n_in_bwd (n_in_bwd[D]),
        .n_out_fwd(n_out_fwd[D]), .n_out_bwd(n_out_bwd[D]),
        .s_in_fwd (s_in_fwd[D]),  .s_in_bwd (s_in_bwd[D]),
        .s_out_fwd(s_out_fwd[D]), .s_out_bwd(s_out_bwd[D]),
        .w_in_fwd (w_in_fwd[D]),  .w_in_bwd (w_in_bwd[D]),
        .w_out_fwd(w_out_fwd[D]), .w_out_bwd(w_out_bwd[D]),
        .e_in_fwd (e_in_fwd[D]),  .e_in_bwd (e_in_bwd[D]),
        .e_out_fwd(e_out_fwd[D]), .e_out_bwd(e_out_bwd[D]),
        .ch_req_valid (hbm_req_valid[D]),
        .ch_req_ready (hbm_req_ready[D]),
        .ch_req_we    (hbm_req_we[D]),
        .ch_req_addr  (hbm_req_addr[D]),
        .ch_req_wdata (hbm_req_wdata[D]),
        .ch_req_tag   (hbm_req_tag[D]),
        .ch_resp_valid(hbm_resp_valid[D]),
        .ch_resp_tag  (hbm_resp_tag[D]),
        .ch_resp_data (hbm_resp_data[D]),
        .ev_cascade   (d_ev_c),
        .ev_evict     (d_ev_e),
        .init_done    (d_init)
      );

      // ---- horizontal link: east edge of this die -> west edge of the next
      // (the last column wraps to the first when torus_x is set)
      localparam int DE = dy*DX + (dx + 1) % DX;
      localparam bit LAST_X = (dx == DX-1);
      localparam bit LAST_Y = (dy == DY-1);
      localparam int DS = ((dy + 1) % DY)*DX + dx;
      logic en_x, en_y;
      assign en_x = !LAST_X || cfg.grid.torus_x;
      assign en_y = !LAST_Y || cfg.grid.torus_y;

      for (genvar n = 0; n < NUM_NOCS; n++) begin : g_n
        for (genvar r = 0; r < TY; r++) begin : g_r
          link_fwd_t a_out, b_out;
          link_bwd_t a_in_bwd, b_in_bwd;
          // eastbound
          d2d_phy #(.LAT(D2D_LAT)) u_east (
            .clk, .rst_n,
            .in_fwd (en_x ? e_out_fwd[D][n][r] : NO_MSG),
            .in_bwd (a_in_bwd),
            .out_fwd(a_out),
            .out_bwd(w_in_bwd[DE][n][r])
          );
          // westbound
          d2d_phy #(.LAT(D2D_LAT)) u_west (
            .clk, .rst_n,
            .in_fwd (en_x ? w_out_fwd[DE][n][r] : NO_MSG),
            .in_bwd (b_in_bwd),
            .out_fwd(b_out),
            .out_bwd(e_in_bwd[D][n][r])
          );
          if (LAST_X) begin : g_edge
            localparam int GR = dy*TY + r;
            assign w_in_fwd[DE][n][r]  = en_x ? a_out : io_w_in_fwd[n][GR];
            assign e_in_fwd[D][n][r]   = en_x ? b_out : io_e_in_fwd[n][GR];
            assign e_out_bwd[D][n][r]  = en_x ? a_in_bwd : io_e_out_bwd[n][GR];
            assign w_out_bwd[DE][n][r] = en_x ? b_in_bwd : io_w_out_bwd[n][GR];
            assign io_e_out_fwd[n][GR] = en_x ? NO_MSG : e_out_fwd[D][n][r];
            assign io_w_out_fwd[n][GR] = en_x ? NO_MSG : w_out_fwd[DE][n][r];
            assign io_e_in_bwd[n][GR]  = en_x ? NO_ROOM : e_in_bwd[D][n][r];
            assign io_w_in_bwd[n][GR]  = en_x ? NO_ROOM : w_in_bwd[DE][n][r];
          end else begin : g_inner
            assign w_in_fwd[DE][n][r]  = a_out;
            assign e_in_fwd[D][n][r]   = b_out;
            assign e_out_bwd[D][n][r]  = a_in_bwd;
            assign w_out_bwd[DE][n][r] = b_in_bwd;
          end
        end

        // ---- vertical link: south edge of this die -> north edge of the next
        for (genvar c = 0; c < TX; c++) begin : g_c
          link_fwd_t a_out, b_out;
          link_bwd_t a_in_bwd, b_in_bwd;
          d2d_phy #(.LAT(D2D_LAT)) u_south (
            .clk, .rst_n,
            .in_fwd (en_y ? s_out_fwd[D][n][c] : NO_MSG),
            .in_bwd (a_in_bwd),
            .out_fwd(a_out),
            .out_bwd(n_in_bwd[DS][n][c])
          );
          d2d_phy #(.LAT(D2D_LAT)) u_north (
            .clk, .rst_n,
            .in_fwd (en_y ? n_out_fwd[DS][n][c] : NO_MSG),
            .in_bwd (b_in_bwd),
            .out_fwd(b_out),
            .out_bwd(s_in_bwd[D][n][c])
          );
          if (LAST_Y) begin : g_edge
            localparam int GC = dx*TX + c;
            assign n_in_fwd[DS][n][c]  = en_y ? a_out : io_n_in_fwd[n][GC];
            assign s_in_fwd[D][n][c]   = en_y ? b_out : io_s_in_fwd[n][GC];
            assign s_out_bwd[D][n][c]  = en_y ? a_in_bwd : io_s_out_bwd[n][GC];
            assign n_out_bwd[DS][n][c] = en_y ? b_in_bwd : io_n_out_bwd[n][GC];
            assign io_s_out_fwd[n][GC] = en_y ? NO_MSG : s_out_fwd[D][n][c];
            assign io_n_out_fwd[n][GC] = en_y ? NO_MSG : n_out_fwd[DS][n][c];
            assign io_s_in_bwd[n][GC]  = en_y ? NO_ROOM : s_in_bwd[D][n][c];
            assign io_n_in_bwd[n][GC]  = en_y ? NO_ROOM : n_in_bwd[DS][n][c];
          end else begin : g_inner
            assign n_in_fwd[DS][n][c]  = a_out;
            assign s_in_fwd[D][n][c]   = b_out;
            assign s_out_bwd[D][n][c]  = a_in_bwd;
            assign n_out_bwd[DS][n][c] = b_in_bwd;
          end
        end
      end
    end
  end
endmodule
