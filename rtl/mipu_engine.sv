// mipu_engine: the processing engine, one Block of TILE_ROWS x TILE_COLS Tiles.
//
// With the default 4x4 Tiles the engine is a 64x64 grid of 4096 SiteOs, every
// one of which a 12-bit message destination can name. Tiles are joined like
// the SiteMs inside them, so the whole Block is one mesh: a message enters at
// the top (one port per SiteO column) or at the left (one port per SiteO row),
// travels down its column to the destination row and then right along that
// row, and is executed where its destination matches. Messages generated by
// SiteOs travel the same way. A message addressed above or to the left of the
// SiteO that sends it (for example the "none" destination 0 of a result)
// leaves the grid at the right or bottom edge; these edge ports carry the
// output messages to the host.
//
// Each SiteO column also has a vertical bus port. A bus message is copied in
// one cycle to the four SiteOs of that column inside the SiteM its destination
// names (address bits [11:10] and [7:6] select the Tile row and SiteM row).
// A host sends Prog messages through the top ports (they hop to their SiteOs,
// farthest first) and operand messages through the buses.
//
// Interface: valid/message/full triples; top, bus and down are indexed by SiteO
// column (0 .. 16*TILE_COLS-1), left and right by SiteO row. A transfer
// happens in a cycle with valid high and full low; a sender must hold its
// message while full is high. Reset is asynchronous, active low.
//
// Follows the published hierarchy (SiteO, SiteM of 16 SiteOs, Tile of 16
// SiteMs, Block of 16 Tiles), the 4096 SiteOs used in the published
// convolution benchmarks, and message entry from the top. Joining Tiles by the
// same mesh links as SiteOs is this design's choice: the published local and
// global buses between Blocks, the bus controller and central bus, and the
// Quad level above the Block are not modelled, since a 12-bit destination
// cannot address beyond one Block.
module mipu_engine
  import mipu_pkg::*;
#(
  parameter int unsigned TILE_ROWS  = 4,
  parameter int unsigned TILE_COLS  = 4,
  parameter int unsigned FIFO_DEPTH = 4,
  localparam int unsigned NR = 16 * TILE_ROWS,
  localparam int unsigned NC = 16 * TILE_COLS
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [NC-1:0] top_valid,
  input  msg_t [NC-1:0] top_msg,
  output logic [NC-1:0] top_full,
  input  logic [NR-1:0] left_valid,
  input  msg_t [NR-1:0] left_msg,
  output logic [NR-1:0] left_full,
  output logic [NR-1:0] right_valid,
  output msg_t [NR-1:0] right_msg,
  input  logic [NR-1:0] right_full,
  output logic [NC-1:0] down_valid,
  output msg_t [NC-1:0] down_msg,
  input  logic [NC-1:0] down_full,
  input  logic [NC-1:0] bus_valid,
  input  msg_t [NC-1:0] bus_msg,
  output logic [NC-1:0] bus_full
);

  logic [TILE_ROWS-1:0][TILE_COLS-1:0][15:0] h_valid, h_full, v_valid, v_full, bfull;
  msg_t [TILE_ROWS-1:0][TILE_COLS-1:0][15:0] h_msg, v_msg;

  for (genvar j = 0; j < TILE_COLS; j++) begin : g_bus
    for (genvar k = 0; k < 16; k++) begin : g_line
      logic [TILE_ROWS-1:0] f;
      for (genvar i = 0; i < TILE_ROWS; i++) begin : g_or
        assign f[i] = bfull[i][j][k];
      end
      assign bus_full[16*j+k] = |f;
    end
  end

  for (genvar i = 0; i < TILE_ROWS; i++) begin : g_row
    for (genvar j = 0; j < TILE_COLS; j++) begin : g_col
      logic [15:0] l_valid, l_full, t_valid, t_full;
      msg_t [15:0] l_msg, t_msg;

      if (j == 0) begin : g_lport
        assign l_valid = left_valid[16*i +: 16];
        assign l_msg   = left_msg[16*i +: 16];
        assign left_full[16*i +: 16] = l_full;
      end else begin : g_lmesh
        assign l_valid = h_valid[i][j-1];
        assign l_msg   = h_msg[i][j-1];
        assign h_full[i][j-1] = l_full;
      end

      if (i == 0) begin : g_tport
        assign t_valid = top_valid[16*j +: 16];
        assign t_msg   = top_msg[16*j +: 16];
        assign top_full[16*j +: 16] = t_full;
      end else begin : g_tmesh
        assign t_valid = v_valid[i-1][j];
        assign t_msg   = v_msg[i-1][j];
        assign v_full[i-1][j] = t_full;
      end

      tile #(.FIFO_DEPTH(FIFO_DEPTH)) u_tile (
        .clk, .rst_n, .base_row(6'(16*i)), .base_col(6'(16*j)),
        .top_valid(t_valid), .top_msg(t_msg), .top_full(t_full),
        .left_valid(l_valid), .left_msg(l_msg), .left_full(l_full),
        .right_valid(h_valid[i][j]), .right_msg(h_msg[i][j]), .right_full(h_full[i][j]),
        .down_valid(v_valid[i][j]), .down_msg(v_msg[i][j]), .down_full(v_full[i][j]),
        .bus_valid(bus_valid[16*j +: 16]), .bus_msg(bus_msg[16*j +: 16]),
        .bus_full(bfull[i][j]));

      if (j == TILE_COLS - 1) begin : g_rport
        assign right_valid[16*i +: 16] = h_valid[i][j];
        assign right_msg[16*i +: 16]   = h_msg[i][j];
        assign h_full[i][j]            = right_full[16*i +: 16];
      end
      if (i == TILE_ROWS - 1) begin : g_dport
        assign down_valid[16*j +: 16] = v_valid[i][j];
        assign down_msg[16*j +: 16]   = v_msg[i][j];
        assign v_full[i][j]           = down_full[16*j +: 16];
      end
    end
  end

  // a sender holds a refused bus message (the host side must obey this too)
  assert property (@(posedge clk) disable iff (!rst_n)
                   (bus_valid[0] && bus_full[0]) |=> bus_valid[0]);

endmodule
