// tile: a Tile, a 4x4 array of SiteMs (256 SiteOs on a 16x16 grid).
//
// SiteMs are joined like the SiteOs inside them: the four right ports of a
// SiteM feed the four left ports of its right neighbour and its four down
// ports the top ports of the SiteM below, so the Tile is one 16x16 mesh of
// SiteOs on which the "same row: right, otherwise down" rule carries a message
// from any entry point to any SiteO below or to the right of it. The vertical
// bus of each of the 16 SiteO columns runs through the four SiteMs of that
// column; the SiteM whose rows the destination names takes the message, the
// others ignore it.
//
// Interface: valid/message/full triples, 16 wide, indexed by SiteO row (left,
// right) or SiteO column (top, down, bus). base_row and base_col (constant
// inputs, multiples of 16) give the global position of the top-left SiteO.
//
// Follows the published Tile: 16 SiteMs in rows and columns, organised like
// the SiteOs of a SiteM, with messages to SiteMs in the same row and column.
// The further links the text names (a SiteM's 4 outputs toward other Tiles of
// its row and 4 toward other columns or Blocks) are carried here by the same
// mesh ports; no separate long-distance wires are modelled.
module tile
  import mipu_pkg::*;
#(
  parameter int unsigned FIFO_DEPTH = 4
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic  [5:0] base_row,
  input  logic  [5:0] base_col,
  input  logic [15:0] top_valid,
  input  msg_t [15:0] top_msg,
  output logic [15:0] top_full,
  input  logic [15:0] left_valid,
  input  msg_t [15:0] left_msg,
  output logic [15:0] left_full,
  output logic [15:0] right_valid,
  output msg_t [15:0] right_msg,
  input  logic [15:0] right_full,
  output logic [15:0] down_valid,
  output msg_t [15:0] down_msg,
  input  logic [15:0] down_full,
  input  logic [15:0] bus_valid,
  input  msg_t [15:0] bus_msg,
  output logic [15:0] bus_full
);

  // h_*[i][j]: right ports of SiteM (i,j); v_*[i][j]: its down ports
  logic [3:0][3:0][3:0] h_valid, h_full, v_valid, v_full, bfull;
  msg_t [3:0][3:0][3:0] h_msg, v_msg;

  for (genvar j = 0; j < 4; j++) begin : g_bus
    for (genvar k = 0; k < 4; k++) begin : g_line
      assign bus_full[4*j+k] = bfull[0][j][k] | bfull[1][j][k] | bfull[2][j][k] | bfull[3][j][k];
    end
  end

  for (genvar i = 0; i < 4; i++) begin : g_row
    for (genvar j = 0; j < 4; j++) begin : g_col
      logic [3:0] l_valid, l_full, t_valid, t_full;
      msg_t [3:0] l_msg, t_msg;

      if (j == 0) begin : g_lport
        assign l_valid = left_valid[4*i +: 4];
        assign l_msg   = left_msg[4*i +: 4];
        assign left_full[4*i +: 4] = l_full;
      end else begin : g_lmesh
        assign l_valid = h_valid[i][j-1];
        assign l_msg   = h_msg[i][j-1];
        assign h_full[i][j-1] = l_full;
      end

      if (i == 0) begin : g_tport
        assign t_valid = top_valid[4*j +: 4];
        assign t_msg   = top_msg[4*j +: 4];
        assign top_full[4*j +: 4] = t_full;
      end else begin : g_tmesh
        assign t_valid = v_valid[i-1][j];
        assign t_msg   = v_msg[i-1][j];
        assign v_full[i-1][j] = t_full;
      end

      sitem #(.FIFO_DEPTH(FIFO_DEPTH)) u_sitem (
        .clk, .rst_n, .base_row(base_row + 6'(4*i)), .base_col(base_col + 6'(4*j)),
        .top_valid(t_valid), .top_msg(t_msg), .top_full(t_full),
        .left_valid(l_valid), .left_msg(l_msg), .left_full(l_full),
        .right_valid(h_valid[i][j]), .right_msg(h_msg[i][j]), .right_full(h_full[i][j]),
        .down_valid(v_valid[i][j]), .down_msg(v_msg[i][j]), .down_full(v_full[i][j]),
        .bus_valid(bus_valid[4*j +: 4]), .bus_msg(bus_msg[4*j +: 4]),
        .bus_full(bfull[i][j]));

      if (j == 3) begin : g_rport
        assign right_valid[4*i +: 4] = h_valid[i][j];
        assign right_msg[4*i +: 4]   = h_msg[i][j];
        assign h_full[i][j]          = right_full[4*i +: 4];
      end
      if (i == 3) begin : g_dport
        assign down_valid[4*j +: 4] = v_valid[i][j];
        assign down_msg[4*j +: 4]   = v_msg[i][j];
        assign v_full[i][j]         = down_full[4*j +: 4];
      end
    end
  end

endmodule
