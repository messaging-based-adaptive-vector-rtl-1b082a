// sitem: a SiteM, a 4x4 array of SiteOs with one vertical bus per column.
//
// SiteOs are connected as a mesh: each SiteO's right output feeds the left
// input of its right neighbour and its down output the top input of the SiteO
// below. The four top ports feed the top row, the four left ports the left
// column; the right column and the bottom row drive the right and down ports.
// A message entering a top or left port reaches its SiteO by hopping.
//
// Vertical bus: each column has a bus port that delivers one message to all
// four SiteOs of that column in the same cycle, so that one input value meets
// four different stored weights (the same image pixel for four filters, the
// same element of matrix B for four rows of matrix A). The SiteM takes a bus
// message when the row part of its destination (address bits [11:10] and
// [7:6]) names this SiteM, and only when none of the four top queues of the
// column is full; it then writes a copy into each of those queues with the
// destination rewritten to that SiteO, so each copy executes there. While the
// bus writes, the normal top input of those SiteOs sees full. A bus message
// naming another SiteM row is ignored and reports not-full, so buses of the
// SiteMs of one column can be tied together by the level above.
//
// Interface: all ports are valid/message/full triples, 4 wide, indexed by row
// (left, right) or column (top, down, bus). A transfer happens in a cycle with
// valid high and full low. base_row and base_col (constant inputs, multiples
// of 4) are the global row and column of the SiteO in the top-left corner;
// SiteO (r,c) answers to make_addr(base_row + r, base_col + c).
//
// Timing: a bus message is written into the four queues at the clock edge
// after it is offered; with empty queues the four SiteOs act on it in that
// cycle and their outputs appear one clock later.
//
// Follows the published SiteM: 16 SiteOs in rows and columns, top ports and
// left/right/down connections between SiteOs, and a vertical bus per column
// that dispatches the same message to several SiteOs at once. The way a bus
// message selects its SiteOs (by column and SiteM) is this design's choice.
// The horizontal buses the text also mentions are not modelled separately:
// results travel along a row by hopping, one message per link per cycle.
module sitem
  import mipu_pkg::*;
#(
  parameter int unsigned FIFO_DEPTH = 4
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic     [5:0] base_row,
  input  logic     [5:0] base_col,
  input  logic     [3:0] top_valid,
  input  msg_t     [3:0] top_msg,
  output logic     [3:0] top_full,
  input  logic     [3:0] left_valid,
  input  msg_t     [3:0] left_msg,
  output logic     [3:0] left_full,
  output logic     [3:0] right_valid,
  output msg_t     [3:0] right_msg,
  input  logic     [3:0] right_full,
  output logic     [3:0] down_valid,
  output msg_t     [3:0] down_msg,
  input  logic     [3:0] down_full,
  input  logic     [3:0] bus_valid,
  input  msg_t     [3:0] bus_msg,
  output logic     [3:0] bus_full
);


  // mesh wires: h_* leave SiteO (r,c) to the right, v_* leave it downwards
  logic [3:0][3:0] h_valid, h_full, v_valid, v_full;
  msg_t [3:0][3:0] h_msg, v_msg;
  // top inputs of every SiteO after the bus multiplexer
  logic [3:0][3:0] t_valid, t_full, t_src_full;
  msg_t [3:0][3:0] t_msg;
  logic [3:0]      bus_hit, bus_go;

  for (genvar c = 0; c < 4; c++) begin : g_bus
    assign bus_hit[c]  = bus_valid[c] && (addr_row(bus_msg[c].dest)[5:2] == base_row[5:2]);
    assign bus_go[c]   = bus_hit[c] && !(|{t_full[0][c], t_full[1][c], t_full[2][c], t_full[3][c]});
    assign bus_full[c] = bus_hit[c] && !bus_go[c];
  end

  for (genvar r = 0; r < 4; r++) begin : g_row
    for (genvar c = 0; c < 4; c++) begin : g_col
      logic l_valid, l_full;
      msg_t l_msg;
      logic src_valid;
      msg_t src_msg, bus_copy;

      // left input: SiteM port or left neighbour
      if (c == 0) begin : g_lport
        assign l_valid      = left_valid[r];
        assign l_msg        = left_msg[r];
        assign left_full[r] = l_full;
      end else begin : g_lmesh
        assign l_valid          = h_valid[r][c-1];
        assign l_msg            = h_msg[r][c-1];
        assign h_full[r][c-1]   = l_full;
      end

      // normal top source: SiteM port or the SiteO above
      if (r == 0) begin : g_tport
        assign src_valid   = top_valid[c];
        assign src_msg     = top_msg[c];
        assign top_full[c] = t_src_full[r][c];
      end else begin : g_tmesh
        assign src_valid        = v_valid[r-1][c];
        assign src_msg          = v_msg[r-1][c];
        assign v_full[r-1][c]   = t_src_full[r][c];
      end

      always_comb begin
        bus_copy      = bus_msg[c];
        bus_copy.dest = make_addr(base_row + 6'(r), base_col + 6'(c));
      end

      assign t_valid[r][c]    = bus_go[c] ? 1'b1 : src_valid;
      assign t_msg[r][c]      = bus_go[c] ? bus_copy : src_msg;
      assign t_src_full[r][c] = t_full[r][c] || bus_go[c];

      siteo #(.FIFO_DEPTH(FIFO_DEPTH)) u_siteo (
        .clk, .rst_n, .my_row(base_row + 6'(r)), .my_col(base_col + 6'(c)),
        .left_valid(l_valid), .left_msg(l_msg), .left_full(l_full),
        .top_valid(t_valid[r][c]), .top_msg(t_msg[r][c]), .top_full(t_full[r][c]),
        .right_valid(h_valid[r][c]), .right_msg(h_msg[r][c]), .right_full(h_full[r][c]),
        .down_valid(v_valid[r][c]), .down_msg(v_msg[r][c]), .down_full(v_full[r][c]));

      if (c == 3) begin : g_rport
        assign right_valid[r] = h_valid[r][c];
        assign right_msg[r]   = h_msg[r][c];
        assign h_full[r][c]   = right_full[r];
      end
      if (r == 3) begin : g_dport
        assign down_valid[c] = v_valid[r][c];
        assign down_msg[c]   = v_msg[r][c];
        assign v_full[r][c]  = down_full[c];
      end
    end
  end

endmodule
