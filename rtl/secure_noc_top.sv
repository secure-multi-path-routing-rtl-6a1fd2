// secure_noc_top -- X x Y mesh NoC with AONT multi-path routing at every tile.
//
// Each tile (x, y) holds a router (noc_router), a source interface (ni_src:
// AONT + two packets + pivot choice) and a destination interface (ni_dst:
// reassembly + inverse AONT).  Routers are wired to their four neighbours;
// ports on the mesh edge are tied off.  Tile index k = y * X + x, with row 0
// on top.  The processing cores, caches and memory controllers that produce
// and consume messages are outside this design: each tile's message ports
// are brought out as the arrays below.
//
// Sending: present msg_in / msg_in_dst_{x,y} with msg_in_valid[k] and hold
// until msg_in_ready[k].  Receiving: msg_out_valid[k] with the message and its
// source; it is held until msg_out_ready[k].  Every message is split by the
// AONT into two packets that cross the mesh on disjoint routes through a blue
// and a red pivot router, so no single router other than the two end routers
// ever sees all the blocks of a message.
//
// Defaults follow the paper where it gives a number: an 8 x 8 mesh and n = 4
// (its worked example of the base-n symbols).  s = 64 blocks, i.e. a 64-byte
// cache line of 4 two-bit symbols per block, the buffer depth and slot count
// are this design's choices.
module secure_noc_top
  import aont_pkg::*;
#(
  parameter int unsigned X     = 8,
  parameter int unsigned Y     = 8,
  parameter int unsigned N     = 4,
  parameter int unsigned S     = 64,
  parameter int unsigned DEPTH = 4,
  parameter int unsigned SLOTS = 8
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     msg_in_valid  [X*Y],
  output logic                     msg_in_ready  [X*Y],
  input  logic [S*N*$clog2(N)-1:0] msg_in        [X*Y],
  input  logic [COORD_W-1:0]       msg_in_dst_x  [X*Y],
  input  logic [COORD_W-1:0]       msg_in_dst_y  [X*Y],
  output logic                     msg_out_valid [X*Y],
  input  logic                     msg_out_ready [X*Y],
  output logic [S*N*$clog2(N)-1:0] msg_out       [X*Y],
  output logic [COORD_W-1:0]       msg_out_src_x [X*Y],
  output logic [COORD_W-1:0]       msg_out_src_y [X*Y],
  output logic [X*Y-1:0]           pivot_swap,   // per router: a pivot swap this cycle
  output logic [X*Y-1:0]           ooo_arrival   // per tile: Pkt2 arrived before Pkt1
);
  localparam int unsigned K     = X * Y;
  localparam int unsigned W     = $clog2(N);
  localparam int unsigned PAY_W = (S / 2 + 1) * N * W;

  // router outputs, indexed [tile][port]
  hdr_t             r_out_hdr   [K][NPORTS];
  logic [PAY_W-1:0] r_out_pay   [K][NPORTS];
  logic [NVC-1:0]   r_out_valid [K][NPORTS];
  logic [NVC-1:0]   r_in_ready  [K][NPORTS];
  // router inputs
  hdr_t             r_in_hdr    [K][NPORTS];
  logic [PAY_W-1:0] r_in_pay    [K][NPORTS];
  logic [NVC-1:0]   r_in_valid  [K][NPORTS];
  logic [NVC-1:0]   r_out_ready [K][NPORTS];

  for (genvar gy = 0; gy < Y; gy++) begin : g_row
    for (genvar gx = 0; gx < X; gx++) begin : g_col
      localparam int unsigned ID = gy * X + gx;

      // ---- neighbour links: input of port P comes from the neighbour's opposite port
      if (gy > 0) begin : g_n
        assign r_in_hdr[ID][PORT_N]    = r_out_hdr[ID-X][PORT_S];
        assign r_in_pay[ID][PORT_N]    = r_out_pay[ID-X][PORT_S];
        assign r_in_valid[ID][PORT_N]  = r_out_valid[ID-X][PORT_S];
        assign r_out_ready[ID][PORT_N] = r_in_ready[ID-X][PORT_S];
      end else begin : g_n_edge
        assign r_in_hdr[ID][PORT_N]    = '0;
        assign r_in_pay[ID][PORT_N]    = '0;
        assign r_in_valid[ID][PORT_N]  = '0;
        assign r_out_ready[ID][PORT_N] = '0;
      end
      if (gy < Y - 1) begin : g_s
        assign r_in_hdr[ID][PORT_S]    = r_out_hdr[ID+X][PORT_N];
        assign r_in_pay[ID][PORT_S]    = r_out_pay[ID+X][PORT_N];
        assign r_in_valid[ID][PORT_S]  = r_out_valid[ID+X][PORT_N];
        assign r_out_ready[ID][PORT_S] = r_in_ready[ID+X][PORT_N];
      end else begin : g_s_edge
        assign r_in_hdr[ID][PORT_S]    = '0;
        assign r_in_pay[ID][PORT_S]    = '0;
        assign r_in_valid[ID][PORT_S]  = '0;
        assign r_out_ready[ID][PORT_S] = '0;
      end
      if (gx > 0) begin : g_w
        assign r_in_hdr[ID][PORT_W]    = r_out_hdr[ID-1][PORT_E];
        assign r_in_pay[ID][PORT_W]    = r_out_pay[ID-1][PORT_E];
        assign r_in_valid[ID][PORT_W]  = r_out_valid[ID-1][PORT_E];
        assign r_out_ready[ID][PORT_W] = r_in_ready[ID-1][PORT_E];
      end else begin : g_w_edge
        assign r_in_hdr[ID][PORT_W]    = '0;
        assign r_in_pay[ID][PORT_W]    = '0;
        assign r_in_valid[ID][PORT_W]  = '0;
        assign r_out_ready[ID][PORT_W] = '0;
      end
      if (gx < X - 1) begin : g_e
        assign r_in_hdr[ID][PORT_E]    = r_out_hdr[ID+1][PORT_W];
        assign r_in_pay[ID][PORT_E]    = r_out_pay[ID+1][PORT_W];
        assign r_in_valid[ID][PORT_E]  = r_out_valid[ID+1][PORT_W];
        assign r_out_ready[ID][PORT_E] = r_in_ready[ID+1][PORT_W];
      end else begin : g_e_edge
        assign r_in_hdr[ID][PORT_E]    = '0;
        assign r_in_pay[ID][PORT_E]    = '0;
        assign r_in_valid[ID][PORT_E]  = '0;
        assign r_out_ready[ID][PORT_E] = '0;
      end

      noc_router #(.PAY_W(PAY_W), .DEPTH(DEPTH), .MY_X(gx), .MY_Y(gy)) u_router (
        .clk       (clk),
        .rst_n     (rst_n),
        .in_hdr    (r_in_hdr[ID]),
        .in_pay    (r_in_pay[ID]),
        .in_valid  (r_in_valid[ID]),
        .in_ready  (r_in_ready[ID]),
        .out_hdr   (r_out_hdr[ID]),
        .out_pay   (r_out_pay[ID]),
        .out_valid (r_out_valid[ID]),
        .out_ready (r_out_ready[ID]),
        .swap_evt  (pivot_swap[ID])
      );

      ni_src #(.X(X), .Y(Y), .N(N), .S(S), .MY_X(gx), .MY_Y(gy),
               .SEED(32'h2468_ACE1 + 32'(ID) * 32'h9E37_79B9)) u_ni_src (
        .clk       (clk),
        .rst_n     (rst_n),
        .msg_valid (msg_in_valid[ID]),
        .msg_ready (msg_in_ready[ID]),
        .msg_data  (msg_in[ID]),
        .msg_dst_x (msg_in_dst_x[ID]),
        .msg_dst_y (msg_in_dst_y[ID]),
        .inj_hdr   (r_in_hdr[ID][PORT_L]),
        .inj_pay   (r_in_pay[ID][PORT_L]),
        .inj_valid (r_in_valid[ID][PORT_L]),
        .inj_ready (r_in_ready[ID][PORT_L])
      );

      ni_dst #(.N(N), .S(S), .SLOTS(SLOTS)) u_ni_dst (
        .clk       (clk),
        .rst_n     (rst_n),
        .ej_hdr    (r_out_hdr[ID][PORT_L]),
        .ej_pay    (r_out_pay[ID][PORT_L]),
        .ej_valid  (r_out_valid[ID][PORT_L]),
        .ej_ready  (r_out_ready[ID][PORT_L]),
        .out_valid (msg_out_valid[ID]),
        .out_ready (msg_out_ready[ID]),
        .out_msg   (msg_out[ID]),
        .out_src_x (msg_out_src_x[ID]),
        .out_src_y (msg_out_src_y[ID]),
        .ooo_evt   (ooo_arrival[ID])
      );
    end
  end
endmodule
