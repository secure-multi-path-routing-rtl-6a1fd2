// noc_router -- 5-port mesh router with XY/YX routing and pivot destination swap.
//
// Ports N, E, S, W (neighbours; y grows downwards) and L (the tile's network
// interfaces).  Every input port has two virtual channels: VC 0 carries
// packets in XY mode (red paths) and VC 1 packets in YX mode (blue paths), so
// the channels are split evenly between the two routing functions.  A packet
// is a single wide flit (header + payload) buffered in a per-VC FIFO.
//
// Route computation at the head of each input FIFO:
//   * pivot swap: if the packet is still heading for its pivot (phase2 = 0)
//     and the pivot is this router, the header's target becomes the final
//     destination fin_id, phase2 is set, and if flip_route is set the mode
//     changes from YX to XY (the packet then moves to VC 0).
//   * XY mode corrects x first, YX mode y first; at the target it leaves on L.
// The outgoing VC is the (possibly updated) mode of the packet.
//
// Switch allocation: each output port has a round-robin arbiter over the ten
// input VCs that want it and whose downstream VC has room (`out_ready`).  A
// winner is popped and appears on the output in the same cycle, so a packet
// advances one hop per clock when unblocked.  Links use valid/ready per VC:
// `out_valid[p][v]` with `out_ready[p][v]`; `in_ready` is simply "FIFO not
// full", so no ready depends on a valid combinationally.
//
// The paper builds on a standard cycle-accurate NoC model and only states the
// routing functions, the VC split and the swap at the pivot; single-flit
// packets, buffer depth and the arbiter are this design's own choices.
//
// Lint notes: on the routers of row 0 and column 0 the tests `dst < MY_X` and
// `dst < MY_Y` are constant false, which is correct there (nothing lies to the
// west or north).  route() reads only the routing fields of the header.  The
// grant assertion is disabled during reset with the same reset that clears
// the flops asynchronously; that is a simulation-only use of rst_n.
module noc_router
  import aont_pkg::*;
#(
  parameter int unsigned PAY_W = 264,   // payload bits per packet
  parameter int unsigned DEPTH = 4,     // packets per VC buffer
  parameter int unsigned MY_X  = 0,
  parameter int unsigned MY_Y  = 0
) (
  input  logic             clk,
  input  logic             rst_n,
  input  hdr_t             in_hdr    [NPORTS],
  input  logic [PAY_W-1:0] in_pay    [NPORTS],
  input  logic [NVC-1:0]   in_valid  [NPORTS],
  output logic [NVC-1:0]   in_ready  [NPORTS],
  output hdr_t             out_hdr   [NPORTS],
  output logic [PAY_W-1:0] out_pay   [NPORTS],
  output logic [NVC-1:0]   out_valid [NPORTS],
  input  logic [NVC-1:0]   out_ready [NPORTS],
  output logic             swap_evt           // a pivot swap left this router
);
  localparam int unsigned NIN = NPORTS * NVC;   // input VCs, index p*NVC + v
  localparam int unsigned FW  = HDR_W + PAY_W;

  logic [FW-1:0]    head  [NIN];
  logic             empty [NIN];
  logic             full  [NIN];
  logic [NIN-1:0]   pop;
  hdr_t             nhdr  [NIN];     // header after a possible swap
  logic [2:0]       oport [NIN];
  logic [NIN-1:0]   swapped;
  logic [NIN-1:0]   req   [NPORTS];
  logic [NIN-1:0]   gnt   [NPORTS];

  function automatic logic [2:0] route(input hdr_t h);
    if (h.mode == MODE_XY) begin
      if      (int'(h.dst_x) > MY_X) return 3'(PORT_E);
      else if (int'(h.dst_x) < MY_X) return 3'(PORT_W);
      else if (int'(h.dst_y) > MY_Y) return 3'(PORT_S);
      else if (int'(h.dst_y) < MY_Y) return 3'(PORT_N);
      else                           return 3'(PORT_L);
    end else begin
      if      (int'(h.dst_y) > MY_Y) return 3'(PORT_S);
      else if (int'(h.dst_y) < MY_Y) return 3'(PORT_N);
      else if (int'(h.dst_x) > MY_X) return 3'(PORT_E);
      else if (int'(h.dst_x) < MY_X) return 3'(PORT_W);
      else                           return 3'(PORT_L);
    end
  endfunction

  for (genvar p = 0; p < NPORTS; p++) begin : g_in
    for (genvar v = 0; v < NVC; v++) begin : g_vc
      localparam int unsigned K = p * NVC + v;
      pkt_fifo #(.WIDTH(FW), .DEPTH(DEPTH)) u_fifo (
        .clk   (clk),
        .rst_n (rst_n),
        .push  (in_valid[p][v] && !full[K]),
        .din   ({in_hdr[p], in_pay[p]}),
        .pop   (pop[K]),
        .dout  (head[K]),
        .empty (empty[K]),
        .full  (full[K])
      );
      assign in_ready[p][v] = !full[K];

      always_comb begin
        hdr_t h;
        h = hdr_t'(head[K][FW-1 -: HDR_W]);
        swapped[K] = 1'b0;
        if (!h.phase2 && int'(h.dst_x) == MY_X && int'(h.dst_y) == MY_Y) begin
          h.dst_x  = h.fin_x;
          h.dst_y  = h.fin_y;
          h.phase2 = 1'b1;
          if (h.flip) h.mode = MODE_XY;
          swapped[K] = 1'b1;
        end
        nhdr[K]  = h;
        oport[K] = route(h);
      end
    end
  end

  for (genvar o = 0; o < NPORTS; o++) begin : g_out
    always_comb begin
      for (int unsigned k = 0; k < NIN; k++)
        req[o][k] = !empty[k] && (oport[k] == 3'(o)) && out_ready[o][nhdr[k].mode];
    end

    rr_arb #(.REQS(NIN)) u_arb (
      .clk     (clk),
      .rst_n   (rst_n),
      .req     (req[o]),
      .advance (1'b1),
      .grant   (gnt[o])
    );

    always_comb begin
      out_hdr[o]   = '0;
      out_pay[o]   = '0;
      out_valid[o] = '0;
      for (int unsigned k = 0; k < NIN; k++) begin
        if (gnt[o][k]) begin
          out_hdr[o]                     = nhdr[k];
          out_pay[o]                     = head[k][PAY_W-1:0];
          out_valid[o][nhdr[k].mode]     = 1'b1;
        end
      end
    end
  end

  always_comb begin
    pop = '0;
    for (int unsigned o = 0; o < NPORTS; o++) pop = pop | gnt[o];
  end

  assign swap_evt = |(pop & swapped);

  // each output forwards at most one packet per cycle
  for (genvar o = 0; o < NPORTS; o++) begin : g_chk
    a_onehot_grant: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(gnt[o]));
  end
endmodule
