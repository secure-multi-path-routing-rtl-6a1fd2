// ni_dst -- destination network interface (NI_D): reassembly and inverse AONT.
//
// Packets leave the router's local port one at a time into a one-entry input
// register.  From there a packet either completes a message whose other half
// is already waiting in one of SLOTS reassembly slots (same source and tag,
// other sequence number), or takes a free slot to wait for its partner.  A
// completed pair is ordered by sequence number, Pkt1's payload (blocks
// B'_1..B'_(s/2)) below Pkt2's (B'_(s/2+1)..B'_(s+1)), and handed to the
// inverse AONT (aont_dec); the recovered message is then offered to the core
// with the source coordinates until it is taken.
//
// Handshake: ej_valid[v] / ej_ready[v] from the router (ready = input register
// empty, never dependent on the packet itself); out_valid / out_ready to the
// core.  Timing: a matching half is decoded from the cycle after it enters
// the register; the message appears 4 cycles later.  While the decoder or
// the output is busy, or no slot is free for an unmatched half, the register
// holds and backpressure reaches the network.
//
// The paper states only that the halves are reassembled by their sequence
// numbers; the slot table, its size and the tag match are this design's own
// choices.  The table can fill with halves whose partners are queued behind an
// unmatched half: with more than SLOTS messages in flight towards one tile the
// interface can therefore block; SLOTS bounds that.
//
// Lint note: the top block of Pkt1's payload field is zero padding and is
// never read, so those bits of p1 are unused on purpose.
module ni_dst
  import aont_pkg::*;
#(
  parameter int unsigned N     = 4,
  parameter int unsigned S     = 64,
  parameter int unsigned SLOTS = 8
) (
  input  logic                           clk,
  input  logic                           rst_n,
  // from the router's local output
  input  hdr_t                           ej_hdr,
  input  logic [(S/2+1)*N*$clog2(N)-1:0] ej_pay,
  input  logic [NVC-1:0]                 ej_valid,
  output logic [NVC-1:0]                 ej_ready,
  // to the core
  output logic                           out_valid,
  input  logic                           out_ready,
  output logic [S*N*$clog2(N)-1:0]       out_msg,
  output logic [COORD_W-1:0]             out_src_x,
  output logic [COORD_W-1:0]             out_src_y,
  output logic                           ooo_evt     // Pkt2 arrived before Pkt1
);
  localparam int unsigned W     = $clog2(N);
  localparam int unsigned BW    = N * W;
  localparam int unsigned PAY_W = (S / 2 + 1) * BW;
  localparam int unsigned SW    = (SLOTS > 1) ? $clog2(SLOTS) : 1;

  // one-entry input register
  logic             in_v_q;
  hdr_t             in_h_q;
  logic [PAY_W-1:0] in_p_q;

  // reassembly slots
  logic             sl_v   [SLOTS];
  hdr_t             sl_h   [SLOTS];
  logic [PAY_W-1:0] sl_p   [SLOTS];

  logic             match, free;
  logic [SW-1:0]    match_idx, free_idx;
  logic             dec_busy_q;       // from start until the result is taken
  logic             dec_start, dec_done;
  logic [(S+1)*BW-1:0] dec_in;
  logic [S*BW-1:0]  dec_msg;
  logic             take;             // input register consumed this cycle
  logic [COORD_W-1:0] src_x_q, src_y_q;

  assign ej_ready = {NVC{!in_v_q}};

  always_comb begin
    match = 1'b0; match_idx = '0;
    free  = 1'b0; free_idx  = '0;
    for (int unsigned k = 0; k < SLOTS; k++) begin
      if (sl_v[k] && !match && sl_h[k].src_x == in_h_q.src_x && sl_h[k].src_y == in_h_q.src_y
          && sl_h[k].tag == in_h_q.tag && sl_h[k].seq != in_h_q.seq) begin
        match = 1'b1; match_idx = SW'(k);
      end
      if (!sl_v[k] && !free) begin
        free = 1'b1; free_idx = SW'(k);
      end
    end
  end

  assign dec_start = in_v_q && match && !dec_busy_q;
  assign take      = dec_start || (in_v_q && !match && free);

  always_comb begin
    logic [PAY_W-1:0] p1, p2;
    p1 = in_h_q.seq ? sl_p[match_idx] : in_p_q;   // Pkt1 payload (s/2 blocks)
    p2 = in_h_q.seq ? in_p_q : sl_p[match_idx];   // Pkt2 payload (s/2+1 blocks)
    dec_in = {p2, p1[(S/2)*BW-1:0]};
  end

  aont_dec #(.N(N), .S(S)) u_dec (
    .clk    (clk),
    .rst_n  (rst_n),
    .start  (dec_start),
    .pseudo (dec_in),
    .done   (dec_done),
    .msg    (dec_msg)
  );

  assign out_msg   = dec_msg;
  assign out_src_x = src_x_q;
  assign out_src_y = src_y_q;
  assign ooo_evt   = take && !match && in_h_q.seq;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      in_v_q     <= 1'b0;
      in_h_q     <= '0;
      in_p_q     <= '0;
      dec_busy_q <= 1'b0;
      out_valid  <= 1'b0;
      src_x_q    <= '0;
      src_y_q    <= '0;
      for (int unsigned k = 0; k < SLOTS; k++) begin
        sl_v[k] <= 1'b0;
        sl_h[k] <= '0;
        sl_p[k] <= '0;
      end
    end else begin
      if (take) in_v_q <= 1'b0;
      if (!in_v_q && (ej_valid != '0)) begin
        in_v_q <= 1'b1;
        in_h_q <= ej_hdr;
        in_p_q <= ej_pay;
      end
      if (dec_start) begin
        dec_busy_q      <= 1'b1;
        sl_v[match_idx] <= 1'b0;
        src_x_q         <= in_h_q.src_x;
        src_y_q         <= in_h_q.src_y;
      end else if (take) begin
        sl_v[free_idx] <= 1'b1;
        sl_h[free_idx] <= in_h_q;
        sl_p[free_idx] <= in_p_q;
      end
      if (dec_done) out_valid <= 1'b1;
      if (out_valid && out_ready) begin
        out_valid  <= 1'b0;
        dec_busy_q <= 1'b0;
      end
    end
  end

  a_one_vc: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(ej_valid));
endmodule
