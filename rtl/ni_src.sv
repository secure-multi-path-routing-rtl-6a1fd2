// ni_src -- source network interface (NI_S): AONT, packetization, path choice.
//
// Accepts one message M (s blocks of n symbols) for a destination tile, draws
// the permutation key K' from perm_gen, and runs the quasigroup AONT
// (aont_enc) to get the s+1 pseudo-blocks.  It splits them as the paper does:
// M'_1 = B'_1 .. B'_(s/2) becomes the payload of Pkt1 and
// M'_2 = B'_(s/2+1) .. B'_(s+1) the payload of Pkt2 (one block longer; Pkt1's
// unused top block is zero).  path_gen picks the blue and red pivots when
// the message is accepted.  Pkt1 goes to the blue pivot in YX mode (VC 1),
// Pkt2 to the red pivot in XY mode (VC 0); both headers carry fin_id, the
// flip_route flag, a sequence number (0 / 1) and a per-source message tag that
// lets the destination pair the halves.
//
// Handshake: msg_valid / msg_ready towards the core (ready only when idle);
// inj_valid[v] / inj_ready[v] towards the router's local input.  Timing: the
// message is accepted in cycle 0, the pseudo-blocks are ready after cycle 2,
// Pkt1 is offered from cycle 3 and Pkt2 in the cycle after Pkt1 is taken, so
// an unblocked message occupies the interface for 5 cycles.  The sequential
// one-message-at-a-time flow is this design's choice; the paper gives no
// timing for the interface.
module ni_src
  import aont_pkg::*;
#(
  parameter int unsigned X     = 8,
  parameter int unsigned Y     = 8,
  parameter int unsigned N     = 4,
  parameter int unsigned S     = 64,
  parameter int unsigned MY_X  = 0,
  parameter int unsigned MY_Y  = 0,
  parameter logic [31:0] SEED  = 32'h1357_9BDF
) (
  input  logic                         clk,
  input  logic                         rst_n,
  // from the core
  input  logic                         msg_valid,
  output logic                         msg_ready,
  input  logic [S*N*$clog2(N)-1:0]     msg_data,
  input  logic [COORD_W-1:0]           msg_dst_x,
  input  logic [COORD_W-1:0]           msg_dst_y,
  // to the router's local input
  output hdr_t                         inj_hdr,
  output logic [(S/2+1)*N*$clog2(N)-1:0] inj_pay,
  output logic [NVC-1:0]               inj_valid,
  input  logic [NVC-1:0]               inj_ready
);
  localparam int unsigned W     = $clog2(N);
  localparam int unsigned BW    = N * W;
  localparam int unsigned PAY_W = (S / 2 + 1) * BW;

  typedef enum logic [1:0] {S_IDLE, S_ENC, S_PKT1, S_PKT2} state_e;

  state_e               state_q;
  logic [W-1:0]         key [N];
  logic                 enc_done;
  logic [(S+1)*BW-1:0]  pseudo;
  logic [31:0]          lfsr_q;
  logic [COORD_W-1:0]   bx, by, rx, ry;
  logic                 flip;
  hdr_t                 h1_q, h2_q;
  logic [TAG_W-1:0]     tag_q;
  logic                 accept;

  perm_gen #(.N(N), .SEED(SEED ^ 32'h5A5A_0F0F)) u_perm (
    .clk   (clk),
    .rst_n (rst_n),
    .key   (key)
  );

  assign msg_ready = (state_q == S_IDLE);
  assign accept    = msg_valid && msg_ready;

  aont_enc #(.N(N), .S(S)) u_enc (
    .clk    (clk),
    .rst_n  (rst_n),
    .start  (accept),
    .msg    (msg_data),
    .key    (key),
    .done   (enc_done),
    .pseudo (pseudo)
  );

  path_gen #(.X(X), .Y(Y)) u_path (
    .src_x  (COORD_W'(MY_X)),
    .src_y  (COORD_W'(MY_Y)),
    .dst_x  (msg_dst_x),
    .dst_y  (msg_dst_y),
    .rnd    (lfsr_q),
    .blue_x (bx),
    .blue_y (by),
    .red_x  (rx),
    .red_y  (ry),
    .flip   (flip)
  );

  always_comb begin
    inj_hdr   = (state_q == S_PKT2) ? h2_q : h1_q;
    inj_valid = '0;
    inj_pay   = '0;
    if (state_q == S_PKT1) begin
      inj_valid[MODE_YX] = 1'b1;
      inj_pay            = PAY_W'(pseudo[0 +: (S/2)*BW]);
    end else if (state_q == S_PKT2) begin
      inj_valid[MODE_XY] = 1'b1;
      inj_pay            = pseudo[(S/2)*BW +: PAY_W];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= S_IDLE;
      lfsr_q  <= SEED;
      tag_q   <= '0;
      h1_q    <= '0;
      h2_q    <= '0;
    end else begin
      lfsr_q <= lfsr_q[0] ? ((lfsr_q >> 1) ^ 32'h8020_0003) : (lfsr_q >> 1);
      unique case (state_q)
        S_IDLE: if (accept) begin
          state_q <= S_ENC;
          h1_q <= '{dst_x: bx, dst_y: by, fin_x: msg_dst_x, fin_y: msg_dst_y,
                    src_x: COORD_W'(MY_X), src_y: COORD_W'(MY_Y), phase2: 1'b0,
                    mode: MODE_YX, flip: flip, seq: 1'b0, tag: tag_q};
          h2_q <= '{dst_x: rx, dst_y: ry, fin_x: msg_dst_x, fin_y: msg_dst_y,
                    src_x: COORD_W'(MY_X), src_y: COORD_W'(MY_Y), phase2: 1'b0,
                    mode: MODE_XY, flip: 1'b0, seq: 1'b1, tag: tag_q};
        end
        S_ENC:  if (enc_done) state_q <= S_PKT1;
        S_PKT1: if (inj_ready[MODE_YX]) state_q <= S_PKT2;
        S_PKT2: if (inj_ready[MODE_XY]) begin
          state_q <= S_IDLE;
          tag_q   <= tag_q + 1'b1;
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end
endmodule
