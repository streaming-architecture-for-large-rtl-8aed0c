// window_buffer: the line buffer ("shift register") of a streaming layer.
//
// Pixels arrive depth-first: all I channels of pixel (r,c), then pixel
// (r,c+1), row after row of a (padded) row of WP pixels. The buffer keeps the
// most recent L entries, L = I*((K-1)*WP + K) for a convolution window, which
// is the buffer size the paper derives for a depth-first scan. Each
// shift_en pushes din in as the newest entry (age 0).
//
// Storage is one shift register per bit plane (EW planes of 1 bit per
// entry). The newest entry enters at the top bit, so the I channels of one
// pixel lie in I adjacent bits in channel order, and every window pixel is a
// plain slice of each plane.
//
// The window output is plane-major: bit window[p*NW + j] is bit p of window
// entry j, NW = K*K*TAP_CH, j = (ky*K + kx)*TAP_CH + t. Entry j is the entry
// of age ((K-1-ky)*WP + (K-1-kx))*I + (TAP_CH-1-t): window row ky, column kx,
// channel t when the newest entry is the last channel of the bottom-right
// pixel. A convolution uses TAP_CH = I (all channels of the window). A
// pooling layer uses TAP_CH = 1 (the channel just arriving) with
// LOOKAHEAD = 1: age 0 is then din itself, so the window is complete in the
// same cycle its last entry arrives, and the register holds one entry fewer.
//
// Timing: one shift per clock at most; window is combinational from the
// register (and din when LOOKAHEAD = 1). No reset: every window a layer uses
// is filled with entries of the current image before it is read.
module window_buffer #(
  parameter int EW        = 2,    // bits per entry
  parameter int I         = 64,   // channels per pixel
  parameter int WP        = 58,   // pixels per (padded) row
  parameter int K         = 3,    // window size
  parameter int TAP_CH    = 64,   // channels per window pixel (I or 1)
  parameter bit LOOKAHEAD = 1'b0
) (
  input  logic                      clk,
  input  logic                      shift_en,
  input  logic [EW-1:0]             din,
  output logic [EW*K*K*TAP_CH-1:0]  window
);

  localparam int NW     = K * K * TAP_CH;
  localparam int MAXAGE = ((K - 1) * WP + (K - 1)) * I + TAP_CH - 1;
  localparam int LA     = int'(LOOKAHEAD);
  localparam int L      = MAXAGE + 1 - LA;

  // plane p: age a (a >= LA) sits at bit L-1-(a-LA)
  logic [L-1:0] sr [EW];

  for (genvar p = 0; p < EW; p++) begin : g_plane
    if (L > 1) begin : g_long
      always_ff @(posedge clk) if (shift_en) sr[p] <= {din[p], sr[p][L-1:1]};
    end else begin : g_one
      always_ff @(posedge clk) if (shift_en) sr[p] <= din[p];
    end

    for (genvar ky = 0; ky < K; ky++) begin : g_ky
      for (genvar kx = 0; kx < K; kx++) begin : g_kx
        // age of channel TAP_CH-1 (the newest) of this window pixel
        localparam int A0 = ((K - 1 - ky) * WP + (K - 1 - kx)) * I;
        localparam int J0 = (ky * K + kx) * TAP_CH;
        if (LOOKAHEAD && A0 == 0) begin : g_din
          // only reachable with TAP_CH = 1
          assign window[p*NW + J0] = din[p];
        end else begin : g_sr
          // channels t = 0..TAP_CH-1 have ages A0+TAP_CH-1 .. A0, i.e. bits
          // L-1-(A0+TAP_CH-1-LA) .. L-1-(A0-LA), in increasing order
          assign window[p*NW + J0 +: TAP_CH] = sr[p][L - 1 - (A0 + TAP_CH - 1 - LA) +: TAP_CH];
        end
      end
    end
  end

endmodule
