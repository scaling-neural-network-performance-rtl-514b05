// swu: sliding window unit. Turns a stream of feature map pixels into the
// stream of convolution windows that an MMVTU consumes.
//
// Buffering follows the paper's reduced-buffer SWU and its Eq. 1: the line
// buffer keeps only the rows that the K-row kernel still needs plus room to
// collect new rows, organised as ceil(K/S)+1 stripes of S rows, each stripe
// S*N pixels deep. A memory word is one whole pixel of all C channels for
// all M images (C*A*M bits). Rows are written in a circular order, and a row
// may be overwritten as soon as no remaining output row's window covers it,
// so input of the next rows (and of the next frame) overlaps window output.
//
// Window order (own choice, the paper does not give it): for every output
// pixel (oy, ox) in raster order, the window elements (ky, kx) in raster
// order, and for each element the C channels in chunks of SIMD channels,
// chunk innermost (CHUNK_OUTER=0, the MMVTU column order ky,kx,c) or
// outermost (CHUNK_OUTER=1, used by the pooling unit). Positions in the
// zero padding of PAD pixels around the map read as 0. The input stream
// carries IN_PAR channels per beat; C/IN_PAR beats make one pixel, pixels
// arrive in raster order, frames back to back. Padding, the handshakes and
// the window order are this design's own choices.
//
// Timing: one window beat per cycle while the needed rows are present; the
// memory read is synchronous, so out_data is a register. Output row oy
// starts once input row min(N-1, oy*S-PAD+K-1) of its frame is complete.
// Row counters are 32 bits and wrap after 2^32 input rows.
module swu import qnn_pkg::*; #(
  parameter int unsigned N           = 8,
  parameter int unsigned C           = 4,
  parameter int unsigned K           = 3,
  parameter int unsigned S           = 1,
  parameter int unsigned PAD         = 0,
  parameter int unsigned A           = 2,
  parameter int unsigned M           = 1,
  parameter int unsigned SIMD        = 2,
  parameter int unsigned IN_PAR      = 2,
  parameter bit          CHUNK_OUTER = 1'b0
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  in_valid,
  output logic                  in_ready,
  input  logic [M*IN_PAR*A-1:0] in_data,
  output logic                  out_valid,
  input  logic                  out_ready,
  output logic [M*SIMD*A-1:0]   out_data
);
  localparam int unsigned OD   = out_dim(N, K, S, PAD);
  localparam int unsigned RB   = swu_rows(K, S);       // rows in the buffer
  localparam int unsigned DEPTH = RB * N;
  localparam int unsigned AW   = $clog2(DEPTH);
  localparam int unsigned PB   = C / IN_PAR;           // input beats per pixel
  localparam int unsigned CF   = C / SIMD;             // channel chunks
  localparam int unsigned PXW  = M * C * A;            // memory word
  localparam int unsigned NRB  = N % RB;

  // ---------------- line buffer ----------------
  logic [PXW-1:0] mem [DEPTH];

  // ---------------- writer ----------------
  logic [PXW-1:0] pix, pix_next;       // pixel assembly register
  int unsigned    wbeat, wx, wslot;    // beat in pixel, column, buffer row
  logic [31:0]    wrows;               // rows completed since reset
  logic [31:0]    rlo_g;               // lowest row still needed (global)

  assign in_ready = (wrows < rlo_g + 32'(RB));

  always_comb begin
    pix_next = pix;
    for (int m = 0; m < M; m++)
      pix_next[(m*C + wbeat*IN_PAR)*A +: IN_PAR*A] = in_data[m*IN_PAR*A +: IN_PAR*A];
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      pix   <= '0;
      wbeat <= 0;
      wx    <= 0;
      wslot <= 0;
      wrows <= '0;
    end else if (in_valid && in_ready) begin
      pix <= pix_next;
      if (wbeat == PB - 1) begin
        wbeat <= 0;
        if (wx == N - 1) begin
          wx    <= 0;
          wslot <= (wslot == RB - 1) ? 0 : wslot + 1;
          wrows <= wrows + 1;
        end else begin
          wx <= wx + 1;
        end
      end else begin
        wbeat <= wbeat + 1;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (in_valid && in_ready && wbeat == PB - 1) mem[AW'(wslot * N + wx)] <= pix_next;
  end

  // ---------------- reader ----------------
  int unsigned oy, ox, ky, kx, cf;
  int unsigned lo_row, lo_slot;        // lowest needed row of the frame, its buffer row
  int unsigned fb_slot;                // buffer row of row 0 of the current frame
  logic [31:0] fbase;                  // global index of row 0 of the current frame
  int          iy, ix, hi_row;
  int unsigned rslot;
  logic        avail, pad, issue, last_k, last_win, last_row;

  assign rlo_g = fbase + 32'(lo_row);

  always_comb begin
    iy     = int'(oy * S) - int'(PAD) + int'(ky);
    ix     = int'(ox * S) - int'(PAD) + int'(kx);
    hi_row = int'(oy * S) - int'(PAD) + int'(K) - 1;
    if (hi_row > int'(N) - 1) hi_row = int'(N) - 1;
    pad    = (iy < 0) || (iy >= int'(N)) || (ix < 0) || (ix >= int'(N));
    rslot  = lo_slot + unsigned'(iy) - lo_row;
    if (rslot >= RB) rslot = rslot - RB;
    avail  = (wrows > fbase + 32'(hi_row));
    issue  = avail && (!out_valid || out_ready);
    last_k = (ky == K - 1) && (kx == K - 1) && (cf == CF - 1);  // either order
    last_win = last_k && (ox == OD - 1);
    last_row = last_win && (oy == OD - 1);
  end

  // next lowest needed row when output row oy+1 starts
  function automatic int unsigned row_lo(int unsigned y);
    int r;
    r = int'(y * S) - int'(PAD);
    return (r < 0) ? 0 : unsigned'(r);
  endfunction

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      oy <= 0; ox <= 0; ky <= 0; kx <= 0; cf <= 0;
      lo_row <= 0; lo_slot <= 0; fb_slot <= 0; fbase <= '0;
    end else if (issue) begin
      // advance the window element counters
      if (CHUNK_OUTER) begin
        if (kx != K - 1) kx <= kx + 1;
        else begin
          kx <= 0;
          if (ky != K - 1) ky <= ky + 1;
          else begin
            ky <= 0;
            cf <= (cf == CF - 1) ? 0 : cf + 1;
          end
        end
      end else begin
        if (cf != CF - 1) cf <= cf + 1;
        else begin
          cf <= 0;
          if (kx != K - 1) kx <= kx + 1;
          else begin
            kx <= 0;
            ky <= (ky == K - 1) ? 0 : ky + 1;
          end
        end
      end
      if (last_k) ox <= (ox == OD - 1) ? 0 : ox + 1;
      if (last_row) begin
        int unsigned nb;
        oy      <= 0;
        fbase   <= fbase + 32'(N);
        nb       = fb_slot + NRB;
        if (nb >= RB) nb = nb - RB;
        fb_slot <= nb;
        lo_slot <= nb;
        lo_row  <= 0;
      end else if (last_win) begin
        int unsigned nl, ns;
        oy     <= oy + 1;
        nl      = row_lo(oy + 1);
        ns      = lo_slot + (nl - lo_row);
        if (ns >= RB) ns = ns - RB;
        lo_row  <= nl;
        lo_slot <= ns;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_data  <= '0;
    end else if (issue) begin
      out_valid <= 1'b1;
      for (int m = 0; m < M; m++)
        out_data[m*SIMD*A +: SIMD*A] <= pad ? '0
          : mem[AW'(rslot * N + unsigned'(ix))][(m*C + cf*SIMD)*A +: SIMD*A];
    end else if (out_ready) begin
      out_valid <= 1'b0;
    end
  end

  a_out_hold: assert property (@(posedge clk) disable iff (!rst_n)
    out_valid && !out_ready |=> out_valid && $stable(out_data));

endmodule
