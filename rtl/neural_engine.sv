// neural_engine -- slice intake, global buffer and the normalization-fused
// first convolution on the 2D PE array.
//
// Reconstructed slices arrive from FIFO2 as min, max and then B*B values
// (y-major). The values are stored in the global buffer (a ring of slices in
// its lower half) and in a slice register file that feeds the PE array. With
// the slice's min/max, norm_fusion rescales the first layer's weights
// (W', b'), so normalization costs no pass over the data. The convolution
//   O[x, y, o] = sum_{kx,ky} D[x+kx, y+ky] * W'[kx, ky, o] + b'[o]
// (valid positions only, (B-2) x (B-2) outputs for a 3x3 kernel, as written
// in the paper) is run as a matrix product on pe_array_2d: output pixels map
// to PE rows (ROWS per tile), output channels to PE columns, and the 9 taps
// are the depth. For each tile the engine (1) works out the (y, x) of each
// row's pixel, one row per cycle, (2) clears the array and feeds 9 columns of
// the im2col matrix with the 9 rows of W', (3) waits for the array to settle
// and (4) drains pixel by pixel, channel by channel, adding b', converting
// Q.40 to the Q.16 data format, writing the result to the upper half of the
// global buffer and sending it on o_* (o_last on the last value of a slice).
//
// The paper gives the array size (128 x 128), the global-buffer size (24 MB)
// and the fusion equations. It does not describe the network itself, nor
// training; only this first, fused layer is built, and the number of output
// channels OC is this design's choice.
module neural_engine
  import flare_pkg::*;
#(
  parameter int unsigned K     = 5,          // log2 slice edge (block edge)
  parameter int unsigned ROWS  = 128,        // PE array rows
  parameter int unsigned COLS  = 128,        // PE array columns
  parameter int unsigned OC    = 16,         // first-layer output channels
  parameter longint unsigned GB_BYTES = 64'd25165824,  // 24 MB
  localparam int unsigned KT   = 9,
  localparam longint unsigned GBW = GB_BYTES / (DATA_W / 8),
  localparam int unsigned GAW  = $clog2(GBW)
) (
  input  logic         clk,
  input  logic         rst_n,
  // slices from FIFO2
  input  logic         s_valid,
  output logic         s_ready,
  input  data_t        s_data,
  input  logic         s_last,
  // first-layer weights (Q.12)
  input  logic         w_we,
  input  logic [$clog2(KT*OC)-1:0] w_addr,
  input  logic signed [CW_W-1:0]   w_data,
  input  logic         b_we,
  input  logic [$clog2(OC+1)-1:0]  b_addr,
  input  logic signed [CW_W-1:0]   b_data,
  // feature-map output
  output logic         o_valid,
  input  logic         o_ready,
  output data_t        o_data,
  output logic         o_last,
  // global buffer read-back
  input  logic [GAW-1:0] gb_raddr,
  output data_t        gb_rdata,
  output logic         busy,
  output logic [31:0]  slices_done
);

  localparam int unsigned B    = 1 << K;
  localparam int unsigned OE   = B - 2;             // output edge
  localparam int unsigned NPIX = OE * OE;
  localparam int unsigned PW   = $clog2(NPIX + ROWS + 1);
  localparam int unsigned RW   = $clog2(ROWS);
  localparam int unsigned OW   = $clog2(OC + 1);
  localparam longint unsigned SLOTS = (GBW / 2) / (B * B);
  localparam int unsigned WAITC = ROWS + COLS + 2;

  typedef enum logic [3:0] {
    N_MIN, N_MAX, N_LOAD, N_FUSE_GO, N_FUSE, N_IDX, N_CLR, N_FEED, N_WAIT, N_DRAIN
  } nstate_e;
  nstate_e st;

  // ---- storage ----------------------------------------------------------------
  data_t gb [GBW];
  data_t srf [B*B];          // slice register file feeding the array
  logic [K-1:0] py [ROWS];   // pixel coordinates of each row in the tile
  logic [K-1:0] px [ROWS];
  logic [ROWS-1:0] pv;       // row holds a real pixel

  data_t vmin, vmax;
  logic [2*K-1:0] lidx;
  logic [GAW-1:0] in_base, out_ptr;
  logic [PW-1:0]  p0, pcur;          // tile base pixel, running pixel
  logic [K-1:0]   cy, cx;            // running coordinates
  logic [RW:0]    r;
  logic [3:0]     kk;
  logic [$clog2(WAITC+1)-1:0] wc;
  logic [OW-1:0]  oc;

  // ---- fusion unit --------------------------------------------------------------
  logic nf_start, nf_busy, nf_done;
  logic signed [31:0] wp [KT][OC];
  logic signed [63:0] bp [OC];
  norm_fusion #(.KT(KT), .OC(OC)) u_fuse (
    .clk, .rst_n, .w_we, .w_addr, .w_data, .b_we, .b_addr, .b_data,
    .start(nf_start), .vmin, .vmax, .busy(nf_busy), .done(nf_done), .wp, .bp
  );

  // ---- PE array -------------------------------------------------------------------
  logic pa_clear, pa_valid;
  data_t pa_a [ROWS];
  logic signed [31:0] pa_b [COLS];
  logic signed [63:0] pa_rd [COLS];
  pe_array_2d #(.ROWS(ROWS), .COLS(COLS), .A_W(DATA_W), .B_W(32), .ACC_W(64)) u_pe (
    .clk, .rst_n, .clear(pa_clear), .in_valid(pa_valid), .a_in(pa_a), .b_in(pa_b),
    .rd_row(r[RW-1:0]), .rd_data(pa_rd)
  );

  // im2col column kk of the tile, row kk of W'
  logic [1:0] kx, ky;
  assign ky = 2'(kk / 3);
  assign kx = 2'(kk % 3);
  always_comb begin
    for (int i = 0; i < ROWS; i++)
      pa_a[i] = pv[i] ? srf[{py[i] + K'(ky), px[i] + K'(kx)}] : '0;
    for (int c = 0; c < COLS; c++)
      pa_b[c] = (c < OC) ? wp[kk][c] : '0;
  end

  logic signed [63:0] osum;
  always_comb begin
    osum   = pa_rd[oc] + bp[oc];
    o_data = data_t'(osum >>> WP_FRAC);
  end

  assign s_ready  = (st == N_MIN) || (st == N_MAX) || (st == N_LOAD);
  assign nf_start = (st == N_FUSE_GO);
  assign pa_clear = (st == N_CLR);
  assign pa_valid = (st == N_FEED);
  assign o_valid  = (st == N_DRAIN);
  assign o_last   = (st == N_DRAIN) && (oc == OW'(OC-1)) && (pcur == PW'(NPIX-1));
  assign busy     = (st != N_MIN);

  always_ff @(posedge clk) begin
    if (st == N_LOAD && s_valid) begin
      gb[in_base + GAW'(lidx)] <= s_data;
      srf[lidx] <= s_data;
    end
    if (o_valid && o_ready) gb[out_ptr] <= o_data;
    gb_rdata <= gb[gb_raddr];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st          <= N_MIN;
      vmin        <= '0;
      vmax        <= '0;
      lidx        <= '0;
      in_base     <= '0;
      out_ptr     <= GAW'(GBW / 2);
      p0          <= '0;
      pcur        <= '0;
      cy          <= '0;
      cx          <= '0;
      r           <= '0;
      kk          <= '0;
      wc          <= '0;
      oc          <= '0;
      pv          <= '0;
      slices_done <= '0;
    end else begin
      unique case (st)
        N_MIN: if (s_valid) begin vmin <= s_data; st <= N_MAX; end
        N_MAX: if (s_valid) begin vmax <= s_data; lidx <= '0; st <= N_LOAD; end
        N_LOAD: if (s_valid) begin
          lidx <= lidx + 1'b1;
          if (s_last) st <= N_FUSE_GO;
        end
        N_FUSE_GO: st <= N_FUSE;
        N_FUSE: if (nf_done) begin
          p0 <= '0;
          cy <= '0;
          cx <= '0;
          r  <= '0;
          st <= N_IDX;
        end
        N_IDX: begin
          // assign pixel p0 + r to row r
          py[r[RW-1:0]] <= cy;
          px[r[RW-1:0]] <= cx;
          pv[r[RW-1:0]] <= (p0 + PW'(r) < PW'(NPIX));
          if (cx == K'(OE-1)) begin cx <= '0; cy <= cy + 1'b1; end
          else cx <= cx + 1'b1;
          if (r == (RW+1)'(ROWS-1)) begin
            kk <= '0;
            st <= N_CLR;
          end else begin
            r <= r + 1'b1;
          end
        end
        N_CLR: st <= N_FEED;
        N_FEED: begin
          if (kk == 4'(KT-1)) begin
            wc <= '0;
            st <= N_WAIT;
          end else begin
            kk <= kk + 1'b1;
          end
        end
        N_WAIT: begin
          if (wc == $bits(wc)'(WAITC)) begin
            r    <= '0;
            oc   <= '0;
            pcur <= p0;
            st   <= N_DRAIN;
          end else begin
            wc <= wc + 1'b1;
          end
        end
        N_DRAIN: if (o_ready) begin
          out_ptr <= (out_ptr == GAW'(GBW - 1)) ? GAW'(GBW / 2) : out_ptr + 1'b1;
          if (oc != OW'(OC-1)) begin
            oc <= oc + 1'b1;
          end else begin
            oc <= '0;
            if (pcur == PW'(NPIX-1)) begin
              // slice finished
              slices_done <= slices_done + 1'b1;
              in_base <= (in_base + GAW'(2*B*B) > GAW'(SLOTS * B * B)) ? '0
                         : in_base + GAW'(B*B);
              st <= N_MIN;
            end else if (r == (RW+1)'(ROWS-1)) begin
              // next tile; coordinates already advanced by N_IDX
              p0 <= p0 + PW'(ROWS);
              r  <= '0;
              st <= N_IDX;
            end else begin
              r    <= r + 1'b1;
              pcur <= pcur + 1'b1;
            end
          end
        end
        default: st <= N_MIN;
      endcase
    end
  end

endmodule
