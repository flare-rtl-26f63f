// norm_fusion -- slice-wise normalization folded into the first convolution.
//
// Instead of normalizing every point of slice i as (D - min_i)/(max_i - min_i)
// and then convolving, the first convolution layer is given per-slice weights
//   W'[k, o] = W[k, o] / (max_i - min_i)
//   b'[o]    = b[o] - sum_k min_i / (max_i - min_i) * W[k, o]
//            = b[o] - min_i * sum_k W'[k, o]
// and applied to the raw slice (paper Sec. 3.2, Eq. 2-6). Only KT*OC weights
// are rescaled per slice, which is cheap next to normalizing the slice.
//
// Fixed-point formats (this design's choice): D in Q.16 (flare_pkg), W and b
// in Q.12 (16 bit), W' in Q.24 (32 bit, saturated), b' in Q.40 (64 bit), so
// that sum(D * W') + b' is Q.40. The raw-data products can be large when min
// is far from zero, but they cancel against the min term of b'; 64-bit
// two's-complement arithmetic keeps that cancellation exact, so only the
// final sum has to fit. W' saturates at +-128, i.e. for slices whose range
// max - min is below |W| / 128 (under 1/16 for the largest Q.12 weight).
// Sequence after `start` (min/max sampled):
//   1. r = max - min (1 if not positive); recip = floor(2^48 / r) by a
//      restoring divider, one quotient bit per cycle (49 cycles);
//   2. one weight per cycle, o outer and k inner: W' = (W * recip) >>> 20,
//      and at the last k of each o, b'[o] = (b[o] << 28) - min * sum_k W'.
// `done` pulses when all KT*OC weights and OC biases are ready; wp/bp hold
// them until the next start. W and b are written through w_*/b_* while idle.
module norm_fusion
  import flare_pkg::*;
#(
  parameter int unsigned KT = 9,    // taps of the first convolution (3x3)
  parameter int unsigned OC = 16    // output channels of the first layer
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 w_we,
  input  logic [$clog2(KT*OC)-1:0] w_addr,   // k*OC + o
  input  logic signed [CW_W-1:0] w_data,
  input  logic                 b_we,
  input  logic [$clog2(OC+1)-1:0] b_addr,
  input  logic signed [CW_W-1:0] b_data,
  input  logic                 start,
  input  data_t                vmin,
  input  data_t                vmax,
  output logic                 busy,
  output logic                 done,
  output logic signed [31:0]   wp [KT][OC],   // W', Q.24
  output logic signed [63:0]   bp [OC]        // b', Q.40
);

  localparam int unsigned OW = $clog2(OC + 1);
  localparam int unsigned KW = $clog2(KT + 1);

  logic signed [CW_W-1:0] wt [KT*OC];
  logic signed [CW_W-1:0] bt [OC];

  always_ff @(posedge clk) begin
    if (w_we) wt[w_addr] <= w_data;
    if (b_we) bt[b_addr[OW-1:0]] <= b_data;
  end

  typedef enum logic [1:0] { F_IDLE, F_DIV, F_W } fstate_e;
  fstate_e st;

  logic [32:0]  r;          // divisor
  logic [33:0]  rem;
  logic [48:0]  quo;        // recip
  logic [5:0]   bitn;
  logic [OW-1:0] o;
  logic [KW-1:0] k;
  data_t        mn;
  logic signed [39:0] acc;  // running sum of W' for this o

  logic signed [65:0] prod;
  logic signed [45:0] wq;
  logic signed [31:0] wsat;
  logic signed [39:0] accn;
  logic signed [63:0] bnew;
  logic [33:0]        rem_sh;
  always_comb begin
    prod = 66'(wt[int'(k) * OC + int'(o)]) * $signed({1'b0, 65'(quo)});
    wq   = 46'(prod >>> (48 - (WP_FRAC - CW_FRAC + 16)));
    if (wq > 46'sh0007fffffff)       wsat = 32'sh7fffffff;
    else if (wq < -46'sh00080000000) wsat = 32'sh80000000;
    else                           wsat = wq[31:0];
    accn = acc + 40'(wsat);
    bnew = (64'(bt[o]) <<< (WP_FRAC + 16 - CW_FRAC)) - 64'(mn) * 64'(accn);
    rem_sh = {rem[32:0], (bitn == 6'd48)};   // dividend 2^48: one 1 at bit 48
  end

  assign busy = (st != F_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st   <= F_IDLE;
      r    <= '0;
      rem  <= '0;
      quo  <= '0;
      bitn <= '0;
      o    <= '0;
      k    <= '0;
      mn   <= '0;
      acc  <= '0;
      done <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (st)
        F_IDLE: if (start) begin
          mn   <= vmin;
          r    <= (vmax > vmin) ? 33'(vmax) - 33'(vmin) : 33'd1;
          rem  <= '0;
          quo  <= '0;
          bitn <= 6'd48;
          st   <= F_DIV;
        end
        F_DIV: begin
          if (rem_sh >= 34'(r)) begin
            rem <= rem_sh - 34'(r);
            quo[bitn] <= 1'b1;
          end else begin
            rem <= rem_sh;
          end
          if (bitn == 6'd0) begin
            o   <= '0;
            k   <= '0;
            acc <= '0;
            st  <= F_W;
          end else begin
            bitn <= bitn - 1'b1;
          end
        end
        F_W: begin
          wp[k][o] <= wsat;
          if (k == KW'(KT-1)) begin
            bp[o] <= bnew;
            acc   <= '0;
            k     <= '0;
            if (o == OW'(OC-1)) begin
              st   <= F_IDLE;
              done <= 1'b1;
            end else begin
              o <= o + 1'b1;
            end
          end else begin
            acc <= accn;
            k   <= k + 1'b1;
          end
        end
        default: st <= F_IDLE;
      endcase
    end
  end

endmodule
