// systolic_1d -- one 1D systolic array of the Prediction Engine.
//
// Three weight-stationary PEs hold the interpolation weights w1, w2, w3.
// Reconstructed anchor points stream in one per push: the newest anchor feeds
// PE3 directly and enters a two-register delay line (D, D) whose outputs feed
// PE2 and PE1, so the window always holds the anchors at t-3s, t-s and t+s
// of the point t being predicted (the sliding window of the paper's figure).
// Partial sums run PE1 -> PE2 -> PE3 within the cycle; the sum is rounded to
// the data format to give the interpolated value. A subtractor then forms
// the error against the original value, which is quantized and used to
// reconstruct the point exactly as the decompressor will.
//
// Quantizer (this design's choice; the paper names only "quantized"):
//   q = round(err * inv2eb / 2^32), recon = pred + 2*eb*q.
// The point is unpredictable (code 0, recon = original) if |q| >= radius,
// if |orig - recon| > eb, or if recon leaves the 32-bit range, so the error
// bound always holds. In decompression, recon = pred + 2*eb*(code - radius),
// or the verbatim value for code 0.
//
// Weight sets near a line's ends (linear mean, copy, zero for the block
// origin) are this design's choice. Timing: `calc` in cycle n gives
// out_valid and the results in cycle n+1; `push` shifts the delay line at
// the same clock edge, after the window was used.
module systolic_1d
  import flare_pkg::*;
(
  input  logic      clk,
  input  logic      rst_n,
  input  pred_cfg_t cfg,
  input  mode_e     mode,
  input  logic      push,       // shift anchor_in into the delay line
  input  data_t     anchor_in,  // newest anchor (t+s)
  input  logic      calc,       // predict/quantize one target point now
  input  wsel_e     wsel,
  input  data_t     orig_in,    // compression: original value of the target
  input  code_t     code_in,    // decompression: quantization code
  input  data_t     value_in,   // decompression: verbatim value for code 0
  output logic      out_valid,
  output data_t     pred_out,
  output data_t     recon_out,
  output code_t     code_out,   // compression: code of the target
  output data_t     value_out   // compression: original value (used for code 0)
);

  data_t d1, d2;  // anchors t-s (after one D) and t-3s (after two D)

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      d1 <= '0;
      d2 <= '0;
    end else if (push) begin
      d1 <= anchor_in;
      d2 <= d1;
    end
  end

  // ---- three PEs with the partial-sum chain --------------------------------
  iw_t ew1, ew2, ew3;
  always_comb begin
    unique case (wsel)
      WSEL_MAIN:   begin ew1 = cfg.w1; ew2 = cfg.w2; ew3 = cfg.w3; end
      WSEL_LINEAR: begin ew1 = '0; ew2 = iw_t'(1 << (IW_FRAC-1)); ew3 = iw_t'(1 << (IW_FRAC-1)); end
      WSEL_COPY:   begin ew1 = '0; ew2 = iw_t'(1 << IW_FRAC);     ew3 = '0; end
      default:     begin ew1 = '0; ew2 = '0; ew3 = '0; end
    endcase
  end

  localparam int unsigned PS_W = DATA_W + IW_W + 2;
  logic signed [PS_W-1:0] ps1, ps2, ps3;
  logic signed [PS_W-1:0] pred_w;
  data_t pred;
  always_comb begin
    ps1    = PS_W'(d2) * PS_W'(ew1);          // PE1
    ps2    = ps1 + PS_W'(d1) * PS_W'(ew2);    // PE2
    ps3    = ps2 + PS_W'(anchor_in) * PS_W'(ew3);  // PE3
    pred_w = (ps3 + PS_W'(1 << (IW_FRAC-1))) >>> IW_FRAC;
    pred   = data_t'(pred_w);
  end

  // ---- error, quantization, reconstruction ---------------------------------
  localparam int unsigned EW = DATA_W + 2;     // error width
  localparam int unsigned MW = EW + 33;        // err * inv2eb
  localparam int unsigned RW = DATA_W + 40;    // reconstruction width

  logic signed [EW-1:0] err;
  logic signed [MW-1:0] qprod;
  logic signed [MW-1:0] q_w;
  logic signed [RW-1:0] two_eb, recon_c, recon_d, diff, absdiff, qabs;
  logic signed [RW-1:0] q_d;
  logic                 outlier;
  data_t                recon_n;
  code_t                code_n;

  always_comb begin
    two_eb  = RW'(cfg.eb) <<< 1;
    // compression path
    err     = EW'(orig_in) - EW'(pred);
    qprod   = MW'(err) * $signed(MW'(cfg.inv2eb));
    q_w     = (qprod + (MW'(1) <<< 31)) >>> 32;
    recon_c = RW'(pred) + RW'(q_w) * two_eb;
    diff    = RW'(orig_in) - recon_c;
    absdiff = diff[RW-1] ? -diff : diff;
    qabs    = q_w[MW-1] ? -RW'(q_w) : RW'(q_w);
    outlier = (qabs >= RW'(cfg.radius)) || (absdiff > RW'(cfg.eb)) ||
              (recon_c > RW'(32'sh7fffffff)) || (recon_c < -RW'(33'sh80000000));
    // decompression path
    q_d     = RW'($signed({1'b0, code_in})) - RW'($signed({1'b0, cfg.radius}));
    recon_d = RW'(pred) + q_d * two_eb;
    if (mode == MODE_COMPRESS) begin
      recon_n = outlier ? orig_in : data_t'(recon_c);
      code_n  = outlier ? '0 : code_t'(q_w[CODE_W-1:0] + cfg.radius);
    end else begin
      recon_n = (code_in == '0) ? value_in : data_t'(recon_d);
      code_n  = code_in;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      pred_out  <= '0;
      recon_out <= '0;
      code_out  <= '0;
      value_out <= '0;
    end else begin
      out_valid <= calc;
      if (calc) begin
        pred_out  <= pred;
        recon_out <= recon_n;
        code_out  <= code_n;
        value_out <= (mode == MODE_COMPRESS) ? orig_in : value_in;
      end
    end
  end

endmodule
