// flare_core -- one FLARE Computing Core.
//
// The core joins the four parts of the architecture: the SRAM buffer, the
// Prediction Engine (M lanes of 1D systolic arrays), the Codec Engine and
// the Neural Engine, with the two circular buffers between them:
//
//   compression   SRAM -> Prediction -> FIFO1 (quant codes) -> Codec -> bs_*
//                                    \-> FIFO2 (slices) -> Neural -> o_*
//   decompression bi_* -> Codec -> FIFO1 -> Prediction -> SRAM
//                                                     \-> FIFO2 -> Neural -> o_*
//
// In compression the Codec and Neural Engines consume the prediction output
// concurrently (parallel dataflow) while the prediction of later slices goes
// on (pipelined dataflow); in decompression the three engines form one
// pipeline. FIFO1 holds quant items (16-bit code + 32-bit verbatim value, in
// 64-bit words, 8 MB); FIFO2 holds slice words (32-bit value + end-of-slice
// flag, 32 MB of values).
//
// Operation: load blocks into SRAM bank b, slot `slot` through h_* (flat
// address {bank, slot, sel=0, z, y, x}), load the Huffman tables and the
// first-layer weights, set mode/cfg and pulse start. `done` pulses when the
// prediction has finished and every FIFO, the codec and the neural engine
// have drained (in compression after the last bitstream word, padded by an
// automatic flush). Reconstructed blocks are read back at sel=1. `start`
// also empties FIFO1 and resets the decoder, so a run in either mode can
// follow any other; in decompression the decoder may run ahead into the zero
// padding of the last stream word, and whatever it decodes there is dropped
// once the prediction has all its items.
// The FIFO capacities and engine sizes are the paper's (Table 4); the mode
// muxing, the drain condition and the host ports are this design's.
// Lint note: rst_n also gates the handshake assertion below, so lint reports
// it as used both asynchronously and synchronously; that is intended.
module flare_core
  import flare_pkg::*;
#(
  parameter int unsigned     M        = 4,
  parameter int unsigned     K        = 5,
  parameter longint unsigned SRAM_B   = 64'd33554432,   // 32 MB
  parameter longint unsigned FIFO1_B  = 64'd8388608,    // 8 MB
  parameter longint unsigned FIFO2_B  = 64'd33554432,   // 32 MB
  parameter int unsigned     ROWS     = 128,
  parameter int unsigned     COLS     = 128,
  parameter int unsigned     OC       = 16,
  parameter longint unsigned GB_B     = 64'd25165824,   // 24 MB
  parameter int unsigned     SYMS     = 65536,
  localparam int unsigned    HAW      = $clog2(SRAM_B / 4),
  localparam int unsigned    BAW      = $clog2(SRAM_B / 4 / M),
  localparam int unsigned    SW       = BAW - (3*K + 1),
  localparam int unsigned    GAW      = $clog2(GB_B / 4),
  localparam int unsigned    KT       = 9
) (
  input  logic           clk,
  input  logic           rst_n,
  // control
  input  logic           start,
  input  mode_e          mode,
  input  pred_cfg_t      cfg,
  input  logic [SW-1:0]  slot,
  output logic           busy,
  output logic           done,
  // DRAM side of the SRAM buffer
  input  logic           h_en,
  input  logic           h_we,
  input  logic [HAW-1:0] h_addr,
  input  data_t          h_wdata,
  output data_t          h_rdata,
  // Huffman tables and histogram
  input  logic           cb_we,
  input  logic [2:0]     cb_sel,
  input  logic [CODE_W-1:0] cb_addr,
  input  logic [37:0]    cb_wdata,
  input  logic           hist_clear,
  input  logic [CODE_W-1:0] hist_addr,
  output logic [31:0]    hist_data,
  // first-layer weights
  input  logic           w_we,
  input  logic [$clog2(KT*OC)-1:0] w_addr,
  input  logic signed [CW_W-1:0]   w_data,
  input  logic           b_we,
  input  logic [$clog2(OC+1)-1:0]  b_addr,
  input  logic signed [CW_W-1:0]   b_data,
  // compressed bitstream out / in
  output logic           bs_valid,
  input  logic           bs_ready,
  output logic [31:0]    bs_data,
  input  logic           bi_valid,
  output logic           bi_ready,
  input  logic [31:0]    bi_data,
  // neural feature maps
  output logic           o_valid,
  input  logic           o_ready,
  output data_t          o_data,
  output logic           o_last,
  input  logic [GAW-1:0] gb_raddr,
  output data_t          gb_rdata,
  output logic [31:0]    slices_done,
  // peak FIFO occupancy, for observing the buffering
  output logic [31:0]    fifo1_peak,
  output logic [31:0]    fifo2_peak
);

  localparam int unsigned F1D  = 1 << $clog2(FIFO1_B / 8);
  localparam int unsigned F2D  = 1 << $clog2(FIFO2_B / 4);

  // ---- SRAM -------------------------------------------------------------------
  logic           m_en    [M];
  logic           m_we    [M];
  logic [BAW-1:0] m_addr  [M];
  data_t          m_wdata [M];
  data_t          m_rdata [M];

  sram_buffer #(.CAP_BYTES(SRAM_B), .NBANK(M)) u_sram (
    .clk, .en(m_en), .we(m_we), .addr(m_addr), .wdata(m_wdata), .rdata(m_rdata),
    .h_en, .h_we, .h_addr, .h_wdata, .h_rdata
  );

  // ---- Prediction Engine ----------------------------------------------------------
  logic   pe_start, pe_busy, pe_done;
  logic   pq_valid, pq_ready, pc_valid, pc_ready, ps_valid, ps_ready, ps_last;
  qitem_t pq_item, pc_item;
  data_t  ps_data;

  prediction_engine #(.M(M), .K(K), .BAW(BAW)) u_pred (
    .clk, .rst_n, .start(pe_start), .mode, .cfg, .slot,
    .mem_en(m_en), .mem_we(m_we), .mem_addr(m_addr), .mem_wdata(m_wdata), .mem_rdata(m_rdata),
    .q_valid(pq_valid), .q_ready(pq_ready), .q_item(pq_item),
    .c_valid(pc_valid), .c_ready(pc_ready), .c_item(pc_item),
    .s_valid(ps_valid), .s_ready(ps_ready), .s_data(ps_data), .s_last(ps_last),
    .busy(pe_busy), .done(pe_done)
  );

  logic run_clear, f1_drop;

  // ---- FIFO1: quant items --------------------------------------------------------
  logic        f1_iv, f1_ir, f1_ov, f1_or;
  logic [63:0] f1_id, f1_od;
  logic [$clog2(F1D):0] f1_cnt;
  qitem_t      dec_item;
  logic        dec_valid, dec_ready;

  assign f1_iv    = (mode == MODE_COMPRESS) ? pq_valid : dec_valid;
  assign f1_id    = 64'((mode == MODE_COMPRESS) ? pq_item : dec_item);
  assign pq_ready = (mode == MODE_COMPRESS) && f1_ir;
  assign dec_ready = (mode == MODE_DECOMPRESS) && f1_ir;

  circ_fifo #(.WIDTH(64), .DEPTH(F1D)) u_fifo1 (
    .clk, .rst_n, .clear(run_clear), .in_valid(f1_iv), .in_ready(f1_ir), .in_data(f1_id),
    .out_valid(f1_ov), .out_ready(f1_or), .out_data(f1_od), .count(f1_cnt)
  );

  logic enc_valid, enc_ready;
  assign enc_valid = (mode == MODE_COMPRESS) && f1_ov;
  assign pc_valid  = (mode == MODE_DECOMPRESS) && f1_ov;
  assign pc_item   = qitem_t'(f1_od[$bits(qitem_t)-1:0]);
  // in decompression, items decoded from the stream's zero padding after the
  // prediction has finished are dropped while the core drains
  assign f1_or     = (mode == MODE_COMPRESS) ? enc_ready : (pc_ready || f1_drop);

  // ---- Codec Engine ----------------------------------------------------------------
  logic flush, flush_done, hist_busy;
  codec_engine #(.SYMS(SYMS)) u_codec (
    .clk, .rst_n,
    .cfg_we(cb_we), .cfg_sel(cb_sel), .cfg_addr(cb_addr), .cfg_wdata(cb_wdata),
    .hist_clear, .hist_addr, .hist_data, .hist_busy,
    .enc_valid, .enc_ready, .enc_item(qitem_t'(f1_od[$bits(qitem_t)-1:0])),
    .flush, .flush_done, .bs_valid, .bs_ready, .bs_data,
    .dec_clear(run_clear), .bi_valid, .bi_ready, .bi_data,
    .dec_valid, .dec_ready, .dec_item
  );

  // ---- FIFO2: slices -------------------------------------------------------------------
  logic        f2_ov, f2_or;
  logic [32:0] f2_od;
  logic [$clog2(F2D):0] f2_cnt;
  circ_fifo #(.WIDTH(33), .DEPTH(F2D)) u_fifo2 (
    .clk, .rst_n, .clear(1'b0), .in_valid(ps_valid), .in_ready(ps_ready), .in_data({ps_last, ps_data}),
    .out_valid(f2_ov), .out_ready(f2_or), .out_data(f2_od), .count(f2_cnt)
  );

  // ---- Neural Engine ----------------------------------------------------------------
  logic ne_busy;
  neural_engine #(.K(K), .ROWS(ROWS), .COLS(COLS), .OC(OC), .GB_BYTES(GB_B)) u_neural (
    .clk, .rst_n,
    .s_valid(f2_ov), .s_ready(f2_or), .s_data(f2_od[31:0]), .s_last(f2_od[32]),
    .w_we, .w_addr, .w_data, .b_we, .b_addr, .b_data,
    .o_valid, .o_ready, .o_data, .o_last,
    .gb_raddr, .gb_rdata, .busy(ne_busy), .slices_done
  );

  // ---- core control ------------------------------------------------------------------
  typedef enum logic [1:0] { C_IDLE, C_RUN, C_DRAIN } cstate_e;
  cstate_e cst;

  assign pe_start = (cst == C_IDLE) && start;
  assign run_clear = pe_start;      // new run: empty FIFO1, reset the decoder
  assign f1_drop  = (cst == C_DRAIN) && (mode == MODE_DECOMPRESS);
  assign flush    = (cst == C_DRAIN) && (mode == MODE_COMPRESS) && (f1_cnt == 0) && !f1_ov;
  assign busy     = (cst != C_IDLE);

  logic drained;
  assign drained = (f2_cnt == 0) && !f2_ov && !ne_busy &&
                   ((mode == MODE_DECOMPRESS) || ((f1_cnt == 0) && !f1_ov && flush_done));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cst        <= C_IDLE;
      done       <= 1'b0;
      fifo1_peak <= '0;
      fifo2_peak <= '0;
    end else begin
      done <= 1'b0;
      if (32'(f1_cnt) > fifo1_peak) fifo1_peak <= 32'(f1_cnt);
      if (32'(f2_cnt) > fifo2_peak) fifo2_peak <= 32'(f2_cnt);
      unique case (cst)
        C_IDLE:  if (start) begin
          cst        <= C_RUN;
          fifo1_peak <= '0;
          fifo2_peak <= '0;
        end
        C_RUN:   if (pe_done) cst <= C_DRAIN;
        C_DRAIN: if (drained) begin
          cst  <= C_IDLE;
          done <= 1'b1;
        end
        default: cst <= C_IDLE;
      endcase
    end
  end

  // a quant item must never be offered to both consumers
  always_ff @(posedge clk)
    if (rst_n) assert (!(enc_valid && pc_valid)) else $error("FIFO1 routed to two consumers");

endmodule
