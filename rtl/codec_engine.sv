// codec_engine -- Huffman encoder/decoder for quantization codes.
//
// The Codec Engine of the paper is an ALU plus a control unit that encode
// quantization codes as they leave the Prediction Engine (compression) and
// decode them as it needs them (decompression). This version uses a
// canonical Huffman code held in tables:
//   enc table  [sym]  -> {length, code}   code right-aligned, length 1..32
//   first_code[len], first_idx[len], count[len]   for len = 1..32
//   sym table  [idx]  -> symbol, symbols sorted by (length, code)
// The tables are written through the cfg_* port (cfg_sel picks the table).
// Building the Huffman tree from the histogram is left to the host: the
// engine counts every encoded symbol into hist[sym], which the host reads
// back through hist_addr/hist_data (one-cycle read).
//
// Encoder: one symbol per cycle appended MSB first to a 96-bit bit buffer;
// symbol 0 (an unpredictable point) is followed by its 32-bit verbatim value.
// Whenever 32 bits are ready they leave as one word on bs_*; `flush` pads the
// last partial word with zeros. Decoder: one bit per cycle, the control unit
// extends the code and the ALU tests code - first_code[len] < count[len];
// on a hit the symbol is looked up, a symbol 0 takes 32 more raw bits, and
// the result leaves on dec_*. All streams are valid/ready. `dec_clear`
// drops the decoder's buffered bits and partial code (start of a stream);
// the zero padding of a stream's last word is otherwise decoded as well, and
// the consumer simply stops taking symbols once it has all it needs.
//
// The table format, the bit order, the in-stream verbatim values and the
// host-built code are this design's choices; the paper names Huffman coding
// and the ALU/control-unit structure only.
module codec_engine
  import flare_pkg::*;
#(
  parameter int unsigned SYMS = 65536,   // alphabet size (2 * radius)
  parameter int unsigned MAXL = 32       // longest code
) (
  input  logic        clk,
  input  logic        rst_n,
  // table load and histogram read
  input  logic        cfg_we,
  input  logic [2:0]  cfg_sel,    // 0 enc, 1 sym, 2 first_code, 3 first_idx, 4 count
  input  logic [CODE_W-1:0] cfg_addr,
  input  logic [37:0] cfg_wdata,  // enc: {len[5:0], code[31:0]}; others: low bits
  input  logic        hist_clear,
  input  logic [CODE_W-1:0] hist_addr,
  output logic [31:0] hist_data,
  output logic        hist_busy,
  // encoder
  input  logic        enc_valid,
  output logic        enc_ready,
  input  qitem_t      enc_item,
  input  logic        flush,
  output logic        flush_done,
  output logic        bs_valid,
  input  logic        bs_ready,
  output logic [31:0] bs_data,
  // decoder
  input  logic        dec_clear,
  input  logic        bi_valid,
  output logic        bi_ready,
  input  logic [31:0] bi_data,
  output logic        dec_valid,
  input  logic        dec_ready,
  output qitem_t      dec_item
);

  localparam int unsigned LW = $clog2(MAXL + 1);

  // ---- tables ---------------------------------------------------------------
  logic [37:0]       enc_tab   [SYMS];
  logic [CODE_W-1:0] sym_tab   [SYMS];
  logic [31:0]       first_code[MAXL+1];
  logic [CODE_W:0]   first_idx [MAXL+1];
  logic [CODE_W:0]   count_tab [MAXL+1];
  logic [31:0]       hist      [SYMS];

  always_ff @(posedge clk) begin
    if (cfg_we) begin
      unique case (cfg_sel)
        3'd0:    enc_tab[cfg_addr] <= cfg_wdata;
        3'd1:    sym_tab[cfg_addr] <= cfg_wdata[CODE_W-1:0];
        3'd2:    first_code[cfg_addr[LW-1:0]] <= cfg_wdata[31:0];
        3'd3:    first_idx[cfg_addr[LW-1:0]]  <= cfg_wdata[CODE_W:0];
        3'd4:    count_tab[cfg_addr[LW-1:0]]  <= cfg_wdata[CODE_W:0];
        default: ;
      endcase
    end
  end

  // ---- encoder --------------------------------------------------------------
  logic [95:0] ebuf;    // left-aligned pending bits
  logic [6:0]  en;      // number of pending bits (0..96)
  logic [5:0]  clen;
  logic [31:0] cbits;
  logic [95:0] app;
  logic        emit, take, pad;

  assign {clen, cbits} = enc_tab[enc_item.code];
  assign emit      = (en >= 7'd32);
  assign pad       = flush && !emit && (en != 0) && !enc_valid;
  assign bs_valid  = emit || pad;
  assign bs_data   = ebuf[95:64];
  assign enc_ready = !emit && !pad && !hist_busy;
  assign take      = enc_valid && enc_ready;
  assign flush_done = flush && (en == 0) && !enc_valid;

  always_comb begin
    // code left-aligned, then shifted behind the pending bits
    app = ({cbits, 64'd0} << (7'd32 - 7'(clen))) >> en;
    if (enc_item.code == '0)
      app |= ({enc_item.value, 64'd0} >> (en + 7'(clen)));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ebuf <= '0;
      en   <= '0;
    end else if (bs_valid && bs_ready) begin
      ebuf <= ebuf << 32;
      en   <= emit ? en - 7'd32 : '0;
    end else if (take) begin
      ebuf <= ebuf | app;
      en   <= en + 7'(clen) + ((enc_item.code == '0) ? 7'd32 : 7'd0);
    end
  end

  // histogram of encoded symbols; hist_clear starts a one-entry-per-cycle
  // sweep that zeroes all SYMS counters (hist_busy while it runs)
  logic [CODE_W:0] clr_idx;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                  clr_idx <= '0;
    else if (hist_clear)         clr_idx <= (CODE_W+1)'(SYMS);
    else if (clr_idx != '0)      clr_idx <= clr_idx - 1'b1;
  end
  assign hist_busy = (clr_idx != '0);

  always_ff @(posedge clk) begin
    if (hist_busy) begin
      hist[clr_idx[CODE_W-1:0] - 1'b1] <= '0;
    end else if (take) begin
      hist[enc_item.code] <= hist[enc_item.code] + 1'b1;
    end
    hist_data <= hist[hist_addr];
  end

  // ---- decoder --------------------------------------------------------------
  typedef enum logic [1:0] { D_CODE, D_RAW, D_OUT } dstate_e;
  dstate_e     dst;
  logic [63:0] dbuf;    // left-aligned input bits
  logic [6:0]  dn;
  logic [31:0] dcode;
  logic [LW-1:0] dlen;
  logic [32:0] ncode, off;
  logic [LW-1:0] nlen;
  logic        hit, c1, c32;
  logic [CODE_W:0] sidx;

  assign bi_ready = (dn <= 7'd32) && !dec_clear;
  always_comb begin
    ncode = {dcode, dbuf[63]};
    nlen  = dlen + 1'b1;
    off   = ncode - 33'(first_code[nlen]);
    hit   = (ncode >= 33'(first_code[nlen])) && (off < 33'(count_tab[nlen]));
    sidx  = first_idx[nlen] + off[CODE_W:0];
    c1    = (dst == D_CODE) && (dn != 0);
    c32   = (dst == D_RAW) && (dn >= 7'd32);
  end

  assign dec_valid = (dst == D_OUT);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dst      <= D_CODE;
      dbuf     <= '0;
      dn       <= '0;
      dcode    <= '0;
      dlen     <= '0;
      dec_item <= '0;
    end else if (dec_clear) begin
      dst      <= D_CODE;
      dbuf     <= '0;
      dn       <= '0;
      dcode    <= '0;
      dlen     <= '0;
    end else begin
      logic [63:0] b;
      logic [6:0]  n;
      b = dbuf;
      n = dn;
      if (c1)  begin b = b << 1;  n = n - 7'd1;  end
      if (c32) begin b = b << 32; n = n - 7'd32; end
      if (bi_valid && bi_ready) begin
        b = b | ({bi_data, 32'd0} >> n);
        n = n + 7'd32;
      end
      dbuf <= b;
      dn   <= n;
      unique case (dst)
        D_CODE: if (c1) begin
          if (hit) begin
            dec_item.code <= sym_tab[sidx];
            dcode <= '0;
            dlen  <= '0;
            dst   <= (sym_tab[sidx] == '0) ? D_RAW : D_OUT;
          end else begin
            dcode <= ncode[31:0];
            dlen  <= nlen;
          end
        end
        D_RAW: if (c32) begin
          dec_item.value <= dbuf[63:32];
          dst <= D_OUT;
        end
        D_OUT: if (dec_ready) dst <= D_CODE;
        default: dst <= D_CODE;
      endcase
    end
  end

endmodule
