// interp_lane -- one block's worth of the Prediction Engine.
//
// The lane walks one B x B x B block (B = 2^K) in the look-ahead order given
// by lookahead_sched and drives its systolic_1d array. For each task
// (level l, slab [lo, lo+2s), s = 2^(l-1)) it makes three passes, as in the
// level-wise interpolation of the paper's Fig. 3: along z (targets at
// z = lo+s, x and y multiples of 2s), along y (x multiples of 2s, y odd
// multiples of s, z multiples of s in the slab) and along x (x odd multiples
// of s, y and z multiples of s in the slab). Each pass runs line by line: two
// anchors are pre-loaded into the delay line (t0-3s if it exists, then t0-s),
// and every target t pushes the anchor t+s and is predicted from the window.
// The block origin comes first and is predicted as zero.
//
// The z-pass of a slab that is the upper half of its parent cannot use the
// plane at lo+2s (it belongs to a later slab), so it copies the anchor at lo;
// so does any target whose t+s lies outside the block. These fallbacks are
// this design's choice; the paper gives only the task order (Fig. 4).
//
// Every reconstructed point updates the running min/max of its z-slice, as
// the paper's slice-wise normalization asks ("track the maximum and minimum
// values of the i-th slice during prediction"). When a level-1 task ends,
// slices lo and lo+1 are final and are streamed out: min, max, then B*B
// values in y-major order, s_last on the final value of each slice.
//
// Memory: one single-port bank with a one-cycle registered read. Local
// address {sel, z, y, x}; sel=0 is the original block, sel=1 the
// reconstruction. In compression the lane emits one quant item per point
// (q_valid/q_ready); in decompression it takes one per point from c_*.
// A point costs 3 to 4 cycles (anchor read, original read, compute, write).
// Lint note: rst_n also gates the consistency assertion below, so lint reports
// it as used both asynchronously and synchronously; that is intended.
module interp_lane
  import flare_pkg::*;
#(
  parameter int unsigned K = 5          // log2 of block edge; 32^3 in the paper
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  input  mode_e           mode,
  input  pred_cfg_t       cfg,
  // block memory port
  output logic            mem_en,
  output logic            mem_we,
  output logic [3*K:0]    mem_addr,
  output data_t           mem_wdata,
  input  data_t           mem_rdata,
  // compression: quantized points out
  output logic            q_valid,
  input  logic            q_ready,
  output qitem_t          q_item,
  // decompression: quantized points in
  input  logic            c_valid,
  output logic            c_ready,
  input  qitem_t          c_item,
  // finished slices out
  output logic            s_valid,
  input  logic            s_ready,
  output data_t           s_data,
  output logic            s_last,
  output logic            busy,
  output logic            done
);

  localparam int unsigned B  = 1 << K;
  localparam int unsigned LW = $clog2(K+1);
  localparam int unsigned CW = K + 2;          // coordinate width, room past B

  typedef enum logic [3:0] {
    S_IDLE, S_TASK, S_LINE, S_PRE_RD3, S_PRE_P3, S_PRE_RD1, S_PRE_P1,
    S_T_RDA, S_T_RDO, S_T_CALC, S_T_WR, S_SL_MIN, S_SL_MAX, S_SL_RD, S_SL_OUT
  } state_e;

  typedef enum logic [1:0] { P_Z = 2'd0, P_Y = 2'd1, P_X = 2'd2 } pass_e;

  state_e st;
  pass_e  pass;
  logic [CW-1:0] c1, c2, tt, lo, s;
  logic          upper, lastlvl, origin;
  data_t         a_new;
  logic [K-1:0]  plane;
  logic [CW-1:0] sx, sy;
  data_t         zmin [B];
  data_t         zmax [B];
  logic [B-1:0]  seen;           // slice has its first point

  // ---- scheduler ----------------------------------------------------------
  logic          sch_valid, sch_ready, sch_upper, sch_last, sch_done;
  logic [LW-1:0] sch_level;
  logic [K-1:0]  sch_lo;

  lookahead_sched #(.K(K)) u_sched (
    .clk, .rst_n, .start,
    .task_valid(sch_valid), .task_ready(sch_ready),
    .task_level(sch_level), .task_lo(sch_lo),
    .task_upper(sch_upper), .task_last(sch_last), .done(sch_done)
  );

  // ---- systolic array -----------------------------------------------------
  logic  sa_push, sa_calc, sa_ovalid;
  wsel_e sa_wsel;
  data_t sa_anchor, sa_pred, sa_recon, sa_value;
  code_t sa_code;

  systolic_1d u_sa (
    .clk, .rst_n, .cfg, .mode,
    .push(sa_push), .anchor_in(sa_anchor), .calc(sa_calc), .wsel(sa_wsel),
    .orig_in(mem_rdata), .code_in(c_item.code), .value_in(c_item.value),
    .out_valid(sa_ovalid), .pred_out(sa_pred), .recon_out(sa_recon),
    .code_out(sa_code), .value_out(sa_value)
  );

  // ---- geometry helpers ---------------------------------------------------
  function automatic logic [3*K:0] addr_of(input logic sel, input pass_e p,
      input logic [CW-1:0] a1, input logic [CW-1:0] a2, input logic [CW-1:0] al);
    logic [K-1:0] x, y, z;
    unique case (p)
      P_Z:     begin x = a1[K-1:0]; y = a2[K-1:0]; z = al[K-1:0]; end
      P_Y:     begin x = a1[K-1:0]; y = al[K-1:0]; z = a2[K-1:0]; end
      default: begin x = al[K-1:0]; y = a1[K-1:0]; z = a2[K-1:0]; end
    endcase
    return {sel, z, y, x};
  endfunction

  logic [CW-1:0] t0, hi, step1, step2;
  logic          has_r, has_l3, tgt_last_in_line;
  always_comb begin
    hi     = lo + (s << 1);
    t0     = (pass == P_Z) ? lo + s : s;
    step1  = (pass == P_X) ? s : (s << 1);
    step2  = (pass == P_Z) ? (s << 1) : s;
    has_r  = !origin && (tt + s < CW'(B)) && !((pass == P_Z) && upper);
    has_l3 = (tt >= 3 * s);
    tgt_last_in_line = (pass == P_Z) || (tt + (s << 1) >= CW'(B));
  end

  logic [3*K:0] tgt_addr;
  assign tgt_addr = origin ? '0 : addr_of(1'b0, pass, c1, c2, tt);
  logic [K-1:0] tgt_z;
  assign tgt_z = tgt_addr[3*K-1 -: K];

  // ---- control --------------------------------------------------------------
  always_comb begin
    mem_en    = 1'b0;
    mem_we    = 1'b0;
    mem_addr  = '0;
    mem_wdata = sa_recon;
    sa_push   = 1'b0;
    sa_calc   = 1'b0;
    sa_anchor = a_new;
    sa_wsel   = origin ? WSEL_ZERO : (!has_r ? WSEL_COPY : (has_l3 ? WSEL_MAIN : WSEL_LINEAR));
    sch_ready = 1'b0;
    q_valid   = 1'b0;
    q_item    = '{code: sa_code, value: sa_value};
    c_ready   = 1'b0;
    s_valid   = 1'b0;
    s_data    = mem_rdata;
    s_last    = 1'b0;
    unique case (st)
      S_TASK:    sch_ready = 1'b1;
      S_PRE_RD3: begin mem_en = 1'b1; mem_addr = addr_of(1'b1, pass, c1, c2, t0 - 3 * s); end
      S_PRE_RD1: begin mem_en = 1'b1; mem_addr = addr_of(1'b1, pass, c1, c2, t0 - s); end
      S_PRE_P3, S_PRE_P1: begin sa_push = 1'b1; sa_anchor = mem_rdata; end
      S_T_RDA:   begin mem_en = 1'b1; mem_addr = addr_of(1'b1, pass, c1, c2, tt + s); end
      S_T_RDO:   begin mem_en = 1'b1; mem_addr = tgt_addr; end
      S_T_CALC: begin
        if (mode == MODE_COMPRESS) begin
          sa_calc = 1'b1;
          sa_push = has_r;
        end else begin
          c_ready = 1'b1;
          sa_calc = c_valid;
          sa_push = c_valid && has_r;
        end
      end
      S_T_WR: begin
        mem_en   = 1'b1;
        mem_we   = 1'b1;
        mem_addr = tgt_addr | {1'b1, {(3*K){1'b0}}};
        q_valid  = (mode == MODE_COMPRESS);
      end
      S_SL_MIN:  begin s_valid = 1'b1; s_data = zmin[plane]; end
      S_SL_MAX:  begin s_valid = 1'b1; s_data = zmax[plane]; end
      S_SL_RD:   begin mem_en = 1'b1; mem_addr = {1'b1, plane, sy[K-1:0], sx[K-1:0]}; end
      S_SL_OUT: begin
        mem_en   = 1'b1;
        mem_addr = {1'b1, plane, sy[K-1:0], sx[K-1:0]};
        s_valid  = 1'b1;
        s_last   = (sx == CW'(B-1)) && (sy == CW'(B-1));
      end
      default: ;
    endcase
  end

  assign busy = (st != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st      <= S_IDLE;
      pass    <= P_Z;
      c1      <= '0;
      c2      <= '0;
      tt      <= '0;
      lo      <= '0;
      s       <= '0;
      upper   <= 1'b0;
      lastlvl <= 1'b0;
      origin  <= 1'b0;
      a_new   <= '0;
      plane   <= '0;
      sx      <= '0;
      sy      <= '0;
      done    <= 1'b0;
      seen    <= '0;
    end else begin
      done <= 1'b0;
      unique case (st)
        S_IDLE: if (start) begin
          origin <= 1'b1;
          seen   <= '0;
          st     <= S_T_RDO;
        end
        S_TASK: if (sch_valid) begin
          lo      <= CW'(sch_lo);
          s       <= CW'(1) << (sch_level - 1'b1);
          upper   <= sch_upper;
          lastlvl <= sch_last;
          pass    <= P_Z;
          c1      <= '0;
          c2      <= '0;
          st      <= S_LINE;
        end
        S_LINE: begin
          tt <= t0;
          st <= (t0 >= 3 * s) ? S_PRE_RD3 : S_PRE_RD1;
        end
        S_PRE_RD3: st <= S_PRE_P3;
        S_PRE_P3:  st <= S_PRE_RD1;
        S_PRE_RD1: st <= S_PRE_P1;
        S_PRE_P1:  st <= has_r ? S_T_RDA : S_T_RDO;
        S_T_RDA:   st <= S_T_RDO;
        S_T_RDO: begin
          if (has_r) a_new <= mem_rdata;
          st <= S_T_CALC;
        end
        S_T_CALC: if (mode == MODE_COMPRESS || c_valid) st <= S_T_WR;
        S_T_WR: if (mode == MODE_DECOMPRESS || q_ready) begin
          // slice statistics
          seen[tgt_z] <= 1'b1;
          if (!seen[tgt_z] || sa_recon < zmin[tgt_z]) zmin[tgt_z] <= sa_recon;
          if (!seen[tgt_z] || sa_recon > zmax[tgt_z]) zmax[tgt_z] <= sa_recon;
          if (origin) begin
            origin <= 1'b0;
            st     <= S_TASK;
          end else if (!tgt_last_in_line) begin
            tt <= tt + (s << 1);
            st <= (tt + 3 * s < CW'(B) && !((pass == P_Z) && upper)) ? S_T_RDA : S_T_RDO;
          end else if (c1 + step1 < CW'(B)) begin
            c1 <= c1 + step1;
            st <= S_LINE;
          end else if (c2 + step2 < ((pass == P_Z) ? CW'(B) : hi)) begin
            c1 <= '0;
            c2 <= c2 + step2;
            st <= S_LINE;
          end else if (pass != P_X) begin
            pass <= (pass == P_Z) ? P_Y : P_X;
            c1   <= '0;
            c2   <= lo;
            st   <= S_LINE;
          end else if (lastlvl) begin
            plane <= lo[K-1:0];
            st    <= S_SL_MIN;
          end else begin
            st <= S_TASK;
          end
        end
        S_SL_MIN: if (s_ready) st <= S_SL_MAX;
        S_SL_MAX: if (s_ready) begin
          sx <= '0;
          sy <= '0;
          st <= S_SL_RD;
        end
        S_SL_RD: st <= S_SL_OUT;
        S_SL_OUT: if (s_ready) begin
          if (sx != CW'(B-1)) begin
            sx <= sx + 1'b1;
            st <= S_SL_RD;
          end else if (sy != CW'(B-1)) begin
            sx <= '0;
            sy <= sy + 1'b1;
            st <= S_SL_RD;
          end else if (plane[0] == 1'b0) begin
            plane <= plane + 1'b1;
            st    <= S_SL_MIN;
          end else if (plane == K'(B-1)) begin
            done <= 1'b1;
            st   <= S_IDLE;
          end else begin
            st <= S_TASK;
          end
        end
        default: st <= S_IDLE;
      endcase
    end
  end

  // the scheduler's own done is implied by the last slice; keep it observable
  // for assertions only
  always_ff @(posedge clk)
    if (rst_n && sch_done) assert (st == S_LINE || st == S_TASK)
      else $error("look-ahead schedule ended in an unexpected state");

endmodule
