// flare_top -- N FLARE Computing Cores side by side.
//
// Workload scalability in FLARE comes from replicating the whole computing
// core: each of the N cores compresses or decompresses its own dataset with
// its own SRAM, engines and FIFOs, and all of them sit next to the off-chip
// DRAM. This top instantiates N flare_core and brings every core's DRAM-side,
// configuration and stream ports out as arrays indexed by core; the DRAM and
// whatever moves data between it and the cores are outside this design. The
// paper evaluates N = 1 (Table 4), which is the default. Within a core,
// data-size scalability is the number M of 1D systolic arrays (default 4).
// Timing and handshakes are those of flare_core.
module flare_top
  import flare_pkg::*;
#(
  parameter int unsigned     N        = 1,
  parameter int unsigned     M        = 4,
  parameter int unsigned     K        = 5,
  parameter longint unsigned SRAM_B   = 64'd33554432,
  parameter longint unsigned FIFO1_B  = 64'd8388608,
  parameter longint unsigned FIFO2_B  = 64'd33554432,
  parameter int unsigned     ROWS     = 128,
  parameter int unsigned     COLS     = 128,
  parameter int unsigned     OC       = 16,
  parameter longint unsigned GB_B     = 64'd25165824,
  parameter int unsigned     SYMS     = 65536,
  localparam int unsigned    HAW      = $clog2(SRAM_B / 4),
  localparam int unsigned    BAW      = $clog2(SRAM_B / 4 / M),
  localparam int unsigned    SW       = BAW - (3*K + 1),
  localparam int unsigned    GAW      = $clog2(GB_B / 4),
  localparam int unsigned    KT       = 9
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           start     [N],
  input  mode_e          mode      [N],
  input  pred_cfg_t      cfg       [N],
  input  logic [SW-1:0]  slot      [N],
  output logic           busy      [N],
  output logic           done      [N],
  input  logic           h_en      [N],
  input  logic           h_we      [N],
  input  logic [HAW-1:0] h_addr    [N],
  input  data_t          h_wdata   [N],
  output data_t          h_rdata   [N],
  input  logic           cb_we     [N],
  input  logic [2:0]     cb_sel    [N],
  input  logic [CODE_W-1:0] cb_addr [N],
  input  logic [37:0]    cb_wdata  [N],
  input  logic           hist_clear[N],
  input  logic [CODE_W-1:0] hist_addr [N],
  output logic [31:0]    hist_data [N],
  input  logic           w_we      [N],
  input  logic [$clog2(KT*OC)-1:0] w_addr [N],
  input  logic signed [CW_W-1:0]   w_data [N],
  input  logic           b_we      [N],
  input  logic [$clog2(OC+1)-1:0]  b_addr [N],
  input  logic signed [CW_W-1:0]   b_data [N],
  output logic           bs_valid  [N],
  input  logic           bs_ready  [N],
  output logic [31:0]    bs_data   [N],
  input  logic           bi_valid  [N],
  output logic           bi_ready  [N],
  input  logic [31:0]    bi_data   [N],
  output logic           o_valid   [N],
  input  logic           o_ready   [N],
  output data_t          o_data    [N],
  output logic           o_last    [N],
  input  logic [GAW-1:0] gb_raddr  [N],
  output data_t          gb_rdata  [N],
  output logic [31:0]    slices_done [N],
  output logic [31:0]    fifo1_peak  [N],
  output logic [31:0]    fifo2_peak  [N]
);

  for (genvar n = 0; n < N; n++) begin : g_core
    flare_core #(
      .M(M), .K(K), .SRAM_B(SRAM_B), .FIFO1_B(FIFO1_B), .FIFO2_B(FIFO2_B),
      .ROWS(ROWS), .COLS(COLS), .OC(OC), .GB_B(GB_B), .SYMS(SYMS)
    ) u_core (
      .clk, .rst_n,
      .start(start[n]), .mode(mode[n]), .cfg(cfg[n]), .slot(slot[n]),
      .busy(busy[n]), .done(done[n]),
      .h_en(h_en[n]), .h_we(h_we[n]), .h_addr(h_addr[n]), .h_wdata(h_wdata[n]),
      .h_rdata(h_rdata[n]),
      .cb_we(cb_we[n]), .cb_sel(cb_sel[n]), .cb_addr(cb_addr[n]), .cb_wdata(cb_wdata[n]),
      .hist_clear(hist_clear[n]), .hist_addr(hist_addr[n]), .hist_data(hist_data[n]),
      .w_we(w_we[n]), .w_addr(w_addr[n]), .w_data(w_data[n]),
      .b_we(b_we[n]), .b_addr(b_addr[n]), .b_data(b_data[n]),
      .bs_valid(bs_valid[n]), .bs_ready(bs_ready[n]), .bs_data(bs_data[n]),
      .bi_valid(bi_valid[n]), .bi_ready(bi_ready[n]), .bi_data(bi_data[n]),
      .o_valid(o_valid[n]), .o_ready(o_ready[n]), .o_data(o_data[n]), .o_last(o_last[n]),
      .gb_raddr(gb_raddr[n]), .gb_rdata(gb_rdata[n]), .slices_done(slices_done[n]),
      .fifo1_peak(fifo1_peak[n]), .fifo2_peak(fifo2_peak[n])
    );
  end

endmodule
