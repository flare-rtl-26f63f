// prediction_engine -- M interpolation/quantization lanes in parallel.
//
// Blocks are independent, so the engine runs M interp_lane instances, each on
// its own block held in its own SRAM bank (block slot `slot` of that bank).
// The lanes share one set of interpolation/quantization settings and one
// start. Their outputs are merged in a fixed round-robin order so that the
// stream is reproducible in decompression:
//   * quantized points: lane 0, 1, .., M-1, 0, .. one point at a time (into
//     FIFO1 and the Codec Engine); decompression hands the decoded points to
//     the lanes in the same order;
//   * finished slices: one whole slice (min, max, B*B values) per lane in
//     turn (into FIFO2 and the Neural Engine).
// All lanes walk identical schedules, so strict rotation never waits on a
// lane that has nothing to give for long. The lane count M and the per-lane
// block parallelism are the paper's; the merge order is this design's choice.
module prediction_engine
  import flare_pkg::*;
#(
  parameter int unsigned M   = 4,    // 1D systolic arrays (Table 4)
  parameter int unsigned K   = 5,    // log2 block edge (32^3 blocks)
  parameter int unsigned BAW = 21,   // bank address width (32 MB / 4 banks)
  localparam int unsigned LAW = 3*K + 1,
  localparam int unsigned SW  = BAW - LAW
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           start,
  input  mode_e          mode,
  input  pred_cfg_t      cfg,
  input  logic [SW-1:0]  slot,
  // SRAM bank ports
  output logic           mem_en    [M],
  output logic           mem_we    [M],
  output logic [BAW-1:0] mem_addr  [M],
  output data_t          mem_wdata [M],
  input  data_t          mem_rdata [M],
  // quantized points (compression out / decompression in)
  output logic           q_valid,
  input  logic           q_ready,
  output qitem_t         q_item,
  input  logic           c_valid,
  output logic           c_ready,
  input  qitem_t         c_item,
  // reconstructed slices
  output logic           s_valid,
  input  logic           s_ready,
  output data_t          s_data,
  output logic           s_last,
  output logic           busy,
  output logic           done
);

  localparam int unsigned PW = (M > 1) ? $clog2(M) : 1;

  logic   l_qv [M], l_qr [M], l_cv [M], l_cr [M], l_sv [M], l_sr [M], l_sl [M];
  logic   l_busy [M], l_done [M];
  qitem_t l_qi [M];
  data_t  l_sd [M];
  logic [LAW-1:0] l_addr [M];

  logic [PW-1:0] qptr, cptr, sptr;
  logic [M-1:0]  finished;

  for (genvar i = 0; i < M; i++) begin : g_lane
    interp_lane #(.K(K)) u_lane (
      .clk, .rst_n, .start, .mode, .cfg,
      .mem_en(mem_en[i]), .mem_we(mem_we[i]), .mem_addr(l_addr[i]),
      .mem_wdata(mem_wdata[i]), .mem_rdata(mem_rdata[i]),
      .q_valid(l_qv[i]), .q_ready(l_qr[i]), .q_item(l_qi[i]),
      .c_valid(l_cv[i]), .c_ready(l_cr[i]), .c_item(c_item),
      .s_valid(l_sv[i]), .s_ready(l_sr[i]), .s_data(l_sd[i]), .s_last(l_sl[i]),
      .busy(l_busy[i]), .done(l_done[i])
    );
    assign mem_addr[i] = {slot, l_addr[i]};
    assign l_qr[i] = q_ready && (qptr == PW'(i));
    assign l_cv[i] = c_valid && (cptr == PW'(i));
    assign l_sr[i] = s_ready && (sptr == PW'(i));
  end

  assign q_valid = l_qv[qptr];
  assign q_item  = l_qi[qptr];
  assign c_ready = l_cr[cptr];
  assign s_valid = l_sv[sptr];
  assign s_data  = l_sd[sptr];
  assign s_last  = l_sl[sptr];

  function automatic logic [PW-1:0] nxt(input logic [PW-1:0] p);
    return (p == PW'(M-1)) ? '0 : p + 1'b1;
  endfunction

  always_comb begin
    busy = 1'b0;
    for (int i = 0; i < M; i++) busy |= l_busy[i];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      qptr     <= '0;
      cptr     <= '0;
      sptr     <= '0;
      finished <= '0;
      done     <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start) begin
        qptr     <= '0;
        cptr     <= '0;
        sptr     <= '0;
        finished <= '0;
      end else begin
        if (q_valid && q_ready)           qptr <= nxt(qptr);
        if (c_valid && c_ready)           cptr <= nxt(cptr);
        if (s_valid && s_ready && s_last) sptr <= nxt(sptr);
        for (int i = 0; i < M; i++)
          if (l_done[i]) finished[i] <= 1'b1;
        if (&finished) begin
          done     <= 1'b1;
          finished <= '0;
        end
      end
    end
  end

endmodule
