// kws_accel: keyword-spotting CNN accelerator, top level.
//
// The accelerator runs a small CNN on a 44x13 MFCC spectrum (44 frames of 13 coefficients):
// conv3x3 - maxpool - conv3x3 - maxpool - conv3x3 - maxpool - fully connected - fully connected,
// with q-bit fixed-point data and weights. Its parts are those of the block diagram: a PE array
// of P engines with M multipliers each, P weight banks, a feature-map memory and an output
// memory (Mq-bit words), a convolution and a fully connected address generator whose
// addresses pass two multiplexers S1 (feature-map address) and S2 (weight address, output
// pixel and tile), a max-pooling block, and the top control logic. Each PE produces one output
// channel; a pass of the array over one output pixel yields P channels (output-channel tiling),
// and a convolution with C input channels takes 9*ceil(C/M) cycles per pixel and tile.
//
// Defaults are the main configuration, q = 4 bits, s = 4.5: P = 16s = 72 PEs, M = 8
// multipliers, 288/144/144 filters, 288 hidden neurons; the 30 outputs are the 30 keyword
// classes of the dataset the network was trained on.
//
// Host interface (all while busy is low): weights are written one Mq-bit word at a time into
// bank w_wr_bank; the input spectrum goes into activation memory 0 (pixel (row,col) =
// frame, coefficient, at word row*IN_W+col, value in lane 0, other lanes zero); `start` runs the
// network; `done` pulses at the end; the N_OUT results (ceil(N_OUT/M) words) are then read
// through res_rd_*, one cycle of read latency. cycle_count and stall_count report the last
// run's length and its stalled cycles.
//
// Timing: the generator issues an address in cycle t; the memories answer in t+1, where the
// PE array takes the words; results leave the array in t+3 and are written back, P/M words,
// from t+4 on.
module kws_accel
  import kws_pkg::*;
#(
  parameter int Q     = 4,
  parameter int P     = 72,
  parameter int M     = 8,
  parameter int IN_H  = 44,
  parameter int IN_W  = 13,
  parameter int F1    = 288,
  parameter int F2    = 144,
  parameter int F3    = 144,
  parameter int FC1   = 288,
  parameter int N_OUT = 30,
  localparam net_cfg_t NET = build_net(Q, P, M, IN_H, IN_W, F1, F2, F3, FC1, N_OUT),
  localparam int WDEPTH = wmem_depth(NET),
  localparam int ADEPTH = amem_depth(NET),
  localparam int WAW    = (WDEPTH > 1) ? $clog2(WDEPTH) : 1,
  localparam int AAW    = (ADEPTH > 1) ? $clog2(ADEPTH) : 1,
  localparam int BW     = (P > 1) ? $clog2(P) : 1
) (
  input  logic           clk,
  input  logic           rst_n,
  // weight loading
  input  logic           w_wr_en,
  input  logic [BW-1:0]  w_wr_bank,
  input  logic [WAW-1:0] w_wr_addr,
  input  logic [M*Q-1:0] w_wr_data,
  // input feature map loading
  input  logic           fm_wr_en,
  input  logic [AAW-1:0] fm_wr_addr,
  input  logic [M*Q-1:0] fm_wr_data,
  // result read-out
  input  logic           res_rd_en,
  input  logic [AAW-1:0] res_rd_addr,
  output logic [M*Q-1:0] res_rd_data,
  // control and status
  input  logic           start,
  output logic           busy,
  output logic           done,
  output logic [31:0]    cycle_count,
  output logic [31:0]    stall_count
);

  // ---------------- control ----------------
  layer_cfg_t cfg;
  logic sel_conv, conv_start, fc_start, pool_start, pool_active, src_bank, adv, stall;
  logic result_bank;
  logic conv_busy, fc_busy, pool_busy, conv_done, fc_done, pool_done;
  logic pipe_busy, inflight_last;
  logic [DIM_W-1:0] wb_remaining;
  issue_t conv_issue, fc_issue;

  // S1 (feature-map address) and S2 (weight address, output pixel, tile): 0 fc, 1 conv
  logic [ADDR_W-1:0] s1_fm_addr, s2_w_addr, s2_out_pix;
  logic [TILE_W-1:0] s2_tile;
  logic              iss_valid, iss_first, iss_last, iss_pad;
  always_comb begin
    s1_fm_addr = sel_conv ? conv_issue.fm_addr : fc_issue.fm_addr;
    s2_w_addr  = sel_conv ? conv_issue.w_addr  : fc_issue.w_addr;
    s2_out_pix = sel_conv ? conv_issue.out_pix : fc_issue.out_pix;
    s2_tile    = sel_conv ? conv_issue.tile    : fc_issue.tile;
    iss_valid  = sel_conv ? conv_issue.valid   : fc_issue.valid;
    iss_first  = sel_conv ? conv_issue.first   : fc_issue.first;
    iss_last   = sel_conv ? conv_issue.last    : fc_issue.last;
    iss_pad    = sel_conv ? conv_issue.pad_zero : 1'b0;
  end

  top_control #(.NET(NET)) u_ctrl (
    .clk, .rst_n, .start,
    .conv_busy, .fc_busy, .pool_busy, .pipe_busy,
    .issue_valid(iss_valid), .issue_last(iss_last), .inflight_last, .wb_remaining,
    .cfg, .sel_conv, .conv_start, .fc_start, .pool_start, .pool_active, .src_bank, .adv, .stall,
    .busy, .done, .result_bank, .cycle_count, .stall_count
  );

  conv_addr_gen u_conv_ag (
    .clk, .rst_n, .start(conv_start), .adv, .cfg,
    .issue(conv_issue), .busy(conv_busy), .done(conv_done)
  );

  fc_addr_gen u_fc_ag (
    .clk, .rst_n, .start(fc_start), .adv, .cfg,
    .issue(fc_issue), .busy(fc_busy), .done(fc_done)
  );

  logic fire;
  assign fire = iss_valid && adv;

  // ---------------- tags travelling with the PE pipeline ----------------
  typedef struct packed {
    logic              valid;
    logic              first;
    logic              last;
    logic              pad;
    logic [ADDR_W-1:0] pix;
    logic [TILE_W-1:0] tile;
  } tag_t;
  tag_t tag_a, tag_b, tag_c;   // cycles t+1, t+2, t+3 after issue

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tag_a <= '0;
      tag_b <= '0;
      tag_c <= '0;
    end else begin
      tag_a <= '{valid: fire, first: iss_first, last: iss_last, pad: iss_pad,
                 pix: s2_out_pix, tile: s2_tile};
      tag_b <= tag_a;
      tag_c <= tag_b;
    end
  end

  assign inflight_last = (tag_a.valid && tag_a.last) || (tag_b.valid && tag_b.last) ||
                         (tag_c.valid && tag_c.last);

  // ---------------- memories ----------------
  logic [P-1:0][M*Q-1:0] w_rdata;
  weight_memory #(.Q(Q), .M(M), .P(P), .DEPTH(WDEPTH)) u_wmem (
    .clk,
    .ren  (fire),
    .raddr(WAW'(s2_w_addr)),
    .rdata(w_rdata),
    .wen  (w_wr_en && !busy),
    .wbank(w_wr_bank),
    .waddr(w_wr_addr),
    .wdata(w_wr_data)
  );

  logic              pool_rd_en, pool_wr_en, wb_wr_en;
  logic [ADDR_W-1:0] pool_rd_addr, pool_wr_addr, wb_wr_addr;
  logic [M*Q-1:0]    pool_wr_data, wb_wr_data;

  // engine-side read and write requests, routed to the bank that has that role
  logic              eng_ren, eng_wen;
  logic [AAW-1:0]    eng_raddr, eng_waddr;
  logic [M*Q-1:0]    eng_wdata;
  always_comb begin
    eng_ren   = pool_active ? pool_rd_en : fire;
    eng_raddr = pool_active ? AAW'(pool_rd_addr) : AAW'(s1_fm_addr);
    eng_wen   = pool_active ? pool_wr_en : wb_wr_en;
    eng_waddr = pool_active ? AAW'(pool_wr_addr) : AAW'(wb_wr_addr);
    eng_wdata = pool_active ? pool_wr_data : wb_wr_data;
  end

  logic [1:0]          bank_ren, bank_wen;
  logic [1:0][AAW-1:0] bank_raddr, bank_waddr;
  logic [1:0][M*Q-1:0] bank_wdata, bank_rdata;
  always_comb begin
    for (int b = 0; b < 2; b++) begin
      if (busy) begin
        bank_ren[b]   = eng_ren && (src_bank == 1'(b));
        bank_raddr[b] = eng_raddr;
        bank_wen[b]   = eng_wen && (src_bank != 1'(b));
        bank_waddr[b] = eng_waddr;
        bank_wdata[b] = eng_wdata;
      end else begin
        bank_ren[b]   = res_rd_en && (result_bank == 1'(b));
        bank_raddr[b] = res_rd_addr;
        bank_wen[b]   = fm_wr_en && (b == 0);
        bank_waddr[b] = fm_wr_addr;
        bank_wdata[b] = fm_wr_data;
      end
    end
  end

  for (genvar b = 0; b < 2; b++) begin : g_act
    act_memory #(.Q(Q), .M(M), .DEPTH(ADEPTH)) u_amem (
      .clk,
      .ren  (bank_ren[b]),
      .raddr(bank_raddr[b]),
      .rdata(bank_rdata[b]),
      .wen  (bank_wen[b]),
      .waddr(bank_waddr[b]),
      .wdata(bank_wdata[b])
    );
  end

  logic [M*Q-1:0] fm_rdata;
  assign fm_rdata    = bank_rdata[src_bank];
  assign res_rd_data = bank_rdata[result_bank];

  // ---------------- PE array and write-back ----------------
  logic                res_valid;
  logic [P-1:0][Q-1:0] res;
  pe_array #(.Q(Q), .M(M), .P(P)) u_pes (
    .clk, .rst_n,
    .in_valid (tag_a.valid),
    .in_first (tag_a.first),
    .in_last  (tag_a.last),
    .fm       (tag_a.pad ? '0 : fm_rdata),
    .w        (w_rdata),
    .shift    (cfg.shift),
    .relu     (cfg.relu),
    .res_valid(res_valid),
    .res      (res)
  );

  out_writeback #(.Q(Q), .M(M), .P(P)) u_wb (
    .clk, .rst_n, .cfg,
    .res_valid, .res,
    .out_pix  (tag_c.pix),
    .tile     (tag_c.tile),
    .wr_en    (wb_wr_en),
    .wr_addr  (wb_wr_addr),
    .wr_data  (wb_wr_data),
    .remaining(wb_remaining)
  );

  assign pipe_busy = tag_a.valid || tag_b.valid || tag_c.valid || res_valid ||
                     (wb_remaining != '0);

  // ---------------- max-pooling block ----------------
  maxpool_unit #(.Q(Q), .M(M)) u_pool (
    .clk, .rst_n,
    .start  (pool_start),
    .cfg,
    .rd_en  (pool_rd_en),
    .rd_addr(pool_rd_addr),
    .rd_data(fm_rdata),
    .wr_en  (pool_wr_en),
    .wr_addr(pool_wr_addr),
    .wr_data(pool_wr_data),
    .busy   (pool_busy),
    .done   (pool_done)
  );

  // results reach the write-back together with the tags of their last word
  a_tag_align: assert property (@(posedge clk) disable iff (!rst_n)
    res_valid |-> (tag_c.valid && tag_c.last));

endmodule
