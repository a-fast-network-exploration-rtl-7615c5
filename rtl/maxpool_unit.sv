// maxpool_unit: the max-pooling block, 2x2 windows with stride 2.
//
// The block reads the feature-map memory, one M-lane word per cycle, and writes the pooled map
// to the output memory. For each output pixel (py, px) and channel word cg it reads the four
// words of the window (2py+dy, 2px+dx), dy, dx in {0,1}, into a register; a lane-wise signed
// comparator keeps the larger of the register and the running maximum, a pass of a bubble sort
// that leaves the maximum on top. After the fourth word the maximum is written. A last odd row
// or column of the input is dropped. Register, comparator and a control of its own are the
// parts the block diagram shows; the read order and the lane-wise (M values per word)
// comparison are this design's choices.
//
// Interface: `start` with `cfg` (a pooling layer, stable during the layer); rd_en/rd_addr to
// the feature-map memory, whose rd_data arrives one cycle later; wr_en/wr_addr/wr_data to the
// output memory. Timing: one read per cycle without stalls; a word is written three cycles
// after the read of its window's fourth word; `done` pulses after the last write.
module maxpool_unit
  import kws_pkg::*;
#(
  parameter int Q = 4,
  parameter int M = 8
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  layer_cfg_t        cfg,
  output logic              rd_en,
  output logic [ADDR_W-1:0] rd_addr,
  input  logic [M*Q-1:0]    rd_data,
  output logic              wr_en,
  output logic [ADDR_W-1:0] wr_addr,
  output logic [M*Q-1:0]    wr_data,
  output logic              busy,
  output logic              done
);

  // ---- maxpooling control logic: read sequence ----
  logic             issuing;
  logic [DIM_W-1:0] py, px, cg;
  logic [1:0]       d;
  logic last_cg, last_px, last_py;
  assign last_cg = (cg == cfg.out_cg - 1'b1);
  assign last_px = (px == cfg.out_w - 1'b1);
  assign last_py = (py == cfg.out_h - 1'b1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      issuing <= 1'b0;
      py <= '0; px <= '0; cg <= '0; d <= '0;
    end else if (start) begin
      issuing <= 1'b1;
      py <= '0; px <= '0; cg <= '0; d <= '0;
    end else if (issuing) begin
      d <= d + 1'b1;
      if (d == 2'd3) begin
        if (!last_cg) cg <= cg + 1'b1;
        else begin
          cg <= '0;
          if (!last_px) px <= px + 1'b1;
          else begin
            px <= '0;
            if (!last_py) py <= py + 1'b1;
            else begin
              py <= '0;
              issuing <= 1'b0;
            end
          end
        end
      end
    end
  end

  logic [ADDR_W-1:0] iy, ix, oaddr;
  always_comb begin
    iy      = ADDR_W'(py) * 2 + ADDR_W'(d[1]);
    ix      = ADDR_W'(px) * 2 + ADDR_W'(d[0]);
    rd_en   = issuing;
    rd_addr = (iy * ADDR_W'(cfg.in_w) + ix) * ADDR_W'(cfg.out_cg) + ADDR_W'(cg);
    oaddr   = (ADDR_W'(py) * ADDR_W'(cfg.out_w) + ADDR_W'(px)) * ADDR_W'(cfg.out_cg)
            + ADDR_W'(cg);
  end

  // ---- datapath: data register, comparator, running maximum ----
  logic              v1, f1, l1, v2, f2, l2;
  logic [ADDR_W-1:0] a1, a2;
  logic [M*Q-1:0]    data_q, run_max, cmp;

  always_comb begin
    for (int i = 0; i < M; i++) begin
      if (f2 || signed'(data_q[i*Q +: Q]) > signed'(run_max[i*Q +: Q]))
        cmp[i*Q +: Q] = data_q[i*Q +: Q];
      else
        cmp[i*Q +: Q] = run_max[i*Q +: Q];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1 <= 1'b0; f1 <= 1'b0; l1 <= 1'b0; a1 <= '0;
      v2 <= 1'b0; f2 <= 1'b0; l2 <= 1'b0; a2 <= '0;
      data_q  <= '0;
      run_max <= '0;
      wr_en   <= 1'b0;
      wr_addr <= '0;
      wr_data <= '0;
      done    <= 1'b0;
    end else begin
      // stage 1: the read word arrives from memory
      v1 <= issuing;
      f1 <= (d == 2'd0);
      l1 <= (d == 2'd3);
      a1 <= oaddr;
      // stage 2: register the word
      v2 <= v1;
      f2 <= f1;
      l2 <= l1;
      a2 <= a1;
      if (v1) data_q <= rd_data;
      // stage 3: compare and write
      if (v2) run_max <= cmp;
      wr_en   <= v2 && l2;
      wr_addr <= a2;
      if (v2 && l2) wr_data <= cmp;
      done    <= wr_en && !issuing && !v1 && !v2;
    end
  end

  assign busy = issuing || v1 || v2 || wr_en;

endmodule
