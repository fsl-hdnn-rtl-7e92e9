// fe_ctrl: sequencer and address generator of the feature extractor.
//
// It runs one 3x3, stride-1 convolution pass: four output rows (one per PE
// row) by sixteen output channels (one per PE column) by w_in-2 output
// columns. Loop order, outermost first:
//   channel group g (gs channels sharing one codebook)
//     input column x = 0 .. w_in   (x = w_in is a drain slot)
//       channel c of the group, kernel row ky = 0..2     (3*gs cycles = 1 slot)
// so the pixels of one window are streamed for one channel before moving to
// the next channel, and the codebook changes only between groups, as in the
// published dataflow. During the first NCB cycles of every slot the PEs also
// multiply out the RF of the pixel that has received all three columns
// (pixel x-3); its partial result arrives NCB+1 cycles into the slot and is
// written (first group) or added (later groups) into the output buffer.
//
// Stage 0 issues memory reads; stage 1, one cycle later, drives the PEs with
// the returned data. For bank b of the compute half the row read is the one
// of y = row0+ky .. row0+ky+3 with y mod 4 = b, at address
// (y/4)*pitch + x*cin + g*gs + c; the data are rotated back to PE rows.
// The slot phase that rotates PE roles runs freely and is never reset
// between passes, so an RF always starts a pixel right after being cleared.
//
// A pass takes ngrp*(w_in+1)*3*gs + 2 cycles from start to done. Requires
// gs >= 6 so that a slot (3*gs cycles) covers the NCB+1 multiply cycles.
// The host (or chip controller) handles padding, strides, other kernel
// sizes and the tiling of layers into passes.
module fe_ctrl
  import fsl_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  conv_cfg_t         cfg,
  output logic              busy,
  output logic              done,
  // activation memory (compute half)
  output logic              am_rd_en,
  output logic [12:0]       am_rd_addr [4],
  input  bf16_t             am_rd_data [4],
  // index and codebook memories
  output logic              im_rd_en,
  output logic [8:0]        im_rd_addr,
  output logic              wm_rd_en,
  output logic [6:0]        wm_rd_addr,
  // PE array control
  output bf16_t             pe_act [4],
  output logic              pe_acc_en,
  output logic [1:0]        pe_ky,
  output logic [1:0]        pe_phase,
  output logic              pe_mac_en,
  output logic [IDX_W-1:0]  pe_mac_addr,
  output logic              pe_mac_last,
  input  logic              pe_out_valid,
  // output buffer write
  output logic              ob_wr_en,
  output logic              ob_wr_acc,
  output logic [5:0]        ob_wr_col
);
  typedef enum logic {S_IDLE, S_RUN} state_t;
  state_t state;

  logic [3:0] g;
  logic [7:0] x;
  logic [6:0] cc;      // channel within the group
  logic [1:0] ky;
  logic [7:0] t;       // cycle within the slot
  logic [1:0] phase;   // free-running slot counter
  logic [9:0] cidx;    // channel within the layer
  logic [7:0] ybase;
  logic       last_cycle;

  // stage 1 registers
  logic       v1;
  logic [3:0] g1;
  logic [7:0] x1;
  logic [1:0] rot1;

  assign cidx       = 10'(g) * 10'(cfg.gs) + 10'(cc);
  assign ybase      = cfg.row0 + 8'(ky);
  assign last_cycle = (g == cfg.ngrp - 4'd1) && (x == cfg.w_in) && (t == 8'(3 * int'(cfg.gs) - 1));

  // ---------------- stage 0: address generation ----------------
  always_comb begin
    am_rd_en   = (state == S_RUN);
    im_rd_en   = (state == S_RUN);
    wm_rd_en   = (state == S_RUN) && (t < 8'(NCB));
    im_rd_addr = 9'(cfg.ch0) + 9'(cidx);
    wm_rd_addr = {g[2:0], t[3:0]};
    for (int b = 0; b < 4; b++) begin
      logic [1:0] r;
      logic [7:0] y;
      r = 2'(b) - ybase[1:0];
      y = ybase + 8'(r);
      am_rd_addr[b] = 13'(32'(y[7:2]) * 32'(cfg.pitch) + 32'(x) * 32'(cfg.cin) + 32'(cidx));
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      {g, x, cc, ky, t, phase} <= '0;
      {v1, g1, x1, rot1} <= '0;
      {pe_acc_en, pe_ky, pe_phase, pe_mac_en, pe_mac_addr, pe_mac_last} <= '0;
      done <= 1'b0;
    end else begin
      done <= v1 && (state == S_IDLE);
      // stage 1 follows stage 0 by one cycle
      v1          <= (state == S_RUN);
      g1          <= g;
      x1          <= x;
      rot1        <= ybase[1:0];
      pe_acc_en   <= (state == S_RUN) && (x < cfg.w_in);
      pe_ky       <= ky;
      pe_phase    <= phase;
      pe_mac_en   <= (state == S_RUN) && (t < 8'(NCB));
      pe_mac_addr <= t[IDX_W-1:0];
      pe_mac_last <= (state == S_RUN) && (t == 8'(NCB - 1));
      unique case (state)
        S_IDLE: if (start) begin
          state <= S_RUN;
          {g, x, cc, ky, t} <= '0;
        end
        S_RUN: begin
          if (last_cycle) state <= S_IDLE;
          if (ky == 2'd2) begin ky <= '0; cc <= cc + 7'd1; end
          else ky <= ky + 2'd1;
          if (t == 8'(3 * int'(cfg.gs) - 1)) begin   // end of slot
            t <= '0; cc <= '0; ky <= '0;
            phase <= phase + 2'd1;
            if (x == cfg.w_in) begin x <= '0; g <= g + 4'd1; end
            else x <= x + 8'd1;
          end else t <= t + 8'd1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state != S_IDLE) || v1;

  // rotate bank data back to PE rows: PE row r reads row ybase+r
  always_comb
    for (int r = 0; r < 4; r++) pe_act[r] = am_rd_data[2'(rot1 + 2'(r))];

  // results of pixel x1-3 arrive inside stage-1 slot x1
  assign ob_wr_en  = pe_out_valid && (x1 >= 8'd3);
  assign ob_wr_acc = (g1 != 4'd0);
  assign ob_wr_col = 6'(x1 - 8'd3);
endmodule
