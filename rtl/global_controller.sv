// global_controller: sequences one CONV layer over the buffers, weight banks and PEs.
//
// After 'start' it latches the layer configuration, pulses 'load' (PEs take mode and BN
// enable, pooling units restart) and then issues one term per cycle. Loop order,
// outermost first:
//   g  : output-block group (NUM_PE output blocks computed in parallel)
//   ph, pw : output pixel (pooled pixel when pooling is on)
//   q  : pixel inside the 2x2 pooling window (only when pooling is on)
//   jb : input channel block (C/16)
//   ky, kx : kernel position (3x3 with zero padding 1, or 1x1)
// Each term reads input vector (jb, oh+ky-1, ow+kx-1) of the source buffer (zero when
// it falls in the padding) and word (g*CB + jb)*K*K + ky*K + kx (+ w_base) of every
// weight bank; 'first'/'last' frame the K*K*CB terms of one output vector, as in the
// paper's dataflow figure (9 terms x0,0 .. x2,2 per output vector for one block).
// Addresses leave registered; t_valid/t_first/t_last/t_pad come one cycle later, in
// step with the read data.
// Two stalls keep the back end safe: (1) the term that closes a batch is held until at
// least NUM_PE cycles have passed since the previous one, so the store unit (one vector
// per cycle) is never overrun; (2) at the end of each group the controller waits until
// every batch of the group is stored, so the BN table address (bn_base + g) changes only
// when the pipeline is empty. 'done' pulses when the last batch of the layer is stored.
// The paper gives the controller's role and the dataflow; the loop order, the stall
// rules and the address arithmetic are this design's.
module global_controller
  import req_yolo_pkg::*;
#(
  parameter int unsigned NUM_PE = 32,
  parameter int unsigned FAW    = 16,   // feature buffer address width
  parameter int unsigned WAW    = 12,   // weight bank address width
  parameter int unsigned BAW    = 4     // BN table address width
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  layer_cfg_t       cfg_in,
  input  logic             stored,      // one batch written by the store unit
  output layer_cfg_t       cfg,         // configuration of the running layer
  output logic             busy,
  output logic             done,
  output logic             load,
  output logic [19:0]      hw_out,      // output pixels per output map
  output logic             rd_en,
  output logic [FAW-1:0]   rd_addr,
  output logic [WAW-1:0]   w_addr,
  output logic [BAW-1:0]   bn_addr,
  output logic             t_valid,
  output logic             t_first,
  output logic             t_last,
  output logic             t_pad,
  output logic             stall_gap,   // stall (1) active this cycle
  output logic             stall_drain  // stall (2) active this cycle
);

  typedef enum logic [1:0] {S_IDLE, S_RUN, S_DRAIN} state_e;
  state_e state;

  logic [9:0]  ph, pw, hout, wout;
  logic [1:0]  q;
  logic [6:0]  jb, g, ngrp;
  logic [1:0]  ky, kx, kmax;
  logic [19:0] issued, done_cnt;      // batches issued / stored in this group
  logic [7:0]  gap;                    // cycles until the next batch may close

  // ---- current term (combinational) ---------------------------------------------------
  logic        first_c, last_c, batch_end, pad_c, can_issue;
  logic signed [11:0] ih, iw;
  logic [9:0]  oh, ow;

  always_comb begin
    kmax      = cfg.k3 ? 2'd2 : 2'd0;
    oh        = cfg.pool_en ? {ph[8:0], q[1]} : ph;
    ow        = cfg.pool_en ? {pw[8:0], q[0]} : pw;
    ih        = $signed({2'b0, oh}) + $signed({10'b0, ky}) - (cfg.k3 ? 12'sd1 : 12'sd0);
    iw        = $signed({2'b0, ow}) + $signed({10'b0, kx}) - (cfg.k3 ? 12'sd1 : 12'sd0);
    pad_c     = (ih < 0) || (iw < 0) || (ih >= $signed({2'b0, cfg.h})) || (iw >= $signed({2'b0, cfg.w}));
    first_c   = (jb == 7'd0) && (ky == 2'd0) && (kx == 2'd0);
    last_c    = (jb == cfg.cb - 7'd1) && (ky == kmax) && (kx == kmax);
    batch_end = last_c && (!cfg.pool_en || q == 2'd3);
    can_issue = (state == S_RUN) && !(batch_end && gap != 8'd0);
  end

  assign stall_gap   = (state == S_RUN) && batch_end && gap != 8'd0;
  assign stall_drain = (state == S_DRAIN) && (done_cnt != issued);
  assign busy        = (state != S_IDLE);
  assign bn_addr     = BAW'(cfg.bn_base) + BAW'(g);

  // ---- loop counters -------------------------------------------------------------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      cfg      <= '0;
      {ph, pw, q, jb, g, ky, kx} <= '0;
      hout     <= '0;
      wout     <= '0;
      ngrp     <= '0;
      hw_out   <= '0;
      issued   <= '0;
      done_cnt <= '0;
      gap      <= '0;
      load     <= 1'b0;
      done     <= 1'b0;
    end else begin
      load <= 1'b0;
      done <= 1'b0;
      if (gap != 8'd0) gap <= gap - 8'd1;
      if (stored) done_cnt <= done_cnt + 20'd1;
      case (state)
        S_IDLE: if (start) begin
          cfg    <= cfg_in;
          hout   <= cfg_in.pool_en ? 10'(cfg_in.h >> 1) : cfg_in.h;
          wout   <= cfg_in.pool_en ? 10'(cfg_in.w >> 1) : cfg_in.w;
          hw_out <= 20'(cfg_in.pool_en ? 10'(cfg_in.h >> 1) : cfg_in.h)
                  * 20'(cfg_in.pool_en ? 10'(cfg_in.w >> 1) : cfg_in.w);
          ngrp   <= 7'((int'(cfg_in.ob) + int'(NUM_PE) - 1) / int'(NUM_PE));
          {ph, pw, q, jb, g, ky, kx} <= '0;
          issued   <= '0;
          done_cnt <= '0;
          gap      <= '0;
          load     <= 1'b1;
          state    <= S_RUN;
        end
        S_RUN: if (can_issue) begin
          if (batch_end) begin
            issued <= issued + 20'd1;
            gap    <= 8'(NUM_PE);
          end
          // advance kx -> ky -> jb -> q -> pw -> ph -> group end
          if (kx != kmax) kx <= kx + 2'd1;
          else begin
            kx <= '0;
            if (ky != kmax) ky <= ky + 2'd1;
            else begin
              ky <= '0;
              if (jb != cfg.cb - 7'd1) jb <= jb + 7'd1;
              else begin
                jb <= '0;
                if (cfg.pool_en && q != 2'd3) q <= q + 2'd1;
                else begin
                  q <= '0;
                  if (pw != wout - 10'd1) pw <= pw + 10'd1;
                  else begin
                    pw <= '0;
                    if (ph != hout - 10'd1) ph <= ph + 10'd1;
                    else begin
                      ph    <= '0;
                      state <= S_DRAIN;
                    end
                  end
                end
              end
            end
          end
        end
        S_DRAIN: if (done_cnt == issued) begin
          issued   <= '0;
          done_cnt <= stored ? 20'd1 : 20'd0;
          if (g == ngrp - 7'd1) begin
            done  <= 1'b1;
            state <= S_IDLE;
          end else begin
            g     <= g + 7'd1;
            state <= S_RUN;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // ---- address generation (registered) and framing (two registers) --------------------
  logic [WAW+8:0] wofs;
  logic [FAW+4:0] aofs;
  always_comb begin
    wofs = (WAW+9)'(cfg.w_base)
         + ((WAW+9)'(g) * (WAW+9)'(cfg.cb) + (WAW+9)'(jb)) * (WAW+9)'(cfg.k3 ? 9 : 1)
         + (WAW+9)'(ky) * (WAW+9)'(cfg.k3 ? 3 : 1) + (WAW+9)'(kx);
    aofs = (FAW+5)'(jb) * (FAW+5)'(cfg.h) * (FAW+5)'(cfg.w)
         + (FAW+5)'(ih[9:0]) * (FAW+5)'(cfg.w) + (FAW+5)'(iw[9:0]);
  end

  logic v1, f1, l1, p1;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_en <= 1'b0;
      v1 <= 1'b0;
      t_valid <= 1'b0;
    end else begin
      rd_en   <= can_issue && !pad_c;
      v1      <= can_issue;
      t_valid <= v1;
    end
  end

  always_ff @(posedge clk) begin
    rd_addr <= pad_c ? '0 : FAW'(aofs);
    w_addr  <= WAW'(wofs);
    f1 <= first_c;
    l1 <= last_c;
    p1 <= pad_c;
    t_first <= f1;
    t_last  <= l1;
    t_pad   <= p1;
  end

  a_addr_fits: assert property (@(posedge clk) disable iff (!rst_n)
      can_issue && !pad_c |-> (aofs >> FAW) == 0)
    else $error("global_controller: input address beyond the buffer");

endmodule
