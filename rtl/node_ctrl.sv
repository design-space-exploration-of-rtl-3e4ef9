// node_ctrl -- sequencer for the node's three convolution layers.
//
// The node runs the first part of the image autoencoder (the layers before
// the split point). Each layer is a stride-2 convolution followed by 2x2 max
// pooling: layer 0 takes the IMG x IMG x C_IN image through F1 kernels of
// K1 x K1, layer 1 takes the (IMG/4)^2 x F1 result through F2 kernels of
// K2 x K2, layer 2 the (IMG/16)^2 x F2 result through F3 kernels of K3 x K3.
// With the defaults these are the paper's three node layers
// (128x128x3 -> 64x64x128, 32x32x128 -> 16x16x64, 8x8x64 -> 4x4x32 before
// pooling). The paper gives the layer sizes; the loop order, the stride-2 and
// pooling reading of those sizes and this controller are this design's.
//
// Every cycle in RUN the controller issues one window operation (op_t): in
// parallel mode one whole k x k window of one input channel, in serial mode
// one kernel column of it, so a window takes k cycles. Loop order, outermost
// first: filter f, pooled row py, pooled column px, the four positions of the
// pooling window (dy, dx), input channel c, kernel column (serial only). The
// four convolution outputs of a pooling window therefore leave the datapath
// back to back. After the last op of a layer the controller waits DRAIN
// cycles for the pipeline to write its last result, then starts the next
// layer. After layer 2 it raises out_phase until tx_done reports that the
// output feature map has been sent, then pulses done.
//
// Interface: start (accepted only when idle) with serial_mode sampled at the
// same edge; busy; done (one-cycle pulse); layer_start (one-cycle pulse at the
// start of each layer); op (valid while issuing); out_phase; tx_done input.
module node_ctrl
  import distnn_pkg::*;
#(
  parameter int unsigned IMG   = 128,
  parameter int unsigned C_IN  = 3,
  parameter int unsigned K1    = 5,
  parameter int unsigned F1    = 128,
  parameter int unsigned K2    = 3,
  parameter int unsigned F2    = 64,
  parameter int unsigned K3    = 3,
  parameter int unsigned F3    = 32,
  parameter int unsigned DRAIN = 4
) (
  input  logic clk,
  input  logic rst_n,
  input  logic start,
  input  logic serial_mode,
  input  logic tx_done,
  output logic busy,
  output logic done,
  output logic layer_start,
  output logic out_phase,
  output logic serial,
  output op_t  op
);

  typedef enum logic [1:0] {S_IDLE, S_RUN, S_DRAIN, S_OUT} state_t;

  state_t     state;
  logic [1:0] layer;
  idx_t       f, py, px, c;
  logic [1:0] q;            // position in pooling window: dy = q[1], dx = q[0]
  logic [2:0] col;
  logic [7:0] drain_cnt;

  // Geometry of the current layer.
  idx_t n_f, n_c, n_p;      // filters, input channels, pooled output size
  logic [2:0] k;
  always_comb begin
    unique case (layer)
      2'd0:    begin n_f = idx_t'(F1); n_c = idx_t'(C_IN); n_p = idx_t'(IMG/4);  k = 3'(K1); end
      2'd1:    begin n_f = idx_t'(F2); n_c = idx_t'(F1);   n_p = idx_t'(IMG/16); k = 3'(K2); end
      default: begin n_f = idx_t'(F3); n_c = idx_t'(F2);   n_p = idx_t'(IMG/64); k = 3'(K3); end
    endcase
  end

  logic last_col, last_c, last_q, last_px, last_py, last_f, last_op;
  always_comb begin
    last_col = !serial || (col == k - 3'd1);
    last_c   = (c  == n_c - 1'b1);
    last_q   = (q  == 2'd3);
    last_px  = (px == n_p - 1'b1);
    last_py  = (py == n_p - 1'b1);
    last_f   = (f  == n_f - 1'b1);
    last_op  = last_col && last_c && last_q && last_px && last_py && last_f;
  end

  always_comb begin
    op           = '0;
    op.valid     = (state == S_RUN);
    op.layer     = layer;
    op.f         = f;
    op.c         = c;
    op.oy        = idx_t'({py, 1'b0}) + idx_t'(q[1]);
    op.ox        = idx_t'({px, 1'b0}) + idx_t'(q[0]);
    op.col       = serial ? col : 3'd0;
    op.first_col = (col == 3'd0);
    op.last_col  = last_col;
    op.first_ch  = (c == '0);
    op.last_ch   = last_c;
  end

  assign busy      = (state != S_IDLE);
  assign out_phase = (state == S_OUT);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= S_IDLE;
      layer       <= '0;
      {f, py, px, c} <= '0;
      q           <= '0;
      col         <= '0;
      drain_cnt   <= '0;
      serial      <= 1'b0;
      done        <= 1'b0;
      layer_start <= 1'b0;
    end else begin
      done        <= 1'b0;
      layer_start <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          serial      <= serial_mode;
          layer       <= '0;
          {f, py, px, c} <= '0;
          q           <= '0;
          col         <= '0;
          layer_start <= 1'b1;
          state       <= S_RUN;
        end
        S_RUN: begin
          if (last_op) begin
            state     <= S_DRAIN;
            drain_cnt <= '0;
          end
          // nested counters, innermost first
          if (!last_col) col <= col + 3'd1;
          else begin
            col <= '0;
            if (!last_c) c <= c + 1'b1;
            else begin
              c <= '0;
              if (!last_q) q <= q + 2'd1;
              else begin
                q <= '0;
                if (!last_px) px <= px + 1'b1;
                else begin
                  px <= '0;
                  if (!last_py) py <= py + 1'b1;
                  else begin
                    py <= '0;
                    if (!last_f) f <= f + 1'b1;
                    else         f <= '0;
                  end
                end
              end
            end
          end
        end
        S_DRAIN: begin
          if (drain_cnt == 8'(DRAIN - 1)) begin
            if (layer == 2'd2) state <= S_OUT;
            else begin
              layer       <= layer + 2'd1;
              layer_start <= 1'b1;
              state       <= S_RUN;
            end
          end else begin
            drain_cnt <= drain_cnt + 8'd1;
          end
        end
        S_OUT: if (tx_done) begin
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
