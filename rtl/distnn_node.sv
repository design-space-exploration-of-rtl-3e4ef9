// distnn_node -- wearable-node half of a distributed autoencoder.
//
// The node runs the front layers of an image autoencoder up to the chosen
// split point and hands the small feature map to a radio, which carries it to
// a hub that runs the rest of the network. This module holds everything on the
// node side of that split: the image and feature-map buffers, the weight
// memory, the node_ctrl sequencer, the two kinds of convolution engine the
// paper describes (k x k parallel: conv5x5_parallel and conv3x3_parallel; k
// lanes sequential: conv_serial), per-output channel accumulation, 2x2
// maxpool, the activation back to 8 bits and a valid/ready output stream for
// the transmitter. The radio itself is outside this module.
//
// Data flow of one window operation (pipeline stages):
//   S0  node_ctrl issues an op; the address generator forms up to 25 feature
//       and 25 weight addresses and an in-bounds mask (zero padding of k/2 on
//       every side, stride 2).
//   S1  memories return the window; masked taps are forced to zero and the
//       engines compute. In serial mode conv_serial accumulates one column.
//   S2  window sum is registered (parallel) or read from conv_serial's
//       accumulator; sums of the input channels are accumulated with 16-bit
//       saturation. After the last channel the value goes to maxpool.
//   S3  maxpool emits one value per 4 convolution outputs; it is passed
//       through ReLU and clipped to 8 bits, then written to the other buffer.
// Buffer A holds the input image and layer 1's result, buffer B holds layer
// 0's and layer 2's results; layer 2's result in B is then streamed out on
// tx_* (one value per two cycles at most, held while tx_ready is low).
//
// Throughput: parallel mode computes one window of one input channel per
// clock, serial mode one kernel column per clock (k clocks per window). A layer
// therefore takes OUT_H*OUT_W*F*C_in clocks in parallel mode and k times that
// in serial mode, plus 4 cycles to drain.
//
// From the paper: weight and feature formats, the MAC unit, the three engine
// types, conv -> maxpool -> output order, the layer sizes (defaults) and a
// 100 MHz, one-window-per-clock schedule. This design's own choices: the
// memories and their single-cycle window fetch, stride-2 'same' convolutions
// with pooling after each layer, accumulation over input channels, ReLU and
// clip to 8 bits between layers, no bias, a run-time mode select between the
// parallel and serial engines, and the load and output ports.
//
// Interface: load the image (ld_img_*, address (ch*IMG + y)*IMG + x) and the
// weights (ld_w_*, layer by layer, each as ((f*C + c)*k + ky)*k + kx) while
// idle; pulse start with serial_mode; read the IMG/64 x IMG/64 x F3 output on
// tx_data (address order (f*P + y)*P + x) with tx_valid/tx_ready/tx_last; done
// pulses after the last value was accepted.
module distnn_node
  import distnn_pkg::*;
#(
  parameter int unsigned IMG  = 128,
  parameter int unsigned C_IN = 3,
  parameter int unsigned K1   = 5,
  parameter int unsigned F1   = 128,
  parameter int unsigned K2   = 3,
  parameter int unsigned F2   = 64,
  parameter int unsigned K3   = 3,
  parameter int unsigned F3   = 32,
  // derived sizes; not meant to be overridden
  parameter int unsigned DEPTH_A = (IMG*IMG*C_IN > (IMG/16)*(IMG/16)*F2) ?
                                   IMG*IMG*C_IN : (IMG/16)*(IMG/16)*F2,
  parameter int unsigned DEPTH_B = ((IMG/4)*(IMG/4)*F1 > (IMG/64)*(IMG/64)*F3) ?
                                   (IMG/4)*(IMG/4)*F1 : (IMG/64)*(IMG/64)*F3,
  parameter int unsigned WBASE1  = F1*C_IN*K1*K1,
  parameter int unsigned WBASE2  = WBASE1 + F2*F1*K2*K2,
  parameter int unsigned DEPTH_W = WBASE2 + F3*F2*K3*K3,
  parameter int unsigned N_OUT   = (IMG/64)*(IMG/64)*F3,
  parameter int unsigned AW_A    = $clog2(DEPTH_A),
  parameter int unsigned AW_B    = $clog2(DEPTH_B),
  parameter int unsigned AW_W    = $clog2(DEPTH_W)
) (
  input  logic            clk,
  input  logic            rst_n,
  // image and weight loading (ignored while busy)
  input  logic            ld_img_we,
  input  logic [AW_A-1:0] ld_img_addr,
  input  fmap_t           ld_img_data,
  input  logic            ld_w_we,
  input  logic [AW_W-1:0] ld_w_addr,
  input  weight_t         ld_w_data,
  // control
  input  logic            start,
  input  logic            serial_mode,
  output logic            busy,
  output logic            done,
  // output feature map towards the transmitter
  output logic            tx_valid,
  output fmap_t           tx_data,
  output logic            tx_last,
  input  logic            tx_ready
);

  localparam int unsigned NP = KMAX * KMAX;   // window taps / read ports

  // ---------------------------------------------------------------- control
  op_t  op;
  logic layer_start, out_phase, serial, tx_done;

  node_ctrl #(
    .IMG(IMG), .C_IN(C_IN), .K1(K1), .F1(F1), .K2(K2), .F2(F2), .K3(K3), .F3(F3)
  ) u_ctrl (
    .clk, .rst_n, .start, .serial_mode, .tx_done,
    .busy, .done, .layer_start, .out_phase, .serial, .op
  );

  // ------------------------------------------------------ address generation
  logic [AW_A-1:0] a_raddr [NP];
  logic [AW_B-1:0] b_raddr [NP];
  logic [AW_W-1:0] w_raddr [NP];
  logic [NP-1:0]   tap_ok;

  logic signed [31:0] in_dim, n_c, kk, pad, wbase, kx, ky, iy, ix, fa, wa;

  always_comb begin
    unique case (op.layer)
      2'd0:    begin in_dim = IMG;    n_c = C_IN; kk = K1; wbase = 0;      end
      2'd1:    begin in_dim = IMG/4;  n_c = F1;   kk = K2; wbase = WBASE1; end
      default: begin in_dim = IMG/16; n_c = F2;   kk = K3; wbase = WBASE2; end
    endcase
    pad = kk / 2;
    for (int p = 0; p < NP; p++) begin
      // port p is tap (ky, kx) = (p % 5, p / 5); serial mode uses ports 0..4
      // for the rows of the current column
      ky = p % KMAX;
      kx = serial ? int'(op.col) : p / KMAX;
      iy = 2 * int'(op.oy) + ky - pad;
      ix = 2 * int'(op.ox) + kx - pad;
      tap_ok[p] = (ky < kk) && (kx < kk) && (!serial || p < KMAX) &&
                  (iy >= 0) && (iy < in_dim) && (ix >= 0) && (ix < in_dim);
      fa = (int'(op.c) * in_dim + iy) * in_dim + ix;
      wa = wbase + ((int'(op.f) * n_c + int'(op.c)) * kk + ky) * kk + kx;
      if (!tap_ok[p]) begin
        fa = 0;
        wa = 0;
      end
      a_raddr[p] = AW_A'(fa);
      b_raddr[p] = AW_B'(fa);
      w_raddr[p] = AW_W'(wa);
    end
  end

  // ----------------------------------------------------------------- memories
  fmap_t   a_rdata [NP];
  fmap_t   b_rdata [NP];
  weight_t w_rdata [NP];
  logic [AW_B-1:0] b_raddr_m [NP];

  logic            a_we, b_we, wr_en;
  logic [AW_A-1:0] a_waddr;
  fmap_t           a_wdata;
  logic signed [31:0] wr_addr;
  fmap_t           wr_data;
  logic [1:0]      wr_layer;
  logic [AW_B-1:0] tx_addr;

  always_comb begin
    b_raddr_m    = b_raddr;
    if (out_phase) b_raddr_m[0] = tx_addr;
    // buffer A: image load while idle, layer 1 results while running
    a_we    = busy ? (wr_en && wr_layer == 2'd1) : ld_img_we;
    a_waddr = busy ? AW_A'(wr_addr) : ld_img_addr;
    a_wdata = busy ? wr_data : ld_img_data;
    b_we    = wr_en && wr_layer != 2'd1;
  end

  mp_ram #(.WIDTH(IN_BITS), .DEPTH(DEPTH_A), .NRD(NP)) u_buf_a (
    .clk, .we(a_we), .waddr(a_waddr), .wdata(a_wdata),
    .raddr(a_raddr), .rdata(a_rdata)
  );

  mp_ram #(.WIDTH(IN_BITS), .DEPTH(DEPTH_B), .NRD(NP)) u_buf_b (
    .clk, .we(b_we), .waddr(AW_B'(wr_addr)), .wdata(wr_data),
    .raddr(b_raddr_m), .rdata(b_rdata)
  );

  mp_ram #(.WIDTH(W_BITS), .DEPTH(DEPTH_W), .NRD(NP)) u_wmem (
    .clk, .we(ld_w_we && !busy), .waddr(ld_w_addr), .wdata(ld_w_data),
    .raddr(w_raddr), .rdata(w_rdata)
  );

  // ------------------------------------------------------------ stage 1
  op_t           s1;
  logic [NP-1:0] s1_ok;
  logic          s1_serial;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1        <= '0;
      s1_ok     <= '0;
      s1_serial <= 1'b0;
    end else begin
      s1        <= op;
      s1_ok     <= tap_ok;
      s1_serial <= serial;
    end
  end

  fmap_t   tap_in [NP];
  weight_t tap_w  [NP];
  always_comb begin
    for (int p = 0; p < NP; p++) begin
      tap_in[p] = !s1_ok[p] ? '0 : (s1.layer == 2'd1) ? b_rdata[p] : a_rdata[p];
      tap_w[p]  = s1_ok[p] ? w_rdata[p] : '0;
    end
  end

  // parallel engines: tap i of a k x k engine is (ky, kx) = (i % k, i / k)
  weight_t w3 [9];
  fmap_t   in3 [9];
  weight_t w5 [25];
  fmap_t   in5 [25];
  weight_t ws [KMAX];
  fmap_t   ins [KMAX];
  always_comb begin
    for (int i = 0; i < 9; i++) begin
      w3[i]  = tap_w[(i / 3) * KMAX + (i % 3)];
      in3[i] = tap_in[(i / 3) * KMAX + (i % 3)];
    end
    for (int i = 0; i < 25; i++) begin
      w5[i]  = tap_w[i];
      in5[i] = tap_in[i];
    end
    for (int i = 0; i < KMAX; i++) begin
      ws[i]  = tap_w[i];
      ins[i] = tap_in[i];
    end
  end

  acc_t out3, out5, out_ser;
  logic s1_k5;

  conv3x3_parallel u_conv3 (.weight(w3), .in_data(in3), .out_conv(out3));
  conv5x5_parallel u_conv5 (.weight(w5), .in_data(in5), .out_conv(out5));
  conv_serial #(.LANES(KMAX)) u_conv_ser (
    .clk, .rst_n, .en(s1.valid && s1_serial), .clr(s1.first_col),
    .w(ws), .in_data(ins), .out_conv(out_ser)
  );

  always_comb begin
    unique case (s1.layer)
      2'd0:    s1_k5 = (K1 == 5);
      2'd1:    s1_k5 = (K2 == 5);
      default: s1_k5 = (K3 == 5);
    endcase
  end

  // ------------------------------------------------------------ stage 2
  op_t  s2;
  logic s2_serial;
  acc_t par_sum, ch_acc, win_sum, conv_sum;
  logic win_valid, pool_in_valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s2        <= '0;
      s2_serial <= 1'b0;
      par_sum   <= '0;
    end else begin
      s2        <= s1;
      s2_serial <= s1_serial;
      par_sum   <= s1_k5 ? out5 : out3;
    end
  end

  always_comb begin
    win_sum       = s2_serial ? out_ser : par_sum;
    win_valid     = s2.valid && s2.last_col;
    conv_sum      = sat_add(s2.first_ch ? acc_t'(0) : ch_acc, win_sum);
    pool_in_valid = win_valid && s2.last_ch;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)         ch_acc <= '0;
    else if (win_valid) ch_acc <= conv_sum;
  end

  // ------------------------------------------------------------ stage 3
  logic pool_valid;
  acc_t pool_out;
  op_t  s3;

  maxpool #(.WIN(4)) u_pool (
    .clk, .rst_n, .clear(layer_start), .in_valid(pool_in_valid),
    .in_data(conv_sum), .out_valid(pool_valid), .out_data(pool_out)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)             s3 <= '0;
    else if (pool_in_valid) s3 <= s2;
  end

  logic signed [31:0] p_dim;

  always_comb begin
    unique case (s3.layer)
      2'd0:    p_dim = IMG/4;
      2'd1:    p_dim = IMG/16;
      default: p_dim = IMG/64;
    endcase
    wr_en    = pool_valid;
    wr_layer = s3.layer;
    wr_addr  = (int'(s3.f) * p_dim + int'(s3.oy) / 2) * p_dim + int'(s3.ox) / 2;
    wr_data  = relu_clip8(pool_out);
  end

  // ------------------------------------------------------- output stream
  typedef enum logic [1:0] {T_IDLE, T_READ, T_SHOW} tx_state_t;
  tx_state_t tx_state;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tx_state <= T_IDLE;
      tx_addr  <= '0;
    end else begin
      unique case (tx_state)
        T_IDLE: if (out_phase && !tx_done) begin
          tx_addr  <= '0;
          tx_state <= T_READ;
        end
        T_READ: tx_state <= T_SHOW;
        T_SHOW: if (tx_ready) begin
          if (32'(tx_addr) == N_OUT - 1) tx_state <= T_IDLE;
          else begin
            tx_addr  <= tx_addr + 1'b1;
            tx_state <= T_READ;
          end
        end
        default: tx_state <= T_IDLE;
      endcase
    end
  end

  assign tx_valid = (tx_state == T_SHOW);
  assign tx_data  = b_rdata[0];
  assign tx_last  = tx_valid && (32'(tx_addr) == N_OUT - 1);
  assign tx_done  = tx_valid && tx_ready && tx_last;

  // ----------------------------------------------------------- assertions
  // The output value must not change while the transmitter holds it off.
  a_tx_hold: assert property (@(posedge clk) disable iff (!rst_n)
    tx_valid && !tx_ready |=> tx_valid && $stable(tx_data));
  // Every result has exactly one destination buffer.
  a_single_dest: assert property (@(posedge clk) disable iff (!rst_n)
    !(a_we && b_we));

endmodule
