// Shared body of the node testbenches. The including module defines the
// localparams IMG, C_IN, K1, F1, K2, F2, K3, F3 and RUNS, and instantiates
// distnn_node as dut on the signals declared here (after including this
// file's declarations part via `DISTNN_TB_DECL`).
//
// Each run loads an image and a weight set, starts the node in parallel or
// serial mode, collects the streamed output while tx_ready is toggled at
// random, and compares it with distnn_ref_pkg::layer_ref applied three times.
// It also checks the layer 0 and layer 1 feature maps left in the buffers and the
// number of compute cycles against
// sum over layers of (outputs * input channels * (serial ? k : 1) + 4).
// Mechanisms counted over all runs (each must occur at least once):
// 5x5 and 3x3 windows on the parallel engines, 5- and 3-column windows on the
// serial engine, zero-padded taps, saturating channel additions, outputs
// clipped to 0 and to 255, output stalls, and a change of mode between runs.

  localparam int DEPTH_A = (IMG*IMG*C_IN > (IMG/16)*(IMG/16)*F2) ? IMG*IMG*C_IN : (IMG/16)*(IMG/16)*F2;
  localparam int WB1     = F1*C_IN*K1*K1;
  localparam int WB2     = WB1 + F2*F1*K2*K2;
  localparam int DEPTH_W = WB2 + F3*F2*K3*K3;
  localparam int AW_A    = $clog2(DEPTH_A);
  localparam int AW_W    = $clog2(DEPTH_W);
  localparam int N_OUT   = (IMG/64)*(IMG/64)*F3;

  logic            clk = 0, rst_n = 0;
  logic            ld_img_we = 0, ld_w_we = 0;
  logic [AW_A-1:0] ld_img_addr = '0;
  logic [AW_W-1:0] ld_w_addr = '0;
  fmap_t           ld_img_data = '0;
  weight_t         ld_w_data = '0;
  logic            start = 0, serial_mode = 0;
  logic            busy, done;
  logic            tx_valid, tx_last;
  fmap_t           tx_data;
  logic            tx_ready = 0;

  int checks = 0, failures = 0;
  int img[], wts[];
  int n_par5 = 0, n_par3 = 0, n_ser5 = 0, n_ser3 = 0, n_pad = 0, n_sat = 0;
  int n_relu0 = 0, n_clip = 0, n_stall = 0, n_mode_switch = 0;
  int ref_stats[3];

  always #5 clk = ~clk;

  // mechanism counters, sampled mid-cycle
  always @(negedge clk) if (rst_n) begin
    int kk;
    kk = (dut.op.layer == 0) ? K1 : (dut.op.layer == 1) ? K2 : K3;
    if (dut.s1.valid && !dut.s1_serial && dut.s1_k5)  n_par5++;
    if (dut.s1.valid && !dut.s1_serial && !dut.s1_k5) n_par3++;
    if (dut.win_valid && dut.s2_serial) begin
      if (((dut.s2.layer == 0) ? K1 : (dut.s2.layer == 1) ? K2 : K3) == 5) n_ser5++;
      else n_ser3++;
    end
    if (dut.op.valid && $countones(dut.tap_ok) < (dut.serial ? kk : kk * kk)) n_pad++;
    if (dut.win_valid && !dut.s2.first_ch &&
        ((int'(dut.ch_acc) + int'(dut.win_sum)) > 32767 ||
         (int'(dut.ch_acc) + int'(dut.win_sum)) < -32768)) n_sat++;
    if (dut.pool_valid && dut.pool_out < 0)   n_relu0++;
    if (dut.pool_valid && dut.pool_out > 255) n_clip++;
    if (tx_valid && !tx_ready) n_stall++;
  end

  initial begin
    repeat (60000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // kind 0: random weights of small magnitude and random sign, random image;
  // kind 1: all weights at the largest positive value and a white image,
  //         which drives the channel sums into saturation.
  task automatic make_data(input int kind);
    img = new[IMG * IMG * C_IN];
    wts = new[DEPTH_W];
    foreach (img[i]) img[i] = (kind == 1) ? 255 : int'($urandom_range(0, 255));
    foreach (wts[i]) begin
      if (kind == 1) wts[i] = 511;
      else wts[i] = int'($urandom_range(0, 1)) * 512 + int'($urandom_range(0, 90));
    end
  endtask

  task automatic load();
    foreach (img[i]) begin
      ld_img_we <= 1; ld_img_addr <= AW_A'(i); ld_img_data <= fmap_t'(img[i]);
      @(posedge clk);
    end
    ld_img_we <= 0;
    foreach (wts[i]) begin
      ld_w_we <= 1; ld_w_addr <= AW_W'(i); ld_w_data <= weight_t'(wts[i]);
      @(posedge clk);
    end
    ld_w_we <= 0;
  endtask

  task automatic run(input bit ser, input int stall_pct);
    int l1[], l2[], l3[], got[$];
    int ops, exp_cycles, cycles;
    bit finished;
    ref_stats = '{0, 0, 0};
    distnn_ref_pkg::layer_ref(IMG,    C_IN, K1, F1, 0,   img, wts, l1, ref_stats);
    distnn_ref_pkg::layer_ref(IMG/4,  F1,   K2, F2, WB1, l1,  wts, l2, ref_stats);
    distnn_ref_pkg::layer_ref(IMG/16, F2,   K3, F3, WB2, l2,  wts, l3, ref_stats);
    ops = (IMG/2)*(IMG/2)*F1*C_IN*(ser ? K1 : 1) + (IMG/8)*(IMG/8)*F2*F1*(ser ? K2 : 1) +
          (IMG/32)*(IMG/32)*F3*F2*(ser ? K3 : 1);
    exp_cycles = ops + 3 * 4;
    @(posedge clk);
    start <= 1; serial_mode <= ser;
    @(posedge clk);
    start <= 0;
    cycles = 0;
    finished = 0;
    while (!finished) begin
      tx_ready <= ($urandom_range(0, 99) >= stall_pct);
      @(posedge clk);
      if (!dut.out_phase) cycles++;
      if (tx_valid && tx_ready) begin
        got.push_back(int'(tx_data));
        checks++;
        if (tx_last != (got.size() == N_OUT)) begin
          failures++; $display("tx_last wrong at value %0d", got.size());
        end
      end
      if (done) finished = 1;
    end
    tx_ready <= 0;
    checks++;
    if (cycles != exp_cycles + 1) begin
      failures++;
      $display("compute took %0d cycles, expected %0d", cycles, exp_cycles + 1);
    end
    checks++;
    if (got.size() != N_OUT) begin
      failures++; $display("received %0d values, expected %0d", got.size(), N_OUT);
    end
    for (int i = 0; i < N_OUT && i < got.size(); i++) begin
      checks++;
      if (got[i] != l3[i]) begin
        failures++;
        if (failures < 10) $display("output %0d: got %0d expected %0d", i, got[i], l3[i]);
      end
    end
    // intermediate feature maps left in the buffers: layer 0's result in B
    // (its first N_OUT words since overwritten by layer 2), layer 1's in A
    for (int i = N_OUT; i < l1.size(); i++) begin
      checks++;
      if (int'(dut.u_buf_b.mem[i]) != l1[i]) begin
        failures++;
        if (failures < 10) $display("layer 0 value %0d: got %0d expected %0d", i, dut.u_buf_b.mem[i], l1[i]);
      end
    end
    for (int i = 0; i < l2.size(); i++) begin
      checks++;
      if (int'(dut.u_buf_a.mem[i]) != l2[i]) begin
        failures++;
        if (failures < 10) $display("layer 1 value %0d: got %0d expected %0d", i, dut.u_buf_a.mem[i], l2[i]);
      end
    end
    $display("run serial=%0b: %0d compute cycles, %0d outputs, reference saw %0d saturations, %0d/%0d clipped",
             ser, cycles - 1, got.size(), ref_stats[0], ref_stats[1], ref_stats[2]);
  endtask

  task automatic report();
    $display("mechanisms: par5=%0d par3=%0d ser5=%0d ser3=%0d pad=%0d sat=%0d relu0=%0d clip255=%0d stall=%0d mode_switch=%0d",
             n_par5, n_par3, n_ser5, n_ser3, n_pad, n_sat, n_relu0, n_clip, n_stall, n_mode_switch);
  endtask
