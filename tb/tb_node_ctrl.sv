// tb_node_ctrl -- runs the sequencer at a reduced size in parallel and then in
// serial mode and compares every issued op with a sequence built by nested
// loops in the testbench (filter, pooled row, pooled column, pooling-window
// position, channel, kernel column). Also checks the op count and run time
// of each layer (ops + 4 drain cycles), layer_start pulses, out_phase and the
// done pulse after tx_done, and that start is ignored while busy.
module tb_node_ctrl;
  import distnn_pkg::*;

  localparam int IMG = 64, C_IN = 2, K1 = 5, F1 = 3, K2 = 3, F2 = 2, K3 = 3, F3 = 2;

  logic clk = 0, rst_n = 0, start = 0, serial_mode = 0, tx_done = 0;
  logic busy, done, layer_start, out_phase, serial;
  op_t  op;
  int   checks = 0, failures = 0;

  node_ctrl #(.IMG(IMG), .C_IN(C_IN), .K1(K1), .F1(F1), .K2(K2), .F2(F2),
              .K3(K3), .F3(F3)) dut (
    .clk, .rst_n, .start, .serial_mode, .tx_done,
    .busy, .done, .layer_start, .out_phase, .serial, .op
  );

  always #5 clk = ~clk;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  op_t exp_q[$];
  int  layer_cycles [3];
  int  layer_starts;

  task automatic build(input bit ser);
    int ind [3] = '{IMG, IMG/4, IMG/16};
    int nc  [3] = '{C_IN, F1, F2};
    int kk  [3] = '{K1, K2, K3};
    int nf  [3] = '{F1, F2, F3};
    op_t o;
    exp_q.delete();
    for (int l = 0; l < 3; l++)
      for (int f = 0; f < nf[l]; f++)
        for (int py = 0; py < ind[l] / 4; py++)
          for (int px = 0; px < ind[l] / 4; px++)
            for (int q = 0; q < 4; q++)
              for (int c = 0; c < nc[l]; c++)
                for (int col = 0; col < (ser ? kk[l] : 1); col++) begin
                  o = '0;
                  o.valid = 1; o.layer = 2'(l); o.f = idx_t'(f); o.c = idx_t'(c);
                  o.oy = idx_t'(2 * py + q / 2); o.ox = idx_t'(2 * px + q % 2);
                  o.col = 3'(col);
                  o.first_col = (col == 0);
                  o.last_col = !ser || (col == kk[l] - 1);
                  o.first_ch = (c == 0);
                  o.last_ch = (c == nc[l] - 1);
                  exp_q.push_back(o);
                end
  endtask

  task automatic run(input bit ser);
    int n_exp, busy_cycles, nops;
    build(ser);
    n_exp = exp_q.size();
    layer_starts = 0;
    @(posedge clk);
    start <= 1; serial_mode <= ser;
    @(posedge clk);
    start <= 0;
    busy_cycles = 0;
    nops = 0;
    forever begin
      #1;
      if (out_phase) break;
      if (op.valid) begin
        checks++;
        nops++;
        if (exp_q.size() == 0 || op != exp_q[0]) begin
          failures++;
          if (failures < 10) $display("op %0d: got %p expected %p", nops, op, exp_q[0]);
        end
        if (exp_q.size() != 0) void'(exp_q.pop_front());
      end
      if (layer_start) layer_starts++;
      if (nops == 5) start <= 1;        // start while busy must be ignored
      else start <= 0;
      busy_cycles++;
      @(posedge clk);
    end
    checks++;
    if (nops != n_exp || exp_q.size() != 0) begin
      failures++; $display("issued %0d ops, expected %0d", nops, n_exp);
    end
    checks++;
    if (busy_cycles != n_exp + 3 * 4) begin
      failures++; $display("compute took %0d cycles, expected %0d", busy_cycles, n_exp + 12);
    end
    checks++;
    if (layer_starts != 3) begin
      failures++; $display("layer_start pulses in loop: %0d", layer_starts);
    end
    // out_phase holds until tx_done, then done pulses once
    repeat (5) @(posedge clk);
    #1;
    checks++;
    if (!out_phase || !busy || done) failures++;
    tx_done <= 1;
    @(posedge clk);
    tx_done <= 0;
    #1;
    checks++;
    if (!done || busy || out_phase) begin failures++; $display("done not signalled"); end
    @(posedge clk);
    #1;
    checks++;
    if (done) failures++;
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    #1;
    checks++;
    if (busy || op.valid) failures++;
    run(1'b0);
    run(1'b1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
