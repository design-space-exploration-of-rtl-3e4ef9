// tb_mp_ram -- writes random words, then reads random addresses on all four
// ports at once and checks each port one cycle later against a model array;
// also checks that out-of-range addresses read as zero and that writes to
// them are dropped.
module tb_mp_ram;
  localparam int W = 10, D = 300, N = 4, AW = 9;

  logic          clk = 0, we = 0;
  logic [AW-1:0] waddr = '0;
  logic [W-1:0]  wdata = '0;
  logic [AW-1:0] raddr [N];
  logic [W-1:0]  rdata [N];
  logic [W-1:0]  model [D];
  int            checks = 0, failures = 0;

  mp_ram #(.WIDTH(W), .DEPTH(D), .NRD(N)) dut (.clk, .we, .waddr, .wdata, .raddr, .rdata);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int a [N];
    for (int p = 0; p < N; p++) raddr[p] = '0;
    for (int i = 0; i < D; i++) begin
      model[i] = W'($urandom);
      we <= 1; waddr <= AW'(i); wdata <= model[i];
      @(posedge clk);
    end
    we <= 1; waddr <= AW'(D + 5); wdata <= '1;        // dropped
    @(posedge clk);
    we <= 0;
    for (int t = 0; t < 5000; t++) begin
      // occasional overwrite during reads
      if (t % 5 == 0) begin
        int wa;
        wa = $urandom_range(0, D - 1);
        we <= 1; waddr <= AW'(wa); wdata <= W'($urandom);
      end else we <= 0;
      for (int p = 0; p < N; p++) begin
        a[p] = (t % 97 == 0 && p == 1) ? D + 5 : $urandom_range(0, D - 1);
        raddr[p] <= AW'(a[p]);
      end
      @(posedge clk);
      #1;
      for (int p = 0; p < N; p++) begin
        checks++;
        if (rdata[p] != ((a[p] < D) ? model[a[p]] : '0)) begin
          failures++;
          if (failures < 10) $display("port %0d addr %0d read %0h expected %0h", p, a[p], rdata[p], model[a[p]]);
        end
      end
      if (we) model[waddr] = wdata;     // write lands at that edge, after the read
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
