// mp_ram -- on-chip memory with one write port and NRD synchronous read ports.
//
// Used for the node's two feature-map buffers and its weight memory. The
// paper only accounts for memory as an energy overhead on top of the MACs; the
// organisation here is this design's own: a plain array with one write port
// and as many read ports as the widest convolution engine needs (25 for a 5x5
// window), so that a whole window can be fetched in one cycle. A silicon
// implementation would bank this memory instead; the behaviour seen by the
// datapath would be the same.
//
// Timing: a write with we high lands at the clock edge. Each read port
// registers mem[raddr] at the clock edge, so data appears one cycle after the
// address (read-before-write on a same-address collision). Addresses at or
// beyond DEPTH read as zero and writes to them are dropped.
module mp_ram #(
  parameter int unsigned WIDTH = 8,
  parameter int unsigned DEPTH = 1024,
  parameter int unsigned NRD   = 1,
  parameter int unsigned AW    = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [WIDTH-1:0] wdata,
  input  logic [AW-1:0]    raddr [NRD],
  output logic [WIDTH-1:0] rdata [NRD]
);

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we && (32'(waddr) < DEPTH)) mem[waddr] <= wdata;
  end

  for (genvar p = 0; p < NRD; p++) begin : g_rd
    always_ff @(posedge clk) begin
      if (32'(raddr[p]) < DEPTH) rdata[p] <= mem[raddr[p]];
      else                       rdata[p] <= '0;
    end
  end

endmodule
