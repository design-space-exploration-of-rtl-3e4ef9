// maxpool -- streaming max pooling over groups of WIN consecutive values.
//
// The paper places a MaxPool stage between the 2D convolution and the output
// feature map; it does not describe its insides. Here the node's controller
// issues the four convolution outputs of each 2x2 pooling window one after
// the other, so pooling reduces to keeping a running maximum over WIN (= 4)
// consecutive valid inputs. A counter marks the first input of each group,
// which restarts the maximum.
//
// Interface: in_valid/in_data (signed 16-bit); out_valid pulses for one cycle,
// with out_data holding the group maximum, in the cycle after the group's last
// input. clear restarts grouping (used at the start of every layer); active-
// low reset does the same.
module maxpool
  import distnn_pkg::*;
#(
  parameter int unsigned WIN = 4
) (
  input  logic clk,
  input  logic rst_n,
  input  logic clear,
  input  logic in_valid,
  input  acc_t in_data,
  output logic out_valid,
  output acc_t out_data
);

  localparam int unsigned CW = (WIN > 1) ? $clog2(WIN) : 1;

  logic [CW-1:0] cnt;
  acc_t          run_max;
  acc_t          next_max;

  always_comb begin
    if (cnt == '0 || in_data > run_max) next_max = in_data;
    else                                next_max = run_max;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt       <= '0;
      run_max   <= '0;
      out_valid <= 1'b0;
      out_data  <= '0;
    end else begin
      out_valid <= 1'b0;
      if (clear) begin
        cnt <= '0;
      end else if (in_valid) begin
        run_max <= next_max;
        if (cnt == CW'(WIN - 1)) begin
          cnt       <= '0;
          out_valid <= 1'b1;
          out_data  <= next_max;
        end else begin
          cnt <= cnt + 1'b1;
        end
      end
    end
  end

endmodule
