// wu_coarse_counter: free-running coarse time counter.
//
// It counts reference clock cycles (5 ns at 200 MHz) and gives the high part
// of every time tag. The delay line code fills in the time within one period.
// One counter is shared by all channels, so their tags can be compared
// directly.
//
// Interface: synchronous active-high reset to zero; count wraps modulo
// 2**COARSE_W. A 32-bit count wraps after about 21 s. The paper names the
// counter but not its width, so the width is this design's choice.
`timescale 1ps/1ps
module wu_coarse_counter #(
  parameter int unsigned COARSE_W = wu_tdc_pkg::COARSE_W
) (
  input  logic                clk_ref,
  input  logic                rst,
  output logic [COARSE_W-1:0] count
);

  always_ff @(posedge clk_ref) begin
    if (rst) count <= '0;
    else     count <= count + 1'b1;
  end

endmodule
