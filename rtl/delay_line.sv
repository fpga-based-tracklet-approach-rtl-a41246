// delay_line: W-bit shift register of D stages (D = 0 is a wire). Used to give every
// processing step its fixed latency and to derive each step's start pulse from the
// previous step's.
module delay_line #(
  parameter int W = 1,
  parameter int D = 1
) (
  input  logic         clk,
  input  logic         rst,
  input  logic [W-1:0] din,
  output logic [W-1:0] dout
);
  if (D == 0) begin : g_wire
    assign dout = din;
  end else begin : g_reg
    logic [W-1:0] sr [D];
    always_ff @(posedge clk) begin
      if (rst) for (int i = 0; i < D; i++) sr[i] <= '0;
      else begin
        sr[0] <= din;
        for (int i = 1; i < D; i++) sr[i] <= sr[i-1];
      end
    end
    assign dout = sr[D-1];
  end
endmodule
