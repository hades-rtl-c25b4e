// nm_input_driver: input driver of NM-CALC.
//
// Holds the M input activations of the current layer and feeds each of the D
// divisions the activation that pairs with the weight word it is reading.
// Division d owns inputs d*M/D .. (d+1)*M/D-1, so a read of index rk returns
// act[d] = x[d*M/D + rk] for every d at once. The read is registered, giving
// the same one-cycle latency as the weight SRAM so both operands meet at the
// barrel shifter. Activations are loaded one per cycle by the host.
// The paper names the input driver only; its organisation is this design's.
module nm_input_driver #(
  parameter int unsigned M       = 64,
  parameter int unsigned D       = 2,
  parameter int unsigned IN_BITS = 4,
  localparam int unsigned MD     = M / D,
  localparam int unsigned AW     = (M  > 1) ? $clog2(M)  : 1,
  localparam int unsigned KW     = (MD > 1) ? $clog2(MD) : 1
) (
  input  logic               clk,
  input  logic               we,
  input  logic [AW-1:0]      waddr,
  input  logic [IN_BITS-1:0] wdata,
  input  logic               re,
  input  logic [KW-1:0]      rk,
  output logic [IN_BITS-1:0] act [D]
);

  logic [IN_BITS-1:0] x [M];

  always_ff @(posedge clk) begin
    if (we) x[waddr] <= wdata;
  end

  always_ff @(posedge clk) begin
    if (re) begin
      for (int d = 0; d < D; d++) act[d] <= x[d*MD + int'(rk)];
    end
  end

  initial begin
    assert (M % D == 0) else $error("nm_input_driver: M must be a multiple of D");
  end

endmodule
