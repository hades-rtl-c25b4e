// nm_adder_accumulator: adder-accumulator of one NM-CALC division.
//
// Each enabled cycle adds one barrel-shifter product to the running sum; with
// 'first' set the sum restarts at that product, so no separate clear cycle is
// needed between output nodes. acc is registered and shows the sum including
// the product presented in the previous enabled cycle. ACC_W should be at
// least IN_W + log2(number of products per sum) so the sum cannot wrap.
// The accumulation over cycles is from the paper; load-on-first and the
// asynchronous active-low reset are this design's choice.
module nm_adder_accumulator #(
  parameter int unsigned IN_W  = 7,
  parameter int unsigned ACC_W = 12
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             en,
  input  logic             first,
  input  logic [IN_W-1:0]  addend,
  output logic [ACC_W-1:0] acc
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     acc <= '0;
    else if (en)    acc <= (first ? '0 : acc) + ACC_W'(addend);
  end

endmodule
