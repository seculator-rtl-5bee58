// pe: one processing element of the output-stationary systolic array.
//
// Each clock it multiplies the pixel arriving from the left (`a_in`) with the
// weight arriving from above (`b_in`), adds the product to its own
// accumulator, and passes both operands on to its right and lower neighbours
// one clock later. `clr` zeroes the accumulator (and takes priority). The
// array's controller feeds zeros when it has no data, so the PE needs no
// valid bit. Arithmetic is integer, wrapping at DW bits.
//
// The paper gives a 32x32 PE array with four-byte pixels; the dataflow and the
// integer format are this design's choices.
module pe #(
  parameter int unsigned DW = 32
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          clr,
  input  logic [DW-1:0] a_in,
  input  logic [DW-1:0] b_in,
  output logic [DW-1:0] a_out,
  output logic [DW-1:0] b_out,
  output logic [DW-1:0] acc
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      a_out <= '0;
      b_out <= '0;
      acc   <= '0;
    end else begin
      a_out <= a_in;
      b_out <= b_in;
      acc   <= clr ? '0 : acc + a_in * b_in;
    end
  end

endmodule
