// act_unit: activation function applied to an accumulated sum ("Act" in the PE drawing and the
// "Activation Functions" of the chiplet).
//
// The sum is passed through a ReLU, shifted right by `shift` and saturated to the positive
// range of an 8-bit operand, so that a layer's outputs can be stored and distributed as the
// next layer's one-byte inputs. The paper names the activation stage but not the function or
// the output format: ReLU and the shift-and-saturate requantisation are this design's choice.
// Purely combinational.
module act_unit #(
  parameter int unsigned ACC_W  = 32,
  parameter int unsigned DATA_W = 8
) (
  input  logic signed [ACC_W-1:0]  sum,    // accumulated dot product
  input  logic        [4:0]        shift,  // requantisation shift
  output logic        [DATA_W-1:0] act     // ReLU(sum) >> shift, saturated to 0..2^(DATA_W-1)-1
);
  localparam logic [ACC_W-1:0] MAXV = ACC_W'((1 << (DATA_W - 1)) - 1);

  logic [ACC_W-1:0] shifted;

  always_comb begin
    shifted = sum[ACC_W-1] ? '0 : (ACC_W'(sum) >> shift);
    act     = (shifted > MAXV) ? MAXV[DATA_W-1:0] : shifted[DATA_W-1:0];
  end
endmodule
