// pe: processing element of an accelerator chiplet.
//
// Structure follows the PE drawing of the paper: an input queue and a weight queue feed a
// multiplier, an adder adds the product to the partial sum held in the third (partial-sum)
// buffer and writes the result back to it, and an activation unit sits after the adder.
// An operation pushes one input byte, one weight byte and a `last` flag. The PE pops one
// operation per cycle; on an operation marked last the finished sum moves to the output
// register (out_sum raw, out_act after the activation) and the partial sum restarts at zero.
// If the output register is still full when the next last operation reaches the head, the PE
// stalls, the queues fill and op_ready drops: an elastic pipeline with valid/ready.
// Queue depth 4, signed int8 operands, int32 sums and the "space for two" op_ready rule (one
// operation may be in flight from a synchronous memory) are this design's choices.
// Timing: a sum is in the output register one cycle after its last operation is popped.
module pe #(
  parameter int unsigned DATA_W = 8,
  parameter int unsigned ACC_W  = 32,
  parameter int unsigned DEPTH  = 4
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     op_valid,
  input  logic signed [DATA_W-1:0] op_in,     // input activation
  input  logic signed [DATA_W-1:0] op_w,      // weight
  input  logic                     op_last,   // last term of this dot product
  output logic                     op_ready,  // room for this and one more operation
  input  logic        [4:0]        shift,     // activation requantisation shift
  output logic                     out_valid,
  output logic signed [ACC_W-1:0]  out_sum,
  output logic        [DATA_W-1:0] out_act,
  input  logic                     out_ready
);
  localparam int unsigned PW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic signed [DATA_W-1:0] in_q   [DEPTH];
  logic signed [DATA_W-1:0] w_q    [DEPTH];
  logic                     last_q [DEPTH];
  logic [PW-1:0]            wr_ptr, rd_ptr;
  logic [PW:0]              count;
  logic signed [ACC_W-1:0]  psum;      // partial-sum buffer
  logic signed [ACC_W-1:0]  sum_next;  // adder output
  logic signed [2*DATA_W-1:0] prod;    // multiplier output
  logic                     pop, push;

  assign op_ready = (count <= (PW+1)'(DEPTH - 2));
  assign push     = op_valid && (count < (PW+1)'(DEPTH));
  assign pop      = (count != '0) && !(last_q[rd_ptr] && out_valid && !out_ready);
  assign prod     = in_q[rd_ptr] * w_q[rd_ptr];
  assign sum_next = psum + ACC_W'(prod);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_ptr    <= '0;
      rd_ptr    <= '0;
      count     <= '0;
      psum      <= '0;
      out_valid <= 1'b0;
      out_sum   <= '0;
    end else begin
      if (push) begin
        in_q[wr_ptr]   <= op_in;
        w_q[wr_ptr]    <= op_w;
        last_q[wr_ptr] <= op_last;
        wr_ptr         <= (wr_ptr == PW'(DEPTH - 1)) ? '0 : wr_ptr + 1'b1;
      end
      if (pop) rd_ptr <= (rd_ptr == PW'(DEPTH - 1)) ? '0 : rd_ptr + 1'b1;
      count <= count + (PW+1)'(push) - (PW+1)'(pop);

      if (out_valid && out_ready) out_valid <= 1'b0;
      if (pop) begin
        if (last_q[rd_ptr]) begin
          out_sum   <= sum_next;
          out_valid <= 1'b1;
          psum      <= '0;
        end else begin
          psum <= sum_next;
        end
      end
    end
  end

  act_unit #(.ACC_W(ACC_W), .DATA_W(DATA_W)) u_act (.sum(out_sum), .shift(shift), .act(out_act));

  // An operation is only offered when there is room for it.
  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n) op_valid |-> count < (PW+1)'(DEPTH));
endmodule
