// nv1_ipu -- a node's processing unit (IPU).
//
// Each node is programmed with one instruction and runs it once per epoch.
// During the epoch the IPU adds every word the Memory Handler accepts into a
// signed ACC_W-bit accumulator. At epoch end it applies the instruction to the
// accumulated sum and stores the result, saturated to a signed DATA_W-bit
// word, as the node's output for the next epoch:
//   OP_SUM   result = sum
//   OP_MUL   result = sum * imm            (imm signed)
//   OP_SHIFT result = sum << imm[3:0]      (imm[7] = 0)
//            result = sum >>> imm[3:0]     (imm[7] = 1, arithmetic)
// With a single input, OP_MUL is the MUL(input, k) of the paper's example.
//
// Interface and timing: clear (epoch start) zeroes the accumulator; in_valid
// adds in_data at the clock edge; finalize (epoch end) loads res at the clock
// edge, from the accumulator as it stands before that edge. res is held until
// the next finalize and is zero after reset.
// The paper names sum, shift and multiply among the instructions but gives no
// list, encoding or width; the operations' exact definitions, the widths and
// the saturation are this design's choices.
module nv1_ipu
  import nv1_pkg::*;
(
  input  logic    clk,
  input  logic    rst_n,
  input  logic    clear,
  input  logic    in_valid,
  input  data_t   in_data,
  input  logic    finalize,
  input  opcode_e opcode,
  input  logic [7:0] imm,
  output data_t   res
);

  localparam int unsigned WIDE_W = 32;
  localparam logic signed [WIDE_W-1:0] MAX_V = (2**(DATA_W-1)) - 1;
  localparam logic signed [WIDE_W-1:0] MIN_V = -(2**(DATA_W-1));

  logic signed [ACC_W-1:0]  acc;
  logic signed [WIDE_W-1:0] wide_acc, op_val;
  data_t                    sat_val;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)        acc <= '0;
    else if (clear)    acc <= '0;
    else if (in_valid) acc <= acc + ACC_W'(in_data);
  end

  assign wide_acc = WIDE_W'(acc);

  always_comb begin
    unique case (opcode)
      OP_MUL:   op_val = wide_acc * WIDE_W'($signed(imm));
      OP_SHIFT: op_val = imm[7] ? (wide_acc >>> imm[3:0]) : (wide_acc <<< imm[3:0]);
      default:  op_val = wide_acc;
    endcase
    if (op_val > MAX_V)      sat_val = MAX_V[DATA_W-1:0];
    else if (op_val < MIN_V) sat_val = MIN_V[DATA_W-1:0];
    else                     sat_val = op_val[DATA_W-1:0];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)        res <= '0;
    else if (finalize) res <= sat_val;
  end

endmodule
