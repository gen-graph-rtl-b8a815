// felix_bitserial_alu: lane-parallel bit-serial add and compare of a PCM tile.
//
// Models the in-memory arithmetic the PCM-FW tile performs with FELIX-style
// bit-serial operations: every lane is one column of the array, and each
// cycle processes one bit plane of all lanes at once.
//   ADD phase (DW cycles): Temp_Add = a + b, LSB first, carries kept in
//     Temp_Carry. A lane whose operand is infinity (all ones) or whose sum
//     overflows saturates to infinity.
//   CMP phase (DW cycles): bit-serial subtraction Temp_Add - old; the final
//     borrow is the Sign_Bit, set when the new path is strictly shorter.
// Then done pulses with res = Temp_Add and wmask = Sign_Bit & lane_en, the
// mask that gates the selective write back to the Main_Block.
// Timing: operands are captured on start; done follows 2*DW+1 cycles later.
// The paper names the FELIX adder/subtractor, the Temp_Add/Temp_Carry/
// Sign_Bit regions and the sign-gated write; the saturation rule for
// infinity and the cycle accounting are this design's.
module felix_bitserial_alu #(
  parameter int unsigned LANES = 1024,
  parameter int unsigned DW    = 32
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     start,
  input  logic [LANES-1:0][DW-1:0] a_vec,
  input  logic [LANES-1:0][DW-1:0] b_vec,
  input  logic [LANES-1:0][DW-1:0] old_vec,
  input  logic [LANES-1:0]         lane_en,
  output logic                     busy,
  output logic                     done,
  output logic [LANES-1:0][DW-1:0] res,
  output logic [LANES-1:0]         wmask
);
  typedef enum logic [1:0] {P_IDLE, P_ADD, P_CMP} phase_e;
  phase_e phase;
  logic [$clog2(DW)-1:0] bit_i;

  logic [LANES-1:0][DW-1:0] a_q, b_q, old_q, temp_add;
  logic [LANES-1:0]         temp_carry, borrow, sat, en_q;

  localparam logic [DW-1:0] INF = '1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      phase <= P_IDLE; bit_i <= '0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (phase)
        P_IDLE: if (start) begin phase <= P_ADD; bit_i <= '0; end
        P_ADD:  begin
          bit_i <= bit_i + 1'b1;
          if (bit_i == ($clog2(DW))'(DW - 1)) begin phase <= P_CMP; bit_i <= '0; end
        end
        P_CMP:  begin
          bit_i <= bit_i + 1'b1;
          if (bit_i == ($clog2(DW))'(DW - 1)) begin phase <= P_IDLE; done <= 1'b1; end
        end
        default: phase <= P_IDLE;
      endcase
    end
  end
  assign busy = (phase != P_IDLE);

  always_ff @(posedge clk) begin
    if (phase == P_IDLE && start) begin
      a_q <= a_vec; b_q <= b_vec; old_q <= old_vec; en_q <= lane_en;
      temp_carry <= '0; borrow <= '0;
      for (int unsigned l = 0; l < LANES; l++)
        sat[l] <= (a_vec[l] == INF) || (b_vec[l] == INF);
    end else if (phase == P_ADD) begin
      for (int unsigned l = 0; l < LANES; l++) begin
        temp_add[l][bit_i] <= a_q[l][bit_i] ^ b_q[l][bit_i] ^ temp_carry[l];
        temp_carry[l] <= (a_q[l][bit_i] & b_q[l][bit_i]) |
                         (temp_carry[l] & (a_q[l][bit_i] ^ b_q[l][bit_i]));
      end
      if (bit_i == ($clog2(DW))'(DW - 1))
        for (int unsigned l = 0; l < LANES; l++)
          if (sat[l] || (a_q[l][DW-1] & b_q[l][DW-1]) ||
              (temp_carry[l] & (a_q[l][DW-1] ^ b_q[l][DW-1]))) begin
            temp_add[l] <= INF;    // saturate: infinity operand or carry out
          end
    end else if (phase == P_CMP) begin
      for (int unsigned l = 0; l < LANES; l++)
        borrow[l] <= (~temp_add[l][bit_i] & old_q[l][bit_i]) |
                     (~(temp_add[l][bit_i] ^ old_q[l][bit_i]) & borrow[l]);
    end
  end

  assign res   = temp_add;
  assign wmask = borrow & en_q;
endmodule
