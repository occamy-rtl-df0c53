// Hardware loop buffer (FREP sequencer) between an integer core and its FPU.
//
// The integer core offloads FP instructions through this unit. Ordinary
// instructions pass straight through (valid/ready, no added latency). An
// frep instruction (opcode 0001011) opens a hardware loop: bits [31:20] give
// the number of body instructions minus one and the integer operand sent
// with it (in_op_i, the value of its rs1 register) the number of iterations
// minus one. The body instructions that follow are issued once as they
// arrive and recorded in the buffer; the sequencer then replays the
// recorded body for the remaining iterations by itself, holding off the
// integer core (in_ready_o low) meanwhile. A body longer than DEPTH is not
// supported (the assertion flags it).
//
// The existence and purpose of the loop buffer follow the paper; the
// instruction encoding and the buffer depth are this design's own choices.
module frep_sequencer
  import occamy_pkg::*;
#(
  parameter int unsigned DEPTH = 16,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic        clk_i,
  input  logic        rst_ni,
  input  logic        in_valid_i,
  input  logic [31:0] in_instr_i,
  input  logic [31:0] in_op_i,
  output logic        in_ready_o,
  output logic        out_valid_o,
  output logic [31:0] out_instr_o,
  input  logic        out_ready_i,
  output logic        looping_o     // high while a loop is recorded or replayed
);
  typedef enum logic [1:0] {S_PASS, S_RECORD, S_REPLAY} state_e;
  state_e      state_q;
  logic [31:0] buf_q [DEPTH];
  logic [AW-1:0] len_q, ptr_q;      // body length - 1, current position
  logic [31:0] iter_q, reps_q;      // iterations done, iterations - 1

  logic is_frep;
  assign is_frep = (in_instr_i[6:0] == OPC_FREP);

  always_comb begin
    in_ready_o  = 1'b0;
    out_valid_o = 1'b0;
    out_instr_o = in_instr_i;
    unique case (state_q)
      S_PASS: begin
        out_valid_o = in_valid_i && !is_frep;
        in_ready_o  = is_frep || out_ready_i;
      end
      S_RECORD: begin
        out_valid_o = in_valid_i;
        in_ready_o  = out_ready_i;
      end
      default: begin
        out_valid_o = 1'b1;
        out_instr_o = buf_q[ptr_q];
      end
    endcase
  end
  assign looping_o = (state_q != S_PASS);

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q <= S_PASS;
      len_q   <= '0;
      ptr_q   <= '0;
      iter_q  <= '0;
      reps_q  <= '0;
    end else begin
      unique case (state_q)
        S_PASS: if (in_valid_i && is_frep) begin
          state_q <= S_RECORD;
          len_q   <= AW'(in_instr_i[31:20]);
          reps_q  <= in_op_i;
          ptr_q   <= '0;
          iter_q  <= '0;
        end
        S_RECORD: if (in_valid_i && out_ready_i) begin
          if (ptr_q == len_q) begin
            ptr_q   <= '0;
            state_q <= (reps_q == 0) ? S_PASS : S_REPLAY;
            iter_q  <= 32'd1;
          end else begin
            ptr_q <= ptr_q + 1'b1;
          end
        end
        default: if (out_ready_i) begin
          if (ptr_q == len_q) begin
            ptr_q <= '0;
            if (iter_q == reps_q) state_q <= S_PASS;
            iter_q <= iter_q + 1'b1;
          end else begin
            ptr_q <= ptr_q + 1'b1;
          end
        end
      endcase
    end
  end

  always_ff @(posedge clk_i)
    if (state_q == S_RECORD && in_valid_i && out_ready_i) buf_q[ptr_q] <= in_instr_i;

  assert property (@(posedge clk_i) disable iff (!rst_ni)
                   (state_q == S_PASS && in_valid_i && is_frep) |-> (in_instr_i[31:20] < 12'(DEPTH)))
    else $error("frep body longer than the loop buffer");
endmodule
