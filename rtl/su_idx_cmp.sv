// Index comparator joining the index streams of two streaming units.
//
// SU0 and SU1, running indirect streams over sorted (ascending) index
// arrays, show their current head index to the comparator. Once per cycle
// the comparator compares the two heads and tells each streamer what to do:
//
//  intersection: equal heads -> both ADV (fetch both values) and the index
//                is forwarded as a joint index; otherwise the smaller head
//                is SKIPped. Ends as soon as either stream is exhausted.
//  union:        the smaller head (or both, if equal) ADVances and the other
//                streamer emits a ZERO value, so both value streams stay
//                aligned; the smaller index is the joint index. An exhausted
//                stream keeps emitting zeros. Ends when both are exhausted.
//
// A decision fires only when every streamer that must ADV or emit ZERO is
// ready and, if joint indices are written out (iout_en_i), SU2 can take the
// index. cmp_fire_o marks one index comparison. done_o is high when the
// mode's end condition holds. Intersection and union follow the paper; the
// command encoding and end conditions are this design's own choices.
module su_idx_cmp
  import occamy_pkg::*;
(
  input  cmp_mode_e   mode_i,
  input  logic        iout_en_i,
  // streamer 0
  input  logic        hv0_i,
  input  logic [31:0] h0_i,
  input  logic        exh0_i,
  input  logic        rdy0_i,
  output su_cmd_e     cmd0_o,
  // streamer 1
  input  logic        hv1_i,
  input  logic [31:0] h1_i,
  input  logic        exh1_i,
  input  logic        rdy1_i,
  output su_cmd_e     cmd1_o,
  // shared
  output logic        fire_o,
  output logic        done_o,
  // joint index to SU2
  output logic        iout_valid_o,
  output logic [31:0] iout_idx_o,
  input  logic        iout_ready_i
);
  logic emit, ok;
  always_comb begin
    cmd0_o     = CMD_NONE;
    cmd1_o     = CMD_NONE;
    emit       = 1'b0;
    ok         = 1'b0;
    done_o     = 1'b0;
    iout_idx_o = '0;
    unique case (mode_i)
      CMP_INTERSECT: begin
        done_o = exh0_i || exh1_i;
        if (!done_o && hv0_i && hv1_i) begin
          ok = 1'b1;
          if (h0_i == h1_i) begin
            cmd0_o = CMD_ADV; cmd1_o = CMD_ADV;
            emit = 1'b1; iout_idx_o = h0_i;
          end else if (h0_i < h1_i) begin
            cmd0_o = CMD_SKIP;
          end else begin
            cmd1_o = CMD_SKIP;
          end
        end
      end
      CMP_UNION: begin
        done_o = exh0_i && exh1_i;
        if (!done_o && (hv0_i || exh0_i) && (hv1_i || exh1_i)) begin
          ok   = 1'b1;
          emit = 1'b1;
          if (exh0_i || (!exh1_i && h1_i < h0_i)) begin
            cmd0_o = CMD_ZERO; cmd1_o = CMD_ADV; iout_idx_o = h1_i;
          end else if (exh1_i || h0_i < h1_i) begin
            cmd0_o = CMD_ADV; cmd1_o = CMD_ZERO; iout_idx_o = h0_i;
          end else begin
            cmd0_o = CMD_ADV; cmd1_o = CMD_ADV; iout_idx_o = h0_i;
          end
        end
      end
      default: ;
    endcase
  end

  logic need0, need1;
  assign need0 = (cmd0_o == CMD_ADV) || (cmd0_o == CMD_ZERO);
  assign need1 = (cmd1_o == CMD_ADV) || (cmd1_o == CMD_ZERO);
  assign fire_o = ok && (!need0 || rdy0_i) && (!need1 || rdy1_i) &&
                  (!(emit && iout_en_i) || iout_ready_i);
  assign iout_valid_o = emit && iout_en_i && ok && (!need0 || rdy0_i) && (!need1 || rdy1_i);
endmodule
