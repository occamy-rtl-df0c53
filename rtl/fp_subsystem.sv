// FP subsystem of one worker core: register file, three streaming units,
// index comparator and the FMA datapath.
//
// Offloaded FP instructions arrive from the loop buffer one per cycle. When
// streams are enabled (ssr_en_i), registers ft0, ft1 and ft2 are not read
// from or written to the register file but mapped onto SU0, SU1 and SU2: a
// read pops the head of that unit's data FIFO, a write pushes into it. An
// instruction issues when all its stream operands are available and its
// stream destination has room; otherwise it stalls (instr_ready_o low). The
// FMA is combinational and its result is written at the end of the issue
// cycle, so a dependent instruction can issue in the next cycle and an
// accumulation chain runs at one FMA per cycle.
//
// Supported instructions (RISC-V D extension encodings): fmadd.d, fmsub.d,
// fnmsub.d, fnmadd.d, fadd.d, fsub.d, fmul.d. fadd/fsub are executed as
// a*1.0+-c and fmul as a*b+(-0.0). Other encodings are dropped and counted
// in illegal_o. SU0 and SU1 support indirect streams and cooperate through
// the comparator (cmp_mode_i); SU2 writes the joint indices when its
// configuration asks for it. The register mapping follows the paper; the
// single-cycle FMA and the instruction subset are this design's choices.
// The register file is cleared to +0.0 by reset.
module fp_subsystem
  import occamy_pkg::*;
#(
  parameter int unsigned FIFO_DEPTH = 4
) (
  input  logic                   clk_i,
  input  logic                   rst_ni,
  // instructions
  input  logic                   instr_valid_i,
  input  logic [31:0]            instr_i,
  output logic                   instr_ready_o,
  // stream configuration
  input  logic                   ssr_en_i,
  input  su_cfg_t   [N_SU-1:0]   su_cfg_i,
  input  logic      [N_SU-1:0]   su_start_i,
  input  cmp_mode_e              cmp_mode_i,
  output logic      [N_SU-1:0]   su_busy_o,
  // scratchpad ports of the streamers
  output mem_req_t  [N_SU-1:0]   mem_req_o,
  input  logic      [N_SU-1:0]   mem_gnt_i,
  input  logic      [N_SU-1:0][63:0] mem_rdata_i,
  // register file read-out and activity counters
  input  logic [4:0]             dbg_raddr_i,
  output logic [63:0]            dbg_rdata_o,
  output logic [31:0]            fp_ops_o,
  output logic [31:0]            stall_cycles_o,
  output logic [31:0]            cmp_count_o,
  output logic [31:0]            illegal_o
);
  localparam logic [63:0] ONE     = 64'h3ff0_0000_0000_0000;
  localparam logic [63:0] NEGZERO = 64'h8000_0000_0000_0000;

  logic [63:0] rf_q [32];

  // ---------------- decode ----------------
  logic [6:0] opc;
  logic [4:0] rd, rs1, rs2, rs3;
  logic       is_r4, is_op, legal, use_rs3;
  logic       neg_prod, neg_c, b_one, c_negzero;
  assign opc = instr_i[6:0];
  assign rd  = instr_i[11:7];
  assign rs1 = instr_i[19:15];
  assign rs2 = instr_i[24:20];
  assign rs3 = instr_i[31:27];
  assign is_r4 = (opc == OPC_FMADD || opc == OPC_FMSUB || opc == OPC_FNMSUB || opc == OPC_FNMADD)
                 && instr_i[26:25] == 2'b01;
  always_comb begin
    is_op = 1'b0; neg_prod = 1'b0; neg_c = 1'b0; b_one = 1'b0; c_negzero = 1'b0; use_rs3 = 1'b0;
    if (is_r4) begin
      use_rs3  = 1'b1;
      neg_prod = (opc == OPC_FNMSUB) || (opc == OPC_FNMADD);
      neg_c    = (opc == OPC_FMSUB)  || (opc == OPC_FNMADD);
    end else if (opc == OPC_OPFP) begin
      unique case (instr_i[31:25])
        7'b0000001: begin is_op = 1'b1; b_one = 1'b1; end                 // fadd.d
        7'b0000101: begin is_op = 1'b1; b_one = 1'b1; neg_c = 1'b1; end   // fsub.d
        7'b0001001: begin is_op = 1'b1; c_negzero = 1'b1; end             // fmul.d
        default: ;
      endcase
    end
  end
  assign legal = is_r4 || is_op;

  // ---------------- streamers ----------------
  logic [N_SU-1:0]       rd_valid, rd_pop, wr_ready, wr_valid;
  logic [N_SU-1:0][63:0] rd_data;
  logic [63:0]           result;
  logic [N_SU-1:0]       hv, exh, crdy;
  logic [N_SU-1:0][31:0] head;
  su_cmd_e               cmd0, cmd1;
  logic                  cmp_fire, cmp_done, iout_valid, iout_ready;
  logic [31:0]           iout_idx;
  logic                  cmp_on;
  logic [N_SU-1:0]       crdy_iout;
  assign cmp_on = (cmp_mode_i != CMP_OFF);

  for (genvar s = 0; s < N_SU; s++) begin : g_su
    su_streamer #(
      .DEPTH(FIFO_DEPTH), .HAS_INDIR(s < 2), .HAS_IOUT(s == 2)
    ) i_su (
      .clk_i, .rst_ni,
      .cfg_i(su_cfg_i[s]), .start_i(su_start_i[s]), .cmp_en_i(cmp_on && s < 2), .busy_o(su_busy_o[s]),
      .mem_req_o(mem_req_o[s]), .mem_gnt_i(mem_gnt_i[s]), .mem_rdata_i(mem_rdata_i[s]),
      .rd_valid_o(rd_valid[s]), .rd_data_o(rd_data[s]), .rd_pop_i(rd_pop[s]),
      .wr_ready_o(wr_ready[s]), .wr_valid_i(wr_valid[s]), .wr_data_i(result),
      .cmp_head_valid_o(hv[s]), .cmp_head_o(head[s]), .cmp_exh_o(exh[s]), .cmp_ready_o(crdy[s]),
      .cmp_cmd_i(s == 0 ? cmd0 : (s == 1 ? cmd1 : CMD_NONE)),
      .cmp_fire_i(s < 2 && cmp_fire), .cmp_done_i(s < 2 && cmp_done),
      .iout_valid_i(s == 2 && iout_valid), .iout_idx_i(iout_idx),
      .iout_ready_o(crdy_iout[s])
    );
  end
  assign iout_ready = crdy_iout[2];

  su_idx_cmp i_cmp (
    .mode_i(cmp_mode_i), .iout_en_i(su_cfg_i[2].iout),
    .hv0_i(hv[0]), .h0_i(head[0]), .exh0_i(exh[0]), .rdy0_i(crdy[0]), .cmd0_o(cmd0),
    .hv1_i(hv[1]), .h1_i(head[1]), .exh1_i(exh[1]), .rdy1_i(crdy[1]), .cmd1_o(cmd1),
    .fire_o(cmp_fire), .done_o(cmp_done),
    .iout_valid_o(iout_valid), .iout_idx_o(iout_idx), .iout_ready_i(iout_ready)
  );

  // ---------------- operand selection and issue ----------------
  function automatic logic is_stream(logic [4:0] r, logic en, logic wr_mode);
    return en && (r < 5'd3) && wr_mode;
  endfunction

  logic [2:0] src_rd_stream;           // which streams this instruction reads
  logic       dst_stream;
  logic [63:0] op_a, op_b, op_c;
  logic       operands_ok, issue;

  always_comb begin
    src_rd_stream = '0;
    if (legal) begin
      for (int s = 0; s < N_SU; s++) begin
        if (is_stream(rs1, ssr_en_i, !su_cfg_i[s].write) && rs1 == 5'(s)) src_rd_stream[s] = 1'b1;
        if (is_stream(rs2, ssr_en_i, !su_cfg_i[s].write) && rs2 == 5'(s)) src_rd_stream[s] = 1'b1;
        if (use_rs3 && is_stream(rs3, ssr_en_i, !su_cfg_i[s].write) && rs3 == 5'(s)) src_rd_stream[s] = 1'b1;
      end
    end
  end
  assign dst_stream = ssr_en_i && (rd < 5'd3) && su_cfg_i[rd[1:0]].write;

  function automatic logic [63:0] rdop(logic [4:0] r, logic en, su_cfg_t [N_SU-1:0] cfg,
                                       logic [N_SU-1:0][63:0] sd, logic [63:0] rfv);
    if (en && r < 5'd3 && !cfg[r[1:0]].write) return sd[r[1:0]];
    return rfv;
  endfunction

  always_comb begin
    op_a = rdop(rs1, ssr_en_i, su_cfg_i, rd_data, rf_q[rs1]);
    op_b = rdop(rs2, ssr_en_i, su_cfg_i, rd_data, rf_q[rs2]);
    op_c = rdop(rs3, ssr_en_i, su_cfg_i, rd_data, rf_q[rs3]);
    if (b_one) begin
      op_c = op_b;
      op_b = ONE;
    end
    if (c_negzero) op_c = NEGZERO;
  end

  assign operands_ok = &(~src_rd_stream | rd_valid) && (!dst_stream || wr_ready[rd[1:0]]);
  assign issue = instr_valid_i && legal && operands_ok;
  assign instr_ready_o = !legal || operands_ok;
  assign rd_pop = issue ? src_rd_stream : '0;
  always_comb begin
    wr_valid = '0;
    if (issue && dst_stream) wr_valid[rd[1:0]] = 1'b1;
  end

  fpu_fma64 i_fma (
    .a_i(op_a), .b_i(op_b), .c_i(op_c), .neg_prod_i(neg_prod), .neg_c_i(neg_c), .res_o(result)
  );

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      for (int r = 0; r < 32; r++) rf_q[r] <= '0;
    end else if (issue && !dst_stream) begin
      rf_q[rd] <= result;
    end
  end
  assign dbg_rdata_o = rf_q[dbg_raddr_i];

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      fp_ops_o       <= '0;
      stall_cycles_o <= '0;
      cmp_count_o    <= '0;
      illegal_o      <= '0;
    end else begin
      if (issue) fp_ops_o <= fp_ops_o + 1;
      if (instr_valid_i && legal && !operands_ok) stall_cycles_o <= stall_cycles_o + 1;
      if (cmp_fire) cmp_count_o <= cmp_count_o + 1;
      if (instr_valid_i && !legal) illegal_o <= illegal_o + 1;
    end
  end
endmodule
