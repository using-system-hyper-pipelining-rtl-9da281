// rv_shp_core: a system hyper pipelined (SHP) RV32IM core.
//
// The core is an RV32IM processor that has been C-slow retimed into C = 4
// micro-stages, with its design registers (program counter, the 32 integer
// registers and the state of the multi-cycle divider) replaced by memories
// indexed by a thread slot ID (SID). The thread controller (TC) picks the slot
// that enters stage 0 each micro-cycle (the memories' read pointer); the slot
// travels down the pipeline with its instruction and is the write pointer
// when the instruction writes back. Each slot has at most one instruction in
// flight, so threads never depend on each other and need no forwarding or
// interlocks; one instruction of a thread is one macro-cycle = C micro-cycles.
//
// Pipeline (one micro-cycle each):
//   S0  TC selects slot; its PC is read and sent to MEM port A.
//   S1  the instruction arrives from MEM; its register addresses are put on
//       the register memory's registered read address (the registers at the
//       memory read address inputs of Fig. 2b replace the CSR shift chain).
//   S2  register data arrive; ALU, branch, multiply, one divider pass, and
//       the data access is issued: local MEM (port B), the thread-private
//       stack through the TLB, an SFR of the TC or DMAE, or a store to
//       another cluster through the routing element.
//   S3  load data arrive; the register memory and the PC memory are written.
// An instruction that cannot complete in S2 does not commit: its PC is kept
// and it is executed again on the slot's next turn. This replay stalls the
// thread while the shared stack is full, while the routing element does not
// take a remote store, and between the passes of a division (DIV_PASSES
// passes of 32/DIV_PASSES restoring steps each, the partial remainder and
// quotient kept per slot).
//
// When the TC starts a thread (start_*), its PC is set and its stack pointer
// x2 reads as 0 until the thread first writes x2.
//
// The ISA (RV32IM), C = 4, D = 16 and the multi-cycle divider come from the
// paper; the stage split, the replay mechanism, the divider's pass count and
// the address map (see hpra_pkg) are this design's choices. FENCE, ECALL,
// EBREAK, CSR and unknown instructions execute as no-ops; loads from another
// cluster are not supported and return 0 (the network carries writes).
module rv_shp_core
  import hpra_pkg::*;
#(
  parameter int unsigned D             = 16,
  parameter int unsigned MEM_WORDS     = 4096,
  parameter int unsigned SECTIONS      = 8,
  parameter int unsigned SECTION_WORDS = 64,
  parameter int unsigned DIV_PASSES    = 4,
  parameter logic [3:0]  MY_COL        = 4'd0,
  parameter logic [3:0]  MY_ROW        = 4'd0,
  localparam int unsigned TW  = $clog2(D),
  localparam int unsigned AW  = $clog2(MEM_WORDS),
  localparam int unsigned SW  = $clog2(SECTIONS),
  localparam int unsigned OW  = $clog2(SECTION_WORDS),
  localparam int unsigned VPNW = 14 - OW
) (
  input  logic            clk,
  input  logic            rst_n,
  // thread controller
  input  logic            issue_valid,
  input  logic [TW-1:0]   issue_tid,
  input  logic            start_valid,
  input  logic [TW-1:0]   start_sid,
  input  logic [31:0]     start_pc,
  // instruction fetch (MEM port A)
  output logic            ia_en,
  output logic [AW-1:0]   ia_addr,
  input  logic [31:0]     ia_rdata,
  // data access to local MEM (port B, always granted)
  output logic            d_en,
  output logic            d_we,
  output logic [3:0]      d_be,
  output logic [AW-1:0]   d_addr,
  output logic [31:0]     d_wdata,
  input  logic [31:0]     d_rdata,
  // SFR access (TC, DMAE)
  output logic            s_valid,
  output logic            s_we,
  output logic [TW-1:0]   s_tid,
  output logic [5:0]      s_off,
  output logic [31:0]     s_wdata,
  input  logic [31:0]     s_rdata,
  // stack TLB lookup
  output logic            t_valid,
  output logic [TW-1:0]   t_tid,
  output logic [VPNW-1:0] t_vpn,
  input  logic            t_grant,
  input  logic [SW-1:0]   t_sec,
  // PE-STACK
  output logic            k_en,
  output logic            k_we,
  output logic [3:0]      k_be,
  output logic [SW+OW-1:0] k_addr,
  output logic [31:0]     k_wdata,
  input  logic [31:0]     k_rdata,
  // stores to other clusters
  output logic            g_valid,
  output pkt_t            g_pkt,
  input  logic            g_ready,
  // retirement (status / performance counting)
  output logic            retire_valid,
  output logic [TW-1:0]   retire_tid,
  output logic            replay_valid
);
  localparam int unsigned DSTEP = 32 / DIV_PASSES;

  typedef enum logic [1:0] {SRC_ALU, SRC_MEM, SRC_STK, SRC_SFR} wsrc_e;

  // ---------------- design state memories ----------------
  logic [31:0] pc_mem [D];
  logic [D-1:0] sp_zero;
  logic [31:0] rf [D * 32];
  logic [D-1:0] div_busy;
  logic [$clog2(DIV_PASSES+1)-1:0] div_cnt [D];
  logic [31:0] div_rem [D];
  logic [31:0] div_quo [D];

  // ---------------- S0 ----------------
  logic          s1_v;
  logic [TW-1:0] s1_tid;
  logic [31:0]   s1_pc;

  assign ia_en   = issue_valid;
  assign ia_addr = pc_mem[issue_tid][AW+1:2];

  // ---------------- S1 ----------------
  logic          s2_v;
  logic [TW-1:0] s2_tid;
  logic [31:0]   s2_pc, s2_ir;
  logic [31:0]   rf_q1, rf_q2;

  always_ff @(posedge clk) begin
    rf_q1 <= rf[{s1_tid, ia_rdata[19:15]}];
    rf_q2 <= rf[{s1_tid, ia_rdata[24:20]}];
  end

  // ---------------- S2 ----------------
  logic [6:0]  opc;
  logic [2:0]  f3;
  logic [6:0]  f7;
  logic [4:0]  rd, rs1, rs2;
  logic [31:0] a, b, imm_i, imm_s, imm_b, imm_u, imm_j;

  assign opc = s2_ir[6:0];
  assign f3  = s2_ir[14:12];
  assign f7  = s2_ir[31:25];
  assign rd  = s2_ir[11:7];
  assign rs1 = s2_ir[19:15];
  assign rs2 = s2_ir[24:20];
  assign imm_i = {{20{s2_ir[31]}}, s2_ir[31:20]};
  assign imm_s = {{20{s2_ir[31]}}, s2_ir[31:25], s2_ir[11:7]};
  assign imm_b = {{19{s2_ir[31]}}, s2_ir[31], s2_ir[7], s2_ir[30:25], s2_ir[11:8], 1'b0};
  assign imm_u = {s2_ir[31:12], 12'b0};
  assign imm_j = {{11{s2_ir[31]}}, s2_ir[31], s2_ir[19:12], s2_ir[20], s2_ir[30:21], 1'b0};

  always_comb begin
    a = rf_q1;
    b = rf_q2;
    if (rs1 == 5'd0 || (rs1 == 5'd2 && sp_zero[s2_tid])) a = '0;
    if (rs2 == 5'd0 || (rs2 == 5'd2 && sp_zero[s2_tid])) b = '0;
  end

  // divider pass
  logic        div_signed, div_last;
  logic [31:0] div_ua, div_ub, div_r, div_q, div_res;
  logic [$clog2(DIV_PASSES+1)-1:0] div_cnt_now;
  logic [32:0] r33;
  always_comb begin
    r33         = '0;
    div_signed  = !f3[0];
    div_ua      = (div_signed && a[31]) ? -a : a;
    div_ub      = (div_signed && b[31]) ? -b : b;
    div_cnt_now = div_busy[s2_tid] ? div_cnt[s2_tid] : '0;
    div_last    = (32'(div_cnt_now) == DIV_PASSES - 1);
    div_r       = div_busy[s2_tid] ? div_rem[s2_tid] : '0;
    div_q       = div_busy[s2_tid] ? div_quo[s2_tid] : div_ua;
    for (int i = 0; i < DSTEP; i++) begin
      r33   = {div_r, div_q[31]};
      div_q = {div_q[30:0], 1'b0};
      if (r33 >= {1'b0, div_ub}) begin
        div_r    = 32'(r33 - {1'b0, div_ub});
        div_q[0] = 1'b1;
      end else begin
        div_r = r33[31:0];
      end
    end
    if (f3[1]) // REM, REMU
      div_res = (div_signed && a[31]) ? -div_r : div_r;
    else       // DIV, DIVU
      div_res = (div_signed && (a[31] ^ b[31]) && b != 0) ? -div_q : div_q;
  end

  // execute
  logic [31:0] res, npc, maddr, ldst_local;
  logic        wb, commit, is_div;
  wsrc_e       wsrc;
  addr_class_e acls;
  logic [3:0]  st_be;
  logic [31:0] st_data;
  logic [63:0] prod;

  logic is_ldst, is_st;
  assign is_ldst = s2_v && (opc == 7'b0000011 || opc == 7'b0100011);
  assign is_st   = opc[5];

  // data address and its class
  always_comb begin
    maddr = a + ((opc == 7'b0100011) ? imm_s : imm_i);
    acls  = addr_class(maddr);
    ldst_local = maddr;
    if (acls == AC_GLOBAL && addr_col(maddr) == MY_COL && addr_row(maddr) == MY_ROW) begin
      ldst_local = {16'h0, maddr[15:0]};
      acls = addr_class(ldst_local);
    end
    case (f3[1:0])
      2'd0:    st_be = 4'b0001 << maddr[1:0];
      2'd1:    st_be = 4'b0011 << maddr[1:0];
      default: st_be = 4'b1111;
    endcase
    st_data = b << (8 * maddr[1:0]);
  end

  assign t_valid = is_ldst && acls == AC_STACK;
  assign g_valid = is_ldst && is_st && acls == AC_GLOBAL;

  logic        taken, alt;
  logic [31:0] op2;

  always_comb begin
    res = '0; npc = s2_pc + 32'd4; wb = 1'b0; commit = 1'b1; wsrc = SRC_ALU; is_div = 1'b0;
    taken = 1'b0; alt = 1'b0; op2 = '0;
    case (f3[1:0])
      2'd0: prod = 64'(a) * 64'(b);                                    // MUL
      2'd1: prod = 64'($signed({{32{a[31]}}, a}) * $signed({{32{b[31]}}, b})); // MULH
      2'd2: prod = 64'($signed({{32{a[31]}}, a}) * $signed({32'b0, b}));       // MULHSU
      default: prod = 64'(a) * 64'(b);                                 // MULHU
    endcase

    d_en = 1'b0; d_we = 1'b0; d_be = st_be; d_addr = ldst_local[AW+1:2]; d_wdata = st_data;
    s_valid = 1'b0; s_we = 1'b0; s_off = ldst_local[7:2]; s_wdata = b;
    k_en = 1'b0; k_we = 1'b0; k_be = st_be; k_wdata = st_data;

    if (s2_v) begin
      case (opc)
        7'b0110111: begin res = imm_u; wb = 1'b1; end                 // LUI
        7'b0010111: begin res = s2_pc + imm_u; wb = 1'b1; end         // AUIPC
        7'b1101111: begin res = s2_pc + 32'd4; wb = 1'b1; npc = s2_pc + imm_j; end
        7'b1100111: begin res = s2_pc + 32'd4; wb = 1'b1; npc = (a + imm_i) & ~32'd1; end
        7'b1100011: begin                                            // branches
          case (f3)
            3'b000:  taken = (a == b);
            3'b001:  taken = (a != b);
            3'b100:  taken = ($signed(a) < $signed(b));
            3'b101:  taken = ($signed(a) >= $signed(b));
            3'b110:  taken = (a < b);
            3'b111:  taken = (a >= b);
            default: taken = 1'b0;
          endcase
          if (taken) npc = s2_pc + imm_b;
        end
        7'b0000011, 7'b0100011: begin                                // loads, stores
          wb = !is_st;
          case (acls)
            AC_LOCAL: begin d_en = 1'b1; d_we = is_st; wsrc = SRC_MEM; end
            AC_SFR:   begin s_valid = 1'b1; s_we = is_st; wsrc = SRC_SFR; end
            AC_STACK: begin
              wsrc = SRC_STK;
              if (t_grant) begin k_en = 1'b1; k_we = is_st; end
              else commit = 1'b0;
            end
            default: begin                                          // AC_GLOBAL
              wsrc = SRC_ALU; res = '0;
              if (is_st && !g_ready) commit = 1'b0;
            end
          endcase
        end
        7'b0010011, 7'b0110011: begin                                // OP-IMM, OP
          op2 = opc[5] ? b : imm_i;
          alt = opc[5] ? f7[5] : (f3 == 3'b101 && f7[5]);
          wb  = 1'b1;
          if (opc[5] && f7 == 7'b0000001) begin                      // M extension
            if (!f3[2]) res = (f3[1:0] == 2'd0) ? prod[31:0] : prod[63:32];
            else begin
              is_div = 1'b1;
              res    = div_res;
              if (!div_last) begin commit = 1'b0; end
            end
          end else begin
            case (f3)
              3'b000: res = (opc[5] && alt) ? a - op2 : a + op2;
              3'b001: res = a << op2[4:0];
              3'b010: res = 32'($signed(a) < $signed(op2));
              3'b011: res = 32'(a < op2);
              3'b100: res = a ^ op2;
              3'b101: res = alt ? 32'($signed(a) >>> op2[4:0]) : a >> op2[4:0];
              3'b110: res = a | op2;
              default: res = a & op2;
            endcase
          end
        end
        default: ;                                                   // FENCE, SYSTEM: no-op
      endcase
    end
    if (!commit) begin wb = 1'b0; npc = s2_pc; end
  end

  assign s_tid = s2_tid;
  assign t_tid = s2_tid;
  assign t_vpn = VPNW'((~maddr[15:0]) >> (OW + 2));
  assign k_addr = {t_sec, OW'((~maddr[15:0]) >> 2)};
  assign g_pkt  = '{addr: {maddr[31:2], 2'b00}, data: st_data, be: st_be};

  // ---------------- S3 ----------------
  logic          s3_v, s3_wb, s3_commit;
  logic [TW-1:0] s3_tid;
  logic [4:0]    s3_rd;
  logic [31:0]   s3_res, s3_npc;
  wsrc_e         s3_src;
  logic [2:0]    s3_f3;
  logic [1:0]    s3_boff;
  logic [31:0]   ld_raw, ld_sh, wb_data;

  always_comb begin
    case (s3_src)
      SRC_MEM: ld_raw = d_rdata;
      SRC_STK: ld_raw = k_rdata;
      default: ld_raw = s_rdata;
    endcase
    ld_sh = ld_raw >> (8 * s3_boff);
    case (s3_f3)
      3'b000:  wb_data = {{24{ld_sh[7]}}, ld_sh[7:0]};
      3'b001:  wb_data = {{16{ld_sh[15]}}, ld_sh[15:0]};
      3'b100:  wb_data = {24'b0, ld_sh[7:0]};
      3'b101:  wb_data = {16'b0, ld_sh[15:0]};
      default: wb_data = ld_sh;
    endcase
    if (s3_src == SRC_ALU) wb_data = s3_res;
  end

  assign retire_valid = s3_v && s3_commit;
  assign retire_tid   = s3_tid;
  assign replay_valid = s3_v && !s3_commit;

  // ---------------- state ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_v <= 1'b0; s2_v <= 1'b0; s3_v <= 1'b0;
      s1_tid <= '0; s2_tid <= '0; s3_tid <= '0;
      s1_pc <= '0; s2_pc <= '0; s2_ir <= '0;
      s3_wb <= 1'b0; s3_commit <= 1'b0; s3_rd <= '0; s3_res <= '0; s3_npc <= '0;
      s3_src <= SRC_ALU; s3_f3 <= '0; s3_boff <= '0;
      sp_zero <= '0; div_busy <= '0;
    end else begin
      s1_v <= issue_valid; s1_tid <= issue_tid; s1_pc <= pc_mem[issue_tid];
      s2_v <= s1_v; s2_tid <= s1_tid; s2_pc <= s1_pc; s2_ir <= ia_rdata;
      s3_v <= s2_v; s3_tid <= s2_tid; s3_rd <= rd; s3_wb <= wb && rd != 5'd0;
      s3_commit <= commit; s3_res <= res; s3_npc <= npc; s3_src <= wsrc;
      s3_f3 <= f3; s3_boff <= maddr[1:0];
      if (s2_v && is_div) div_busy[s2_tid] <= !div_last;
      if (s3_v && s3_wb && s3_rd == 5'd2) sp_zero[s3_tid] <= 1'b0;
      if (start_valid) sp_zero[start_sid] <= 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (s2_v && is_div) begin
      div_cnt[s2_tid] <= div_cnt_now + 1'b1;
      div_rem[s2_tid] <= div_r;
      div_quo[s2_tid] <= div_q;
    end
    if (s3_v && s3_wb) rf[{s3_tid, s3_rd}] <= wb_data;
    if (s3_v) pc_mem[s3_tid] <= s3_npc;
    if (start_valid) pc_mem[start_sid] <= start_pc;
  end

  // Only one instruction per slot may be in the pipeline.
  assert property (@(posedge clk) disable iff (!rst_n)
    issue_valid |-> !((s1_v && s1_tid == issue_tid) || (s2_v && s2_tid == issue_tid) ||
                      (s3_v && s3_tid == issue_tid)));
endmodule
