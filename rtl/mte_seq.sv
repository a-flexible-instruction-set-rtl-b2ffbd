// mte_seq: instruction sequencer of the MTE vector unit.
//
// It takes one decoded instruction at a time (valid/ready) and turns it into micro-ops, one per
// cycle, for the lanes' read stage (rd_o) together with the control word that follows each
// micro-op to the execute stage (ctrl_o, registered by the unit).
//   tss*, csrw, vsetvl  go to mte_csr; the granted value comes back on rsp_* the next cycle.
//   tmul / tfmul        are decoded, as the paper proposes, into tk cvfma micro-instructions.
//                       cvfma k covers tm*COLS elements (the C tile rows) in
//                       STEPS = ceil(tm*COLS/NLANES) steps; step s reads C and A from slot s
//                       and the B row k from slot (k*COLS)/NLANES. The implicit column mask
//                       (col < tn) and, if vm, the v0 mask are applied by the interconnect.
//                       Because a C element is read again by cvfma k+1, the steps of one
//                       cvfma must span at least PIPE = 3 cycles (read, execute, write-back);
//                       with fewer steps the sequencer inserts bubbles (stall_o).
//   vector ops          vbcast / v[f]mul.v[xf] / v[f]macc.v[xf] over vl elements, ceil(vl/NLANES)
//                       steps, optionally masked by v0.
//   tvmask              writes the mask made by mte_tvmask into vd (SLOTS steps).
//   tl / ttl            start the tile LSU, wait for it, then write its image into vd.
//   tsc / ttsc          read vd step by step into the LSU image, then let the LSU store it.
// After the last micro-op one drain cycle passes before the next instruction is taken, so that
// an instruction never reads a register its predecessor is still writing.
// A tile multiply of M rows and K cvfma takes K*max(STEPS,3) issue cycles plus 2 cycles from
// acceptance to the next ready: 64+2 cycles for 16x16x16 at the default size, in line with the
// 64-cycle dynamic latency the paper uses for MTE_32v. Overlapping instructions (the paper's
// non-blocking front end, several vector units) is not done here.
module mte_seq
  import mte_pkg::*;
#(
  parameter int unsigned VLEN   = VLEN_D,
  parameter int unsigned RLEN   = RLEN_D,
  parameter int unsigned NLANES = NLANES_D
) (
  input  logic            clk,
  input  logic            rst_n,
  // instructions
  input  logic            in_valid_i,
  output logic            in_ready_o,
  input  mte_instr_t      in_instr_i,
  output logic            rsp_valid_o,
  output logic [XLEN-1:0] rsp_data_o,
  // CSR
  output logic            csr_cmd_valid_o,
  input  logic [XLEN-1:0] csr_rd_i,
  input  mte_csr_t        csr_i,
  input  logic [15:0]     vl_i,
  // tvmask
  output tile_e           mask_tile_o,
  output logic [XLEN-1:0] mask_rs1_o,
  // tile LSU
  output logic            lsu_start_o,
  output logic            lsu_store_o,
  output logic            lsu_trans_o,
  output logic [11:0]     lsu_rows_o,
  output logic [11:0]     lsu_cols_o,
  output logic [XLEN-1:0] lsu_base_o,
  output logic [XLEN-1:0] lsu_stride_o,
  output logic            lsu_col_agn_o,
  output logic            lsu_row_agn_o,
  input  logic            lsu_done_i,
  // lanes
  output lane_rd_t        rd_o,
  output uop_ctrl_t       ctrl_o,
  output logic [ELEN-1:0] scalar_o,
  output logic            img_from_mask_o,
  // events
  output logic            stall_o,      // one cvfma bubble cycle
  output logic            cvfma_o       // one cvfma micro-instruction started
);
  localparam int unsigned COLS  = RLEN / ELEN;
  localparam int unsigned SLOTS = VLEN / (ELEN * NLANES);
  localparam int unsigned PIPE  = 3;

  typedef enum logic [2:0] {S_IDLE, S_MUL, S_VEC, S_IMG, S_LDMEM, S_CAPT, S_STMEM, S_DRAIN} state_e;

  state_e      state_q;
  mte_instr_t  ins_q;
  logic [11:0] k_q, steps_q, s_q, bub_q;
  logic [15:0] vlim_q;
  logic [2:0]  cwait_q;
  logic        rsp_valid_q;
  logic [XLEN-1:0] rsp_data_q;

  assign rsp_valid_o = rsp_valid_q;
  assign rsp_data_o  = rsp_data_q;
  assign in_ready_o  = (state_q == S_IDLE);
  assign scalar_o    = ins_q.rs1[ELEN-1:0];
  assign mask_tile_o = ins_q.tile;
  assign mask_rs1_o  = ins_q.rs1;
  assign img_from_mask_o = (ins_q.op == OP_TVMASK);

  wire is_csr_op = in_instr_i.op inside {OP_TSSM, OP_TSSN, OP_TSSK, OP_CSRW, OP_VSETVL};
  assign csr_cmd_valid_o = in_valid_i && in_ready_o && is_csr_op;

  // tile shape of a load/store
  logic [11:0] t_rows, t_cols;
  ttype_t      t_type;
  always_comb begin
    unique case (in_instr_i.tile)
      TILE_A:  begin t_rows = csr_i.tm; t_cols = csr_i.tk; t_type = csr_i.ttypei; end
      TILE_B:  begin t_rows = csr_i.tk; t_cols = csr_i.tn; t_type = csr_i.ttypei; end
      TILE_C:  begin t_rows = csr_i.tm; t_cols = csr_i.tn; t_type = csr_i.ttypeo; end
      default: begin t_rows = csr_i.tn; t_cols = csr_i.tk; t_type = csr_i.ttypei; end
    endcase
    if (in_instr_i.op == OP_TSC) begin t_rows = csr_i.tm; t_cols = csr_i.tn; end
  end
  assign lsu_start_o   = in_valid_i && in_ready_o && (in_instr_i.op inside {OP_TL})
                         || (state_q == S_CAPT && cwait_q == 3'd1);
  assign lsu_store_o   = (state_q == S_CAPT);
  assign lsu_trans_o   = (state_q == S_CAPT) ? ins_q.trans : in_instr_i.trans;
  assign lsu_rows_o    = (state_q == S_CAPT) ? csr_i.tm : t_rows;
  assign lsu_cols_o    = (state_q == S_CAPT) ? csr_i.tn : t_cols;
  assign lsu_base_o    = (state_q == S_CAPT) ? ins_q.rs1 : in_instr_i.rs1;
  assign lsu_stride_o  = (state_q == S_CAPT) ? ins_q.rs2 : in_instr_i.rs2;
  assign lsu_col_agn_o = t_type.col_agn;
  assign lsu_row_agn_o = t_type.row_agn;

  // ---- micro-op generation (read stage) ----
  always_comb begin
    rd_o    = '0;
    ctrl_o  = '0;
    stall_o = 1'b0;
    cvfma_o = 1'b0;
    rd_o.vd_reg  = ins_q.vd;
    rd_o.vs1_reg = ins_q.vs1;
    rd_o.vs2_reg = ins_q.vs2;
    rd_o.vd_slot  = 8'(s_q);
    rd_o.vs1_slot = 8'(s_q);
    rd_o.vs2_slot = 8'(s_q);
    rd_o.v0_slot  = 8'((32'(s_q) * NLANES / ELEN) / NLANES);
    ctrl_o.wreg  = ins_q.vd;
    ctrl_o.slot  = 8'(s_q);
    ctrl_o.vm    = ins_q.vm;
    ctrl_o.vlim  = vlim_q;
    ctrl_o.k     = k_q;
    ctrl_o.ncols = csr_i.tn;
    unique case (state_q)
      S_MUL: begin
        if (bub_q == '0) begin
          rd_o.en       = 1'b1;
          rd_o.vs2_slot = 8'((32'(k_q) * COLS) / NLANES);
          ctrl_o.valid  = 1'b1;
          ctrl_o.mode   = XB_CVFMA;
          ctrl_o.op     = (ins_q.op == OP_TFMUL) ? LOP_MAC_F : LOP_MAC_I;
          cvfma_o       = (s_q == '0);
        end else begin
          stall_o = 1'b1;
        end
      end
      S_VEC: begin
        rd_o.en      = 1'b1;
        ctrl_o.valid = 1'b1;
        unique case (ins_q.op)
          OP_VBCAST:    begin ctrl_o.mode = XB_BCAST; ctrl_o.op = LOP_MOVE;  end
          OP_VMUL_VX:   begin ctrl_o.mode = XB_VX;    ctrl_o.op = LOP_MUL_I; end
          OP_VFMUL_VF:  begin ctrl_o.mode = XB_VX;    ctrl_o.op = LOP_MUL_F; end
          OP_VMACC_VX:  begin ctrl_o.mode = XB_VX;    ctrl_o.op = LOP_MAC_I; end
          default:      begin ctrl_o.mode = XB_VX;    ctrl_o.op = LOP_MAC_F; end
        endcase
      end
      S_IMG: begin
        ctrl_o.valid = 1'b1;
        ctrl_o.mode  = XB_IMAGE;
        ctrl_o.op    = LOP_MOVE;
        ctrl_o.vm    = 1'b0;
      end
      S_CAPT: begin
        if (cwait_q == '0) begin
          rd_o.en        = 1'b1;
          ctrl_o.capture = 1'b1;
        end
      end
      default: ;
    endcase
  end

  // ---- state machine ----
  logic [15:0] vtile;
  always_comb vtile = 16'(32'(csr_i.tm) * COLS);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= S_IDLE;
      ins_q   <= '0;
      k_q <= '0; steps_q <= '0; s_q <= '0; bub_q <= '0; vlim_q <= '0; cwait_q <= '0;
      rsp_valid_q <= 1'b0; rsp_data_q <= '0;
    end else begin
      rsp_valid_q <= 1'b0;
      unique case (state_q)
        S_IDLE: if (in_valid_i) begin
          ins_q <= in_instr_i;
          s_q   <= '0;
          k_q   <= '0;
          bub_q <= '0;
          unique case (in_instr_i.op)
            OP_TSSM, OP_TSSN, OP_TSSK, OP_CSRW, OP_VSETVL: begin
              rsp_valid_q <= 1'b1;
              rsp_data_q  <= csr_rd_i;
            end
            OP_TMUL, OP_TFMUL: begin
              vlim_q  <= vtile;
              steps_q <= 12'((32'(vtile) + NLANES - 1) / NLANES);
              state_q <= (csr_i.tm == '0 || csr_i.tk == '0) ? S_IDLE : S_MUL;
            end
            OP_TL: state_q <= S_LDMEM;
            OP_TSC: begin cwait_q <= '0; state_q <= S_CAPT; end
            OP_TVMASK: begin vlim_q <= 16'(VLEN / ELEN); steps_q <= 12'(SLOTS); state_q <= S_IMG; end
            default: begin  // vector operations
              vlim_q  <= vl_i;
              steps_q <= 12'((32'(vl_i) + NLANES - 1) / NLANES);
              state_q <= (vl_i == '0) ? S_IDLE : S_VEC;
            end
          endcase
        end
        S_MUL: begin
          if (bub_q != '0) begin
            bub_q <= bub_q - 1'b1;
            if (bub_q == 12'd1) begin
              if (k_q + 1'b1 == csr_i.tk) state_q <= S_DRAIN;
              else k_q <= k_q + 1'b1;
            end
          end else if (s_q + 1'b1 == steps_q) begin
            s_q <= '0;
            if (32'(steps_q) < PIPE) bub_q <= 12'(PIPE - 32'(steps_q));
            else if (k_q + 1'b1 == csr_i.tk) state_q <= S_DRAIN;
            else k_q <= k_q + 1'b1;
          end else s_q <= s_q + 1'b1;
        end
        S_VEC, S_IMG: begin
          if (s_q + 1'b1 == steps_q) begin s_q <= '0; state_q <= S_DRAIN; end
          else s_q <= s_q + 1'b1;
        end
        S_LDMEM: if (lsu_done_i) begin
          steps_q <= 12'(SLOTS);
          s_q     <= '0;
          state_q <= S_IMG;
        end
        S_CAPT: begin
          // read the SLOTS steps, then wait for the last capture (execute stage) and start the LSU
          if (cwait_q == '0) begin
            if (s_q + 1'b1 == 12'(SLOTS)) cwait_q <= 3'd1;
            s_q <= s_q + 1'b1;
          end else begin
            state_q <= S_STMEM;
          end
        end
        S_STMEM: if (lsu_done_i) state_q <= S_IDLE;
        default: state_q <= S_IDLE;  // S_DRAIN
      endcase
    end
  end

  initial begin
    assert (COLS <= NLANES && NLANES % COLS == 0) else $error("NLANES must be a multiple of RLEN/ELEN");
  end

endmodule
