// instr_offload_engine: decides where an issued instruction executes and makes its
// registers available there.
//
// It follows the three steps of the offloading mechanism. Step 1, instruction location,
// by decreasing priority: (a) an opcode in the far-bank opcode set (EXIT, BRA, TID and the
// global loads/stores, which need the base-die LSU) goes far-bank, and ld/st.shared go
// near-bank because the shared memory sits beside the NBUs; (b) otherwise the compiler hint
// decides; (c) otherwise the instruction goes near-bank only if every source register has a
// valid near-bank copy in the register track table, and far-bank if not. Step 2, register
// locations: for ld/st.global the address register is far-bank and the data register is
// near-bank; for ld/st.shared all registers are near-bank; otherwise all follow the
// instruction. Step 3: each source that is not valid where it is needed is moved, one at a
// time, by the far-bank register move engine; the table is updated after each move and, at
// dispatch, the destination is marked valid only at the side that will write it.
//
// Interface: in_valid/in_ready accepts {warp, instruction, SIMT mask}; mv_* drives the
// register move engine (one request, then wait for mv_done); dispatch goes to exactly one of
// three valid/ready outputs: far-bank execution, the LSU, or near-bank offload.
// Timing: 1 cycle to accept, 1 to decide, 1 per checked source slot plus the move time,
// then dispatch; an instruction that needs no move reaches dispatch 5 cycles after in_valid.
// A hinted or table-chosen near-bank instruction touching a register that has no near-bank
// slot (register number >= NBR) is sent far-bank instead: this is this design's own rule.
module instr_offload_engine
  import mpu_pkg::*;
#(
  parameter int unsigned NBR = mpu_pkg::NB_REGS
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  output logic              in_ready,
  input  logic [WARP_W-1:0] in_warp,
  input  instr_t            in_instr,
  input  mask_t             in_mask,
  // register track table lookup / update
  output logic [WARP_W-1:0] rtt_warp,
  output logic [2:0][4:0]   rtt_reg,
  input  logic [2:0]        rtt_fb,
  input  logic [2:0]        rtt_nb,
  output logic              rtt_mv_en,
  output logic [4:0]        rtt_mv_reg,
  output loc_e              rtt_mv_to,
  output logic              rtt_wr_en,
  output logic [4:0]        rtt_wr_reg,
  output loc_e              rtt_wr_loc,
  // register move engine
  output logic              mv_req,
  output logic [WARP_W-1:0] mv_warp,
  output logic [4:0]        mv_reg,
  output loc_e              mv_to,
  input  logic              mv_done,
  // dispatch
  output logic [WARP_W-1:0] d_warp,
  output instr_t            d_instr,
  output mask_t             d_mask,
  output logic              fb_valid,
  input  logic              fb_ready,
  output logic              lsu_valid,
  input  logic              lsu_ready,
  output logic              nb_valid,
  input  logic              nb_ready,
  // statistics
  output logic              st_offload,   // pulses when an instruction is sent near-bank
  output logic              st_move       // pulses when a register move completes
);
  typedef enum logic [2:0] { S_IDLE, S_DECIDE, S_MOVE, S_WAIT, S_DISP } state_e;
  state_e st;
  instr_t ins;
  logic [WARP_W-1:0] warp;
  mask_t  mask;
  loc_e   iloc;
  loc_e [2:0] need;
  logic [2:0] used;
  logic [1:0] slot;

  assign rtt_warp = warp;
  assign rtt_reg  = '{ins.dst, ins.src1, ins.src0};   // index 0 src0, 1 src1, 2 dst
  assign in_ready = (st == S_IDLE);
  assign d_warp = warp; assign d_instr = ins; assign d_mask = mask;

  // ---- steps 1 and 2, combinational on the latched instruction ----
  logic [2:0] u;
  loc_e   loc_c;
  loc_e [2:0] need_c;
  always_comb begin
    logic all_nb, fits_nb;
    u[0] = reads_src0(ins.op);
    u[1] = reads_src1(ins.op);
    u[2] = (ins.op == OP_MAD);              // accumulator is read too
    all_nb  = 1'b1;
    fits_nb = !(writes_dst(ins.op) && 32'(ins.dst) >= NBR);
    for (int i = 0; i < 3; i++) if (u[i]) begin
      all_nb  &= rtt_nb[i];
      fits_nb &= (32'(rtt_reg[i]) < NBR);
    end
    if (is_far_op(ins.op))             loc_c = LOC_FAR;
    else if (is_smem_op(ins.op))       loc_c = LOC_NEAR;
    else if (ins.hint != LOC_NONE)     loc_c = (ins.hint == LOC_NEAR && fits_nb) ? LOC_NEAR : LOC_FAR;
    else                               loc_c = (all_nb && fits_nb) ? LOC_NEAR : LOC_FAR;
    for (int i = 0; i < 3; i++) need_c[i] = loc_c;
    if (ins.op inside {OP_LDG, OP_STG}) begin
      need_c[0] = LOC_FAR;     // address register: LSU
      need_c[1] = LOC_NEAR;    // store data register
    end
  end

  // current move slot
  logic need_move;
  assign need_move = used[slot] &&
                     ((need[slot] == LOC_FAR)  ? !rtt_fb[slot] :
                      (need[slot] == LOC_NEAR) ? !rtt_nb[slot] : 1'b0);
  assign mv_warp = warp;
  assign mv_reg  = rtt_reg[slot];
  assign mv_to   = need[slot];
  assign mv_req  = (st == S_MOVE) && need_move;

  assign rtt_mv_en  = (st == S_WAIT) && mv_done;
  assign rtt_mv_reg = rtt_reg[slot];
  assign rtt_mv_to  = need[slot];

  logic fire;
  assign fb_valid  = (st == S_DISP) && iloc == LOC_FAR && !(ins.op inside {OP_LDG, OP_STG});
  assign lsu_valid = (st == S_DISP) && (ins.op inside {OP_LDG, OP_STG});
  assign nb_valid  = (st == S_DISP) && iloc == LOC_NEAR;
  assign fire      = (fb_valid && fb_ready) || (lsu_valid && lsu_ready) || (nb_valid && nb_ready);

  assign rtt_wr_en  = fire && writes_dst(ins.op);
  assign rtt_wr_reg = ins.dst;
  assign rtt_wr_loc = (ins.op == OP_LDG) ? LOC_NEAR : iloc;
  assign st_offload = fire && nb_valid;
  assign st_move    = rtt_mv_en;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      st <= S_IDLE; ins <= '0; warp <= '0; mask <= '0; iloc <= LOC_NONE;
      need <= '0; used <= '0; slot <= '0;
    end else begin
      unique case (st)
        S_IDLE: if (in_valid) begin
          ins <= in_instr; warp <= in_warp; mask <= in_mask; st <= S_DECIDE;
        end
        S_DECIDE: begin
          iloc <= loc_c; need <= need_c; used <= u; slot <= '0; st <= S_MOVE;
        end
        S_MOVE: begin
          if (need_move) st <= S_WAIT;
          else if (slot == 2'd2) st <= S_DISP;
          else slot <= slot + 2'd1;
        end
        S_WAIT: if (mv_done) begin
          if (slot == 2'd2) st <= S_DISP;
          else begin slot <= slot + 2'd1; st <= S_MOVE; end
        end
        S_DISP: if (fire) st <= S_IDLE;
        default: st <= S_IDLE;
      endcase
    end

  assert property (@(posedge clk) disable iff (!rst_n) $onehot0({fb_valid, lsu_valid, nb_valid}));
endmodule
