// fetta_controller: global controller of the accelerator.
//
// The host writes one instruction (fetta_pkg::instr_t) at a time with a
// valid/ready handshake. The decoder stores it; a finite-state machine with
// loop counters (tile, inner) then drives everything else:
//
//   OP_CONTRACT, WS / IS (stationary IB):
//     PRELOAD  4 cycles: read IB words 0..3 of tile 0 and shift them into
//              the CE shadow registers (ib_load); the 4th word also swaps.
//     COMPUTE  per tile max(n_inner, 7) cycles. Cycles 0..n_inner-1 read an
//              IA word and issue it (ia_valid); cycles 3..6 preload the IB
//              words of the next tile (double buffering); the last cycle of
//              the tile swaps. Cycles without an IA word are stalls (only
//              when n_inner < 7) and are reported on 'stall'.
//   OP_CONTRACT, OS:
//     COMPUTE  per tile max(n_inner, 4) cycles; cycles 0..n_inner-1 read an
//              IA and an IB word each and mark the first and last step.
//   then FLUSH until the address generator has seen every psum word of the
//   instruction and the accumulation unit has written it back.
//   OP_VECTOR: n_inner rows; row i of the accumulation unit (acc_base + i)
//     and of the unified memory (b_base + i) are read, passed through the
//     vector unit and written to unified-memory row dst_base + i or sent to
//     the DRAM port.
//   OP_SWAP: flips the ping-pong halves of the unified memory.
//
// Network control, after the controller description: the IA operand's bank
// enable mask and start bank index are rotated by bank_stride at every tile
// boundary when rotate_ia is set (Rotate_bit(bank_en, bank_stride);
// bank_idx += bank_stride), and the distribution network applies
// sel_vec[i] XOR bank_idx[i] at its butterfly level i. Memory reads take one
// cycle, so the CE control word and the network bank index are registered
// here and reach the TCU together with the bank data. The instruction format,
// the state machine and the cycle budgets are this design's choices.
module fetta_controller
  import fetta_pkg::*;
#(
  parameter int unsigned NB = NUM_BANKS
) (
  input  logic              clk,
  input  logic              rst_n,
  // host
  input  logic              instr_valid,
  output logic              instr_ready,
  input  instr_t            instr,
  output logic              busy,
  output logic              done,          // one-cycle pulse at the end of an instruction
  // current instruction and loop counters (address generator)
  output instr_t            ins,
  output logic [CNT_W-1:0]  tile,
  output logic [CNT_W-1:0]  inner,
  output logic [CNT_W-1:0]  ib_tile,
  output logic [CNT_W-1:0]  ib_k,
  input  logic [UM_AW-1:0]  ia_addr,
  input  logic [UM_AW-1:0]  ib_addr,
  output logic              wstart,
  input  logic              wdone,
  // unified memory, compute side
  output logic [NB-1:0]            um_re,
  output logic [NB-1:0][UM_AW-1:0] um_raddr,
  output logic [NB-1:0]            um_we,
  output logic [UM_AW-1:0]         um_waddr,
  output logic                     pp_sel,
  // TCU (data time, one cycle after the read)
  output ce_ctrl_t                 ce_ctrl,
  output logic [LOG_BANKS-1:0]     ia_bank_idx,
  // accumulation unit read-out
  output logic                     acc_rd_en,
  output logic [ACC_AW-1:0]        acc_rd_addr,
  // vector unit
  output logic                     vu_valid,
  output logic                     dram_out_valid,
  output logic [UM_AW-1:0]         dram_out_row,
  // status
  output logic                     stall,
  output logic [NB-1:0]            ia_bank_en    // current IA banks (after rotation)
);

  typedef enum logic [2:0] {S_IDLE, S_PRELOAD, S_COMPUTE, S_FLUSH, S_VEC, S_DONE} state_e;
  state_e state;

  logic [CNT_W-1:0] cyc;       // cycle within the current phase / tile
  logic [CNT_W-1:0] phase_len;
  logic [2:0]       flush_cnt;
  logic             os;
  logic [LOG_BANKS-1:0] ia_idx_q;

  assign os          = (ins.df == DF_OS);
  assign phase_len   = os ? ((ins.n_inner < CNT_W'(4)) ? CNT_W'(4) : ins.n_inner)
                          : ((ins.n_inner < CNT_W'(7)) ? CNT_W'(7) : ins.n_inner);
  assign instr_ready = (state == S_IDLE);
  assign busy        = (state != S_IDLE);

  // ---------------------------------------------------------- issue logic
  logic     ia_rd, ib_rd, vec_rd;
  ce_ctrl_t ctl_n;
  logic     last_tile, tile_end;

  assign last_tile = (tile == ins.n_tiles - 1'b1);
  assign tile_end  = (cyc == phase_len - 1'b1);

  always_comb begin
    ia_rd   = 1'b0;
    ib_rd   = 1'b0;
    vec_rd  = 1'b0;
    inner   = cyc;
    ib_tile = tile;
    ib_k    = '0;
    ctl_n   = '{df: ins.df, ib_dir: ins.ib_dir, default: 1'b0};
    stall   = 1'b0;
    unique case (state)
      S_PRELOAD: begin
        ib_rd         = 1'b1;
        ib_k          = cyc;
        ctl_n.ib_load = 1'b1;
        ctl_n.ib_swap = (cyc == CNT_W'(3));
      end
      S_COMPUTE: begin
        if (cyc < ins.n_inner) begin
          ia_rd          = 1'b1;
          ctl_n.ia_valid = 1'b1;
        end else begin
          stall = 1'b1;
        end
        if (os) begin
          ib_rd       = (cyc < ins.n_inner);
          ib_k        = cyc;
          ctl_n.first = (cyc == '0);
          ctl_n.last  = (cyc == ins.n_inner - 1'b1);
        end else begin
          if (!last_tile && cyc >= CNT_W'(3) && cyc < CNT_W'(7)) begin
            ib_rd         = 1'b1;
            ib_tile       = tile + 1'b1;
            ib_k          = cyc - CNT_W'(3);
            ctl_n.ib_load = 1'b1;
          end
          ctl_n.ib_swap = tile_end;
        end
      end
      S_VEC: vec_rd = (cyc < ins.n_inner);
      default: ;
    endcase
  end

  // bank read enables and addresses
  always_comb begin
    for (int b = 0; b < NB; b++) begin
      um_re[b]    = 1'b0;
      um_raddr[b] = '0;
      if (vec_rd) begin
        um_re[b]    = 1'b1;
        um_raddr[b] = UM_AW'(ins.b_base + cyc);
      end else if (ia_rd && ia_bank_en[b]) begin
        um_re[b]    = 1'b1;
        um_raddr[b] = ia_addr;
      end else if (ib_rd && ins.ib_bank_en[b]) begin
        um_re[b]    = 1'b1;
        um_raddr[b] = ib_addr;
      end
    end
  end

  assign acc_rd_en   = vec_rd;
  assign acc_rd_addr = ACC_AW'(ins.acc_base + cyc);

  // -------------------------------------------------------------- FSM
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      ins        <= '0;
      cyc        <= '0;
      tile       <= '0;
      flush_cnt  <= '0;
      pp_sel     <= 1'b0;
      ia_bank_en <= '0;
      ia_idx_q   <= '0;
      wstart     <= 1'b0;
    end else begin
      wstart <= 1'b0;
      unique case (state)
        S_IDLE: if (instr_valid) begin
          ins        <= instr;
          cyc        <= '0;
          tile       <= '0;
          ia_bank_en <= instr.ia_bank_en;
          ia_idx_q   <= instr.ia_bank_idx;
          wstart     <= 1'b1;
          unique case (instr.op)
            OP_CONTRACT: state <= (instr.df == DF_OS) ? S_COMPUTE : S_PRELOAD;
            OP_VECTOR:   state <= S_VEC;
            OP_SWAP:     begin pp_sel <= ~pp_sel; state <= S_DONE; end
            default:     state <= S_DONE;
          endcase
        end
        S_PRELOAD: begin
          cyc <= cyc + 1'b1;
          if (cyc == CNT_W'(3)) begin
            cyc   <= '0;
            state <= S_COMPUTE;
          end
        end
        S_COMPUTE: begin
          cyc <= cyc + 1'b1;
          if (tile_end) begin
            cyc  <= '0;
            tile <= tile + 1'b1;
            if (ins.rotate_ia) begin
              ia_bank_en <= (ia_bank_en << ins.bank_stride) |
                            (ia_bank_en >> (LOG_BANKS+1)'(NB - ins.bank_stride));
              ia_idx_q   <= ia_idx_q + ins.bank_stride;
            end
            if (last_tile) begin
              state     <= S_FLUSH;
              flush_cnt <= '0;
            end
          end
        end
        S_FLUSH: begin
          // wait for every psum word, then for the accumulation write-back
          if (wdone) flush_cnt <= flush_cnt + 1'b1;
          if (flush_cnt == 3'd2) state <= S_DONE;
        end
        S_VEC: begin
          cyc <= cyc + 1'b1;
          if (cyc == ins.n_inner + CNT_W'(1)) state <= S_DONE;
        end
        S_DONE: state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  assign done = (state == S_DONE);

  // ------------------------------------------------ data-time registers
  logic [CNT_W-1:0] vrow_d1, vrow_d2;
  logic             vrd_d1, vrd_d2;
  logic [LOG_BANKS-1:0] ia_idx_d;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      ce_ctrl  <= '0;
      ia_idx_d <= '0;
      vrd_d1   <= 1'b0;
      vrd_d2   <= 1'b0;
      vrow_d1  <= '0;
      vrow_d2  <= '0;
    end else begin
      ce_ctrl  <= ctl_n;
      ia_idx_d <= ia_idx_q;
      vrd_d1   <= vec_rd;
      vrd_d2   <= vrd_d1;
      vrow_d1  <= cyc;
      vrow_d2  <= vrow_d1;
    end
  end
  assign ia_bank_idx = ia_idx_d;

  // vector unit input at d1, its result at d2
  assign vu_valid       = vrd_d1;
  assign um_we          = (vrd_d2 && !ins.to_dram) ? '1 : '0;
  assign um_waddr       = UM_AW'(ins.dst_base + vrow_d2);
  assign dram_out_valid = vrd_d2 && ins.to_dram;
  assign dram_out_row   = UM_AW'(vrow_d2);

  // ------------------------------------------------------- assertions
  // A contraction needs at least one tile and one inner step; OS tiles need
  // four steps to hide the drain of the previous tile.
  always_ff @(posedge clk) begin
    if (rst_n && state == S_IDLE && instr_valid && instr.op == OP_CONTRACT) begin
      assert (instr.n_tiles != '0 && instr.n_inner != '0)
        else $error("contraction with an empty loop");
    end
  end

endmodule
