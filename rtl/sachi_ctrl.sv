// sachi_ctrl: the sequencer of the SACHI Ising machine. It executes one decoded
// command at a time and reports its end with a one-cycle done pulse.
//
//   OP_DRAM_WRITE       forwarded to the DRAM side (dram_wr pulse), done next cycle
//   OP_DRAM_TO_STORAGE  one packet (the instruction's data) written to storage
//                       address src1: below NT a tuple row, from NT on an adjacency
//                       row (the adjacency data is a region of the storage array)
//   OP_STORAGE_TO_COMP  tuples src1 .. src1+src2-1 copied into the compute tiles, one
//                       per cycle through storage read port A; tuple t goes to tile
//                       t mod L, row (t div L) mod ROWS, so neighbouring tuples land in
//                       different tiles and are computed in the same cycle
//   OP_XNORM            one Hamiltonian sweep over tuples src1 .. src1+src2-1: each
//                       cycle one row is activated in all L tiles at once (the paper's
//                       mixed-stationary row decode, RWL(s)=sigma_i, RWL(s+n)=~sigma_i);
//                       the results, 4 cycles later, go to the spin-update unit. The
//                       sweep stalls while that unit's FIFO is almost full, and ends
//                       when the pipelines and the update unit are empty. iter_num
//                       (iterNum of the annealer, 1 after reset) then increments and
//                       flips reports how many spins changed.
// The prefetch counter is loaded with the sweep's row count and stepped per row.
// res_in_range marks, in the result cycle, the lanes whose tuples belong to the sweep
// (the others of a partly covered row group carry stale rows and are ignored).
// Command semantics beyond the paper's opcode table (operand use, the fill address
// map, the stall) are this design's.
module sachi_ctrl
  import sachi_pkg::*;
#(
  parameter int unsigned L    = NUM_TILES,
  parameter int unsigned ROWS = TILE_ROWS,
  parameter int unsigned N    = NBR,
  parameter int unsigned R    = IC_BITS,
  parameter int unsigned HW   = H_W,
  parameter int unsigned PW   = PAR_W,
  localparam int unsigned NT  = L * ROWS,
  localparam int unsigned TW  = (NT > 1) ? $clog2(NT) : 1,
  localparam int unsigned RAW = (ROWS > 1) ? $clog2(ROWS) : 1,
  localparam int unsigned RW  = N * (R + 1),
  localparam int unsigned TPW = RW + HW + 1,
  localparam int unsigned PIPE = 4
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             cmd_valid,
  input  sachi_cmd_t       cmd,
  output logic             busy,
  output logic             done,
  output logic [4:0]       done_dest,
  output logic [31:0]      flips,
  output logic [PW-1:0]    iter_num,
  // DRAM write forwarding
  output logic             dram_wr,
  // fill (DRAM to storage)
  output logic             fill_tuple_we,
  output logic             fill_adj_we,
  output logic [TW-1:0]    fill_addr,
  // storage read port A (transfer)
  output logic             st_re,
  output logic [TW-1:0]    st_raddr,
  input  logic [TPW-1:0]   st_rdata,
  // tile load
  output logic [L-1:0]     tile_we,
  output logic [RAW-1:0]   tile_waddr,
  output logic [RW-1:0]    tile_wrow,
  output logic             tile_wsigma,
  output logic [HW-1:0]    tile_wh,
  // tile compute
  output logic             act,
  output logic [RAW-1:0]   arow,
  input  logic [L-1:0]     res_valid,
  input  logic [L-1:0]     res_sigma_old,
  input  logic [L-1:0]     res_sigma_new,
  output logic [L-1:0]     res_in_range,     // result lanes that belong to the sweep
  // spin-update unit
  output logic             upd_push,
  output logic [TW-1:0]    upd_base,
  output logic [L-1:0]     upd_lane_valid,
  output logic [L-1:0]     upd_sigma,
  input  logic             upd_almost_full,
  input  logic             upd_busy,
  // prefetch counter
  output logic             pf_load,
  output logic [15:0]      pf_rows,
  output logic             pf_step,
  // event counters
  output logic [31:0]      stall_cycles
);

  typedef enum logic [2:0] {C_IDLE, C_XFER, C_XNORM, C_DRAIN, C_DONE} cstate_e;
  cstate_e state;

  logic [TW:0]   t_cur, t_end;           // tuple range [t_cur, t_end)
  logic [TW:0]   r_cur, r_last;          // row group range
  logic [4:0]    dest;
  logic          x_v;                    // transfer read in flight
  logic [TW-1:0] x_t;
  logic [PIPE-1:0]     p_v;              // act issued PIPE..1 cycles ago
  logic [L-1:0]        p_mask [PIPE];
  logic [TW-1:0]       p_base [PIPE];
  logic [3:0]          drain_cnt;

  assign busy = (state != C_IDLE);

  // lanes of row group r_cur whose tuples are inside [t_cur, t_end)
  logic [L-1:0] lane_in;
  logic [TW:0]  rbase;
  always_comb begin
    rbase = (TW+1)'(r_cur * L);
    for (int i = 0; i < L; i++)
      lane_in[i] = ((rbase + (TW+1)'(i)) >= t_cur) && ((rbase + (TW+1)'(i)) < t_end);
  end

  logic issue;
  assign issue = (state == C_XNORM) && !upd_almost_full;

  assign act      = issue;
  assign arow     = RAW'(r_cur % (TW+1)'(ROWS));
  assign pf_step  = issue;

  // transfer
  assign st_re    = (state == C_XFER) && (t_cur < t_end);
  assign st_raddr = TW'(t_cur);

  always_comb begin
    tile_we     = '0;
    tile_waddr  = RAW'((x_t / TW'(L)) % TW'(ROWS));
    tile_wrow   = st_rdata[RW-1:0];
    tile_wh     = st_rdata[RW +: HW];
    tile_wsigma = st_rdata[RW + HW];
    if (x_v) tile_we[int'(x_t) % int'(L)] = 1'b1;
  end

  // results -> update unit (all lanes of a row group finish in the same cycle)
  logic [L-1:0] changed;
  always_comb begin
    changed        = res_valid & p_mask[PIPE-1] & (res_sigma_old ^ res_sigma_new);
    upd_push       = p_v[PIPE-1] && (changed != '0);
    upd_base       = p_base[PIPE-1];
    upd_lane_valid = changed;
    upd_sigma      = res_sigma_new;
    res_in_range   = p_v[PIPE-1] ? p_mask[PIPE-1] : '0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state        <= C_IDLE;
      t_cur        <= '0;
      t_end        <= '0;
      r_cur        <= '0;
      r_last       <= '0;
      dest         <= '0;
      x_v          <= 1'b0;
      x_t          <= '0;
      p_v          <= '0;
      drain_cnt    <= '0;
      done         <= 1'b0;
      done_dest    <= '0;
      flips        <= '0;
      iter_num     <= PW'(1);
      dram_wr      <= 1'b0;
      fill_tuple_we <= 1'b0;
      fill_adj_we  <= 1'b0;
      fill_addr    <= '0;
      pf_load      <= 1'b0;
      pf_rows      <= '0;
      stall_cycles <= '0;
    end else begin
      done          <= 1'b0;
      dram_wr       <= 1'b0;
      fill_tuple_we <= 1'b0;
      fill_adj_we   <= 1'b0;
      pf_load       <= 1'b0;
      x_v           <= st_re;
      x_t           <= st_raddr;
      p_v           <= {p_v[PIPE-2:0], issue};
      if (upd_push) flips <= flips + 32'($countones(changed));
      unique case (state)
        C_IDLE: if (cmd_valid) begin
          dest  <= cmd.dest;
          t_cur <= (TW+1)'(cmd.src1);
          t_end <= (TW+1)'(cmd.src1 + cmd.src2);
          r_cur <= (TW+1)'(cmd.src1 / L);
          r_last <= (TW+1)'((cmd.src1 + cmd.src2 - 1) / L);
          unique case (cmd.op)
            OP_DRAM_WRITE: begin
              dram_wr <= 1'b1;
              state   <= C_DONE;
            end
            OP_DRAM_TO_STORAGE: begin
              if (cmd.src1 < NT) begin
                fill_tuple_we <= 1'b1;
                fill_addr     <= TW'(cmd.src1);
              end else begin
                fill_adj_we   <= 1'b1;
                fill_addr     <= TW'(cmd.src1 - NT);
              end
              state <= C_DONE;
            end
            OP_STORAGE_TO_COMP: state <= (cmd.src2 == 0) ? C_DONE : C_XFER;
            OP_XNORM: begin
              flips   <= '0;
              pf_load <= 1'b1;
              pf_rows <= 16'((cmd.src1 + cmd.src2 - 1) / L - cmd.src1 / L + 1);
              state   <= (cmd.src2 == 0) ? C_DONE : C_XNORM;
            end
            default: state <= C_DONE;   // illegal: report done, do nothing
          endcase
        end
        C_XFER: begin
          if (st_re) t_cur <= t_cur + 1'b1;
          else if (!x_v) state <= C_DONE;
        end
        C_XNORM: begin
          if (upd_almost_full) stall_cycles <= stall_cycles + 1;
          if (issue) begin
            r_cur <= r_cur + 1'b1;
            if (r_cur == r_last) begin
              state     <= C_DRAIN;
              drain_cnt <= 4'(PIPE + 1);
            end
          end
        end
        C_DRAIN: begin
          if (drain_cnt != 0) drain_cnt <= drain_cnt - 1'b1;
          else if (!upd_busy) begin
            iter_num <= iter_num + 1'b1;
            state    <= C_DONE;
          end
        end
        C_DONE: begin
          done      <= 1'b1;
          done_dest <= dest;
          state     <= C_IDLE;
        end
        default: state <= C_IDLE;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    p_mask[0] <= lane_in;
    p_base[0] <= TW'(rbase);
    for (int i = 1; i < PIPE; i++) begin
      p_mask[i] <= p_mask[i-1];
      p_base[i] <= p_base[i-1];
    end
  end

endmodule
