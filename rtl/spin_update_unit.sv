// spin_update_unit: writes the spins produced by the compute tiles back into the
// storage array, using the adjacency information to reach every copy of a spin.
//
// Because of tuple replication ("tuple-rep") a spin sigma_i lives in its own tuple
// (as the target spin) and in the tuple of every neighbour (as a sigma_j slot). The
// compute array keeps the old values for the rest of the sweep; the updates go to the
// storage array, so the next storage-to-compute transfer carries them.
//
// Input: one entry per compute cycle with the results of all L tiles, i.e. the tuples
// base..base+L-1; lane_valid marks the lanes whose spin changed (unchanged spins need
// no write). Entries wait in a FIFO of FD entries; almost_full is raised while fewer
// than MARGIN entries are free, so a producer with up to MARGIN-1 entries in flight
// can stop in time.
// Per changed spin t: cycle 1 writes the own-spin bit of tuple t and reads adjacency
// row t; cycle 2 takes the adjacency entries {valid, tuple, slot}; then one masked
// one-bit write per valid entry into tuple.slot's sigma_j bit. Cost 2 + degree
// cycles per changed spin; busy is low once the FIFO and the walk are empty.
// The paper specifies reading the adjacency data and updating only the relevant
// tuples; the FIFO, the entry format and the one-write-per-cycle walk are this
// design's.
module spin_update_unit
  import sachi_pkg::*;
#(
  parameter int unsigned L      = NUM_TILES,
  parameter int unsigned N      = NBR,
  parameter int unsigned R      = IC_BITS,
  parameter int unsigned HW     = H_W,
  parameter int unsigned NT     = NUM_TUPLES,
  parameter int unsigned FD     = 8,
  parameter int unsigned MARGIN = 5,
  localparam int unsigned TW    = (NT > 1) ? $clog2(NT) : 1,
  localparam int unsigned SW    = (N > 1) ? $clog2(N) : 1,
  localparam int unsigned EW    = 1 + TW + SW,
  localparam int unsigned RW    = N * (R + 1),
  localparam int unsigned TPW   = RW + HW + 1,
  localparam int unsigned LW    = (L > 1) ? $clog2(L) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  // results of one compute cycle
  input  logic              push_valid,
  input  logic [TW-1:0]     push_base,
  input  logic [L-1:0]      push_lane_valid,
  input  logic [L-1:0]      push_sigma,
  output logic              almost_full,
  // storage array: tuple write
  output logic              st_we,
  output logic [TW-1:0]     st_waddr,
  output logic [TPW-1:0]    st_wmask,
  output logic [TPW-1:0]    st_wdata,
  // storage array: adjacency read (1-cycle latency, data held)
  output logic              adj_re,
  output logic [TW-1:0]     adj_addr,
  input  logic [N*EW-1:0]   adj_rdata,
  // status
  output logic              busy,
  output logic [31:0]       spins_written
);

  typedef struct packed {
    logic [TW-1:0] base;
    logic [L-1:0]  lv;
    logic [L-1:0]  sg;
  } entry_t;

  localparam int unsigned FAW = (FD > 1) ? $clog2(FD) : 1;

  entry_t                fifo [FD];
  logic [FAW-1:0]        head, tail;
  logic [$clog2(FD+1)-1:0] count;
  logic                  pop;

  typedef enum logic [1:0] {S_IDLE, S_LANE, S_ADJ, S_SCAN} state_e;
  state_e state;

  entry_t          cur;
  logic [L-1:0]    lanes_left;
  logic            cur_sigma;
  logic [N-1:0]    pend;

  // ---- lowest pending lane / adjacency entry ----
  logic             lane_found;
  logic [LW-1:0]    lane_idx;
  logic             ent_found;
  logic [SW-1:0]    ent_idx;
  logic [EW-1:0]    ent;

  always_comb begin
    lane_found = 1'b0;
    lane_idx   = '0;
    for (int i = L - 1; i >= 0; i--)
      if (lanes_left[i]) begin
        lane_found = 1'b1;
        lane_idx   = LW'(i);
      end
    ent_found = 1'b0;
    ent_idx   = '0;
    for (int i = N - 1; i >= 0; i--)
      if (pend[i]) begin
        ent_found = 1'b1;
        ent_idx   = SW'(i);
      end
    ent = adj_rdata[ent_idx*EW +: EW];
  end

  logic [TW-1:0] lane_tuple;
  assign lane_tuple = cur.base + TW'(lane_idx);

  // ---- FIFO ----
  assign pop         = (state == S_IDLE) && (count != '0);
  assign almost_full = (32'(count) + MARGIN > FD);
  assign busy        = (state != S_IDLE) || (count != '0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      head  <= '0;
      tail  <= '0;
      count <= '0;
    end else begin
      if (push_valid) begin
        fifo[tail] <= '{base: push_base, lv: push_lane_valid, sg: push_sigma};
        tail       <= (tail == FAW'(FD - 1)) ? '0 : tail + 1'b1;
      end
      if (pop)
        head <= (head == FAW'(FD - 1)) ? '0 : head + 1'b1;
      count <= count + $bits(count)'(push_valid) - $bits(count)'(pop);
    end
  end

  // ---- walk ----
  always_comb begin
    st_we    = 1'b0;
    st_waddr = '0;
    st_wmask = '0;
    st_wdata = '0;
    adj_re   = 1'b0;
    adj_addr = lane_tuple;
    if (state == S_LANE && lane_found) begin
      st_we    = 1'b1;
      st_waddr = lane_tuple;
      st_wmask[RW + HW] = 1'b1;
      st_wdata[RW + HW] = cur.sg[lane_idx];
      adj_re   = 1'b1;
    end else if (state == S_SCAN && ent_found) begin
      st_we    = 1'b1;
      st_waddr = ent[SW +: TW];
      st_wmask[32'(ent[SW-1:0]) * (R + 1) + R] = 1'b1;
      st_wdata[32'(ent[SW-1:0]) * (R + 1) + R] = cur_sigma;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state         <= S_IDLE;
      lanes_left    <= '0;
      pend          <= '0;
      cur           <= '0;
      cur_sigma     <= 1'b0;
      spins_written <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (pop) begin
          cur        <= fifo[head];
          lanes_left <= fifo[head].lv;
          state      <= S_LANE;
        end
        S_LANE: begin
          if (lane_found) begin
            cur_sigma             <= cur.sg[lane_idx];
            lanes_left[lane_idx]  <= 1'b0;
            spins_written         <= spins_written + 1;
            state                 <= S_ADJ;
          end else begin
            state <= S_IDLE;
          end
        end
        S_ADJ: begin
          for (int i = 0; i < N; i++)
            pend[i] <= adj_rdata[i*EW + EW - 1];
          state <= S_SCAN;
        end
        S_SCAN: begin
          if (ent_found) pend[ent_idx] <= 1'b0;
          else           state         <= S_LANE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

`ifndef SYNTHESIS
  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
    push_valid |-> (count < ($clog2(FD+1))'(FD)))
    else $error("spin_update_unit: push into a full FIFO");
`endif

endmodule
