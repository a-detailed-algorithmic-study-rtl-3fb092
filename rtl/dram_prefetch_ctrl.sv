// dram_prefetch_ctrl: the prefetch counter SACHI adds to the DRAM controller.
//
// When the Ising graph does not fit on chip, the compute array has to be refilled
// from DRAM round after round. Because the compute array is swept top to bottom, one
// row per cycle, the point at which the next round's data is needed is known in
// advance. The counter is loaded with the number of rows of the current round
// (load/rows), decremented on every row activation (row_step), and when the count of
// rows still to be accessed reaches the threshold (chosen to cover DRAM-to-storage
// plus storage-to-compute latency) a single-cycle prefetch_req is issued, provided
// more data is waiting in DRAM (more_pending). At most one request is made per round;
// req_count counts the requests issued since reset.
//
// The paper gives the counter and the threshold rule; the load/step interface, the
// once-per-round rule and the "reaches" test (remaining == threshold after a step, or
// at load when the round is already no longer than the threshold) are this design's.
module dram_prefetch_ctrl #(
  parameter int unsigned CW = 16
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          load,          // start of a round
  input  logic [CW-1:0] rows,          // rows to access in this round
  input  logic          row_step,      // one row accessed
  input  logic [CW-1:0] threshold,
  input  logic          more_pending,  // more spin+IC packets wait in DRAM
  output logic [CW-1:0] remaining,
  output logic          prefetch_req,
  output logic [15:0]   req_count
);

  logic issued;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      remaining    <= '0;
      issued       <= 1'b0;
      prefetch_req <= 1'b0;
      req_count    <= '0;
    end else begin
      prefetch_req <= 1'b0;
      if (load) begin
        remaining <= rows;
        issued    <= 1'b0;
        if (rows <= threshold && more_pending) begin
          prefetch_req <= 1'b1;
          issued       <= 1'b1;
          req_count    <= req_count + 1'b1;
        end
      end else if (row_step && remaining != '0) begin
        remaining <= remaining - 1'b1;
        if (!issued && more_pending && (remaining - 1'b1) == threshold) begin
          prefetch_req <= 1'b1;
          issued       <= 1'b1;
          req_count    <= req_count + 1'b1;
        end
      end
    end
  end

endmodule
