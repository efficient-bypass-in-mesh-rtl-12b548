// damq_buffer: dynamically allocated multi-queue (DAMQ) input buffer.
//
// One pool of SLOTS flit slots is shared by NUM_VCS virtual channels. Each
// VC is a FIFO kept as a linked list through the pool: a per-slot next
// pointer, per-VC head and tail pointers and a per-VC count. A write takes
// the lowest-numbered free slot; a read frees the VC's head slot. One write
// and one read per cycle, to the same or to different VCs. The front flit
// of every VC is visible combinationally, so the switch allocator can look
// at all VC fronts at once.
//
// The buffer itself does not refuse writes: admission is decided upstream
// by credits (credit_tracker), which keep one private slot per VC and let
// the rest be shared. A write into a full pool is an error and is flagged
// by an assertion. Timing: a flit written in cycle t is at the VC front
// (if the VC was empty) in cycle t+1.
//
// The shared pool of 12 slots follows the evaluated configuration; the
// linked-list organisation is this design's choice, since only the name and
// function of the DAMQ are given.
module damq_buffer #(
  parameter int unsigned SLOTS   = 12,
  parameter int unsigned NUM_VCS = 2,
  parameter int unsigned W       = $bits(nebb_pkg::flit_t)
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         wr_valid,
  input  logic [$clog2(NUM_VCS)-1:0]   wr_vc,
  input  logic [W-1:0]                 wr_data,
  input  logic                         rd_valid,
  input  logic [$clog2(NUM_VCS)-1:0]   rd_vc,
  output logic [W-1:0]                 front [NUM_VCS],
  output logic [$clog2(SLOTS+1)-1:0]   count [NUM_VCS],
  output logic [$clog2(SLOTS+1)-1:0]   free_slots
);
  localparam int unsigned SW = $clog2(SLOTS);
  localparam int unsigned CW = $clog2(SLOTS+1);

  logic [W-1:0]  mem  [SLOTS];
  logic [SW-1:0] nxt  [SLOTS];
  logic [SW-1:0] hd   [NUM_VCS];
  logic [SW-1:0] tl   [NUM_VCS];
  logic [CW-1:0] cnt  [NUM_VCS];
  logic [SLOTS-1:0] free_map;

  logic [SW-1:0] alloc;
  logic          any_free;

  always_comb begin
    alloc    = '0;
    any_free = 1'b0;
    for (int i = SLOTS - 1; i >= 0; i--) begin
      if (free_map[i]) begin
        alloc    = SW'(i);
        any_free = 1'b1;
      end
    end
  end

  always_comb begin
    for (int v = 0; v < NUM_VCS; v++) begin
      front[v] = mem[hd[v]];
      count[v] = cnt[v];
    end
    free_slots = CW'($countones(free_map));
  end

  logic rd_ok, wr_ok;
  assign rd_ok = rd_valid && cnt[rd_vc] != '0;
  assign wr_ok = wr_valid && any_free;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      free_map <= '1;
      for (int v = 0; v < NUM_VCS; v++) begin
        hd[v]  <= '0;
        tl[v]  <= '0;
        cnt[v] <= '0;
      end
    end else begin
      if (rd_ok) begin
        free_map[hd[rd_vc]] <= 1'b1;
        hd[rd_vc]           <= nxt[hd[rd_vc]];
      end
      if (wr_ok) begin
        free_map[alloc] <= 1'b0;
        // the list is empty after this cycle's read: the new slot is the head
        if (cnt[wr_vc] == '0 || (rd_ok && rd_vc == wr_vc && cnt[wr_vc] == CW'(1)))
          hd[wr_vc] <= alloc;
        else
          nxt[tl[wr_vc]] <= alloc;
        tl[wr_vc] <= alloc;
      end
      for (int v = 0; v < NUM_VCS; v++) begin
        cnt[v] <= cnt[v] + CW'(wr_ok && wr_vc == $clog2(NUM_VCS)'(v))
                         - CW'(rd_ok && rd_vc == $clog2(NUM_VCS)'(v));
      end
    end
  end

  always_ff @(posedge clk) begin
    if (wr_ok) mem[alloc] <= wr_data;
  end

  // Credits upstream must never let the pool overflow, and nothing is read
  // from an empty VC.
  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n) wr_valid |-> any_free);
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) rd_valid |-> cnt[rd_vc] != '0);

endmodule
