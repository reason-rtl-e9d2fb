// bcp_fifo: the BCP implication queue.
//
// Boolean constraint propagation finds implications in several leaf nodes
// in the same cycle, but must assign them one at a time to keep the cause
// order needed for conflict analysis. This FIFO accepts up to M pushes per
// cycle (lowest lane first) and gives one entry per pop, first-in first-out.
// flush empties it in one cycle; the controller uses it when a conflict
// makes every queued implication invalid. push and pop in the same cycle are
// allowed; a flush wins over both.
//
// Interface: push_mask/push_data lanes, pop/head/empty, count, and
// free_slots (DEPTH - count). Pushing more than free_slots entries (counting a
// same-cycle pop) is an error, checked by an assertion; the controller that
// uses the FIFO reserves room before it lets work start. DEPTH is a power of
// two; the paper gives no depth. The BCP engine uses one entry per variable
// (a variable is queued at most once), so its FIFO can never overflow.
//
// Lint note: rst_n is also used synchronously, by the assertion's
// "disable iff"; this is simulation-only checking, not circuit logic.
module bcp_fifo #(
  parameter int W     = 9,
  parameter int M     = 8,
  parameter int DEPTH = 16
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   flush,
  input  logic [M-1:0]           push_mask,
  input  logic [M-1:0][W-1:0]    push_data,
  input  logic                   pop,
  output logic [W-1:0]           head,
  output logic                   empty,
  output logic [$clog2(DEPTH):0] count,
  output logic [$clog2(DEPTH):0] free_slots
);

  localparam int AW = $clog2(DEPTH);

  logic [W-1:0]  mem [DEPTH];
  logic [AW-1:0] rd_ptr, wr_ptr;
  logic [AW:0]   npush;
  logic          do_pop;

  assign empty      = (count == '0);
  assign free_slots = (AW+1)'(DEPTH) - count;
  assign head       = mem[rd_ptr];
  assign do_pop     = pop & ~empty;

  always_comb begin
    npush = '0;
    for (int i = 0; i < M; i++) npush = npush + (AW+1)'(push_mask[i]);
  end

  always_ff @(posedge clk) begin
    if (!flush) begin
      logic [AW-1:0] p;
      p = wr_ptr;
      for (int i = 0; i < M; i++) begin
        if (push_mask[i]) begin
          mem[p] <= push_data[i];
          p = p + 1'b1;
        end
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
      count  <= '0;
    end else if (flush) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
      count  <= '0;
    end else begin
      wr_ptr <= wr_ptr + npush[AW-1:0];
      if (do_pop) rd_ptr <= rd_ptr + 1'b1;
      count <= count + npush - (AW+1)'(do_pop);
    end
  end

  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
    !flush |-> ((count + npush - (AW+1)'(do_pop)) <= (AW+1)'(DEPTH)))
    else $error("bcp_fifo overflow: count=%0d push=%0d", count, npush);

endmodule
