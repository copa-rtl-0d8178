// copa_queue: one CoPA metadata queue (Q1 or Q2).
//
// Holds one entry per tracked PJA page. The paper stores the page address in
// each entry; this design also keeps the page's DRAM buffer slot and PJA slot
// next to it so that a refresh can address both memories without a second
// lookup. The queue is kept dense in a RAM of DEPTH entries: a push appends at
// position count, and invalidating the entry at position p moves the last entry
// into p ("swap-remove") and shrinks the queue by one, so the count never
// exceeds the number of PJA pages and a refresh walks only live entries. Order
// inside a queue carries no meaning in CoPA (a whole queue is refreshed at
// once), which is what allows the swap. clear_i empties the queue after it has
// been walked. The owner (copa_queue_manager) keeps the position of each page.
//
// Interface and timing: all operations take effect on the next clock edge.
// push_pos_o is the position the pushed entry lands in. For a remove,
// moved_o/moved_data_o show combinationally which entry is moved into
// remove_pos_i (none when the removed entry was the last one). rd_data_o is an
// asynchronous read of rd_pos_i. Only one of push, remove and write may be
// requested in a cycle.
//
// The assertions at the end are disabled while rst_ni is low; lint tools note
// that rst_ni is then both an asynchronous reset and read synchronously, which
// is intended and affects only the checks.
module copa_queue #(
  parameter int unsigned DEPTH   = copa_pkg::CFG_PJA_PAGES,
  parameter int unsigned ENTRY_W = 70,
  localparam int unsigned POS_W  = (DEPTH > 1) ? $clog2(DEPTH) : 1,
  localparam int unsigned CNT_W  = $clog2(DEPTH + 1)
) (
  input  logic               clk_i,
  input  logic               rst_ni,
  // append
  input  logic               push_i,
  input  logic [ENTRY_W-1:0] push_data_i,
  output logic [POS_W-1:0]   push_pos_o,
  // overwrite in place
  input  logic               wr_i,
  input  logic [POS_W-1:0]   wr_pos_i,
  input  logic [ENTRY_W-1:0] wr_data_i,
  // invalidate
  input  logic               remove_i,
  input  logic [POS_W-1:0]   remove_pos_i,
  output logic               moved_o,
  output logic [ENTRY_W-1:0] moved_data_o,
  // read port for the refresh walk
  input  logic [POS_W-1:0]   rd_pos_i,
  output logic [ENTRY_W-1:0] rd_data_o,
  // empty the queue
  input  logic               clear_i,
  output logic [CNT_W-1:0]   count_o
);

  logic [ENTRY_W-1:0] mem [DEPTH];
  logic [CNT_W-1:0]   count_q;
  logic [POS_W-1:0]   last_pos;

  assign last_pos     = POS_W'(count_q - CNT_W'(1));
  assign count_o      = count_q;
  assign push_pos_o   = POS_W'(count_q);
  assign rd_data_o    = mem[rd_pos_i];
  assign moved_data_o = mem[last_pos];
  assign moved_o      = remove_i && (remove_pos_i != last_pos);

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      count_q <= '0;
    end else if (clear_i) begin
      count_q <= '0;
    end else if (push_i) begin
      count_q <= count_q + CNT_W'(1);
    end else if (remove_i) begin
      count_q <= count_q - CNT_W'(1);
    end
  end

  // Entry RAM: no reset, entries at or above count_q are never read as live.
  always_ff @(posedge clk_i) begin
    if (push_i) begin
      mem[POS_W'(count_q)] <= push_data_i;
    end else if (wr_i) begin
      mem[wr_pos_i] <= wr_data_i;
    end else if (remove_i && (remove_pos_i != last_pos)) begin
      mem[remove_pos_i] <= mem[last_pos];
    end
  end

  // One operation per cycle, pushes never overflow, removes hit live entries.
  a_one_op: assert property (@(posedge clk_i) disable iff (!rst_ni)
    $onehot0({push_i, wr_i, remove_i}));
  a_no_overflow: assert property (@(posedge clk_i) disable iff (!rst_ni)
    push_i |-> (count_q < CNT_W'(DEPTH)));
  a_remove_live: assert property (@(posedge clk_i) disable iff (!rst_ni)
    remove_i |-> (CNT_W'(remove_pos_i) < count_q));

endmodule
