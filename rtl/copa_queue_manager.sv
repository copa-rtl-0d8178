// copa_queue_manager: the CoPA Queue Manager with its two queues Q1 and Q2.
//
// It carries out the paper's Req_Management and the queue side of
// PJA_Refreshing. For every page written to the PJA (QM_INSERT) it drops the
// page's old entry from Q1 or Q2, if there is one, and appends the page to the
// Sleepy queue when DC=0 or to the Awake queue when DC=1; QI names the Sleepy
// queue (QI=0: Q1, QI=1: Q2), so relabelling the queues never copies them. For
// a dirty page that leaves the NVB-Buffer or the PJA (QM_INVALIDATE) it drops
// the page's entry. When the State_Counter asks for a refresh it walks the
// queue that was Sleepy and hands every page in it, through the refresh
// multiplexer of the overview figure, to the Distant Refreshing engine.
//
// A refreshed page has just been rewritten, so it is treated like a page
// written at that moment: it is re-inserted into the queue that is Sleepy after
// the State_Counter increment (the other queue), and the walked queue is then
// empty. This keeps every idle PJA page within three time-steps of its last
// write, the bound the paper states (T_idle < 3 T_time-step) and measures
// (14.95 min for 300 s steps). The paper's queue figure instead draws a
// refreshed page staying in its queue; read literally that would let a page
// wait four time-steps between refreshes, so this design follows the bound.
//
// A location table indexed by PJA slot records, for each tracked page, its
// queue and position; this replaces an associative search of the queues. The
// table is cleared by a sweep of PJA_PAGES cycles after reset (cmd_ready_o is
// low meanwhile).
//
// Interface and timing: commands use a valid/ready handshake and complete in
// the cycle they are accepted. During a refresh walk cmd_ready_o is low (the
// buffer manager stalls) and one page is offered per cycle on ref_* with a
// valid/ready handshake. A refresh request that arrives during a walk is kept
// and served after it.
//
// The assertions at the end are disabled while rst_ni is low; lint tools note
// that rst_ni is then both an asynchronous reset and read synchronously, which
// is intended and affects only the checks.
module copa_queue_manager
  import copa_pkg::*;
#(
  parameter int unsigned PAGE_ADDR_W = copa_pkg::CFG_PAGE_ADDR_W,
  parameter int unsigned BUF_PAGES   = copa_pkg::CFG_BUF_PAGES,
  parameter int unsigned PJA_PAGES   = copa_pkg::CFG_PJA_PAGES,
  localparam int unsigned BUF_W      = (BUF_PAGES > 1) ? $clog2(BUF_PAGES) : 1,
  localparam int unsigned PJA_W      = (PJA_PAGES > 1) ? $clog2(PJA_PAGES) : 1,
  localparam int unsigned CNT_W      = $clog2(PJA_PAGES + 1)
) (
  input  logic                   clk_i,
  input  logic                   rst_ni,
  // State_Counter
  input  logic                   qi_i,
  input  logic                   dc_i,
  input  logic                   refresh_i,
  input  qid_e                   refresh_q_i,
  // metadata commands from the buffer manager
  input  logic                   cmd_valid_i,
  output logic                   cmd_ready_o,
  input  qm_op_e                 cmd_op_i,
  input  logic [PAGE_ADDR_W-1:0] cmd_page_i,
  input  logic [BUF_W-1:0]       cmd_buf_slot_i,
  input  logic [PJA_W-1:0]       cmd_pja_slot_i,
  // pages to refresh, to the Distant Refreshing engine
  output logic                   ref_valid_o,
  input  logic                   ref_ready_i,
  output logic [PAGE_ADDR_W-1:0] ref_page_o,
  output logic [BUF_W-1:0]       ref_buf_slot_o,
  output logic [PJA_W-1:0]       ref_pja_slot_o,
  // status
  output logic                   busy_o,       // refresh walk in progress
  output logic [CNT_W-1:0]       q1_count_o,
  output logic [CNT_W-1:0]       q2_count_o
);

  typedef struct packed {
    logic [PAGE_ADDR_W-1:0] page;
    logic [BUF_W-1:0]       buf_slot;
    logic [PJA_W-1:0]       pja_slot;
  } entry_t;
  localparam int unsigned ENTRY_W = $bits(entry_t);
  localparam int unsigned POS_W   = (PJA_PAGES > 1) ? $clog2(PJA_PAGES) : 1;

  typedef enum logic [1:0] {S_INIT, S_IDLE, S_WALK} state_e;

  state_e           state_q;
  logic [PJA_W-1:0] init_idx_q;
  logic [POS_W:0]   walk_idx_q;
  qid_e             walk_q_q;
  logic             pend_q;
  qid_e             pend_q_id_q;

  // location table, one row per PJA slot
  logic             loc_v   [PJA_PAGES];
  qid_e             loc_q   [PJA_PAGES];
  logic [POS_W-1:0] loc_pos [PJA_PAGES];

  // queue ports
  logic             q_push   [2];
  entry_t           q_push_d [2];
  logic [POS_W-1:0] q_push_pos [2];
  logic             q_wr     [2];
  logic [POS_W-1:0] q_wr_pos [2];
  logic             q_rm     [2];
  logic [POS_W-1:0] q_rm_pos [2];
  logic             q_moved  [2];
  logic [ENTRY_W-1:0] q_moved_d [2];
  logic [POS_W-1:0] q_rd_pos [2];
  logic [ENTRY_W-1:0] q_rd_d [2];
  logic             q_clr    [2];
  logic [CNT_W-1:0] q_cnt    [2];

  for (genvar g = 0; g < 2; g++) begin : g_q
    copa_queue #(.DEPTH(PJA_PAGES), .ENTRY_W(ENTRY_W)) u_q (
      .clk_i        (clk_i),
      .rst_ni       (rst_ni),
      .push_i       (q_push[g]),
      .push_data_i  (q_push_d[g]),
      .push_pos_o   (q_push_pos[g]),
      .wr_i         (q_wr[g]),
      .wr_pos_i     (q_wr_pos[g]),
      .wr_data_i    (q_push_d[g]),
      .remove_i     (q_rm[g]),
      .remove_pos_i (q_rm_pos[g]),
      .moved_o      (q_moved[g]),
      .moved_data_o (q_moved_d[g]),
      .rd_pos_i     (q_rd_pos[g]),
      .rd_data_o    (q_rd_d[g]),
      .clear_i      (q_clr[g]),
      .count_o      (q_cnt[g])
    );
  end

  assign q1_count_o = q_cnt[0];
  assign q2_count_o = q_cnt[1];
  assign busy_o     = (state_q == S_WALK);

  // ---------------------------------------------------------------------
  // Command decode
  // ---------------------------------------------------------------------
  entry_t cmd_e;
  qid_e   tgt_q;        // queue a written page goes to
  logic   cmd_fire;
  logic   old_v;
  qid_e   old_q;
  logic [POS_W-1:0] old_pos;
  logic   same_q;
  logic [PJA_W-1:0] moved_pja;  // PJA slot of the entry moved into a hole

  assign cmd_e       = '{page: cmd_page_i, buf_slot: cmd_buf_slot_i, pja_slot: cmd_pja_slot_i};
  // DC=0: Sleepy queue (named by QI); DC=1: Awake queue (the other one).
  assign tgt_q       = qid_e'(qi_i ^ dc_i);
  assign cmd_ready_o = (state_q == S_IDLE) && !pend_q;
  assign cmd_fire    = cmd_valid_i && cmd_ready_o;
  assign old_v       = loc_v[cmd_pja_slot_i];
  assign old_q       = loc_q[cmd_pja_slot_i];
  assign old_pos     = loc_pos[cmd_pja_slot_i];
  assign same_q      = old_v && (old_q == tgt_q);
  // pja_slot is the last field of the packed entry, i.e. its low bits
  assign moved_pja   = q_moved_d[old_q][PJA_W-1:0];

  // walk
  entry_t walk_e;
  qid_e   dest_q;
  logic   walk_end;
  logic   walk_fire;

  assign dest_q    = qid_e'(~walk_q_q);
  assign walk_e    = entry_t'(q_rd_d[walk_q_q]);
  assign walk_end  = (walk_idx_q == (POS_W+1)'(q_cnt[walk_q_q]));
  assign ref_valid_o    = (state_q == S_WALK) && !walk_end;
  assign ref_page_o     = walk_e.page;
  assign ref_buf_slot_o = walk_e.buf_slot;
  assign ref_pja_slot_o = walk_e.pja_slot;
  assign walk_fire      = ref_valid_o && ref_ready_i;

  always_comb begin
    for (int g = 0; g < 2; g++) begin
      q_push[g]   = 1'b0;
      q_push_d[g] = cmd_e;
      q_wr[g]     = 1'b0;
      q_wr_pos[g] = old_pos;
      q_rm[g]     = 1'b0;
      q_rm_pos[g] = old_pos;
      q_rd_pos[g] = POS_W'(walk_idx_q);
      q_clr[g]    = 1'b0;
    end
    if (state_q == S_WALK) begin
      if (walk_fire) begin
        q_push[dest_q]   = 1'b1;
        q_push_d[dest_q] = walk_e;
      end
      if (walk_end) q_clr[walk_q_q] = 1'b1;
    end else if (cmd_fire) begin
      if (cmd_op_i == QM_INSERT) begin
        if (same_q) begin
          q_wr[tgt_q] = 1'b1;
        end else begin
          q_push[tgt_q] = 1'b1;
          if (old_v) q_rm[old_q] = 1'b1;
        end
      end else if (old_v) begin
        q_rm[old_q] = 1'b1;
      end
    end
  end

  // ---------------------------------------------------------------------
  // State and location table
  // ---------------------------------------------------------------------
  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q     <= S_INIT;
      init_idx_q  <= '0;
      walk_idx_q  <= '0;
      walk_q_q    <= Q1;
      pend_q      <= 1'b0;
      pend_q_id_q <= Q1;
    end else begin
      if (refresh_i) begin
        pend_q      <= 1'b1;
        pend_q_id_q <= refresh_q_i;
      end
      unique case (state_q)
        S_INIT: begin
          init_idx_q <= init_idx_q + PJA_W'(1);
          if (init_idx_q == PJA_W'(PJA_PAGES - 1)) state_q <= S_IDLE;
        end
        S_IDLE: begin
          // A pending request is served once the current command is done.
          if (pend_q) begin
            state_q    <= S_WALK;
            walk_q_q   <= pend_q_id_q;
            walk_idx_q <= '0;
            if (!refresh_i) pend_q <= 1'b0;
          end
        end
        S_WALK: begin
          if (walk_fire) walk_idx_q <= walk_idx_q + (POS_W+1)'(1);
          if (walk_end) state_q <= S_IDLE;
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end

  // Location table RAM: every write below targets a distinct PJA slot.
  always_ff @(posedge clk_i) begin
    if (state_q == S_INIT) begin
      loc_v[init_idx_q] <= 1'b0;
    end else if (state_q == S_WALK) begin
      if (walk_fire) begin
        loc_q[walk_e.pja_slot]   <= dest_q;
        loc_pos[walk_e.pja_slot] <= q_push_pos[dest_q];
      end
    end else if (cmd_fire) begin
      // the entry moved into the hole left by a removal changes position
      if (q_rm[old_q] && q_moved[old_q]) begin
        loc_pos[moved_pja] <= old_pos;
      end
      if (cmd_op_i == QM_INSERT) begin
        if (!same_q) begin
          loc_v[cmd_pja_slot_i]   <= 1'b1;
          loc_q[cmd_pja_slot_i]   <= tgt_q;
          loc_pos[cmd_pja_slot_i] <= q_push_pos[tgt_q];
        end
      end else begin
        loc_v[cmd_pja_slot_i] <= 1'b0;
      end
    end
  end

  // The walked queue is not changed by commands while it is walked.
  a_no_cmd_in_walk: assert property (@(posedge clk_i) disable iff (!rst_ni)
    (state_q == S_WALK) |-> !cmd_fire);
  a_ref_stable: assert property (@(posedge clk_i) disable iff (!rst_ni)
    (ref_valid_o && !ref_ready_i) |=> ref_valid_o);

endmodule
