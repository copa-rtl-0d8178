// copa_top: NVB-Buffer controller with Cold Page Awakening (CoPA).
//
// A DRAM page buffer keeps an STT-MRAM journal copy (PJA) of every dirty page
// so that no dirty data is lost on power failure. STT-MRAM cells lose data when
// a page stays unwritten for long (retention failure), and in an NVB-Buffer a
// dirty page can sit in the PJA untouched for over an hour. CoPA bounds that
// idle time: it tracks written PJA pages in two queues and, once per refresh
// period (two time-steps), rewrites the pages of the Sleepy queue from their
// DRAM replicas (Distant Refreshing). A page is rewritten at the latest three
// time-steps after its last write, and pages written recently are skipped.
//
// Blocks, following the paper's overview figure:
//   u_bm   nvb_buffer_manager    Buffer Manager: LRU buffer and PJA metadata
//   u_sc   copa_state_counter    time-step timer and State_Counter (QI, DC)
//   u_qm   copa_queue_manager    Queue Manager with queues Q1 and Q2
//   u_ref  distant_refresh_engine  copies a page DRAM -> PJA
//   u_enc_ref, u_enc_jnl  secded_enc  SEC-DED(72,64) encoding of every word
//          written to the PJA: by a refresh, and by the data mover for a
//          host write (the mover passes each word through pja_jnl_*)
//   u_dec_rec  secded_dec  corrects journal words read back for recovery
// The DRAM buffer space, the STT-MRAM PJA, the main storage and the data mover
// that carries host and storage pages are outside this block; their ports are
// brought out. While a refresh is in progress (queue walk or page copy) the
// buffer manager's metadata and data-move commands are held back, so a request
// never races a refresh of the same page: requests stall for the refresh.
//
// Timing: see the blocks. At the default sizes the buffer manager spends
// 2^21 cycles per request on its table lookup and the reset sweeps take 2^21
// cycles; refreshing one page takes about 3 x 512 cycles plus memory waits.
// The SEC-DED encoders and the decoder are combinational.
module copa_top
  import copa_pkg::*;
#(
  parameter int unsigned     PAGE_ADDR_W     = copa_pkg::CFG_PAGE_ADDR_W,
  parameter int unsigned     WORD_W          = copa_pkg::CFG_WORD_W,
  parameter int unsigned     WORDS_PER_PAGE  = copa_pkg::CFG_WORDS_PER_PAGE,
  parameter int unsigned     BUF_PAGES       = copa_pkg::CFG_BUF_PAGES,
  parameter int unsigned     PJA_PAGES       = copa_pkg::CFG_PJA_PAGES,
  parameter longint unsigned TIMESTEP_CYCLES = copa_pkg::CFG_TIMESTEP_CYCLES,
  localparam int unsigned BUF_W  = (BUF_PAGES > 1) ? $clog2(BUF_PAGES) : 1,
  localparam int unsigned PJA_W  = (PJA_PAGES > 1) ? $clog2(PJA_PAGES) : 1,
  localparam int unsigned WIDX_W = (WORDS_PER_PAGE > 1) ? $clog2(WORDS_PER_PAGE) : 1,
  localparam int unsigned CNT_W  = $clog2(PJA_PAGES + 1),
  localparam int unsigned CODE_W = WORD_W + copa_pkg::secded_checks(WORD_W) + 1
) (
  input  logic                    clk_i,
  input  logic                    rst_ni,
  // application I/O
  input  logic                    req_valid_i,
  output logic                    req_ready_o,
  input  logic                    req_write_i,
  input  logic [PAGE_ADDR_W-1:0]  req_page_i,
  output logic                    rsp_valid_o,
  output logic                    rsp_hit_o,
  // page moves for the external data mover (host, DRAM, PJA, main storage)
  output logic                    dma_valid_o,
  input  logic                    dma_ready_i,
  output dma_op_e                 dma_op_o,
  output logic [PAGE_ADDR_W-1:0]  dma_page_o,
  output logic [BUF_W-1:0]        dma_buf_slot_o,
  output logic [PJA_W-1:0]        dma_pja_slot_o,
  // Distant Refreshing: DRAM read port
  output logic                    dram_rd_valid_o,
  input  logic                    dram_rd_ready_i,
  output logic [BUF_W+WIDX_W-1:0] dram_rd_addr_o,
  input  logic                    dram_rd_data_valid_i,
  input  logic [WORD_W-1:0]       dram_rd_data_i,
  // Distant Refreshing: PJA write port
  output logic                    pja_wr_valid_o,
  input  logic                    pja_wr_ready_i,
  output logic [PJA_W+WIDX_W-1:0] pja_wr_addr_o,
  output logic [CODE_W-1:0]       pja_wr_data_o,     // SEC-DED codeword
  // SEC-DED encoder for the data mover's journal writes (host data -> PJA)
  input  logic [WORD_W-1:0]       pja_jnl_data_i,
  output logic [CODE_W-1:0]       pja_jnl_code_o,
  // SEC-DED decoder for journal reads during recovery (PJA -> host)
  input  logic [CODE_W-1:0]       pja_rec_code_i,
  output logic [WORD_W-1:0]       pja_rec_data_o,
  output logic                    pja_rec_ce_o,      // single error corrected
  output logic                    pja_rec_ue_o,      // uncorrectable error
  // status and events
  output logic [1:0]              state_counter_o,
  output logic                    timestep_tick_o,   // last cycle of a time-step
  output logic                    refresh_start_o,   // end of a refresh period
  output logic [PAGE_ADDR_W-1:0]  refresh_page_o,    // page offered for refreshing
  output logic                    refresh_busy_o,
  output logic                    page_refreshed_o,  // one PJA page rewritten
  output logic [CNT_W-1:0]        q1_count_o,
  output logic [CNT_W-1:0]        q2_count_o,
  output logic                    ev_buf_evict_o,
  output logic                    ev_dirty_evict_o,
  output logic                    ev_pja_evict_o
);

  // buffer manager <-> queue manager
  logic                   bm_qm_valid, bm_qm_ready, qm_cmd_ready;
  qm_op_e                 bm_qm_op;
  logic [PAGE_ADDR_W-1:0] bm_qm_page;
  logic [BUF_W-1:0]       bm_qm_buf;
  logic [PJA_W-1:0]       bm_qm_pja;
  logic                   bm_dma_valid, bm_dma_ready;
  // state counter
  logic qi, dc, tick, refresh;
  qid_e refresh_q;
  // queue manager -> refresh engine
  logic                   ref_valid, ref_ready;
  logic [PAGE_ADDR_W-1:0] ref_page;
  logic [BUF_W-1:0]       ref_buf;
  logic [PJA_W-1:0]       ref_pja;
  logic                   qm_busy, eng_busy, refresh_active;
  logic [WORD_W-1:0]      ref_wr_word;

  assign refresh_active = qm_busy || eng_busy || ref_valid;
  assign bm_qm_ready    = qm_cmd_ready && !refresh_active;
  assign bm_dma_ready   = dma_ready_i && !refresh_active;
  assign dma_valid_o    = bm_dma_valid && !refresh_active;

  nvb_buffer_manager #(
    .PAGE_ADDR_W (PAGE_ADDR_W),
    .BUF_PAGES   (BUF_PAGES),
    .PJA_PAGES   (PJA_PAGES)
  ) u_bm (
    .clk_i            (clk_i),
    .rst_ni           (rst_ni),
    .req_valid_i      (req_valid_i),
    .req_ready_o      (req_ready_o),
    .req_write_i      (req_write_i),
    .req_page_i       (req_page_i),
    .rsp_valid_o      (rsp_valid_o),
    .rsp_hit_o        (rsp_hit_o),
    .dma_valid_o      (bm_dma_valid),
    .dma_ready_i      (bm_dma_ready),
    .dma_op_o         (dma_op_o),
    .dma_page_o       (dma_page_o),
    .dma_buf_slot_o   (dma_buf_slot_o),
    .dma_pja_slot_o   (dma_pja_slot_o),
    .qm_valid_o       (bm_qm_valid),
    .qm_ready_i       (bm_qm_ready),
    .qm_op_o          (bm_qm_op),
    .qm_page_o        (bm_qm_page),
    .qm_buf_slot_o    (bm_qm_buf),
    .qm_pja_slot_o    (bm_qm_pja),
    .ev_buf_evict_o   (ev_buf_evict_o),
    .ev_dirty_evict_o (ev_dirty_evict_o),
    .ev_pja_evict_o   (ev_pja_evict_o)
  );

  copa_state_counter #(.TIMESTEP_CYCLES(TIMESTEP_CYCLES)) u_sc (
    .clk_i       (clk_i),
    .rst_ni      (rst_ni),
    .qi_o        (qi),
    .dc_o        (dc),
    .state_o     (state_counter_o),
    .tick_o      (tick),
    .refresh_o   (refresh),
    .refresh_q_o (refresh_q)
  );

  copa_queue_manager #(
    .PAGE_ADDR_W (PAGE_ADDR_W),
    .BUF_PAGES   (BUF_PAGES),
    .PJA_PAGES   (PJA_PAGES)
  ) u_qm (
    .clk_i          (clk_i),
    .rst_ni         (rst_ni),
    .qi_i           (qi),
    .dc_i           (dc),
    .refresh_i      (refresh),
    .refresh_q_i    (refresh_q),
    .cmd_valid_i    (bm_qm_valid && !refresh_active),
    .cmd_ready_o    (qm_cmd_ready),
    .cmd_op_i       (bm_qm_op),
    .cmd_page_i     (bm_qm_page),
    .cmd_buf_slot_i (bm_qm_buf),
    .cmd_pja_slot_i (bm_qm_pja),
    .ref_valid_o    (ref_valid),
    .ref_ready_i    (ref_ready),
    .ref_page_o     (ref_page),
    .ref_buf_slot_o (ref_buf),
    .ref_pja_slot_o (ref_pja),
    .busy_o         (qm_busy),
    .q1_count_o     (q1_count_o),
    .q2_count_o     (q2_count_o)
  );

  distant_refresh_engine #(
    .WORD_W         (WORD_W),
    .WORDS_PER_PAGE (WORDS_PER_PAGE),
    .BUF_PAGES      (BUF_PAGES),
    .PJA_PAGES      (PJA_PAGES)
  ) u_ref (
    .clk_i                (clk_i),
    .rst_ni               (rst_ni),
    .req_valid_i          (ref_valid),
    .req_ready_o          (ref_ready),
    .req_buf_slot_i       (ref_buf),
    .req_pja_slot_i       (ref_pja),
    .dram_rd_valid_o      (dram_rd_valid_o),
    .dram_rd_ready_i      (dram_rd_ready_i),
    .dram_rd_addr_o       (dram_rd_addr_o),
    .dram_rd_data_valid_i (dram_rd_data_valid_i),
    .dram_rd_data_i       (dram_rd_data_i),
    .pja_wr_valid_o       (pja_wr_valid_o),
    .pja_wr_ready_i       (pja_wr_ready_i),
    .pja_wr_addr_o        (pja_wr_addr_o),
    .pja_wr_data_o        (ref_wr_word),
    .busy_o               (eng_busy),
    .done_o               (page_refreshed_o)
  );

  // every word written to the PJA is a SEC-DED codeword
  secded_enc #(.DATA_W(WORD_W)) u_enc_ref (
    .data_i (ref_wr_word),
    .code_o (pja_wr_data_o)
  );

  secded_enc #(.DATA_W(WORD_W)) u_enc_jnl (
    .data_i (pja_jnl_data_i),
    .code_o (pja_jnl_code_o)
  );

  secded_dec #(.DATA_W(WORD_W)) u_dec_rec (
    .code_i (pja_rec_code_i),
    .data_o (pja_rec_data_o),
    .ce_o   (pja_rec_ce_o),
    .ue_o   (pja_rec_ue_o)
  );

  assign timestep_tick_o = tick;
  assign refresh_start_o = refresh;
  assign refresh_page_o  = ref_page;
  assign refresh_busy_o  = refresh_active;

endmodule
