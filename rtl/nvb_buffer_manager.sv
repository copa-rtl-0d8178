// nvb_buffer_manager: metadata controller of the NVM-Backed Buffer.
//
// The NVB-Buffer is a DRAM page buffer (buffer space) plus a smaller STT-MRAM
// Persistent Journal Area (PJA) that holds a copy of every dirty DRAM page.
// Both are managed least-recently-used. Behaviour per request, as in the
// paper's access-pattern example:
//   read hit   DRAM -> host; the page becomes MRU in the buffer and, when it
//              is dirty, in the PJA as well.
//   read miss  a buffer slot is taken (free, else the LRU page is evicted) and
//              the page is filled from main storage as a clean page.
//   write      the page is written to its DRAM slot and to a PJA slot (a free
//              one, else the LRU PJA page is evicted) and becomes dirty.
//   eviction   a dirty page evicted from the buffer is flushed to main storage
//              and its PJA slot is freed; a page evicted from the PJA is
//              flushed and its DRAM copy becomes clean (it stays buffered).
// Every write is reported to the Queue Manager (QM_INSERT) and every page that
// leaves the PJA (QM_INVALIDATE). The paper's algorithm names only dirty
// evictions from the buffer; invalidating on PJA evictions as well is this
// design's choice, since such a page has no PJA copy left to refresh.
//
// Implementation: the metadata tables are RAMs with one row per DRAM page and
// per PJA page. LRU order is kept as a per-row access stamp. A request is
// looked up by one sequential pass over the tables (one row of each per cycle)
// that finds at once the hit, a free row and the LRU row of each table; the
// pass takes max(BUF_PAGES, PJA_PAGES) cycles. This is the simplest complete
// search, not a fast one: the paper gives the buffer's policy, not its
// directory. After reset a sweep of the same length clears the valid bits.
//
// Interface and timing: requests and both command outputs use valid/ready
// handshakes, one request at a time. Page data never passes through this block:
// it asks an external data mover for page moves (dma_*), and a DMA command is
// taken as done once accepted. Metadata commands go to the queue manager
// before the data move they belong to. rsp_valid_o pulses when a request is
// finished, with rsp_hit_o telling whether it hit in the buffer.
//
// The assertions at the end are disabled while rst_ni is low; lint tools note
// that rst_ni is then both an asynchronous reset and read synchronously, which
// is intended and affects only the checks.
module nvb_buffer_manager
  import copa_pkg::*;
#(
  parameter int unsigned PAGE_ADDR_W = copa_pkg::CFG_PAGE_ADDR_W,
  parameter int unsigned BUF_PAGES   = copa_pkg::CFG_BUF_PAGES,
  parameter int unsigned PJA_PAGES   = copa_pkg::CFG_PJA_PAGES,
  parameter int unsigned STAMP_W     = 48,
  localparam int unsigned BUF_W      = (BUF_PAGES > 1) ? $clog2(BUF_PAGES) : 1,
  localparam int unsigned PJA_W      = (PJA_PAGES > 1) ? $clog2(PJA_PAGES) : 1
) (
  input  logic                   clk_i,
  input  logic                   rst_ni,
  // application I/O requests (one 4 KB page each)
  input  logic                   req_valid_i,
  output logic                   req_ready_o,
  input  logic                   req_write_i,
  input  logic [PAGE_ADDR_W-1:0] req_page_i,
  output logic                   rsp_valid_o,
  output logic                   rsp_hit_o,
  // page moves for the external data mover
  output logic                   dma_valid_o,
  input  logic                   dma_ready_i,
  output dma_op_e                dma_op_o,
  output logic [PAGE_ADDR_W-1:0] dma_page_o,
  output logic [BUF_W-1:0]       dma_buf_slot_o,
  output logic [PJA_W-1:0]       dma_pja_slot_o,
  // metadata to the CoPA queue manager
  output logic                   qm_valid_o,
  input  logic                   qm_ready_i,
  output qm_op_e                 qm_op_o,
  output logic [PAGE_ADDR_W-1:0] qm_page_o,
  output logic [BUF_W-1:0]       qm_buf_slot_o,
  output logic [PJA_W-1:0]       qm_pja_slot_o,
  // event pulses
  output logic                   ev_buf_evict_o,    // a buffered page was evicted
  output logic                   ev_dirty_evict_o,  // ... and it was dirty (flushed)
  output logic                   ev_pja_evict_o     // a PJA page was evicted (flushed, made clean)
);

  localparam int unsigned SCAN_N = (BUF_PAGES > PJA_PAGES) ? BUF_PAGES : PJA_PAGES;
  localparam int unsigned SCAN_W = $clog2(SCAN_N + 1);

  typedef enum logic [3:0] {
    S_INIT, S_IDLE, S_SCAN, S_DECIDE, S_EVB_QM, S_EVB_DMA, S_EVP_QM, S_EVP_DMA,
    S_INS_QM, S_XFER, S_RSP
  } state_e;

  // metadata RAMs
  logic                   buf_v     [BUF_PAGES];
  logic                   buf_dirty [BUF_PAGES];
  logic [PAGE_ADDR_W-1:0] buf_tag   [BUF_PAGES];
  logic [STAMP_W-1:0]     buf_stamp [BUF_PAGES];
  logic [PJA_W-1:0]       buf_pja   [BUF_PAGES];
  logic                   pja_v     [PJA_PAGES];
  logic [BUF_W-1:0]       pja_buf   [PJA_PAGES];
  logic [STAMP_W-1:0]     pja_stamp [PJA_PAGES];

  state_e                 state_q;
  logic [SCAN_W-1:0]      idx_q;
  logic [STAMP_W-1:0]     now_q;
  logic                   wr_q;
  logic [PAGE_ADDR_W-1:0] page_q;
  // results of the lookup pass
  logic                   hit_q, bfree_q, bvic_q, pfree_q, pvic_q;
  logic [BUF_W-1:0]       hit_slot_q, bfree_slot_q, bvic_slot_q;
  logic [STAMP_W-1:0]     bvic_stamp_q, pvic_stamp_q;
  logic [PJA_W-1:0]       pfree_slot_q, pvic_slot_q;
  // plan of the request
  logic [BUF_W-1:0]       b_q;          // buffer slot of the page
  logic [PJA_W-1:0]       p_q;          // PJA slot of the page (writes)
  // victims: the dirty buffer page to flush, the PJA page to evict
  logic [PAGE_ADDR_W-1:0] evb_page_q;
  logic [PJA_W-1:0]       evb_pja_q;
  logic [BUF_W-1:0]       evp_owner_q;
  logic [PAGE_ADDR_W-1:0] evp_page_q;
  logic                   read_dirty_q; // read hit on a dirty page

  logic in_buf, in_pja;
  logic [BUF_W-1:0] bidx;
  logic [PJA_W-1:0] pidx;
  assign in_buf = (idx_q < SCAN_W'(BUF_PAGES));
  assign in_pja = (idx_q < SCAN_W'(PJA_PAGES));
  assign bidx   = BUF_W'(idx_q);
  assign pidx   = PJA_W'(idx_q);

  logic scan_last;
  assign scan_last = (idx_q == SCAN_W'(SCAN_N - 1));

  // plan computed from the lookup results
  logic [BUF_W-1:0] d_b, d_pvic_owner;
  logic             d_dirty_b;
  assign d_b          = hit_q ? hit_slot_q : (bfree_q ? bfree_slot_q : bvic_slot_q);
  assign d_dirty_b    = buf_dirty[d_b];
  assign d_pvic_owner = pja_buf[pvic_slot_q];

  // d_rehit: hit on a dirty page (its PJA slot is kept).
  // d_evb:   the miss evicts a dirty page; it is flushed and frees its PJA slot.
  // d_evp:   a write needs a PJA slot and none is free: evict the LRU PJA page.
  logic d_rehit, d_evb, d_evp;
  assign d_rehit = hit_q && d_dirty_b;
  assign d_evb   = !hit_q && !bfree_q && d_dirty_b;
  assign d_evp   = wr_q && !d_rehit && !d_evb && !pfree_q;

  // ---------------------------------------------------------------------
  // outputs
  // ---------------------------------------------------------------------
  assign req_ready_o = (state_q == S_IDLE);
  assign rsp_valid_o = (state_q == S_RSP);
  assign rsp_hit_o   = hit_q;

  always_comb begin
    dma_valid_o    = 1'b0;
    dma_op_o       = DMA_HOST_RD;
    dma_page_o     = page_q;
    dma_buf_slot_o = b_q;
    dma_pja_slot_o = p_q;
    qm_valid_o     = 1'b0;
    qm_op_o        = QM_INVALIDATE;
    qm_page_o      = page_q;
    qm_buf_slot_o  = b_q;
    qm_pja_slot_o  = p_q;
    unique case (state_q)
      S_EVB_QM: begin
        qm_valid_o    = 1'b1;
        qm_page_o     = evb_page_q;
        qm_pja_slot_o = evb_pja_q;
      end
      S_EVB_DMA: begin
        dma_valid_o = 1'b1;
        dma_op_o    = DMA_FLUSH;
        dma_page_o  = evb_page_q;
      end
      S_EVP_QM: begin
        qm_valid_o    = 1'b1;
        qm_page_o     = evp_page_q;
        qm_buf_slot_o = evp_owner_q;
      end
      S_EVP_DMA: begin
        dma_valid_o    = 1'b1;
        dma_op_o       = DMA_FLUSH;
        dma_page_o     = evp_page_q;
        dma_buf_slot_o = evp_owner_q;
      end
      S_INS_QM: begin
        qm_valid_o = 1'b1;
        qm_op_o    = QM_INSERT;
      end
      S_XFER: begin
        dma_valid_o = 1'b1;
        dma_op_o    = wr_q ? DMA_HOST_WR : (hit_q ? DMA_HOST_RD : DMA_FILL);
      end
      default: ;
    endcase
  end

  assign ev_buf_evict_o   = (state_q == S_DECIDE) && !hit_q && !bfree_q;
  assign ev_dirty_evict_o = (state_q == S_EVB_DMA) && dma_ready_i;
  assign ev_pja_evict_o   = (state_q == S_EVP_DMA) && dma_ready_i;

  // ---------------------------------------------------------------------
  // control
  // ---------------------------------------------------------------------
  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q      <= S_INIT;
      idx_q        <= '0;
      now_q        <= '0;
      wr_q         <= 1'b0;
      page_q       <= '0;
      hit_q        <= 1'b0;
      bfree_q      <= 1'b0;
      bvic_q       <= 1'b0;
      pfree_q      <= 1'b0;
      pvic_q       <= 1'b0;
      hit_slot_q   <= '0;
      bfree_slot_q <= '0;
      bvic_slot_q  <= '0;
      bvic_stamp_q <= '0;
      pfree_slot_q <= '0;
      pvic_slot_q  <= '0;
      pvic_stamp_q <= '0;
      b_q          <= '0;
      p_q          <= '0;
      evb_page_q   <= '0;
      evb_pja_q    <= '0;
      evp_owner_q  <= '0;
      evp_page_q   <= '0;
      read_dirty_q <= 1'b0;
    end else begin
      unique case (state_q)
        S_INIT: begin
          idx_q <= idx_q + SCAN_W'(1);
          if (scan_last) state_q <= S_IDLE;
        end
        S_IDLE: begin
          if (req_valid_i) begin
            wr_q    <= req_write_i;
            page_q  <= req_page_i;
            now_q   <= now_q + STAMP_W'(1);
            idx_q   <= '0;
            hit_q   <= 1'b0;
            bfree_q <= 1'b0;
            bvic_q  <= 1'b0;
            pfree_q <= 1'b0;
            pvic_q  <= 1'b0;
            state_q <= S_SCAN;
          end
        end
        S_SCAN: begin
          if (in_buf) begin
            if (buf_v[bidx] && buf_tag[bidx] == page_q) begin
              hit_q      <= 1'b1;
              hit_slot_q <= bidx;
            end
            if (!buf_v[bidx] && !bfree_q) begin
              bfree_q      <= 1'b1;
              bfree_slot_q <= bidx;
            end
            if (buf_v[bidx] && (!bvic_q || buf_stamp[bidx] < bvic_stamp_q)) begin
              bvic_q       <= 1'b1;
              bvic_slot_q  <= bidx;
              bvic_stamp_q <= buf_stamp[bidx];
            end
          end
          if (in_pja) begin
            if (!pja_v[pidx] && !pfree_q) begin
              pfree_q      <= 1'b1;
              pfree_slot_q <= pidx;
            end
            if (pja_v[pidx] && (!pvic_q || pja_stamp[pidx] < pvic_stamp_q)) begin
              pvic_q       <= 1'b1;
              pvic_slot_q  <= pidx;
              pvic_stamp_q <= pja_stamp[pidx];
            end
          end
          idx_q <= idx_q + SCAN_W'(1);
          if (scan_last) state_q <= S_DECIDE;
        end
        S_DECIDE: begin
          b_q          <= d_b;
          read_dirty_q <= d_rehit;
          evb_page_q   <= buf_tag[d_b];
          evb_pja_q    <= buf_pja[d_b];
          evp_owner_q  <= d_pvic_owner;
          evp_page_q   <= buf_tag[d_pvic_owner];
          if (d_rehit || d_evb) p_q <= buf_pja[d_b];   // rewrite in place / reuse victim's slot
          else if (pfree_q)     p_q <= pfree_slot_q;
          else                  p_q <= pvic_slot_q;
          if (d_evb)       state_q <= S_EVB_QM;
          else if (d_evp)  state_q <= S_EVP_QM;
          else if (wr_q)   state_q <= S_INS_QM;
          else             state_q <= S_XFER;
        end
        S_EVB_QM:  if (qm_ready_i)  state_q <= S_EVB_DMA;
        S_EVB_DMA: if (dma_ready_i) state_q <= wr_q ? S_INS_QM : S_XFER;
        S_EVP_QM:  if (qm_ready_i)  state_q <= S_EVP_DMA;
        S_EVP_DMA: if (dma_ready_i) state_q <= S_INS_QM;
        S_INS_QM:  if (qm_ready_i)  state_q <= S_XFER;
        S_XFER:    if (dma_ready_i) state_q <= S_RSP;
        S_RSP:     state_q <= S_IDLE;
        default:   state_q <= S_IDLE;
      endcase
    end
  end

  // ---------------------------------------------------------------------
  // metadata RAM writes
  // ---------------------------------------------------------------------
  always_ff @(posedge clk_i) begin
    unique case (state_q)
      S_INIT: begin
        if (in_buf) buf_v[bidx] <= 1'b0;
        if (in_pja) pja_v[pidx] <= 1'b0;
      end
      S_EVB_DMA: if (dma_ready_i) begin
        buf_v[b_q]      <= 1'b0;
        pja_v[evb_pja_q] <= 1'b0;
      end
      S_EVP_DMA: if (dma_ready_i) begin
        buf_dirty[evp_owner_q] <= 1'b0;
        pja_v[p_q]             <= 1'b0;
      end
      S_XFER: if (dma_ready_i) begin
        buf_v[b_q]     <= 1'b1;
        buf_tag[b_q]   <= page_q;
        buf_stamp[b_q] <= now_q;
        if (wr_q) begin
          buf_dirty[b_q] <= 1'b1;
          buf_pja[b_q]   <= p_q;
          pja_v[p_q]     <= 1'b1;
          pja_buf[p_q]   <= b_q;
          pja_stamp[p_q] <= now_q;
        end else if (!hit_q) begin
          buf_dirty[b_q] <= 1'b0;
        end else if (read_dirty_q) begin
          pja_stamp[p_q] <= now_q;
        end
      end
      default: ;
    endcase
  end

  a_qm_hold: assert property (@(posedge clk_i) disable iff (!rst_ni)
    (qm_valid_o && !qm_ready_i) |=> qm_valid_o);
  a_dma_hold: assert property (@(posedge clk_i) disable iff (!rst_ni)
    (dma_valid_o && !dma_ready_i) |=> dma_valid_o);

endmodule
