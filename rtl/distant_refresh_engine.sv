// distant_refresh_engine: Distant Refreshing of one PJA page.
//
// CoPA never reads an STT-MRAM page to refresh it (a read-check-write refresh
// raises the chance of read disturbance). Instead it overwrites the PJA page
// with its replica in the DRAM buffer, whether or not the PJA copy has been
// corrupted: every dirty DRAM page has an identical journal copy in the PJA, so
// the DRAM copy is always the correct content. This engine performs that copy
// for one page at a time, WORDS_PER_PAGE words (512 x 64 bit for a 4 KB page):
// for each word it issues a read of DRAM word {buf_slot, word}, waits for the
// read data, then writes it to PJA word {pja_slot, word}.
//
// Interface and timing: a page is accepted on req_valid_i && req_ready_o.
// The DRAM read request and the PJA write use valid/ready handshakes; read data
// return on dram_rd_data_valid_i, in order, any number of cycles after the
// request was accepted. One word is in flight at a time, so a page takes
// WORDS_PER_PAGE x (3 + memory wait) cycles; done_o pulses in the cycle the
// last word is written. The word-serial schedule and the memory handshakes are
// this design's choice; the paper gives only what is copied, and from where.
module distant_refresh_engine #(
  parameter int unsigned WORD_W         = copa_pkg::CFG_WORD_W,
  parameter int unsigned WORDS_PER_PAGE = copa_pkg::CFG_WORDS_PER_PAGE,
  parameter int unsigned BUF_PAGES      = copa_pkg::CFG_BUF_PAGES,
  parameter int unsigned PJA_PAGES      = copa_pkg::CFG_PJA_PAGES,
  localparam int unsigned BUF_W  = (BUF_PAGES > 1) ? $clog2(BUF_PAGES) : 1,
  localparam int unsigned PJA_W  = (PJA_PAGES > 1) ? $clog2(PJA_PAGES) : 1,
  localparam int unsigned WIDX_W = (WORDS_PER_PAGE > 1) ? $clog2(WORDS_PER_PAGE) : 1
) (
  input  logic                    clk_i,
  input  logic                    rst_ni,
  // page to refresh
  input  logic                    req_valid_i,
  output logic                    req_ready_o,
  input  logic [BUF_W-1:0]        req_buf_slot_i,
  input  logic [PJA_W-1:0]        req_pja_slot_i,
  // DRAM buffer space read port (word address = {slot, word index})
  output logic                    dram_rd_valid_o,
  input  logic                    dram_rd_ready_i,
  output logic [BUF_W+WIDX_W-1:0] dram_rd_addr_o,
  input  logic                    dram_rd_data_valid_i,
  input  logic [WORD_W-1:0]       dram_rd_data_i,
  // PJA (STT-MRAM) write port
  output logic                    pja_wr_valid_o,
  input  logic                    pja_wr_ready_i,
  output logic [PJA_W+WIDX_W-1:0] pja_wr_addr_o,
  output logic [WORD_W-1:0]       pja_wr_data_o,
  // status
  output logic                    busy_o,
  output logic                    done_o
);

  typedef enum logic [1:0] {S_IDLE, S_RD, S_WAIT, S_WR} state_e;

  state_e            state_q;
  logic [BUF_W-1:0]  buf_q;
  logic [PJA_W-1:0]  pja_q;
  logic [WIDX_W-1:0] widx_q;
  logic [WORD_W-1:0] data_q;
  logic              last_word;

  assign last_word       = (widx_q == WIDX_W'(WORDS_PER_PAGE - 1));
  assign req_ready_o     = (state_q == S_IDLE);
  assign busy_o          = (state_q != S_IDLE);
  assign dram_rd_valid_o = (state_q == S_RD);
  assign dram_rd_addr_o  = {buf_q, widx_q};
  assign pja_wr_valid_o  = (state_q == S_WR);
  assign pja_wr_addr_o   = {pja_q, widx_q};
  assign pja_wr_data_o   = data_q;
  assign done_o          = (state_q == S_WR) && pja_wr_ready_i && last_word;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q <= S_IDLE;
      buf_q   <= '0;
      pja_q   <= '0;
      widx_q  <= '0;
      data_q  <= '0;
    end else begin
      unique case (state_q)
        S_IDLE: if (req_valid_i) begin
          buf_q   <= req_buf_slot_i;
          pja_q   <= req_pja_slot_i;
          widx_q  <= '0;
          state_q <= S_RD;
        end
        S_RD:   if (dram_rd_ready_i) state_q <= S_WAIT;
        S_WAIT: if (dram_rd_data_valid_i) begin
          data_q  <= dram_rd_data_i;
          state_q <= S_WR;
        end
        S_WR:   if (pja_wr_ready_i) begin
          widx_q  <= widx_q + WIDX_W'(1);
          state_q <= last_word ? S_IDLE : S_RD;
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end

endmodule
