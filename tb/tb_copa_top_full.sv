// tb_copa_top_full: the controller at its default sizes (8 GB DRAM buffer and
// 512 MB PJA in 4 KB pages, 30 s time-steps at 100 MHz).
//
// Waits for the reset sweep of the metadata tables (2^21 cycles), then sends a
// write, a read of the same page and a read of another page. It checks the
// hit flags, the page moves the buffer manager asks for (journal write into
// DRAM and PJA, read hit from the same DRAM slot, fill from storage into a
// different slot), that the write was reported to the queue manager as a
// Sleepy-queue insert (DC=0 in the first time-step), and that each request
// takes one lookup pass of 2^21 cycles plus a few cycles. A journal word is
// also taken through the SEC-DED encoder and, with one and then two bits
// flipped, through the recovery decoder. A time-step is 3e9
// cycles, so no refresh happens here; refreshing is covered by tb_copa_top.
module tb_copa_top_full;
  import copa_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  logic req_valid = 1'b0, req_ready, req_write = 1'b0;
  logic [31:0] req_page = '0;
  logic rsp_valid, rsp_hit;
  logic dma_valid;
  dma_op_e dma_op;
  logic [31:0] dma_page;
  logic [20:0] dma_buf;
  logic [16:0] dma_pja;
  logic rd_valid, wr_valid;
  logic [29:0] rd_addr;
  logic [25:0] wr_addr;
  logic [71:0] wdata;
  logic [63:0] jnl_data = '0, rec_data;
  logic [71:0] jnl_code, rec_code = '0;
  logic rec_ce, rec_ue;
  logic [1:0] sc;
  logic ts_tick, ref_start, ref_busy, page_ref;
  logic [31:0] ref_page;
  logic [17:0] q1c, q2c;
  logic ev_b, ev_d, ev_p;

  copa_top dut (
    .clk_i(clk), .rst_ni(rst_n),
    .req_valid_i(req_valid), .req_ready_o(req_ready), .req_write_i(req_write),
    .req_page_i(req_page), .rsp_valid_o(rsp_valid), .rsp_hit_o(rsp_hit),
    .dma_valid_o(dma_valid), .dma_ready_i(1'b1), .dma_op_o(dma_op),
    .dma_page_o(dma_page), .dma_buf_slot_o(dma_buf), .dma_pja_slot_o(dma_pja),
    .dram_rd_valid_o(rd_valid), .dram_rd_ready_i(1'b1), .dram_rd_addr_o(rd_addr),
    .dram_rd_data_valid_i(1'b0), .dram_rd_data_i(64'd0),
    .pja_wr_valid_o(wr_valid), .pja_wr_ready_i(1'b1), .pja_wr_addr_o(wr_addr),
    .pja_wr_data_o(wdata),
    .pja_jnl_data_i(jnl_data), .pja_jnl_code_o(jnl_code),
    .pja_rec_code_i(rec_code), .pja_rec_data_o(rec_data),
    .pja_rec_ce_o(rec_ce), .pja_rec_ue_o(rec_ue),
    .state_counter_o(sc), .timestep_tick_o(ts_tick), .refresh_start_o(ref_start),
    .refresh_page_o(ref_page), .refresh_busy_o(ref_busy), .page_refreshed_o(page_ref),
    .q1_count_o(q1c), .q2_count_o(q2c),
    .ev_buf_evict_o(ev_b), .ev_dirty_evict_o(ev_d), .ev_pja_evict_o(ev_p));

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  longint cyc = 0;
  int n_dma = 0;
  dma_op_e last_op;
  logic [31:0] last_page;
  logic [20:0] last_buf;
  logic [16:0] last_pja;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s at cycle %0d", what, cyc);
    end
  endtask

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (dma_valid) begin
      n_dma++;
      last_op <= dma_op; last_page <= dma_page; last_buf <= dma_buf; last_pja <= dma_pja;
    end
    if (rd_valid || wr_valid || ref_busy) begin
      failures++;
      $display("FAIL refresh activity in the first time-step");
    end
  end

  task automatic request(input bit wr, input logic [31:0] p, output bit hit, output longint lat);
    longint t0;
    req_valid = 1'b1; req_write = wr; req_page = p;
    while (!req_ready) @(negedge clk);
    t0 = cyc;
    @(negedge clk);
    req_valid = 1'b0;
    while (!rsp_valid) @(negedge clk);
    hit = rsp_hit;
    lat = cyc - t0;
  endtask

  initial begin
    #200000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit hit;
    longint lat;
    logic [20:0] slot_a;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    while (!req_ready) @(negedge clk);
    check(cyc >= 2097152, "reset sweep of the buffer table");
    $display("ready after %0d cycles", cyc);

    request(1'b1, 32'h0001_2345, hit, lat);
    check(!hit, "first write misses");
    check(n_dma == 1 && last_op == DMA_HOST_WR && last_page == 32'h0001_2345, "journal write");
    check(q1c == 1 && q2c == 0, "write inserted into the Sleepy queue Q1 (QI=0, DC=0)");
    check(lat >= 2097152 && lat < 2097152 + 10, "one lookup pass per request");
    $display("write latency %0d cycles", lat);
    slot_a = last_buf;

    request(1'b0, 32'h0001_2345, hit, lat);
    check(hit, "read of the written page hits");
    check(n_dma == 2 && last_op == DMA_HOST_RD && last_buf == slot_a, "read from the same DRAM slot");

    request(1'b0, 32'h0000_0777, hit, lat);
    check(!hit, "read of a new page misses");
    check(n_dma == 3 && last_op == DMA_FILL && last_buf != slot_a, "fill into another slot");
    check(q1c == 1 && q2c == 0 && sc == 2'd0, "reads leave the queues alone");

    // data bit 0 sits at code position 3, covered by check bits 1 and 2; with
    // the overall parity bit the codeword is 0xF
    jnl_data = 64'h1;
    #1;
    check(jnl_code == 72'hF, "journal word encoded");
    rec_code = jnl_code ^ (72'h1 << 40);
    #1;
    check(rec_data == 64'h1 && rec_ce && !rec_ue, "one flipped bit corrected on recovery");
    rec_code = rec_code ^ (72'h1 << 7);
    #1;
    check(rec_ue && !rec_ce, "two flipped bits detected on recovery");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
