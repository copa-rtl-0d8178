// tb_distant_refresh_engine: self-checking test of Distant Refreshing.
//
// A DRAM model (4 slots x 16 words) answers reads after a random 1..4 cycle
// delay and a PJA model (4 slots x 16 words) accepts writes with random
// back-pressure; both also grant their request handshakes at random. The PJA
// model is first filled with corrupted words. For each of 6 random pages the
// test checks that the PJA page equals its DRAM replica afterwards, that no
// other PJA page changed, that every write went to the requested slot, that
// done_o pulses once per page, and that with no memory wait a page takes
// exactly 3 cycles per word.
module tb_distant_refresh_engine;
  localparam int unsigned WW = 64, WPP = 16, BP = 4, PP = 4;

  logic clk = 1'b0, rst_n = 1'b0;
  logic req_valid = 1'b0, req_ready;
  logic [1:0] req_buf = '0, req_pja = '0;
  logic rd_valid, rd_ready, rdata_valid;
  logic [5:0] rd_addr;
  logic [WW-1:0] rdata;
  logic wr_valid, wr_ready;
  logic [5:0] wr_addr;
  logic [WW-1:0] wdata;
  logic busy, done;

  logic [WW-1:0] dram [BP*WPP];
  logic [WW-1:0] pja  [PP*WPP];
  logic [WW-1:0] pja_ref [PP*WPP];
  bit   stall_mode = 1'b1;
  int   rd_delay = -1;
  logic [5:0] rd_pend_addr;
  int checks = 0, failures = 0, dones = 0;

  distant_refresh_engine #(.WORD_W(WW), .WORDS_PER_PAGE(WPP), .BUF_PAGES(BP), .PJA_PAGES(PP)) dut (
    .clk_i(clk), .rst_ni(rst_n),
    .req_valid_i(req_valid), .req_ready_o(req_ready),
    .req_buf_slot_i(req_buf), .req_pja_slot_i(req_pja),
    .dram_rd_valid_o(rd_valid), .dram_rd_ready_i(rd_ready), .dram_rd_addr_o(rd_addr),
    .dram_rd_data_valid_i(rdata_valid), .dram_rd_data_i(rdata),
    .pja_wr_valid_o(wr_valid), .pja_wr_ready_i(wr_ready), .pja_wr_addr_o(wr_addr),
    .pja_wr_data_o(wdata), .busy_o(busy), .done_o(done));

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  // memory models, driven on the falling edge
  always @(negedge clk) begin
    rd_ready <= stall_mode ? ($urandom_range(0, 1) == 1) : 1'b1;
    wr_ready <= stall_mode ? ($urandom_range(0, 2) != 0) : 1'b1;
  end
  always @(posedge clk) begin
    rdata_valid <= 1'b0;
    if (rd_valid && rd_ready) begin
      if (!stall_mode || $urandom_range(0, 2) == 0) begin
        rdata_valid <= 1'b1;                   // data in the next cycle
        rdata       <= dram[rd_addr];
      end else begin
        rd_pend_addr <= rd_addr;
        rd_delay     <= $urandom_range(0, 2);
      end
    end else if (rd_delay > 0) begin
      rd_delay <= rd_delay - 1;
    end else if (rd_delay == 0) begin
      rdata_valid <= 1'b1;
      rdata       <= dram[rd_pend_addr];
      rd_delay    <= -1;
    end
    if (wr_valid && wr_ready) begin
      pja[wr_addr] <= wdata;
      checks++;
      if (wr_addr[5:4] != req_pja) begin
        failures++;
        $display("FAIL write outside the page being refreshed");
      end
    end
    if (done) dones++;
  end

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int b, p, t0, t1;
    rd_ready = 1'b0; wr_ready = 1'b0; rdata_valid = 1'b0; rdata = '0; rd_pend_addr = '0;
    for (int i = 0; i < BP*WPP; i++) dram[i] = {$urandom, $urandom};
    for (int i = 0; i < PP*WPP; i++) begin
      pja[i] = dram[i] ^ 64'h1;               // retention-corrupted copies
      pja_ref[i] = pja[i];
    end
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 7; n++) begin
      stall_mode = (n != 6);
      b = $urandom_range(0, BP - 1);
      p = $urandom_range(0, PP - 1);
      @(negedge clk);
      check(req_ready && !busy, "idle before a page");
      req_valid = 1'b1; req_buf = 2'(b); req_pja = 2'(p);
      @(negedge clk);
      req_valid = 1'b0;
      t0 = int'($time);
      while (busy) @(negedge clk);
      t1 = int'($time);
      for (int w = 0; w < WPP; w++) pja_ref[p*WPP + w] = dram[b*WPP + w];
      for (int i = 0; i < PP*WPP; i++) check(pja[i] == pja_ref[i], "PJA content after refresh");
      check(dones == n + 1, "one done pulse per page");
      if (!stall_mode) begin
        check((t1 - t0) / 10 == 3 * WPP, "3 cycles per word without memory wait");
        $display("page of %0d words refreshed in %0d cycles", WPP, (t1 - t0) / 10);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
