// tb_copa_queue: self-checking test of one CoPA queue (8 entries).
//
// Drives 3000 random push / overwrite / remove / clear operations (never
// pushing into a full queue or removing from an empty one) and keeps a
// reference copy of the queue as a SystemVerilog queue. After every operation
// it checks the count, the position a push lands in, which entry a removal
// moves into the hole, and the whole content through the read port.
module tb_copa_queue;
  localparam int unsigned DEPTH = 8;
  localparam int unsigned EW    = 8;

  logic clk = 1'b0, rst_n = 1'b0;
  logic          push, wr, rm, clr, moved;
  logic [EW-1:0] push_d, wr_d, moved_d, rd_d;
  logic [2:0]    push_pos, wr_pos, rm_pos, rd_pos;
  logic [3:0]    count;
  logic [EW-1:0] model [$];
  int checks = 0, failures = 0;

  copa_queue #(.DEPTH(DEPTH), .ENTRY_W(EW)) dut (
    .clk_i(clk), .rst_ni(rst_n),
    .push_i(push), .push_data_i(push_d), .push_pos_o(push_pos),
    .wr_i(wr), .wr_pos_i(wr_pos), .wr_data_i(wr_d),
    .remove_i(rm), .remove_pos_i(rm_pos), .moved_o(moved), .moved_data_o(moved_d),
    .rd_pos_i(rd_pos), .rd_data_o(rd_d), .clear_i(clr), .count_o(count));

  always #50 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t count=%0d model=%0d", what, $time, count, model.size());
    end
  endtask

  initial begin
    #10000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int op, n;
    int unsigned p;
    logic [EW-1:0] d;
    {push, wr, rm, clr} = '0;
    push_d = '0; wr_d = '0; wr_pos = '0; rm_pos = '0; rd_pos = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int it = 0; it < 3000; it++) begin
      n  = model.size();
      op = $urandom_range(0, 99);
      d  = EW'($urandom);
      {push, wr, rm, clr} = '0;
      if (op < 45 && n < DEPTH) begin
        push = 1'b1; push_d = d;
        #1 check(push_pos == 3'(n), "push position = count");
        model.push_back(d);
      end else if (op < 60 && n > 0) begin
        p = $urandom_range(0, n - 1);
        wr = 1'b1; wr_pos = 3'(p); wr_d = d;
        model[p] = d;
      end else if (op < 97 && n > 0) begin
        p = $urandom_range(0, n - 1);
        rm = 1'b1; rm_pos = 3'(p);
        #1 check(moved == (p != n - 1), "moved flag");
        if (p != n - 1) check(moved_d == model[n-1], "moved entry is the last one");
        model[p] = model[n-1];
        void'(model.pop_back());
      end else if (op >= 97) begin
        clr = 1'b1;
        model.delete();
      end
      @(negedge clk);
      {push, wr, rm, clr} = '0;
      check(count == 4'(model.size()), "count");
      for (int i = 0; i < model.size(); i++) begin
        rd_pos = 3'(i);
        #1 check(rd_d == model[i], "content");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
