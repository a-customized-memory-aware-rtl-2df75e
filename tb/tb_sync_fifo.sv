// tb_sync_fifo: random pushes and pops against a queue model; checks the
// head, empty, full and count every cycle, including a push and pop in the
// same cycle while full.
module tb_sync_fifo;
  localparam int D = 5;
  logic clk = 0, rst_n = 0;
  logic wr_en, rd_en, full, empty;
  logic [15:0] wr_data, rd_data;
  logic [$clog2(D+1)-1:0] count;
  logic [15:0] model[$];
  int checks = 0, failures = 0, both_full = 0;

  sync_fifo #(.T(logic [15:0]), .DEPTH(D)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    wr_en = 0; rd_en = 0; wr_data = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int cyc = 0; cyc < 3000; cyc++) begin
      @(negedge clk);
      checks++;
      if (empty != (model.size() == 0) || full != (model.size() == D) || int'(count) != model.size()) begin
        failures++;
        $display("FAIL flags size=%0d empty=%0b full=%0b count=%0d", model.size(), empty, full, count);
      end
      if (model.size() > 0) begin
        checks++;
        if (rd_data != model[0]) begin
          failures++;
          $display("FAIL head %h exp %h", rd_data, model[0]);
        end
      end
      // bias towards filling in the first half, draining in the second
      rd_en   = !empty && ($urandom_range(0, 9) < ((cyc % 400) < 200 ? 3 : 7));
      wr_en   = (!full || rd_en) && ($urandom_range(0, 9) < ((cyc % 400) < 200 ? 7 : 3));
      wr_data = 16'($urandom);
      if (wr_en && rd_en && full) both_full++;
      @(posedge clk);
      if (rd_en) void'(model.pop_front());
      if (wr_en) model.push_back(wr_data);
    end
    checks++;
    if (both_full == 0) begin
      failures++;
      $display("FAIL never pushed and popped while full");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
