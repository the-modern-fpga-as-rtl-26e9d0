`timescale 1ns/1ps
// tb_sync_fifo: random writes and reads on an 8-deep, 8-bit FIFO compared
// with a queue model: data order, one-clock read latency (`rd_valid`),
// `full`, `empty` and `level`. The stimulus never writes when full nor reads
// when empty, which the FIFO asserts as a protocol rule.
module tb_sync_fifo;
  localparam int W = 8, D = 8;
  logic clk = 1'b0, rst_n = 1'b1, wr_en = 1'b0, rd_en = 1'b0;
  logic [W-1:0] wr_data = '0, rd_data;
  logic full, empty, rd_valid;
  logic [3:0] level;
  logic [W-1:0] model [$];
  logic [W-1:0] expect_q [$];
  int checks = 0, failures = 0, n_full = 0, n_read = 0;

  sync_fifo #(.WIDTH(W), .DEPTH(D)) dut (.clk, .rst_n, .wr_en, .wr_data, .full,
    .rd_en, .rd_data, .rd_valid, .empty, .level);

  always #2 clk = ~clk;

  initial begin
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      // compare status with the model
      checks += 3;
      if (full  !== (model.size() == D)) begin failures++; $display("FAIL full at %0d", i); end
      if (empty !== (model.size() == 0)) begin failures++; $display("FAIL empty at %0d", i); end
      if (int'(level) != model.size())   begin failures++; $display("FAIL level %0d vs %0d", level, model.size()); end
      if (rd_valid) begin
        logic [W-1:0] e;
        e = expect_q.pop_front();
        checks++; n_read++;
        if (rd_data !== e) begin failures++; $display("FAIL data %h expected %h", rd_data, e); end
      end
      if (full) n_full++;
      // phases: fill-biased, then drain-biased, then mixed
      wr_en = !full && ($urandom_range(0, 99) < ((i / 500) % 2 == 0 ? 70 : 30));
      rd_en = !empty && ($urandom_range(0, 99) < ((i / 500) % 2 == 0 ? 30 : 70));
      wr_data = W'($urandom);
      @(posedge clk);
      if (rd_en) expect_q.push_back(model.pop_front());
      if (wr_en) model.push_back(wr_data);
    end
    checks++;
    if (n_full == 0 || n_read < 500) begin failures++; $display("FAIL coverage full=%0d reads=%0d", n_full, n_read); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
