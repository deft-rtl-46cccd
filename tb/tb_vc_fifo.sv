// tb_vc_fifo: self-checking test of the four-flit VC input buffer.
// Random writes (never to a full buffer unless popping, as credit flow control guarantees)
// and random pops are compared with a queue model: order, data, rd_valid and full.
module tb_vc_fifo;
  import defft_pkg::*;
  logic clk = 0, rst_n = 0;
  logic wr_en, rd_en, rd_valid, full;
  flit_t wr_data, rd_data;
  int checks = 0, failures = 0, cycle = 0, max_fill = 0;
  flit_t model[$];

  vc_fifo dut (.*);
  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wr_en = 0; rd_en = 0; wr_data = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 4000; i++) begin
      @(negedge clk);
      // compare visible state
      checks++;
      if (rd_valid != (model.size() != 0) || full != (model.size() == BUF_DEPTH)) begin
        failures++; $display("state mismatch at %0d: valid=%b full=%b size=%0d", i, rd_valid, full, model.size());
      end
      if (model.size() != 0) begin
        checks++;
        if (rd_data != model[0]) begin failures++; $display("data mismatch at %0d", i); end
      end
      rd_en = ($urandom_range(0, 2) != 0) && (i % 500 < 400);
      wr_en = ($urandom_range(0, 3) != 0) && (model.size() < BUF_DEPTH || rd_en);
      wr_data = flit_t'({$urandom, $urandom});
      @(posedge clk);
      #1;
      if (rd_en && model.size() != 0) void'(model.pop_front());
      if (wr_en) model.push_back(wr_data);
      if (model.size() > max_fill) max_fill = model.size();
    end
    checks++;
    if (max_fill != BUF_DEPTH) begin failures++; $display("never filled: %0d", max_fill); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
