// tb_sync_fifo: random pushes and pops against a queue model, including
// full and empty.
module tb_sync_fifo;
  logic clk = 0, rst_n = 0, we = 0, re = 0, full, empty;
  logic [51:0] wd, rd;
  logic [51:0] q [$];
  int checks = 0, failures = 0;
  int nfull = 0;
  sync_fifo #(.WIDTH(52), .DEPTH(16)) dut (.clk, .rst_n, .wr_en(we), .wr_data(wd), .full, .rd_en(re), .rd_data(rd), .empty);
  always #5 clk = ~clk;
  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      checks++;
      if (empty !== (q.size() == 0) || full !== (q.size() == 16)) failures++;
      if (full) nfull++;
      if (!empty) begin
        checks++;
        if (rd !== q[0]) failures++;
      end
      we = ($urandom_range(0, 99) < ((n / 500) % 2 ? 70 : 30));
      re = !empty && ($urandom_range(0, 99) < ((n / 500) % 2 ? 30 : 70));
      wd = {20'($urandom), 32'($urandom)};
      @(posedge clk);
      #1;
      begin
        int sz;
        sz = q.size();
        if (re) void'(q.pop_front());
        if (we && sz < 16) q.push_back(wd);
      end
      we = 0; re = 0;
    end
    if (nfull == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
