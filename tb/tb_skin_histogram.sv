// tb_skin_histogram: loads random values and reads them back on all ports
// with the one-clock latency.
module tb_skin_histogram;
  localparam int NP = 4;
  logic clk = 0, we = 0;
  logic [11:0] wa, wdat;
  logic [11:0] ra [NP], rdat [NP];
  logic [11:0] model [4096];
  int checks = 0, failures = 0;
  skin_histogram #(.N_PORTS(NP)) dut (.clk, .wr_en(we), .wr_addr(wa), .wr_data(wdat), .rd_addr(ra), .rd_data(rdat));
  always #5 clk = ~clk;
  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    for (int i = 0; i < 4096; i++) begin
      @(negedge clk);
      we = 1; wa = 12'(i); wdat = 12'($urandom); model[i] = wdat;
    end
    @(negedge clk);
    we = 0;
    for (int n = 0; n < 1000; n++) begin
      logic [11:0] a [NP];
      for (int p = 0; p < NP; p++) begin a[p] = 12'($urandom); ra[p] = a[p]; end
      @(negedge clk);
      for (int p = 0; p < NP; p++) begin
        checks++;
        if (rdat[p] !== model[a[p]]) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
