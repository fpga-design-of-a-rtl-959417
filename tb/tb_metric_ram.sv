// tb_metric_ram -- writes random words to all 253 addresses of a 160-bit RAM,
// reads them back in random order (one-cycle latency) and checks that the read
// register holds while re is low.
module tb_metric_ram;
  logic clk = 0, we = 0, re = 0;
  logic [7:0] addr = 0;
  logic [159:0] wdata = 0, rdata;
  logic [159:0] model [253];
  int checks = 0, failures = 0;
  metric_ram #(.W(160), .DEPTH(253)) dut (.*);
  always #5 clk = ~clk;
  initial begin
    for (int a = 0; a < 253; a++) begin
      for (int w = 0; w < 5; w++) model[a][w*32 +: 32] = $urandom;
      @(negedge clk); we = 1; addr = 8'(a); wdata = model[a];
    end
    @(negedge clk); we = 0;
    for (int i = 0; i < 600; i++) begin
      int a;
      a = $urandom_range(252, 0);
      re = 1; addr = 8'(a);
      @(negedge clk); re = 0; addr = 8'($urandom_range(252, 0));
      checks++; if (rdata != model[a]) begin failures++; $display("addr %0d", a); end
      @(negedge clk);
      checks++; if (rdata != model[a]) begin failures++; $display("read register changed"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #1_000_000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
