// tb_natsa_scratchpad -- self-checking testbench of the scratchpad.
// Writes random words to random addresses over the full 1 KB, keeps a shadow
// copy, and reads every address back through all read ports at once.
module tb_natsa_scratchpad;
  localparam int NRD = 4;
  logic clk = 0, we = 0;
  logic [7:0]  waddr = 0;
  logic [31:0] wdata = 0;
  logic [7:0]  raddr [NRD];
  logic [31:0] rdata [NRD];
  logic [31:0] shadow [256];
  int checks = 0, failures = 0;

  natsa_scratchpad #(.NRD(NRD)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    for (int a = 0; a < 256; a++) begin
      @(negedge clk) we = 1; waddr = 8'(a); wdata = $urandom; shadow[a] = wdata;
    end
    for (int t = 0; t < 2000; t++) begin
      @(negedge clk) we = ($urandom % 2 == 0); waddr = 8'($urandom); wdata = $urandom;
      if (we) shadow[waddr] = wdata;
    end
    @(negedge clk) we = 0;
    for (int a = 0; a < 256; a += NRD) begin
      for (int p = 0; p < NRD; p++) raddr[p] = 8'(a + p);
      #1;
      for (int p = 0; p < NRD; p++) begin
        checks++;
        if (rdata[p] !== shadow[a+p]) begin
          failures++;
          $display("FAIL addr %0d port %0d: %h exp %h", a + p, p, rdata[p], shadow[a+p]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
