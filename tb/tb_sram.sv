// tb_sram: writes random words to random addresses and reads them back
// against a shadow copy, including a read of an address written in the same
// cycle (the read returns the old word).
module tb_sram;
  localparam int W = 20, WORDS = 32;
  logic clk = 0, we = 0, re = 0;
  logic [4:0] waddr, raddr;
  logic [W-1:0] wdata, rdata;
  logic [W-1:0] shadow [WORDS];
  int checks = 0, failures = 0;

  sram #(.W(W), .WORDS(WORDS)) dut (.*);
  always #5 clk = ~clk;
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [W-1:0] e;
    waddr = '0; raddr = '0; wdata = '0;
    for (int a = 0; a < WORDS; a++) begin
      @(negedge clk);
      we = 1; waddr = 5'(a); wdata = W'($urandom); shadow[a] = wdata;
    end
    for (int i = 0; i < 400; i++) begin
      @(negedge clk);
      we = ($urandom >> 9) % 2; waddr = 5'($urandom); wdata = W'($urandom);
      re = 1; raddr = 5'($urandom);
      e = shadow[raddr];
      if (we) shadow[waddr] = wdata;
      @(negedge clk);
      we = 0; re = 0;
      checks++;
      if (rdata !== e) begin failures++; $display("addr %0d read %h expected %h", raddr, rdata, e); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
