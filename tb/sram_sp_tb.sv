// sram_sp_tb: writes with random bit enables and reads back against a shadow array;
// checks the one-cycle read latency and read-first behaviour on a write.
module sram_sp_tb;
  int checks = 0, failures = 0;
  localparam int D = 32, W = 40;
  logic clk = 0, en;
  logic [W-1:0] we, wdata, rdata;
  logic [4:0] addr;
  logic [W-1:0] shadow [D];

  sram_sp #(.DEPTH(D), .WIDTH(W)) dut (.clk, .en, .we, .addr, .wdata, .rdata);
  always #5 clk = ~clk;

  initial begin
    en = 0; we = '0; addr = '0; wdata = '0;
    // full writes of every row
    for (int a = 0; a < D; a++) begin
      @(negedge clk); en = 1; we = '1; addr = 5'(a); wdata = {8'(a), $urandom};
      shadow[a] = wdata;
    end
    for (int n = 0; n < 2000; n++) begin
      logic [W-1:0] old;
      @(negedge clk);
      en = 1; addr = 5'($urandom_range(D - 1, 0));
      we = ($urandom_range(1, 0) == 1) ? {$urandom, $urandom} : '0;
      wdata = {$urandom, $urandom};
      old = shadow[addr];
      for (int b = 0; b < W; b++) if (we[b]) shadow[addr][b] = wdata[b];
      @(posedge clk); #1;
      checks++;
      if (rdata !== old) begin failures++; $display("FAIL addr=%0d got=%h exp=%h", addr, rdata, old); end
      // rdata holds while en is low
      @(negedge clk); en = 0; @(posedge clk); #1;
      checks++;
      if (rdata !== old) begin failures++; $display("FAIL hold addr=%0d", addr); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
