// tb_sram_sdp: random lane-masked writes and reads of a small sram_sdp,
// compared with a behavioural array; also checks the one-cycle read latency
// and that a read in the same cycle as a write to that address returns the
// old word.
module tb_sram_sdp;
  localparam int W = 64, D = 32, L = 4;
  logic clk = 0; always #5 clk = ~clk;
  logic we, re; logic [4:0] waddr, raddr; logic [L-1:0] wlane; logic [W-1:0] wdata, rdata;
  logic [W-1:0] model [D];
  int checks = 0, failures = 0;

  sram_sdp #(.WIDTH(W), .DEPTH(D), .LANES(L)) dut (.*);

  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic [W-1:0] exp;
    we = 0; re = 0; waddr = 0; raddr = 0; wlane = 0; wdata = 0;
    // initialise
    for (int a = 0; a < D; a++) begin
      @(negedge clk); we = 1; waddr = 5'(a); wlane = '1; wdata = {$urandom, $urandom}; model[a] = wdata;
    end
    @(negedge clk); we = 0;
    for (int i = 0; i < 400; i++) begin
      @(negedge clk);
      we = $urandom_range(1); re = 1; waddr = 5'($urandom); raddr = (i % 7 == 0) ? waddr : 5'($urandom);
      wlane = L'($urandom); wdata = {$urandom, $urandom};
      exp = model[raddr];
      if (we) for (int l = 0; l < L; l++) if (wlane[l]) model[waddr][l*16 +: 16] = wdata[l*16 +: 16];
      @(posedge clk); #1;
      checks++;
      if (rdata !== exp) begin failures++; if (failures < 5) $display("mismatch at %0d", raddr); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
