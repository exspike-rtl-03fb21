// tb_fetch_decode: runs a four-instruction program (conv with 3 groups and
// fire, transposed conv with 2 groups and no fire, FC, end) through the Fetcher and
// Decoder, with behavioural cores that answer sc_start with sc_done after a
// random delay, keep mpe_idle / eafc_idle low for a while, and answer
// fire_start with fire_done. It checks the number and order of scans, fires,
// group indices and FC layer ends, that the decoded configuration matches the
// instruction, and that done pulses once.
module tb_fetch_decode;
  import exspike_pkg::*;
  logic clk = 0, rst_n = 0; always #5 clk = ~clk;
  logic start, busy, done, ins_re, layer_start, sc_start, sc_done, mpe_idle, fire_start, fire_done, eafc_idle, fc_layer_end;
  logic [INS_AW-1:0] ins_raddr; logic [INS_BITS-1:0] ins_rdata; instr_t cfg; logic [3:0] g;
  logic [31:0] layer_count, cycle_count;
  instr_t prog [4];
  string trace, exp_trace;
  int checks = 0, failures = 0, n_done = 0;

  fetch_decode dut (.*);

  always_ff @(posedge clk) if (ins_re) ins_rdata <= prog[ins_raddr[1:0]];

  // behavioural cores
  int sc_cnt = -1, fire_cnt = -1, busy_cnt = 0;
  always @(posedge clk) if (rst_n) begin
    sc_done <= 1'b0; fire_done <= 1'b0;
    if (sc_start) begin
      sc_cnt = $urandom_range(2, 8);
      trace = {trace, $sformatf("S%0d%0d ", cfg.op, g)};
      checks++; if (cfg !== prog[layer_count - 1]) begin failures++; $display("cfg mismatch"); end
    end
    if (fire_start) begin fire_cnt = $urandom_range(2, 8); trace = {trace, $sformatf("F%0d ", g)}; end
    if (fc_layer_end) trace = {trace, "E "};
    if (layer_start) trace = {trace, "L "};
    if (sc_cnt > 0) sc_cnt--; else if (sc_cnt == 0) begin sc_done <= 1'b1; sc_cnt = -1; busy_cnt = 3; end
    if (fire_cnt > 0) fire_cnt--; else if (fire_cnt == 0) begin fire_done <= 1'b1; fire_cnt = -1; end
    if (busy_cnt > 0) busy_cnt--;
    if (done) n_done++;
  end
  assign mpe_idle  = (busy_cnt == 0);
  assign eafc_idle = (busy_cnt == 0);

  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    start = 0; trace = "";
    prog[0] = '0; prog[0].op = OP_CONV; prog[0].groups = 5'd3; prog[0].fire = 1; prog[0].cin = 10'd77;
    prog[1] = '0; prog[1].op = OP_TCONV; prog[1].groups = 5'd2; prog[1].fire = 0; prog[1].thresh = 16'sd9;
    prog[2] = '0; prog[2].op = OP_FC;   prog[2].groups = 5'd1; prog[2].fc_group = 3'd4;
    prog[3] = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    checks++; if (!busy) failures++;
    wait (done); repeat (3) @(negedge clk);
    exp_trace = "L S10 F0 S11 F1 S12 F2 L S30 S31 L S20 E ";
    checks++; if (trace != exp_trace) begin failures++; $display("trace  %s\nexpect %s", trace, exp_trace); end
    checks++; if (n_done != 1 || busy) failures++;
    checks++; if (layer_count != 3) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
