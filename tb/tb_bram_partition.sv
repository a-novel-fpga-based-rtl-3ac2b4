// tb_bram_partition: self-checking test of the dual-port node memory.
// Fills a 64-node partition through both ports, then reads random addresses
// on both ports at once and checks each read returns the stored node exactly
// one cycle later; also checks read-first behaviour of a write.
module tb_bram_partition;
  import bst_pkg::*;

  localparam int unsigned DEPTH = 64;
  localparam int unsigned AW    = 6;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic a_en, a_we, b_en, b_we;
  logic [AW-1:0] a_addr, b_addr;
  node_t a_wdata, b_wdata, a_rdata, b_rdata;
  node_t model [DEPTH];
  int checks = 0, failures = 0;

  bram_partition #(.DEPTH(DEPTH), .AW(AW)) dut (.*);

  function automatic node_t pat(int unsigned a, int unsigned salt);
    node_t n;
    n.key   = a * 32'h9E37_79B9 + salt;
    n.value = ~(a * 32'h85EB_CA6B) ^ salt;
    return n;
  endfunction

  task automatic check(string what, node_t got, node_t exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %h exp %h", what, got, exp);
    end
  endtask

  initial begin
    a_en = 0; b_en = 0; a_we = 0; b_we = 0; a_addr = '0; b_addr = '0;
    a_wdata = '0; b_wdata = '0;
    // fill: even addresses through port 1, odd through port 2
    for (int i = 0; i < DEPTH; i += 2) begin
      @(negedge clk);
      a_en = 1; a_we = 1; a_addr = AW'(i);     a_wdata = pat(i, 1);
      b_en = 1; b_we = 1; b_addr = AW'(i + 1); b_wdata = pat(i + 1, 1);
      model[i] = pat(i, 1); model[i+1] = pat(i + 1, 1);
    end
    @(negedge clk); a_we = 0; b_we = 0;
    // random dual reads, checked one cycle later
    for (int t = 0; t < 300; t++) begin
      int unsigned ra, rb;
      ra = $urandom_range(DEPTH - 1); rb = $urandom_range(DEPTH - 1);
      a_en = 1; b_en = 1; a_addr = AW'(ra); b_addr = AW'(rb);
      @(negedge clk);
      check("port1 read", a_rdata, model[ra]);
      check("port2 read", b_rdata, model[rb]);
    end
    // held output when not enabled
    a_en = 0; b_en = 0; a_addr = 0;
    @(negedge clk);
    // read-first: write on port 1 returns the old node, port 2 then sees new
    a_en = 1; a_we = 1; a_addr = 5; a_wdata = pat(5, 77);
    @(negedge clk);
    check("read-first", a_rdata, model[5]);
    model[5] = pat(5, 77);
    a_we = 0; a_en = 0; b_en = 1; b_addr = 5;
    @(negedge clk);
    check("write seen by port 2", b_rdata, model[5]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
