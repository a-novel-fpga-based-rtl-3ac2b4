// tb_direct_buffer: self-checking test of the direct-mapped buffer (8 slots,
// chunks of 8). Every cycle a random subset of the chunk positions offers a
// key; the testbench pushes when the buffer reports no conflict. A reference
// model (slot k for chunk position k, lowest occupied slot of each half to
// port 1 / port 2, a slot read in the same cycle counts as free) predicts the
// two outputs and the conflict flag each cycle. Coverage: conflicts, conflicts
// while other slots were free, both ports busy.
module tb_direct_buffer;
  import bst_pkg::*;

  localparam int unsigned C = 8;
  localparam int unsigned H = C / 2;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic rst_n, push, conflict;
  logic [C-1:0] in_valid;
  query_t [C-1:0] in_query;
  logic [1:0] out_valid;
  query_t [1:0] out_query;

  int checks = 0, failures = 0;
  int n_conf = 0, n_conf_free = 0, n_both = 0, n_out = 0;

  bit     r_occ [C];
  query_t r_q   [C];

  direct_buffer #(.CHUNK(C), .SLOTS(C)) dut (.*);

  initial begin
    rst_n = 0; push = 0; in_valid = '0; in_query = '0;
    foreach (r_occ[i]) r_occ[i] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 2000; t++) begin
      bit e_conf, any_free;
      bit deq [C];
      int pick [2];
      for (int k = 0; k < C; k++) begin
        in_valid[k] = ($urandom_range(3) == 0);
        in_query[k] = query_t'({$urandom, $urandom});
        deq[k] = 0;
      end
      #1;
      // reference outputs
      for (int p = 0; p < 2; p++) begin
        pick[p] = -1;
        for (int i = p * H; i < (p + 1) * H; i++)
          if (r_occ[i] && pick[p] < 0) pick[p] = i;
        checks++;
        if (out_valid[p] !== (pick[p] >= 0) || (pick[p] >= 0 && out_query[p] !== r_q[pick[p]])) begin
          failures++; $display("FAIL t=%0d port %0d", t, p);
        end
        if (pick[p] >= 0) begin deq[pick[p]] = 1; n_out++; end
      end
      if (pick[0] >= 0 && pick[1] >= 0) n_both++;
      e_conf = 0; any_free = 0;
      for (int k = 0; k < C; k++) begin
        if (in_valid[k] && r_occ[k] && !deq[k]) e_conf = 1;
        if (!r_occ[k]) any_free = 1;
      end
      checks++;
      if (conflict !== e_conf) begin
        failures++; $display("FAIL t=%0d conflict %0d exp %0d", t, conflict, e_conf);
      end
      if (e_conf) begin n_conf++; if (any_free) n_conf_free++; end
      push = !conflict;
      @(posedge clk);
      for (int k = 0; k < C; k++) if (deq[k]) r_occ[k] = 0;
      if (push)
        for (int k = 0; k < C; k++)
          if (in_valid[k]) begin r_occ[k] = 1; r_q[k] = in_query[k]; end
      @(negedge clk);
    end
    checks++;
    if (n_conf == 0 || n_conf_free == 0 || n_both == 0) begin
      failures++; $display("FAIL coverage conf=%0d conf_free=%0d both=%0d", n_conf, n_conf_free, n_both);
    end
    $display("direct_buffer: %0d conflicts (%0d with free slots), %0d keys out", n_conf, n_conf_free, n_out);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
