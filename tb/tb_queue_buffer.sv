// tb_queue_buffer: self-checking test of the queue-mapped buffer (16 entries,
// chunks of 16). Each cycle a random number of the chunk's keys (sometimes all
// 16) go to this buffer, labelled 0,1,2,... in chunk order; the testbench
// pushes when no conflict is reported. A plain FIFO reference predicts the two
// keys leaving per cycle (oldest first, to port 1 then port 2) and the conflict
// flag (more keys than free entries, counting the entries read this cycle).
// Coverage: conflicts, pointer wrap, a multi-key chunk accepted into a
// non-empty queue.
module tb_queue_buffer;
  import bst_pkg::*;

  localparam int unsigned C  = 16;
  localparam int unsigned S  = 16;
  localparam int unsigned CW = 5;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic rst_n, push, conflict;
  logic [C-1:0] in_valid;
  query_t [C-1:0] in_query;
  logic [CW-1:0] in_rank [C];
  logic [CW-1:0] in_count;
  logic [1:0] out_valid;
  query_t [1:0] out_query;

  int checks = 0, failures = 0;
  int n_conf = 0, n_pushed = 0, n_multi = 0;
  query_t fifo [$];

  queue_buffer #(.CHUNK(C), .SLOTS(S), .CW(CW)) dut (.*);

  initial begin
    rst_n = 0; push = 0; in_valid = '0; in_query = '0; in_count = '0;
    foreach (in_rank[k]) in_rank[k] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 3000; t++) begin
      int n, ndeq, dens;
      bit e_conf;
      dens = ($urandom_range(9) == 0) ? 16 : int'($urandom_range(5));
      n = 0;
      for (int k = 0; k < C; k++) begin
        in_valid[k] = (int'($urandom_range(15)) < dens);
        in_query[k] = query_t'({$urandom, $urandom});
        in_rank[k]  = CW'(n);
        if (in_valid[k]) n++;
      end
      in_count = CW'(n);
      #1;
      ndeq = (fifo.size() >= 2) ? 2 : fifo.size();
      for (int p = 0; p < 2; p++) begin
        checks++;
        if (out_valid[p] !== (p < ndeq) || (p < ndeq && out_query[p] !== fifo[p])) begin
          failures++; $display("FAIL t=%0d port %0d", t, p);
        end
      end
      e_conf = (n > int'(S) - fifo.size() + ndeq);
      checks++;
      if (conflict !== e_conf) begin
        failures++; $display("FAIL t=%0d conflict %0d exp %0d (n=%0d used=%0d)", t, conflict, e_conf, n, fifo.size());
      end
      if (e_conf) n_conf++;
      push = !conflict;
      @(posedge clk);
      repeat (ndeq) void'(fifo.pop_front());
      if (push) begin
        if (n > 2 && fifo.size() > 0) n_multi++;
        for (int k = 0; k < C; k++) if (in_valid[k]) begin fifo.push_back(in_query[k]); n_pushed++; end
      end
      @(negedge clk);
    end
    checks++;
    if (n_conf == 0 || n_pushed <= int'(S) || n_multi == 0) begin
      failures++; $display("FAIL coverage conf=%0d pushed=%0d multi=%0d", n_conf, n_pushed, n_multi);
    end
    $display("queue_buffer: %0d conflicts, %0d keys stored", n_conf, n_pushed);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
