// tb_sync_fifo: checks the in-order queue (32 entries, memory-queue entry
// type) against a queue model under random push/pop, including full and
// empty flags, simultaneous push and pop and a flush.
module tb_sync_fifo;
  import ava_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic push = 0, pop = 0, flush = 0, full, empty;
  mem_op_t din = '0, dout;
  logic [5:0] count;
  mem_op_t q [$];
  int checks = 0, failures = 0;

  sync_fifo #(.T(mem_op_t), .DEPTH(QUEUE_DEPTH)) dut (
    .clk, .rst_n, .flush_i(flush), .push_i(push), .data_i(din), .full_o(full),
    .pop_i(pop), .data_o(dout), .empty_o(empty), .count_o(count));

  initial begin repeat (20000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    #12 rst_n = 1;
    for (int t = 0; t < 4000; t++) begin
      @(negedge clk);
      checks++;
      if (count != 6'(q.size()) || full != (q.size() == QUEUE_DEPTH) || empty != (q.size() == 0) ||
          (q.size() != 0 && dout != q[0])) begin
        failures++; $display("t=%0d count %0d/%0d", t, count, q.size());
      end
      if (t == 2000) begin
        flush = 1; @(posedge clk); #1 flush = 0; q.delete(); continue;
      end
      // bias towards filling, then towards draining
      push = !full && ($urandom % 100 < ((t / 300) % 2 ? 30 : 70));
      pop  = !empty && ($urandom % 100 < ((t / 300) % 2 ? 70 : 30));
      din  = mem_op_t'({$urandom, $urandom, $urandom});
      @(posedge clk);
      if (pop) void'(q.pop_front());
      if (push) q.push_back(din);
      #1 push = 0; pop = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
