// tb_sync_fifo: pushes and pops random words with random valid/ready, and
// checks order and contents against a queue model, the ready flag when
// full, and that nothing is lost or duplicated.
module tb_sync_fifo;
  localparam int WIDTH = 32, DEPTH = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [WIDTH-1:0] in_data, out_data;
  logic [3:0] level;
  logic [WIDTH-1:0] q [$];
  int checks = 0, failures = 0, pushed = 0, popped = 0, full_seen = 0;

  sync_fifo #(.WIDTH(WIDTH), .DEPTH(DEPTH)) dut (.*);

  initial begin
    in_valid = 0; out_ready = 0; in_data = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 4000; n++) begin
      @(negedge clk);
      in_valid  = ($urandom_range(0, 9) < ((n / 500) % 2 ? 3 : 7));
      out_ready = ($urandom_range(0, 9) < ((n / 500) % 2 ? 7 : 3));
      in_data   = $urandom;
      checks++;
      if (in_ready !== (q.size() < DEPTH) || out_valid !== (q.size() > 0)) begin
        failures++;
        $display("FAIL flags ready=%0d valid=%0d size=%0d", in_ready, out_valid, q.size());
      end
      if (q.size() == DEPTH) full_seen++;
      if (out_valid && out_ready) begin
        checks++;
        if (out_data !== q[0]) begin failures++; $display("FAIL data %h exp %h", out_data, q[0]); end
        void'(q.pop_front());
        popped++;
      end
      if (in_valid && in_ready) begin q.push_back(in_data); pushed++; end
    end
    checks++;
    if (full_seen == 0) begin failures++; $display("FAIL never full"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
