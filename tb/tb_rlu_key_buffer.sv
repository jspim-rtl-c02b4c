// tb_rlu_key_buffer: sends bursts of 4 keys (some partly filled, one empty)
// while the consumer takes keys at random moments. Checks that keys come
// out in order with none lost or added, that burst_ready falls when DEPTH
// bursts are queued, and that stall_cycles counts refused offers.
module tb_rlu_key_buffer;
  import jspim_pkg::*;
  localparam int unsigned KPB = 4, DEPTH = 2, NK_W = $clog2(KPB + 1);

  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n, burst_valid, burst_ready, key_valid, key_ready;
  logic [KPB-1:0][KEY_W-1:0] burst_keys;
  logic [NK_W-1:0] burst_nkeys;
  key_t key;
  logic [31:0] stall_cycles;

  rlu_key_buffer #(.KEYS_PER_BURST(KPB), .DEPTH(DEPTH)) dut (.*);

  key_t exp_q[$];
  int checks = 0, failures = 0, refused = 0, got = 0, sent = 0;
  bit consumer_on = 0;

  always @(posedge clk) if (rst_n && burst_valid && !burst_ready) refused++;
  always @(negedge clk) key_ready = consumer_on && ($urandom_range(0, 3) == 0);
  always @(posedge clk) if (rst_n && key_valid && key_ready) begin
    checks++; got++;
    if (exp_q.size() == 0 || key != exp_q[0]) begin
      failures++; $display("FAIL key %h expected %h", key, exp_q.size() ? exp_q[0] : 0);
    end
    if (exp_q.size()) void'(exp_q.pop_front());
  end

  task automatic send(int n);
    @(negedge clk);
    burst_valid = 1; burst_nkeys = NK_W'(n);
    for (int i = 0; i < KPB; i++) begin
      burst_keys[i] = $urandom;
      if (i < n) exp_q.push_back(burst_keys[i]);
    end
    sent += n;
    @(posedge clk); while (!burst_ready) @(posedge clk);
    #1 burst_valid = 0;
  endtask

  initial begin
    #1000000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    rst_n = 0; burst_valid = 0; burst_keys = '0; burst_nkeys = 0; key_ready = 0;
    #12 rst_n = 1;
    // consumer off: the buffer fills after DEPTH bursts
    send(KPB); send(KPB);
    @(negedge clk);
    checks++; if (burst_ready) begin failures++; $display("FAIL buffer should be full"); end
    consumer_on = 1;
    for (int i = 0; i < 40; i++) send((i % 7 == 3) ? 0 : (i % 5 == 0) ? 1 + (i % KPB) : KPB);
    while (exp_q.size() != 0) @(posedge clk);
    repeat (4) @(posedge clk);
    checks++; if (got != sent) begin failures++; $display("FAIL got %0d sent %0d", got, sent); end
    checks++; if (refused == 0 || stall_cycles != 32'(refused)) begin
      failures++; $display("FAIL stall count %0d refused %0d", stall_cycles, refused);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
