// tb_rlu_opt_buffer: feeds keys drawn from a small set (so that many repeat
// within 8 keys) with a behavioural PIM responder of random latency
// (hit = key bit 0, value = key * 3 + 1, dup = key bit 1). Checks every
// result, that the number of searches sent to the PIM side and the number
// of filtered keys equal those of a reference 8-entry FIFO window, and
// that after `invalidate` a key already in the window is searched again.
module tb_rlu_opt_buffer;
  import jspim_pkg::*;
  localparam int unsigned WINDOW = 8;

  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n, invalidate, key_valid, key_ready, pr_valid, pr_ready, pr_rsp_valid;
  logic pr_rsp_hit, pr_rsp_dup, res_valid, res_ready, busy;
  key_t key, pr_key;
  val_t pr_rsp_value;
  result_t res;
  logic [31:0] filtered_count;

  rlu_opt_buffer #(.WINDOW(WINDOW)) dut (.*);

  int checks = 0, failures = 0, searches = 0, exp_searches = 0, exp_filtered = 0;
  key_t win[$];
  key_t exp_q[$];

  // behavioural PIM side
  initial begin
    pr_ready = 1; pr_rsp_valid = 0; pr_rsp_hit = 0; pr_rsp_dup = 0; pr_rsp_value = 0;
    forever begin
      @(posedge clk);
      if (rst_n && pr_valid && pr_ready) begin
        key_t k;
        k = pr_key; searches++;
        #1 pr_ready = 0;
        repeat ($urandom_range(1, 6)) @(posedge clk);
        #1 pr_rsp_valid = 1; pr_rsp_hit = k[0]; pr_rsp_dup = k[1]; pr_rsp_value = k * 3 + 1;
        @(posedge clk);
        #1 pr_rsp_valid = 0; pr_ready = 1;
      end
    end
  end

  always @(negedge clk) res_ready = ($urandom_range(0, 2) != 0);
  always @(posedge clk) if (rst_n && res_valid && res_ready) begin
    key_t k;
    checks++;
    k = exp_q.pop_front();
    if (res.kind != RES_JOIN || res.key != k || res.hit != k[0] || res.dup != k[1] || res.value != k * 3 + 1) begin
      failures++; $display("FAIL result key %h expected %h value %h", res.key, k, res.value);
    end
  end

  // reference window
  function automatic bit in_win(key_t k);
    foreach (win[i]) if (win[i] == k) return 1;
    return 0;
  endfunction

  task automatic send(key_t k);
    @(negedge clk); key_valid = 1; key = k;
    @(posedge clk); while (!key_ready) @(posedge clk);
    #1 key_valid = 0;
    exp_q.push_back(k);
    if (in_win(k)) exp_filtered++;
    else begin
      exp_searches++;
      win.push_back(k);
      if (win.size() > WINDOW) void'(win.pop_front());
    end
  endtask

  initial begin
    #2000000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    rst_n = 0; invalidate = 0; key_valid = 0; key = 0;
    #12 rst_n = 1;
    for (int i = 0; i < 300; i++) send(key_t'($urandom_range(0, 11)));
    while (exp_q.size() != 0) @(posedge clk);
    repeat (10) @(posedge clk);
    checks++;
    if (searches != exp_searches || filtered_count != 32'(exp_filtered)) begin
      failures++; $display("FAIL searches %0d/%0d filtered %0d/%0d", searches, exp_searches, filtered_count, exp_filtered);
    end
    $display("searches %0d filtered %0d", searches, filtered_count);
    // invalidate, then a key that was in the window must be searched again
    @(negedge clk); invalidate = 1; @(negedge clk); invalidate = 0;
    win.delete();
    begin
      int s0;
      s0 = searches;
      send(win.size() == 0 ? exp_q.size() : 0);
      send(key_t'(5)); send(key_t'(5));
      while (exp_q.size() != 0) @(posedge clk);
      repeat (10) @(posedge clk);
      checks++;
      if (searches != s0 + 2) begin failures++; $display("FAIL after invalidate: %0d searches", searches - s0); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
