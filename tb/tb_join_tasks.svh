// Shared testbench code for the RLU and rank testbenches.
//
// Expects, declared before the include: localparams NB (banks), RPB (rows
// per bank), ROW_BITS, KPB (keys per burst), BASE (command base address);
// signals clk, rst_n, wr_valid, wr_ready, wr_addr, wr_data, burst_valid,
// burst_ready, burst_keys, burst_nkeys, res_valid, res_ready, res.
//
// The host model keeps a slot-level image of the hash-table buckets it has
// written. Keys are {tag, bucket}; bucket = low BUCKET_W key bits.

localparam int unsigned BUCKET_W = $clog2(NB * RPB);
localparam int unsigned TAG_W    = KEY_W - BUCKET_W;
localparam int unsigned ENTRY_W  = TAG_W + VAL_W + 2;
localparam int unsigned SLOTS    = ROW_BITS / ENTRY_W;

int checks = 0, failures = 0;
logic [ENTRY_W-1:0] img [int][int];   // bucket -> slot -> entry
result_t got_q[$];
bit slow_consumer = 0;
int n_null = 0, n_hit = 0, n_dupflag = 0;

always @(negedge clk) res_ready = slow_consumer ? ($urandom_range(0, 7) == 0) : 1'b1;
always @(posedge clk) if (rst_n && res_valid && res_ready) got_q.push_back(res);

task automatic chk(logic cond, string msg);
  checks++;
  if (!cond) begin failures++; if (failures < 20) $display("FAIL %s", msg); end
endtask

function automatic key_t mk_key(int b, logic [TAG_W-1:0] t);
  return {t, BUCKET_W'(b)};
endfunction

task automatic host_wr(cmd_op_e op, logic [CMD_DATA_W-1:0] d);
  @(negedge clk); wr_valid = 1; wr_addr = BASE + ADDR_W'(64 * int'(op)); wr_data = d;
  @(posedge clk); while (!wr_ready) @(posedge clk);
  #1 wr_valid = 0;
endtask

task automatic clear_bucket(int b);
  logic [CMD_DATA_W-1:0] d;
  for (int s = 0; s < SLOTS; s++) begin
    d = '0; d[31:0] = 32'(b); d[47:32] = 16'(s); d[49] = 1'b0;
    host_wr(CMD_ENTRY_UPDATE, d);
    img[b][s] = '0;
  end
endtask

// Writes n entries into bucket b from slot s0 (n <= 7 per command).
task automatic fill_bucket(int b, int s0, int n, int seed);
  logic [CMD_DATA_W-1:0] d;
  int s;
  s = s0;
  while (n > 0) begin
    int m;
    m = (n > TU_MAX) ? TU_MAX : n;
    d = '0; d[31:0] = 32'(b); d[47:32] = 16'(s); d[50:48] = 3'(m);
    for (int j = 0; j < m; j++) begin
      logic [TAG_W-1:0] t; val_t v; logic dp;
      t  = TAG_W'((s + j) * 7919 + seed * 104729 + 3);
      v  = $urandom;
      dp = ((s + j) % 5 == 1);
      d[64*(j+1) +: 64] = {dp, 31'(t), v};
      img[b][s + j] = {1'b1, dp, t, v};
    end
    host_wr(CMD_TABLE_UPDATE, d);
    s += m; n -= m;
  end
endtask

function automatic logic [ENTRY_W-1:0] find(key_t k, output int slot);
  int b; logic [ENTRY_W-1:0] e;
  b = int'(k[BUCKET_W-1:0]);
  slot = -1;
  if (!img.exists(b)) return '0;
  for (int s = SLOTS - 1; s >= 0; s--) begin
    e = img[b].exists(s) ? img[b][s] : '0;
    if (e[ENTRY_W-1] && e[VAL_W +: TAG_W] == k[KEY_W-1 -: TAG_W]) begin find = e; slot = s; end
  end
  if (slot < 0) return '0;
endfunction

// A key of bucket b: present (slot s) or absent.
function automatic key_t key_in(int b, int s);
  return mk_key(b, img[b][s][VAL_W +: TAG_W]);
endfunction
function automatic key_t key_absent(int b);
  return mk_key(b, TAG_W'(32'h00AB_CDEF));
endfunction

// Streams keys as bursts of KPB (the last one partly filled).
task automatic send_keys(key_t ks[$]);
  int i;
  i = 0;
  while (i < ks.size()) begin
    int n;
    n = (ks.size() - i >= KPB) ? KPB : ks.size() - i;
    @(negedge clk);
    burst_valid = 1;
    burst_nkeys = NK_W'(n);
    for (int j = 0; j < KPB; j++) burst_keys[j] = (j < n) ? ks[i + j] : key_t'($urandom);
    @(posedge clk); while (!burst_ready) @(posedge clk);
    #1 burst_valid = 0;
    i += n;
  end
endtask

// Waits for one join record per key and checks them in order.
task automatic check_join(key_t ks[$], int max_cycles);
  int cyc, slot;
  logic [ENTRY_W-1:0] e;
  cyc = 0;
  while (got_q.size() < ks.size() && cyc < max_cycles) begin @(posedge clk); cyc++; end
  chk(got_q.size() == ks.size(), $sformatf("join records %0d expected %0d", got_q.size(), ks.size()));
  foreach (ks[i]) if (i < got_q.size()) begin
    e = find(ks[i], slot);
    if (slot >= 0) n_hit++; else n_null++;
    if (slot >= 0 && e[ENTRY_W-2]) n_dupflag++;
    chk(got_q[i].kind == RES_JOIN && got_q[i].key == ks[i] && got_q[i].hit == (slot >= 0) &&
        got_q[i].value == ((slot >= 0) ? e[VAL_W-1:0] : '0) && got_q[i].dup == ((slot >= 0) && e[ENTRY_W-2]),
        $sformatf("join %0d key %h: hit %0b value %h expected %0b %h", i, ks[i], got_q[i].hit,
                  got_q[i].value, slot >= 0, e[VAL_W-1:0]));
  end
  got_q.delete();
endtask

task automatic wait_results(int n, int max_cycles);
  int cyc;
  cyc = 0;
  while (got_q.size() < n && cyc < max_cycles) begin @(posedge clk); cyc++; end
endtask
