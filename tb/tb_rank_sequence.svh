// Shared end-to-end sequence for the rank testbenches (see
// tb_join_tasks.svh for what must be declared before the include).
// Besides those, expects T_RP and T_RCD localparams and the rank's
// mem_* ports, pim_mode and counter outputs as signals.

int mech_mode_switch = 0, mech_mem_access = 0, mech_distinct = 0, mech_idx_update = 0;
int mech_row_hit = 0, mech_row_conflict = 0, mech_ignored = 0, mech_refused = 0;

// Cycles from the accepted host write of a select where to its result.
task automatic select_latency(key_t k, output int lat, output result_t r);
  logic [CMD_DATA_W-1:0] d;
  d = '0; d[31:0] = k;
  got_q.delete();
  host_wr(CMD_SELECT_WHERE, d);
  lat = 0;
  while (got_q.size() == 0 && lat < 100000) begin @(posedge clk); lat++; end
  r = got_q[0];
  got_q.delete();
endtask

task automatic mem_access(logic we, int bank, int row, int col, logic [63:0] wd, output logic [63:0] rd);
  @(negedge clk);
  mem_req_valid = 1; mem_we = we; mem_bank = BANK_W'(bank); mem_row = ROW_W'(row);
  mem_col = COL_W'(col); mem_wdata = wd;
  @(posedge clk); while (!mem_req_ready) @(posedge clk);
  #1 mem_req_valid = 0;
  while (!mem_rsp_valid) @(posedge clk);
  rd = mem_rdata;
  mech_mem_access++;
endtask

task automatic run_sequence(int n_keys, int fill);
  int bk[4];
  key_t ks[$];
  logic [CMD_DATA_W-1:0] d;
  bk = '{5, 6, NB * RPB / 2 + 5, NB * RPB - 1};
  chk(pim_mode, "PIM mode after reset");

  // 1. build the hash table: clear four buckets, fill them
  foreach (bk[i]) begin clear_bucket(bk[i]); fill_bucket(bk[i], 0, fill, i); end

  // 2. join: present, absent and repeated keys; consumer fast, then slow
  for (int i = 0; i < n_keys; i++) begin
    int b, r;
    b = bk[$urandom_range(0, 3)];
    r = $urandom_range(0, 9);
    if (r < 7) ks.push_back(key_in(b, $urandom_range(0, fill - 1)));
    else if (r < 8) ks.push_back(key_absent(b));
    else begin
      key_t k; k = key_in(b, $urandom_range(0, fill - 1));
      repeat ($urandom_range(2, 5)) ks.push_back(k);
    end
  end
  fork
    send_keys(ks);
    begin
      repeat (200) @(posedge clk);
      slow_consumer = 1;
      repeat (1500) @(posedge clk);
      slow_consumer = 0;
    end
  join_none
  check_join(ks, 400000);
  wait fork;

  // 3. select where: the row is open vs. another row of the bank is open
  begin
    int lat_open, lat_conf;
    result_t r;
    key_t k0, k2;
    k0 = key_in(bk[0], 1);
    k2 = key_in(bk[2], 0);                          // bk[2] is in bank 1 (odd), bk[0] in bank 1 too
    select_latency(k0, lat_open, r);               // opens bk[0]'s row (may already be open)
    select_latency(k0, lat_open, r);               // row open now
    chk(r.kind == RES_SELECT && r.hit && r.value == img[bk[0]][1][VAL_W-1:0], "select where value");
    select_latency(k2, lat_conf, r);               // same bank, other row
    if (bk[0] % NB == bk[2] % NB) begin
      chk(lat_conf == lat_open + int'(T_RP + T_RCD),
          $sformatf("select where latency: open %0d, conflict %0d, activation cost %0d",
                    lat_open, lat_conf, T_RP + T_RCD));
      mech_row_conflict++;
    end
    mech_row_hit++;
    $display("select where latency: row open %0d cycles, row conflict %0d cycles", lat_open, lat_conf);
  end

  // 4. index update of a key that was just probed (it sits in the window)
  begin
    key_t k; key_t one[$];
    k = key_in(bk[1], 2);
    one.push_back(k);
    send_keys(one); check_join(one, 10000);
    d = '0; d[31:0] = k; d[63:32] = 32'h0BAD_F00D; d[64] = 1'b1;
    host_wr(CMD_INDEX_UPDATE, d);
    img[bk[1]][2] = {1'b1, 1'b1, k[KEY_W-1 -: TAG_W], 32'h0BAD_F00D};
    wait_results(1, 10000);
    chk(got_q.size() == 1 && got_q[0].kind == RES_UPDATE && got_q[0].hit, "index update acknowledged");
    if (got_q.size() == 1 && got_q[0].hit) mech_idx_update++;
    got_q.delete();
    send_keys(one); check_join(one, 10000);
  end

  // 5. entry update erases a slot; the key then gives a null result
  begin
    int lat; result_t r; key_t k;
    k = key_in(bk[3], 0);
    d = '0; d[31:0] = 32'(bk[3]); d[47:32] = 16'd0; d[49] = 1'b0;
    host_wr(CMD_ENTRY_UPDATE, d);
    img[bk[3]][0] = '0;
    select_latency(k, lat, r);
    chk(r.kind == RES_SELECT && !r.hit && r.value == '0, "erased key gives null");
  end

  // 6. select distinct over the first two buckets
  begin
    int n;
    got_q.delete();
    d = '0; d[31:0] = 32'(bk[0]); d[63:32] = 32'd2;
    host_wr(CMD_SELECT_DISTINCT, d);
    n = 0;
    for (int b = bk[0]; b <= bk[0] + 1; b++)
      for (int s = 0; s < SLOTS; s++) if (img[b][s][ENTRY_W-1]) n++;
    wait_results(n, 100000 + 200 * SLOTS);
    repeat (200) @(posedge clk);
    chk(got_q.size() == n, $sformatf("distinct records %0d expected %0d", got_q.size(), n));
    n = 0;
    for (int b = bk[0]; b <= bk[0] + 1; b++)
      for (int s = 0; s < SLOTS; s++) if (img[b][s][ENTRY_W-1]) begin
        if (n < got_q.size())
          chk(got_q[n].kind == RES_DISTINCT && got_q[n].key == mk_key(b, img[b][s][VAL_W +: TAG_W]) &&
              got_q[n].value == img[b][s][VAL_W-1:0] && got_q[n].dup == img[b][s][ENTRY_W-2],
              $sformatf("distinct record %0d", n));
        n++;
      end
    mech_distinct = got_q.size();
    got_q.delete();
  end

  // 7. PIM off: commands dropped, keys refused, PIM chip read/written as DRAM
  begin
    logic [63:0] rd, exp;
    logic [ROW_BITS-1:0] rowimg;
    int b;
    host_wr(CMD_PIM_OFF, '0);
    repeat (2) @(posedge clk);
    chk(!pim_mode, "memory mode after PIM off");
    mech_mode_switch++;
    d = '0; d[31:0] = key_in(bk[0], 0);
    host_wr(CMD_SELECT_WHERE, d);
    repeat (50) @(posedge clk);
    chk(got_q.size() == 0 && ignored_cmds == 1, "command ignored in memory mode");
    mech_ignored = ignored_cmds;
    @(negedge clk); burst_valid = 1; burst_nkeys = NK_W'(1);
    repeat (5) begin @(posedge clk); if (!burst_ready) mech_refused++; end
    #1 burst_valid = 0;
    chk(mech_refused == 5, "key bursts refused in memory mode");
    // column 0 of bucket bk[0]'s row holds the low 64 bits of its slot image
    b = bk[0];
    rowimg = '0;
    for (int s = 0; s < SLOTS; s++) rowimg[s*ENTRY_W +: ENTRY_W] = img[b][s];
    mem_access(1'b0, b % NB, b / NB, 0, '0, rd);
    chk(rd == rowimg[63:0], $sformatf("memory-mode read of a bucket row: %h expected %h", rd, rowimg[63:0]));
    // write and read back a column of a row that holds no bucket in use
    exp = {$urandom, $urandom};
    mem_access(1'b1, 1, 9, 3, exp, rd);
    mem_access(1'b0, 0, 9, 3, '0, rd);
    mem_access(1'b0, 1, 9, 3, '0, rd);
    chk(rd == exp, "memory-mode write/read back");
    host_wr(CMD_PIM_START, '0);
    repeat (2) @(posedge clk);
    chk(pim_mode, "PIM mode after PIM start");
    mech_mode_switch++;
    @(negedge clk); mem_req_valid = 1; mem_we = 0;
    repeat (3) begin @(posedge clk); chk(!mem_req_ready, "memory port closed in PIM mode"); end
    #1 mem_req_valid = 0;
  end

  // 8. join again after the mode switch
  begin
    key_t ks2[$];
    for (int i = 0; i < 12; i++) ks2.push_back(key_in(bk[i % 3], i % fill));
    ks2.push_back(key_absent(bk[1]));
    send_keys(ks2); check_join(ks2, 100000);
  end

  // every mechanism must have happened
  $display("stalls %0d filtered %0d searches %0d activations %0d null %0d dupflag %0d",
           stall_cycles, filtered_count, search_count, act_count, n_null, n_dupflag);
  $display("row-hit %0d row-conflict %0d distinct %0d index-update %0d mode-switch %0d mem %0d ignored %0d refused %0d",
           mech_row_hit, mech_row_conflict, mech_distinct, mech_idx_update, mech_mode_switch,
           mech_mem_access, mech_ignored, mech_refused);
  chk(stall_cycles > 0, "mechanism: key-buffer stall");
  chk(filtered_count > 0, "mechanism: optimization-window filtering");
  chk(n_null > 0, "mechanism: null result");
  chk(n_dupflag > 0, "mechanism: duplicate-list flag");
  chk(act_count < search_count, "mechanism: searches served from an open row");
  chk(mech_row_conflict > 0, "mechanism: row conflict (precharge + activate)");
  chk(mech_distinct > 0, "mechanism: select distinct");
  chk(mech_idx_update > 0, "mechanism: index update");
  chk(mech_mode_switch == 2, "mechanism: mode switch");
  chk(mech_mem_access > 0, "mechanism: memory-mode access");
  chk(mech_ignored > 0 && mech_refused > 0, "mechanism: commands and keys refused in memory mode");
endtask
