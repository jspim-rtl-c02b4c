// rlu_key_buffer: the RLU's buffer for fact-table keys.
//
// The host (or a DMA engine) streams read requests over the fact-table key
// column; the regular DRAM chips answer with bursts that the RLU picks up
// from the LRDIMM data buffers. One burst carries KEYS_PER_BURST keys
// (by default 8 chips x 8 bits x BL8 = 512 bits = 16 keys of 32 bits, key
// 0 in the low bits) and a count of how many of them are real keys (the
// last burst of a column may be partly filled). Bursts are queued in a
// DEPTH-deep FIFO and handed to the rest of the RLU one key at a time.
//
// When the FIFO is full, burst_ready falls: the RLU must not be sent more
// key bursts, i.e. the host/DMA stalls until the PIM side has consumed
// keys. stall_cycles counts cycles in which a burst was offered but not
// taken. The paper asks the RLU to stall to avoid overflow but does not
// give the buffer size; DEPTH and the burst format are this design's.
module rlu_key_buffer
  import jspim_pkg::*;
#(
  parameter int unsigned KEYS_PER_BURST = 16,
  parameter int unsigned DEPTH          = 4,
  parameter int unsigned NK_W           = $clog2(KEYS_PER_BURST + 1)
) (
  input  logic                                 clk,
  input  logic                                 rst_n,
  input  logic                                 burst_valid,
  output logic                                 burst_ready,
  input  logic [KEYS_PER_BURST-1:0][KEY_W-1:0] burst_keys,
  input  logic [NK_W-1:0]                      burst_nkeys,
  output logic                                 key_valid,
  input  logic                                 key_ready,
  output key_t                                 key,
  output logic [31:0]                          stall_cycles
);
  localparam int unsigned W     = KEYS_PER_BURST * KEY_W + NK_W;
  localparam int unsigned IDX_W = $clog2(KEYS_PER_BURST);

  logic             f_valid, f_ready;
  logic [W-1:0]     f_data;
  logic [KEYS_PER_BURST-1:0][KEY_W-1:0] f_keys;
  logic [NK_W-1:0]  f_nkeys;
  logic [IDX_W-1:0] idx;

  sync_fifo #(.WIDTH(W), .DEPTH(DEPTH)) u_fifo (
    .clk       (clk),
    .rst_n     (rst_n),
    .in_valid  (burst_valid),
    .in_ready  (burst_ready),
    .in_data   ({burst_nkeys, burst_keys}),
    .out_valid (f_valid),
    .out_ready (f_ready),
    .out_data  (f_data),
    .count     ()
  );

  assign {f_nkeys, f_keys} = f_data;

  // A burst with no keys is dropped at once.
  logic last;
  assign last      = (NK_W'(idx) + 1'b1 >= f_nkeys);
  assign key_valid = f_valid && (f_nkeys != '0);
  assign key       = f_keys[idx];
  assign f_ready   = f_valid && ((f_nkeys == '0) || (key_ready && last));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      idx          <= '0;
      stall_cycles <= '0;
    end else begin
      if (key_valid && key_ready) idx <= last ? '0 : idx + 1'b1;
      if (burst_valid && !burst_ready) stall_cycles <= stall_cycles + 32'd1;
    end
  end
endmodule
