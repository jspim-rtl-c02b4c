// rlu_cmd_decoder: recognises host commands written to special addresses.
//
// The host controls the RLU by writing 64-byte lines to reserved addresses;
// the RLU sees these writes in the LRDIMM data buffers. A write whose line
// address is CMD_BASE + 64*op (op < 7, see jspim_pkg::cmd_op_e) is a
// command; any other write is ordinary memory traffic and is ignored here.
//
//   PIM_START / PIM_OFF  set / clear the mode bit (PIM mode vs. plain DRAM)
//   SELECT_WHERE         data[31:0] = key
//   SELECT_DISTINCT      data[31:0] = first bucket, data[63:32] = buckets
//   ENTRY_UPDATE         data[31:0] = bucket, [47:32] = slot, [48] = dup,
//                        [49] = valid, [95:64] = key, [127:96] = value
//   INDEX_UPDATE         data[31:0] = key, [63:32] = new value, [64] = dup
//   TABLE_UPDATE         data[31:0] = bucket, [47:32] = first slot,
//                        [50:48] = entries (1..7); entry i in
//                        data[64*(i+1) +: 64] = {dup, tag[30:0], value}
//
// Commands other than PIM_START are accepted only in PIM mode; in memory
// mode they are dropped and counted in `ignored`. Accepted query/update
// commands are held in a one-entry register until the PIM controller takes
// them; while it is full, wr_ready is low and the host must hold its write.
// The mode bit resets to RESET_PIM_MODE (1: the paper's evaluation assumes
// PIM mode from boot). The field layout, the command base address and the
// hand-shake are this design's choices.
module rlu_cmd_decoder
  import jspim_pkg::*;
#(
  parameter logic [ADDR_W-1:0] CMD_BASE       = 40'hFF_FFFF_0000,
  parameter bit                RESET_PIM_MODE = 1'b1
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  wr_valid,
  output logic                  wr_ready,
  input  logic [ADDR_W-1:0]     wr_addr,
  input  logic [CMD_DATA_W-1:0] wr_data,
  output logic                  pim_mode,
  output logic                  cmd_valid,
  input  logic                  cmd_ready,
  output cmd_req_t              cmd,
  output logic [31:0]           ignored
);
  logic          is_cmd;
  logic [3:0]    op_raw;
  logic [ADDR_W-1:0] off;
  assign off    = wr_addr - CMD_BASE;
  assign op_raw = off[9:6];
  assign is_cmd = (wr_addr >= CMD_BASE) && (off[ADDR_W-1:10] == '0) &&
                  (off[5:0] == '0) && (op_raw <= 4'(CMD_TABLE_UPDATE));

  assign wr_ready = !cmd_valid;

  cmd_req_t dec;
  always_comb begin
    dec         = '0;
    dec.op      = cmd_op_e'(op_raw);
    dec.key     = wr_data[31:0];
    dec.bucket  = wr_data[31:0];
    dec.slot    = wr_data[47:32];
    unique case (cmd_op_e'(op_raw))
      CMD_SELECT_DISTINCT: dec.count = wr_data[63:32];
      CMD_ENTRY_UPDATE: begin
        dec.dup   = wr_data[48];
        dec.valid = wr_data[49];
        dec.key   = wr_data[95:64];
        dec.value = wr_data[127:96];
      end
      CMD_INDEX_UPDATE: begin
        dec.value = wr_data[63:32];
        dec.dup   = wr_data[64];
        dec.valid = 1'b1;
      end
      CMD_TABLE_UPDATE: begin
        dec.count = 32'(wr_data[50:48]);
        for (int i = 0; i < TU_MAX; i++) dec.tu_data[i] = wr_data[64*(i+1) +: 64];
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pim_mode  <= RESET_PIM_MODE;
      cmd_valid <= 1'b0;
      cmd       <= '0;
      ignored   <= '0;
    end else begin
      if (cmd_valid && cmd_ready) cmd_valid <= 1'b0;
      if (wr_valid && wr_ready && is_cmd) begin
        if (cmd_op_e'(op_raw) == CMD_PIM_START) begin
          pim_mode <= 1'b1;
        end else if (!pim_mode) begin
          ignored <= ignored + 32'd1;
        end else if (cmd_op_e'(op_raw) == CMD_PIM_OFF) begin
          pim_mode <= 1'b0;
        end else begin
          cmd_valid <= 1'b1;
          cmd       <= dec;
        end
      end
    end
  end
endmodule
