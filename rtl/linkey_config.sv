// linkey_config: the software-visible registers of the prefetcher and the
// decoder of the lds.* configuration instructions. It holds
//   NodeSize   12-bit node size in bytes,
//   ChildOs    up to NUM_CHILD 12-bit child-pointer offsets (+ their count),
//   KeyO       12-bit offset of the traversal key inside a node,
//   Roots      NUM_ROOTS pointers into the Address Table, each with a valid bit.
// The register set and widths follow the paper (4 KiB maximum node, eight
// child pointers, four roots). Instructions arrive on a valid/ready port:
//   CFG_RESET        clear every register and pulse table_clear for one cycle,
//   CFG_SET_ROOT     ask the table builder to find or allocate an AT entry for
//                    cfg_data and, when it answers, point root cfg_idx at it;
//                    cfg_ready stays low until the answer (root_done) comes,
//   CFG_CLEAR_ROOTS  clear every root valid bit,
//   CFG_ADD_OFFSET   append cfg_data[11:0] to ChildOs (ignored when full),
//   CFG_SET_SIZE     NodeSize := cfg_data[11:0],
//   CFG_NEW_TRAV     pulse new_trav_mark (the optional traversal marker).
// KeyO is written by the table search when it detects a new traversal.
// The handshake and the count register for ChildOs are this design's choice;
// the paper only names the instructions.
module linkey_config
  import linkey_pkg::*;
#(
  parameter int unsigned AT_ENTRIES = 256,
  parameter int unsigned NUM_CHILD  = 8,
  parameter int unsigned NUM_ROOTS  = 4,
  localparam int unsigned AI_W = $clog2(AT_ENTRIES),
  localparam int unsigned RN_W = (NUM_ROOTS > 1) ? $clog2(NUM_ROOTS) : 1,
  localparam int unsigned NC_W = $clog2(NUM_CHILD + 1)
) (
  input  logic            clk,
  input  logic            rst_n,

  input  logic            cfg_valid,
  output logic            cfg_ready,
  input  cfg_op_e         cfg_op,
  input  logic [RN_W-1:0] cfg_idx,
  input  va_t             cfg_data,

  // set-root request to the table builder
  output logic            root_req,
  output va_t             root_req_addr,
  input  logic            root_done,
  input  logic            root_ok,
  input  logic [AI_W-1:0] root_at_idx,

  // KeyO update from the table search
  input  logic            keyo_we,
  input  ofs_t            keyo_wdata,

  output ofs_t                      node_size,
  output ofs_t [NUM_CHILD-1:0]      child_os,
  output logic [NC_W-1:0]           num_child,
  output ofs_t                      key_o,
  output logic [NUM_ROOTS-1:0]      root_v,
  output logic [NUM_ROOTS-1:0][AI_W-1:0] root_idx,
  output logic [AT_ENTRIES-1:0]     root_mask,
  output logic                      table_clear,
  output logic                      new_trav_mark
);

  logic            root_busy_q;
  logic [RN_W-1:0] root_num_q;
  va_t             root_addr_q;
  logic            fire;

  assign cfg_ready     = !root_busy_q;
  assign fire          = cfg_valid && cfg_ready;
  assign root_req      = root_busy_q;
  assign root_req_addr = root_addr_q;
  assign table_clear   = fire && cfg_op == CFG_RESET;
  assign new_trav_mark = fire && cfg_op == CFG_NEW_TRAV;

  always_comb begin
    root_mask = '0;
    for (int r = 0; r < NUM_ROOTS; r++)
      if (root_v[r]) root_mask[root_idx[r]] = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      node_size   <= '0;
      child_os    <= '0;
      num_child   <= '0;
      key_o       <= '0;
      root_v      <= '0;
      root_idx    <= '0;
      root_busy_q <= 1'b0;
      root_num_q  <= '0;
      root_addr_q <= '0;
    end else begin
      if (keyo_we) key_o <= keyo_wdata;
      if (root_busy_q && root_done) begin
        root_busy_q          <= 1'b0;
        root_v[root_num_q]   <= root_ok;
        root_idx[root_num_q] <= root_at_idx;
      end
      if (fire) begin
        unique case (cfg_op)
          CFG_RESET: begin
            node_size <= '0;
            child_os  <= '0;
            num_child <= '0;
            key_o     <= '0;
            root_v    <= '0;
          end
          CFG_SET_ROOT: begin
            root_busy_q     <= 1'b1;
            root_num_q      <= cfg_idx;
            root_addr_q     <= cfg_data;
            root_v[cfg_idx] <= 1'b0;
          end
          CFG_CLEAR_ROOTS: root_v <= '0;
          CFG_ADD_OFFSET: begin
            if (num_child < NC_W'(NUM_CHILD)) begin
              child_os[num_child[NC_W-1:0]] <= cfg_data[OFS_W-1:0];
              num_child <= num_child + 1'b1;
            end
          end
          CFG_SET_SIZE: node_size <= cfg_data[OFS_W-1:0];
          default: ;  // CFG_NEW_TRAV only pulses new_trav_mark
        endcase
      end
    end
  end

endmodule
