// linkey_search: the table search that runs on every core memory request.
// Two checks run in parallel in one combinational step, as in the paper's
// table-search algorithm:
//   * root check: for each valid root, RootAddr <= Addr < RootAddr + NodeSize
//     (base and bound); the lowest-numbered root that passes wins;
//   * CAM lookup: the Address Table's CAM port a is driven with
//     (Addr - KeyO) >> 3 and every root entry is masked out of its result.
// A root hit takes precedence. A new traversal begins when a root is hit and
// the previous core request did not hit that same node (the paper's third
// assumption), or when the optional lds.new_traversal marker was seen since
// the last root hit. On a new traversal KeyO := Addr - RootAddr (keyo_we) and
// all JustBuilt bits are cleared (new_trav). The "previous node" register is
// this module's only state; it is updated on every accepted request
// (req_fire), with "no node" when the request missed.
//
// Lint notes: the low three bits of the CAM address and the high bits of the
// root offset are computed but not used (the table holds 8-byte aligned
// addresses, KeyO is 12 bits), which verilator reports as unused bits.
module linkey_search
  import linkey_pkg::*;
#(
  parameter int unsigned AT_ENTRIES = 256,
  parameter int unsigned NUM_ROOTS  = 4,
  localparam int unsigned AI_W = $clog2(AT_ENTRIES)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            clear,
  input  logic            req_fire,
  input  va_t             req_addr,
  input  ofs_t            node_size,
  input  ofs_t            key_o,
  input  logic [NUM_ROOTS-1:0]           root_v,
  input  logic [NUM_ROOTS-1:0][AI_W-1:0] root_idx,
  input  logic [AT_ENTRIES-1:0]          root_mask,
  input  naddr_t [AT_ENTRIES-1:0]        at_addr,
  input  logic   [AT_ENTRIES-1:0]        at_valid,
  output naddr_t          cam_key,
  input  logic [AT_ENTRIES-1:0]          cam_match,
  input  logic            mark,           // lds.new_traversal

  output logic            hit,
  output logic [AI_W-1:0] hit_idx,
  output logic            root_hit,
  output logic            new_trav,
  output ofs_t            keyo_new
);

  logic            last_v_q, mark_q;
  logic [AI_W-1:0] last_idx_q;

  va_t cam_va;
  assign cam_va  = req_addr - va_t'(key_o);
  assign cam_key = cam_va[VA_W-1:ALIGN_BITS];

  logic            cam_hit;
  logic [AI_W-1:0] cam_idx;
  logic [AI_W-1:0] r_idx;
  va_t             r_off;

  always_comb begin
    root_hit = 1'b0;
    r_idx    = '0;
    r_off    = '0;
    for (int r = 0; r < NUM_ROOTS; r++) begin
      va_t ra;
      ra = va_of(at_addr[root_idx[r]]);
      if (!root_hit && root_v[r] && at_valid[root_idx[r]] &&
          ra <= req_addr && req_addr < ra + va_t'(node_size)) begin
        root_hit = 1'b1;
        r_idx    = root_idx[r];
        r_off    = req_addr - ra;
      end
    end
    cam_hit = 1'b0;
    cam_idx = '0;
    for (int e = 0; e < AT_ENTRIES; e++) begin
      if (!cam_hit && cam_match[e] && !root_mask[e]) begin
        cam_hit = 1'b1;
        cam_idx = AI_W'(e);
      end
    end
    hit      = root_hit || cam_hit;
    hit_idx  = root_hit ? r_idx : cam_idx;
    new_trav = root_hit && (mark_q || mark || !last_v_q || last_idx_q != r_idx);
    keyo_new = r_off[OFS_W-1:0];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      last_v_q   <= 1'b0;
      last_idx_q <= '0;
      mark_q     <= 1'b0;
    end else if (clear) begin
      last_v_q   <= 1'b0;
      mark_q     <= 1'b0;
    end else begin
      if (mark) mark_q <= 1'b1;
      if (req_fire) begin
        last_v_q   <= hit;
        last_idx_q <= hit_idx;
        if (root_hit) mark_q <= 1'b0;
      end
    end
  end

endmodule
