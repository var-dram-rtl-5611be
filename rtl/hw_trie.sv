// hw_trie: hardware multibit trie storing a set of 32-bit address keys, each
// with a value.
//
// The key is cut into four 8-bit symbols, most significant first; each level
// of the tree consumes one symbol, so a node has 256 possible children and
// the tree is four levels deep.  As in any trie, no node stores its key: the
// path from the root defines it.  The design uses two instances: the primary
// trie (victim address -> effective row/column in the target bank) and the
// auxiliary trie (the set of addresses holding data, used to find what must
// be migrated and to detect collisions).
//
// Storage.  Every node owns a 256-bit child bitmap (bmp_mem) and 256 child
// pointers (ptr_mem, indexed {node, symbol}).  A pointer at levels 0-2 names
// a node, at level 3 a leaf.  Nodes and leaves are handed out in order from
// two free counters and are only released all together by `clear`; clearing
// needs one cycle because a node's bitmap is zeroed when it is allocated.
// Leaves also keep their full key so that the leaf table can be scanned
// (sc_* port): this is how the remapping unit lists all addresses of a bank
// (the paper's recursiveGet).
//
// Lookup (lk_*, LK_PORTS independent ports) is a three-stage pipeline that accepts a key every cycle:
// two tree levels per clock, then the leaf read, so lk_done comes 3 cycles
// after lk_valid.  The paper reaches its 3-cycle lookup with dual-edge
// flip-flops (one level per clock edge); this design gets the same latency
// from one edge by resolving two levels per cycle.
//
// Insert (ins_*) walks one level per cycle and creates missing nodes: the
// result (ins_done, with ins_new for a new key, ins_full if the node or leaf
// pool ran out) comes 5 cycles after the request is taken.  An existing key
// has its value overwritten.  ins_ready is low while an insert or a clear is
// in progress.
//
// Sizes: the tries are given a fixed budget of about 2% of the memory.  For
// a 2 GB device that holds just over 2 million addresses (2^21 leaves, the
// default, used for the auxiliary trie) and half as many in the primary
// trie.  The node pool is sized separately: with 256-way nodes, densely
// written addresses fill a last-level node with up to 256 leaves, so 32,768
// nodes (about 22 MB of pointers) keep the auxiliary trie near that budget.
// Sparse keys use nodes faster; the utilization unit watches both pools.
//
// Lint note: rst_n is also read synchronously by the assertions'
// `disable iff`; this is simulation-only checking, not a second reset path.
// Pointers share one memory for node and leaf indexes, so a pointer is as
// wide as the larger of the two; where it names a node only its low node-
// index bits are read, and lint reports the upper bits of those node reads
// as unused.  That is expected and harmless.
module hw_trie
  import varram_pkg::*;
#(
  parameter int unsigned LEAVES = 2097152,
  parameter int unsigned NODES  = 32768,
  parameter int unsigned VAL_W  = ROW_W + COL_W,
  parameter int unsigned LK_PORTS = 1
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      clear,
  // insert
  input  logic                      ins_valid,
  output logic                      ins_ready,
  input  logic [KEY_W-1:0]          ins_key,
  input  logic [VAL_W-1:0]          ins_val,
  output logic                      ins_done,
  output logic                      ins_new,
  output logic                      ins_full,
  // lookup ports
  input  logic                      lk_valid   [LK_PORTS],
  input  logic [KEY_W-1:0]          lk_key     [LK_PORTS],
  output logic                      lk_done    [LK_PORTS],
  output logic                      lk_hit     [LK_PORTS],
  output logic [VAL_W-1:0]          lk_val     [LK_PORTS],
  // leaf table scan
  input  logic [$clog2(LEAVES)-1:0] sc_idx,
  output logic                      sc_valid,
  output logic [KEY_W-1:0]          sc_key,
  output logic [VAL_W-1:0]          sc_val,
  // occupancy
  output logic [$clog2(LEAVES):0]   leaf_count,
  output logic [$clog2(NODES):0]    node_count
);

  localparam int unsigned FAN   = 1 << STRIDE;
  localparam int unsigned NPW   = $clog2(NODES);
  localparam int unsigned LPW   = $clog2(LEAVES);
  localparam int unsigned PTR_W = (NPW > LPW) ? NPW : LPW;

  typedef logic [STRIDE-1:0] sym_t;
  typedef logic [PTR_W-1:0]  ptr_t;

  logic [FAN-1:0]   bmp_mem  [NODES];
  ptr_t             ptr_mem  [NODES * FAN];
  logic [KEY_W-1:0] leaf_key [LEAVES];
  logic [VAL_W-1:0] leaf_val [LEAVES];

  function automatic sym_t sym_at(logic [KEY_W-1:0] k, int unsigned lvl);
    return k[KEY_W-1-lvl*STRIDE -: STRIDE];
  endfunction

  // ---------------------------------------------------------------- lookup
  typedef struct packed {
    logic             v;
    logic             alive;
    ptr_t             node;
    logic [KEY_W-1:0] key;
  } lk_stage_t;

  typedef struct packed {
    logic             v;
    logic             alive;
    ptr_t             node;
  } lk_stage2_t;

  for (genvar p = 0; p < LK_PORTS; p++) begin : g_lk
    lk_stage_t  s1_q;
    lk_stage2_t s2_q;
    ptr_t      l0_child, l1_child, l2_child, l3_child;
    logic      l0_bit, l1_bit, l2_bit, l3_bit;

    always_comb begin
      // Stage 1: levels 0 and 1 from the root.
      l0_bit   = bmp_mem[0][sym_at(lk_key[p], 0)];
      l0_child = ptr_mem[{NPW'(0), sym_at(lk_key[p], 0)}];
      l1_bit   = bmp_mem[l0_child[NPW-1:0]][sym_at(lk_key[p], 1)];
      l1_child = ptr_mem[{l0_child[NPW-1:0], sym_at(lk_key[p], 1)}];
      // Stage 2: levels 2 and 3.
      l2_bit   = bmp_mem[s1_q.node[NPW-1:0]][sym_at(s1_q.key, 2)];
      l2_child = ptr_mem[{s1_q.node[NPW-1:0], sym_at(s1_q.key, 2)}];
      l3_bit   = bmp_mem[l2_child[NPW-1:0]][sym_at(s1_q.key, 3)];
      l3_child = ptr_mem[{l2_child[NPW-1:0], sym_at(s1_q.key, 3)}];
    end

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        s1_q       <= '0;
        s2_q       <= '0;
        lk_done[p] <= 1'b0;
        lk_hit[p]  <= 1'b0;
        lk_val[p]  <= '0;
      end else begin
        s1_q.v     <= lk_valid[p];
        s1_q.alive <= l0_bit && l1_bit;
        s1_q.node  <= l1_child;
        s1_q.key   <= lk_key[p];
        s2_q.v     <= s1_q.v;
        s2_q.alive <= s1_q.alive && l2_bit && l3_bit;
        s2_q.node  <= l3_child;
        // Stage 3: leaf read.
        lk_done[p] <= s2_q.v;
        lk_hit[p]  <= s2_q.v && s2_q.alive;
        lk_val[p]  <= leaf_val[s2_q.node[LPW-1:0]];
      end
    end
  end

  // ---------------------------------------------------------------- insert
  typedef enum logic [1:0] {ST_CLR, ST_IDLE, ST_WALK} st_e;
  st_e                st_q;
  logic [1:0]         lvl_q;
  ptr_t               cur_q;
  logic [KEY_W-1:0]   key_q;
  logic [VAL_W-1:0]   val_q;
  logic [NPW:0]       ncnt_q;
  logic [LPW:0]       lcnt_q;

  sym_t w_sym;
  logic w_bit;
  ptr_t w_child;

  // memory write controls
  logic       bmp_clr_en, bmp_set_en, ptr_we, leaf_we, val_we;
  logic [NPW-1:0] bmp_clr_idx;
  ptr_t       ptr_wval;
  logic [LPW-1:0] leaf_widx;

  assign w_sym   = sym_at(key_q, 32'(lvl_q));
  assign w_bit   = bmp_mem[cur_q[NPW-1:0]][w_sym];
  assign w_child = ptr_mem[{cur_q[NPW-1:0], w_sym}];

  always_comb begin
    bmp_clr_en  = 1'b0;
    bmp_clr_idx = '0;
    bmp_set_en  = 1'b0;
    ptr_we      = 1'b0;
    ptr_wval    = '0;
    leaf_we     = 1'b0;
    val_we      = 1'b0;
    leaf_widx   = w_child[LPW-1:0];
    if (st_q == ST_CLR) begin
      bmp_clr_en  = 1'b1;
      bmp_clr_idx = '0;
    end else if (st_q == ST_WALK && !clear) begin
      if (lvl_q != 2'd3) begin
        if (!w_bit && ncnt_q < (NPW+1)'(NODES)) begin
          bmp_set_en  = 1'b1;
          ptr_we      = 1'b1;
          ptr_wval    = ptr_t'(ncnt_q);
          bmp_clr_en  = 1'b1;
          bmp_clr_idx = ncnt_q[NPW-1:0];
        end
      end else begin
        if (w_bit) begin
          val_we = 1'b1;
        end else if (lcnt_q < (LPW+1)'(LEAVES)) begin
          bmp_set_en = 1'b1;
          ptr_we     = 1'b1;
          ptr_wval   = ptr_t'(lcnt_q);
          leaf_we    = 1'b1;
          val_we     = 1'b1;
          leaf_widx  = lcnt_q[LPW-1:0];
        end
      end
    end
  end

  // Memories: written without reset.
  always_ff @(posedge clk) begin
    if (bmp_clr_en) bmp_mem[bmp_clr_idx] <= '0;
    if (bmp_set_en) bmp_mem[cur_q[NPW-1:0]][w_sym] <= 1'b1;
    if (ptr_we)     ptr_mem[{cur_q[NPW-1:0], w_sym}] <= ptr_wval;
    if (leaf_we)    leaf_key[leaf_widx] <= key_q;
    if (val_we)     leaf_val[leaf_widx] <= val_q;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_q     <= ST_CLR;
      lvl_q    <= '0;
      cur_q    <= '0;
      key_q    <= '0;
      val_q    <= '0;
      ncnt_q   <= '0;
      lcnt_q   <= '0;
      ins_done <= 1'b0;
      ins_new  <= 1'b0;
      ins_full <= 1'b0;
    end else begin
      ins_done <= 1'b0;
      if (clear) begin
        st_q <= ST_CLR;
      end else begin
        unique case (st_q)
          ST_CLR: begin
            ncnt_q <= (NPW+1)'(1);
            lcnt_q <= '0;
            st_q   <= ST_IDLE;
          end
          ST_IDLE: begin
            if (ins_valid) begin
              key_q <= ins_key;
              val_q <= ins_val;
              cur_q <= '0;
              lvl_q <= '0;
              st_q  <= ST_WALK;
            end
          end
          ST_WALK: begin
            if (lvl_q != 2'd3) begin
              if (w_bit) begin
                cur_q <= w_child;
                lvl_q <= lvl_q + 2'd1;
              end else if (ncnt_q < (NPW+1)'(NODES)) begin
                cur_q  <= ptr_t'(ncnt_q);
                ncnt_q <= ncnt_q + 1'b1;
                lvl_q  <= lvl_q + 2'd1;
              end else begin
                ins_done <= 1'b1;
                ins_new  <= 1'b0;
                ins_full <= 1'b1;
                st_q     <= ST_IDLE;
              end
            end else begin
              ins_done <= 1'b1;
              st_q     <= ST_IDLE;
              if (w_bit) begin
                ins_new  <= 1'b0;
                ins_full <= 1'b0;
              end else if (lcnt_q < (LPW+1)'(LEAVES)) begin
                lcnt_q   <= lcnt_q + 1'b1;
                ins_new  <= 1'b1;
                ins_full <= 1'b0;
              end else begin
                ins_new  <= 1'b0;
                ins_full <= 1'b1;
              end
            end
          end
          default: st_q <= ST_IDLE;
        endcase
      end
    end
  end

  assign ins_ready  = (st_q == ST_IDLE) && !clear;
  assign leaf_count = lcnt_q;
  assign node_count = ncnt_q;

  // ------------------------------------------------------------ leaf scan
  assign sc_valid = (LPW+1)'(sc_idx) < lcnt_q;
  assign sc_key   = leaf_key[sc_idx];
  assign sc_val   = leaf_val[sc_idx];

  // An insert is only taken when the trie is idle.
  a_ins_idle: assert property (@(posedge clk) disable iff (!rst_n)
    ins_valid && ins_ready |=> st_q == ST_WALK || clear);

endmodule
