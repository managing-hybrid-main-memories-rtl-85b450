// dram_tag_store: tag store of DRAM used as a set-associative page cache of NVM.
//
// DRAM is organised as a WAYS-way set-associative cache of 4 KB NVM pages
// with LRU replacement. The tag store answers, for every memory request,
// whether the page is in DRAM and in which frame (set * WAYS + way), and lets
// the migration engine pick the victim frame for a page to be migrated and
// then write or clear a frame's tag. All data starts in NVM: after reset all
// tags are invalid.
//
// Port A serves memory requests: a lookup that hits makes the way most
// recently used. Port B serves the migration engine with three operations:
// PROBE (hit check plus the LRU victim way and its page, no LRU change),
// FILL (write page into a way, make it most recently used) and INVAL (clear
// a way). Port B waits (b_ready low) in a cycle in which port A is used.
//
// Follows the design: 16-way set associativity, LRU, 4 KB pages, all data in
// NVM at start. The set count follows from the 512 MB DRAM: 131072 frames /
// 16 ways = 8192 sets. Own choices: true LRU with a 4-bit age per way, the
// set index taken from the low page-number bits, two ports with port A
// first, results registered one cycle after the request (the evaluation
// charges 6 cycles for this lookup; any extra pipelining is left to the
// integrator), a SETS-cycle clearing sweep after reset ('ready' low).
module dram_tag_store
  import ubm_pkg::*;
#(
  parameter int unsigned SETS = 8192,
  parameter int unsigned WAYS = 16
) (
  input  logic              clk,
  input  logic              rst_n,
  output logic              ready,
  // port A: request lookup
  input  logic              a_valid,
  input  page_t             a_page,
  output logic              a_resp_valid,
  output logic              a_hit,
  output logic [$clog2(SETS*WAYS)-1:0] a_frame,
  // port B: migration engine
  input  logic              b_valid,
  output logic              b_ready,
  input  logic [1:0]        b_op,          // 0 PROBE, 1 FILL, 2 INVAL
  input  page_t             b_page,
  input  logic [$clog2(WAYS)-1:0] b_way,   // FILL / INVAL way
  output logic              b_resp_valid,
  output logic              b_hit,
  output logic [$clog2(WAYS)-1:0] b_victim_way,
  output logic              b_victim_valid,
  output page_t             b_victim_page
);

  localparam int unsigned SET_W = $clog2(SETS);
  localparam int unsigned WAY_W = $clog2(WAYS);
  localparam int unsigned TAG_W = PAGE_W - SET_W;

  localparam logic [1:0] OP_PROBE = 2'd0, OP_FILL = 2'd1, OP_INVAL = 2'd2;

  typedef struct packed {
    logic             valid;
    logic [TAG_W-1:0] tag;
    logic [WAY_W-1:0] age;     // 0 = most recently used
  } way_t;
  typedef way_t [WAYS-1:0] set_t;

  set_t mem [SETS];

  logic             init_q;
  logic [SET_W-1:0] init_idx_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      init_q     <= 1'b1;
      init_idx_q <= '0;
    end else if (init_q) begin
      init_idx_q <= init_idx_q + 1'b1;
      if (init_idx_q == SET_W'(SETS - 1)) init_q <= 1'b0;
    end
  end

  assign ready   = !init_q;
  assign b_ready = !init_q && !a_valid;

  // make way 'w' most recently used in set 's'
  function automatic set_t touch(set_t s, logic [WAY_W-1:0] w);
    set_t r;
    r = s;
    for (int i = 0; i < WAYS; i++)
      if (s[i].age < s[w].age) r[i].age = s[i].age + 1'b1;
    r[w].age = '0;
    return r;
  endfunction

  // ---- port A ----
  logic [SET_W-1:0] a_idx;
  set_t             a_set;
  logic             a_h;
  logic [WAY_W-1:0] a_way;

  assign a_idx = a_page[SET_W-1:0];
  assign a_set = mem[a_idx];
  always_comb begin
    a_h = 1'b0; a_way = '0;
    for (int i = WAYS - 1; i >= 0; i--)
      if (a_set[i].valid && a_set[i].tag == a_page[PAGE_W-1:SET_W]) begin
        a_h = 1'b1; a_way = WAY_W'(i);
      end
  end

  // ---- port B ----
  logic [SET_W-1:0] b_idx;
  set_t             b_set, b_wset;
  logic             b_h;
  logic [WAY_W-1:0] b_hway, b_vway;

  assign b_idx = b_page[SET_W-1:0];
  assign b_set = mem[b_idx];
  always_comb begin
    b_h = 1'b0; b_hway = '0; b_vway = '0;
    for (int i = WAYS - 1; i >= 0; i--)
      if (b_set[i].valid && b_set[i].tag == b_page[PAGE_W-1:SET_W]) begin
        b_h = 1'b1; b_hway = WAY_W'(i);
      end
    for (int i = WAYS - 1; i >= 0; i--)
      if (b_set[i].age == WAY_W'(WAYS - 1)) b_vway = WAY_W'(i);
    for (int i = WAYS - 1; i >= 0; i--)
      if (!b_set[i].valid) b_vway = WAY_W'(i);
    b_wset = b_set;
    if (b_op == OP_FILL) begin
      b_wset = touch(b_set, b_way);
      b_wset[b_way].valid = 1'b1;
      b_wset[b_way].tag   = b_page[PAGE_W-1:SET_W];
    end else if (b_op == OP_INVAL) begin
      b_wset[b_way].valid = 1'b0;
    end
  end

  set_t init_set;
  always_comb
    for (int i = 0; i < WAYS; i++) begin
      init_set[i]     = '0;
      init_set[i].age = WAY_W'(i);
    end

  always_ff @(posedge clk) begin
    if (init_q)
      mem[init_idx_q] <= init_set;
    else if (a_valid) begin
      if (a_h) mem[a_idx] <= touch(a_set, a_way);
    end else if (b_valid && b_op != OP_PROBE)
      mem[b_idx] <= b_wset;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      a_resp_valid <= 1'b0; a_hit <= 1'b0; a_frame <= '0;
      b_resp_valid <= 1'b0; b_hit <= 1'b0; b_victim_way <= '0;
      b_victim_valid <= 1'b0; b_victim_page <= '0;
    end else begin
      a_resp_valid   <= a_valid && !init_q;
      a_hit          <= a_h;
      a_frame        <= {a_idx, a_way};
      b_resp_valid   <= b_valid && b_ready;
      b_hit          <= b_h;
      b_victim_way   <= b_h ? b_hway : b_vway;
      b_victim_valid <= b_set[b_vway].valid;
      b_victim_page  <= {b_set[b_vway].tag, b_idx};
    end
  end

endmodule
