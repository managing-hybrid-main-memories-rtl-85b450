// tb_dram_tag_store: fills, invalidations, probes and lookups on a small tag
// store compared with a reference LRU model kept here (queues of ways per
// set, most recent first); checks hits, frames, victim choice, the port-B
// wait when port A is busy and the clearing time after reset.
module tb_dram_tag_store;
  import ubm_pkg::*;
  localparam int SETS = 4, WAYS = 4;
  localparam int SW = $clog2(SETS), WW = $clog2(WAYS);
  logic clk = 0, rst_n = 0, ready;
  logic a_valid = 0, a_resp_valid, a_hit;
  page_t a_page = '0;
  logic [$clog2(SETS*WAYS)-1:0] a_frame;
  logic b_valid = 0, b_ready, b_resp_valid, b_hit, b_victim_valid;
  logic [1:0] b_op = 0;
  page_t b_page = '0, b_victim_page;
  logic [WW-1:0] b_way = '0, b_victim_way;
  int checks = 0, failures = 0;

  dram_tag_store #(.SETS(SETS), .WAYS(WAYS)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  // model: per set, tag and valid per way, and recency order of ways
  longint mtag [SETS][WAYS];
  bit     mval [SETS][WAYS];
  int     order [SETS][$];     // way numbers, most recent first

  function automatic void touch(int s, int w);
    foreach (order[s][j]) if (order[s][j] == w) begin order[s].delete(j); break; end
    order[s].push_front(w);
  endfunction

  function automatic int find(int s, longint pg);
    for (int w = 0; w < WAYS; w++) if (mval[s][w] && mtag[s][w] == pg) return w;
    return -1;
  endfunction

  function automatic int victim(int s);
    for (int w = 0; w < WAYS; w++) if (!mval[s][w]) return w;
    return order[s][WAYS-1];
  endfunction

  initial begin
    int cyc = 0, nhit = 0, nrepl = 0;
    for (int s = 0; s < SETS; s++) for (int w = 0; w < WAYS; w++) begin
      mval[s][w] = 0; mtag[s][w] = 0; order[s].push_back(w);
    end
    repeat (2) @(posedge clk); #1 rst_n = 1;
    while (!ready) begin @(posedge clk); #1 cyc++; end
    chk("clear time", cyc, SETS);
    for (int i = 0; i < 6000; i++) begin
      int kind, s, w;
      longint pg;
      pg = longint'($urandom_range(23));
      s  = int'(pg % SETS);
      kind = $urandom_range(3);
      if (kind == 0) begin
        // port A lookup, and port B must wait in the same cycle
        a_valid = 1; a_page = page_t'(pg); b_valid = 1; b_op = 0; b_page = page_t'(pg);
        #1 chk("b waits", b_ready, 0);
        @(posedge clk); #1 a_valid = 0; b_valid = 0;
        w = find(s, pg);
        chk("a resp", a_resp_valid, 1);
        chk("a hit", a_hit, w >= 0);
        if (w >= 0) begin chk("a frame", a_frame, s * WAYS + w); touch(s, w); nhit++; end
        chk("no b resp", b_resp_valid, 0);
      end else begin
        // migration engine: probe, then fill the victim (invalidate it first if used)
        int v;
        b_valid = 1; b_op = 0; b_page = page_t'(pg);
        #1 chk("b ready", b_ready, 1);
        @(posedge clk); #1 b_valid = 0;
        w = find(s, pg);
        v = victim(s);
        chk("b resp", b_resp_valid, 1);
        chk("b hit", b_hit, w >= 0);
        if (w < 0) begin
          chk("victim way", b_victim_way, v);
          chk("victim valid", b_victim_valid, mval[s][v]);
          if (mval[s][v]) begin
            chk("victim page", b_victim_page, mtag[s][v]);
            nrepl++;
            b_valid = 1; b_op = 2; b_page = page_t'(mtag[s][v]); b_way = WW'(v);
            @(posedge clk); #1 b_valid = 0;
            mval[s][v] = 0;
          end
          b_valid = 1; b_op = 1; b_page = page_t'(pg); b_way = WW'(v);
          @(posedge clk); #1 b_valid = 0;
          mval[s][v] = 1; mtag[s][v] = pg; touch(s, v);
        end
      end
    end
    chk("hits seen", nhit > 100, 1);
    chk("replacements seen", nrepl > 100, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
