// tb_priority_queue: a 16-entry queue receives bursts of random candidates (one per
// cycle, with gaps), is drained in order and compared with a stable sort of the
// inputs; drops, occupancy and the settle time (at most DEPTH cycles) are checked.
module tb_priority_queue;
  import fatrq_pkg::*;
  localparam int DEPTH = 16;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, clear = 0, push = 0, pop = 0;
  cand_t push_cand = '0;
  logic head_valid, busy, drop;
  cand_t head_o;
  logic [4:0] count;
  int drops = 0;

  priority_queue #(.DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) if (rst_n && drop) drops++;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input int n, input int range);
    cand_t ins [$];
    cand_t srt [$];
    int settle;
    bit seen [int];
    cand_t hv;
    int hid;
    drops = 0;
    @(negedge clk); clear = 1; @(negedge clk); clear = 0;
    for (int i = 0; i < n; i++) begin
      cand_t c;
      c.id = id_t'(i);
      c.score = dist_t'($signed($urandom_range(range)) - (range / 4));
      ins.push_back(c);
      push = 1; push_cand = c;
      @(negedge clk);
      push = 0;
      if ($urandom_range(3) == 0) @(negedge clk);
    end
    settle = 0;
    while (busy) begin @(negedge clk); settle++; end
    checks++;
    if (settle > DEPTH) begin failures++; $display("FAIL settle %0d", settle); end
    // reference: stable insertion sort, keep DEPTH smallest
    foreach (ins[i]) begin
      int p = srt.size();
      while (p > 0 && srt[p-1].score > ins[i].score) p--;
      srt.insert(p, ins[i]);
    end
    checks++;
    if (drops != ((n > DEPTH) ? n - DEPTH : 0)) begin failures++; $display("FAIL drops %0d", drops); end
    checks++;
    if (int'(count) != ((n > DEPTH) ? DEPTH : n)) begin failures++; $display("FAIL count %0d", count); end
    for (int i = 0; i < ((n > DEPTH) ? DEPTH : n); i++) begin
      // equal distances may leave in either order: check the distance at each rank,
      // that the pointer belongs to an input with that distance, and that no pointer repeats
      checks++;
      hid = int'(head_o.id);
      hv  = '0;
      if (hid < n) hv = ins[hid];
      if (!head_valid || head_o.score !== srt[i].score || hid >= n
          || hv.score !== head_o.score || seen.exists(hid)) begin
        failures++;
        $display("FAIL rank %0d: got id %0d score %0d want score %0d", i,
                 head_o.id, head_o.score, srt[i].score);
      end
      seen[hid] = 1'b1;
      pop = 1; @(negedge clk); pop = 0;
    end
    checks++;
    if (head_valid || count != 0) begin failures++; $display("FAIL not empty after drain"); end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    run(10, 1000);
    run(40, 1000);
    run(64, 20);        // many ties
    run(100, 32'h7fff_0000);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
