// tb_node_cache: fills Node Sets for several leaves into a 2-entry node
// cache and checks lookups (hit only for the two most recently filled
// leaves, FIFO replacement), in-order read-back of each entry, that an entry
// being filled is not reported as a hit, and flush.
module tb_node_cache;
  import tigris_pkg::*;
  localparam int NC_ENTRIES = 2, NC_SET_MAX = 8;
  logic clk = 0, rst_n = 0;
  logic flush, hit, rd_start, rd_next, fill_start, fill_we, fill_done;
  leaf_t lookup_leaf, fill_leaf;
  logic [0:0] hit_entry, rd_entry;
  point_t rd_data, fill_data;
  int checks = 0, failures = 0;

  node_cache #(.NC_ENTRIES(NC_ENTRIES), .NC_SET_MAX(NC_SET_MAX)) dut (.*);
  always #5 clk = ~clk;

  task automatic chk(bit ok, string s);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", s); end
  endtask

  function automatic point_t pt(int leaf, int i);
    return '{x: coord_t'(leaf), y: coord_t'(i), z: coord_t'(leaf * 31 + i)};
  endfunction

  task automatic fill(int leaf, int n);
    @(negedge clk);
    fill_start = 1; fill_leaf = leaf_t'(leaf);
    @(negedge clk);
    fill_start = 0;
    lookup_leaf = leaf_t'(leaf);
    #1;
    chk(!hit, "entry under fill reported as hit");
    for (int i = 0; i < n; i++) begin
      fill_we = 1; fill_data = pt(leaf, i);
      @(negedge clk);
    end
    fill_we = 0; fill_done = 1;
    @(negedge clk);
    fill_done = 0;
  endtask

  task automatic readback(int leaf, int n, bit expect_hit);
    lookup_leaf = leaf_t'(leaf);
    #1;
    chk(hit == expect_hit, $sformatf("leaf %0d hit=%0d", leaf, hit));
    if (hit) begin
      @(negedge clk);
      rd_start = 1; rd_entry = hit_entry;
      @(negedge clk);
      rd_start = 0;
      for (int i = 0; i < n; i++) begin
        chk(rd_data == pt(leaf, i), $sformatf("leaf %0d node %0d", leaf, i));
        rd_next = 1;
        @(negedge clk);
      end
      rd_next = 0;
    end
  endtask

  initial begin
    flush = 0; rd_start = 0; rd_next = 0; fill_start = 0; fill_we = 0; fill_done = 0;
    lookup_leaf = '0; fill_leaf = '0; rd_entry = '0; fill_data = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    readback(3, 0, 0);
    fill(3, 5);
    readback(3, 5, 1);
    fill(4, 8);
    readback(3, 5, 1);
    readback(4, 8, 1);
    fill(6, 2);              // replaces leaf 3 (first in, first out)
    readback(3, 0, 0);
    readback(4, 8, 1);
    readback(6, 2, 1);
    @(negedge clk);
    flush = 1;
    @(negedge clk);
    flush = 0;
    readback(4, 0, 0);
    readback(6, 0, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
