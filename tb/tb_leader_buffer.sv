// tb_leader_buffer: inserts leaders for several leaves of one search unit
// (NSU = 4, so leaves 1, 5, 9 ... belong to it) and checks the group
// contents read back, the cap of LB_ENTRIES leaders per leaf with the drop
// counter, a slot being taken over by another leaf that maps to it, and
// flush.
module tb_leader_buffer;
  import tigris_pkg::*;
  localparam int NSU = 4, LB_SLOTS = 4, LB_ENTRIES = 16, EW = 4;
  logic clk = 0, rst_n = 0;
  logic flush, ins_valid;
  leaf_t rd_leaf, ins_leaf;
  logic [EW-1:0] rd_idx;
  logic [EW:0] rd_count;
  leader_t rd_entry, ins_entry;
  logic [31:0] cnt_added, cnt_dropped;
  int checks = 0, failures = 0;

  leader_buffer #(.NSU(NSU), .LB_SLOTS(LB_SLOTS), .LB_ENTRIES(LB_ENTRIES)) dut (.*);
  always #5 clk = ~clk;

  task automatic chk(bit ok, string s);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", s); end
  endtask

  function automatic leader_t mk(int leaf, int i);
    return '{qpt: '{x: coord_t'(leaf), y: coord_t'(i), z: 7}, res_idx: paddr_t'(leaf * 100 + i),
             res_pt: '{x: coord_t'(i), y: coord_t'(leaf), z: 9}};
  endfunction

  task automatic ins(int leaf, int i);
    @(negedge clk);
    ins_valid = 1; ins_leaf = leaf_t'(leaf); ins_entry = mk(leaf, i);
    @(negedge clk);
    ins_valid = 0;
  endtask

  initial begin
    flush = 0; ins_valid = 0; rd_leaf = '0; ins_leaf = '0; rd_idx = '0; ins_entry = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // three leaves of this search unit, different slots
    for (int i = 0; i < 5; i++) begin ins(1, i); ins(5, i); ins(9, i); end
    for (int l = 1; l <= 9; l += 4) begin
      rd_leaf = leaf_t'(l);
      #1;
      chk(rd_count == 5, $sformatf("leaf %0d holds %0d leaders", l, rd_count));
      for (int i = 0; i < 5; i++) begin
        rd_idx = EW'(i);
        #1;
        chk(rd_entry == mk(l, i), $sformatf("leaf %0d entry %0d", l, i));
      end
    end
    // cap at 16
    for (int i = 5; i < 20; i++) ins(1, i);
    rd_leaf = 1;
    #1;
    chk(rd_count == 16, "group not capped at 16");
    chk(cnt_dropped == 4, $sformatf("dropped %0d", cnt_dropped));
    chk(cnt_added == 15 + 11, $sformatf("added %0d", cnt_added));
    rd_idx = 15;
    #1;
    chk(rd_entry == mk(1, 15), "last entry");
    // leaf 17 maps to the slot of leaf 1 ((17/4) mod 4 = 0): takes it over
    ins(17, 0);
    rd_leaf = 1;
    #1;
    chk(rd_count == 0, "old leaf still visible after takeover");
    rd_leaf = 17; rd_idx = 0;
    #1;
    chk(rd_count == 1 && rd_entry == mk(17, 0), "takeover");
    // flush
    @(negedge clk);
    flush = 1;
    @(negedge clk);
    flush = 0;
    rd_leaf = 5;
    #1;
    chk(rd_count == 0, "flush");
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
