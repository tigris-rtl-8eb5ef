// tb_gbuf_bank: three requesters hammer one global-buffer partition with
// random reads and writes. Checks: at most one grant per cycle, a read
// returns to the requester that issued it one cycle after the grant with the
// last value written (scoreboard), and no requester waits more than NREQ
// cycles for a grant.
module tb_gbuf_bank;
  localparam int NREQ = 3, DEPTH = 16, WIDTH = 24, AW = 4;
  logic clk = 0, rst_n = 0;
  logic [NREQ-1:0] req, we, gnt, rvalid;
  logic [NREQ-1:0][AW-1:0] addr;
  logic [NREQ-1:0][WIDTH-1:0] wdata;
  logic [WIDTH-1:0] rdata;
  int checks = 0, failures = 0;
  logic [WIDTH-1:0] model [DEPTH];
  logic [WIDTH-1:0] expect_q [NREQ];
  int wait_c [NREQ];
  logic [NREQ-1:0] pend, g;

  gbuf_bank #(.NREQ(NREQ), .DEPTH(DEPTH), .WIDTH(WIDTH)) dut (.*);

  always #5 clk = ~clk;

  task automatic chk(bit ok, string s);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", s); end
  endtask

  initial begin
    req = '0; we = '0; addr = '0; wdata = '0; pend = '0;
    for (int i = 0; i < DEPTH; i++) model[i] = '0;
    for (int i = 0; i < NREQ; i++) wait_c[i] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // initialise every word through requester 0
    for (int i = 0; i < DEPTH; i++) begin
      req[0] = 1; we[0] = 1; addr[0] = AW'(i); wdata[0] = '0;
      @(negedge clk);
    end
    req = '0;
    for (int cyc = 0; cyc < 3000; cyc++) begin
      // new requests for idle requesters
      for (int i = 0; i < NREQ; i++) if (!req[i] && !pend[i] && ($urandom % 2)) begin
        req[i] = 1; we[i] = $urandom % 2; addr[i] = AW'($urandom % DEPTH); wdata[i] = WIDTH'($urandom);
      end
      #1;
      g = gnt;
      chk($countones(gnt) <= 1, "more than one grant");
      chk(!(|req) || (|gnt), "requests but no grant");
      for (int i = 0; i < NREQ; i++) begin
        if (gnt[i]) begin
          if (we[i]) model[addr[i]] = wdata[i];
          else begin expect_q[i] = model[addr[i]]; pend[i] = 1; end
          wait_c[i] = 0;
        end else if (req[i]) begin
          wait_c[i]++;
          chk(wait_c[i] < NREQ, "requester starved");
        end
      end
      @(posedge clk);
      #1;
      for (int i = 0; i < NREQ; i++) begin
        if (pend[i]) begin
          chk(rvalid[i], "rvalid missing");
          chk(rdata == expect_q[i], $sformatf("read data %h expected %h", rdata, expect_q[i]));
          pend[i] = 0;
        end else chk(!rvalid[i], "spurious rvalid");
        if (g[i]) req[i] = 0;
      end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
