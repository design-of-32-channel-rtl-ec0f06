// tb_sync_fifo: random push/pop traffic against a queue model for a
// 54-bit x 64 FIFO (the readout FIFO) and a 64-bit x 1024 FIFO (the output
// FIFO); checks head data, empty, full and count every clock.
module tb_sync_fifo;
  logic clk = 0, rst;
  logic wa, ra, fa, ea;
  logic [53:0] da, qa;
  logic [6:0]  ca;
  logic wb, rb, fb, eb;
  logic [63:0] db, qb;
  logic [10:0] cb;
  int checks = 0, failures = 0;
  logic [53:0] ma[$];
  logic [63:0] mb[$];

  sync_fifo #(.WIDTH(54), .DEPTH(64)) dut_a (
    .clk(clk), .rst(rst), .wr_en(wa), .din(da), .full(fa), .rd_en(ra), .dout(qa), .empty(ea), .count(ca));
  sync_fifo #(.WIDTH(64), .DEPTH(1024)) dut_b (
    .clk(clk), .rst(rst), .wr_en(wb), .din(db), .full(fb), .rd_en(rb), .dout(qb), .empty(eb), .count(cb));

  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int pa, pb;
    bit seen_full_a, seen_full_b;
    rst = 1; wa = 0; ra = 0; wb = 0; rb = 0; da = 0; db = 0;
    repeat (2) @(posedge clk);
    #1 rst = 0;
    for (int c = 0; c < 20000; c++) begin
      // phases: fill-biased, then drain-biased
      int bias;
      bias = ((c / 2500) % 2 == 0) ? 3 : 1;
      wa = ($urandom % 4) < bias;  ra = ($urandom % 4) >= bias;
      wb = ($urandom % 4) < bias;  rb = ($urandom % 4) >= bias;
      da = {$urandom, $urandom};   db = {$urandom, $urandom};
      checks += 4;
      if (ea !== (ma.size() == 0) || fa !== (ma.size() == 64) || ca !== 7'(ma.size())) failures++;
      if (eb !== (mb.size() == 0) || fb !== (mb.size() == 1024) || cb !== 11'(mb.size())) failures++;
      if (ma.size() > 0 && qa !== ma[0]) failures++;
      if (mb.size() > 0 && qb !== mb[0]) failures++;
      if (fa) seen_full_a = 1;
      if (fb) seen_full_b = 1;
      @(posedge clk);
      pa = ma.size(); pb = mb.size();
      if (ra && pa > 0) void'(ma.pop_front());
      if (wa && pa < 64) ma.push_back(da);
      if (rb && pb > 0) void'(mb.pop_front());
      if (wb && pb < 1024) mb.push_back(db);
      #1;
    end
    checks++;
    if (!seen_full_a || !seen_full_b) begin
      failures++;
      $display("FAIL full never reached");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
