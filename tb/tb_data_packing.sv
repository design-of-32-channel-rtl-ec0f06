// tb_data_packing: random records and channel numbers go in with random
// back-pressure at the output; each 64-bit word must carry, by explicit
// bit slices, marker 3'b101 in [63:61], channel in [60:54], trigger count
// in [53:46], time tag in [45:20] and time in [19:0], in input order,
// with none lost or duplicated.
module tb_data_packing;
  import tdc_pkg::*;
  logic clk = 0, rst, in_valid, in_ready, out_valid, out_ready;
  logic [6:0] in_ch;
  rec_t in_rec;
  word_t out_word;
  logic [63:0] w;
  int checks = 0, failures = 0;
  logic [6:0]  e_ch[$];
  logic [7:0]  e_tr[$];
  logic [25:0] e_tag[$];
  logic [19:0] e_tm[$];

  data_packing dut (.clk(clk), .rst(rst), .in_valid(in_valid), .in_ready(in_ready),
    .in_ch(in_ch), .in_rec(in_rec), .out_valid(out_valid), .out_ready(out_ready),
    .out_word(out_word));

  always #5 clk = ~clk;
  assign w = out_word;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int n_out = 0, n_in = 0;
    rst = 1; in_valid = 0; out_ready = 0; in_ch = 0; in_rec = '0;
    repeat (2) @(posedge clk);
    #1 rst = 0;
    for (int c = 0; c < 3000; c++) begin
      logic [7:0] tr; logic [25:0] tg; logic [19:0] tm;
      out_ready = ($urandom % 3) != 0;
      in_valid  = ($urandom % 2) != 0;
      in_ch = 7'($urandom);
      tr = 8'($urandom); tg = 26'($urandom); tm = 20'($urandom);
      in_rec.trig = tr; in_rec.tag = tg; in_rec.tm = tm;
      @(posedge clk);
      if (out_valid && out_ready) begin
        checks++;
        if (w[63:61] !== 3'b101 || w[60:54] !== e_ch[0] || w[53:46] !== e_tr[0] ||
            w[45:20] !== e_tag[0] || w[19:0] !== e_tm[0]) begin
          failures++;
          if (failures < 10) $display("FAIL word %h", w);
        end
        void'(e_ch.pop_front()); void'(e_tr.pop_front()); void'(e_tag.pop_front()); void'(e_tm.pop_front());
        n_out++;
      end
      if (in_valid && in_ready) begin
        e_ch.push_back(in_ch); e_tr.push_back(tr); e_tag.push_back(tg); e_tm.push_back(tm);
        n_in++;
      end
      #1;
    end
    checks++;
    if (n_in - n_out > 1 || n_out < 500) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
