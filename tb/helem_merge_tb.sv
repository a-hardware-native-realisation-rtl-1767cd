// helem_merge_tb -- merge of the even and odd element streams.
// N = 5 gives 15 pairs per geometry: the even branch supplies positions
// 0, 2, ..., 14 and the odd branch 1, 3, ..., 13. Three geometries are sent
// with random gaps on both inputs and random back-pressure on the output. Each
// output beat must carry positions 2b and 2b+1 of the flat order in its two
// lanes (keep = 11), and the eighth beat of each geometry only position 14
// (keep = 01). A final run without gaps checks the rate: two elements per beat,
// one beat per cycle.
module helem_merge_tb;
  import tb_fx_pkg::*;
  localparam int N = 5, NP = N*(N+1)/2, NB = (NP+1)/2, NG = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic ev = 0, er, ovd = 0, orr, ov, ordy = 1;
  helem_t ed, odd;
  helem_t [1:0] od;
  logic [1:0] ok;
  bit gaps = 1;

  helem_merge #(.N_ORB(N)) dut (.clk, .rst_n, .even_valid(ev), .even_ready(er), .even_data(ed),
    .odd_valid(ovd), .odd_ready(orr), .odd_data(odd), .out_valid(ov), .out_ready(ordy),
    .out_data(od), .out_keep(ok));

  int pi_ [NP], pj_ [NP];
  function automatic helem_t elem(int g, int n);
    return '{i: idx_t'(pi_[n]), j: idx_t'(pj_[n]), h: fx_t'(g*1000 + n)};
  endfunction

  int bcnt = 0, cyc = 0, tlast0 = 0, tlast1 = 0;
  always @(posedge clk) begin
    cyc++;
    ordy <= gaps ? ($urandom_range(0, 3) != 0) : 1'b1;
    if (rst_n && ov && ordy) begin
      int g, b;
      g = bcnt / NB; b = bcnt % NB;
      checks++;
      if (b == NB-1) begin
        if (ok != 2'b01 || od[0] != elem(g, 2*b)) begin failures++; $display("last beat g%0d", g); end
      end else if (ok != 2'b11 || od[0] != elem(g, 2*b) || od[1] != elem(g, 2*b+1)) begin
        failures++; $display("beat g%0d b%0d: %h %h", g, b, od, {elem(g,2*b+1), elem(g,2*b)});
      end
      if (g == NG-1 && b == 0) tlast0 = cyc;
      if (g == NG-1 && b == NB-1) tlast1 = cyc;
      bcnt++;
    end
  end

  initial begin
    int n; n = 0;
    for (int i = 0; i < N; i++) for (int j = i; j < N; j++) begin pi_[n] = i; pj_[n] = j; n++; end
    repeat (3) @(posedge clk); rst_n = 1;
    for (int g = 0; g < NG; g++) begin
      if (g == NG-1) begin gaps = 0; repeat (4) @(posedge clk); end
      fork
        begin
        for (int k = 0; k < NP; k += 2) begin
          @(negedge clk);
          if (gaps && $urandom_range(0, 2) == 0) begin ev = 0; @(negedge clk); end
          ev = 1; ed = elem(g, k);
          #1; while (!er) begin @(negedge clk); #1; end   // after both drivers settled
          @(posedge clk);
        end
        @(negedge clk); ev = 0;
        end
        begin
        for (int k = 1; k < NP; k += 2) begin
          @(negedge clk);
          if (gaps && $urandom_range(0, 2) == 0) begin ovd = 0; @(negedge clk); end
          ovd = 1; odd = elem(g, k);
          #1; while (!orr) begin @(negedge clk); #1; end
          @(posedge clk);
        end
        @(negedge clk); ovd = 0;
        end
      join
      repeat (5) @(posedge clk);
    end
    repeat (10) @(posedge clk);
    checks++; if (tlast1 - tlast0 != NB-1) begin failures++; $display("rate: %0d", tlast1-tlast0); end
    checks++; if (bcnt != NG*NB) begin failures++; $display("beats %0d", bcnt); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (3000) @(posedge clk);
    failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
