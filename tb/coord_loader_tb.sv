// coord_loader_tb -- fills a coordinate memory with known values, runs two
// geometries of 5 orbitals and checks every (x,y,z) token, the token count, and
// that without back-pressure a geometry takes 3*N_ORB cycles (one scalar read
// per cycle). A second run adds random back-pressure.
module coord_loader_tb;
  import tb_fx_pkg::*;
  localparam int N = 5, G = 2;
  logic clk = 0, rst_n = 0, start = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic busy, rd, ov, ordy;
  logic [$clog2(G*N*3)-1:0] addr;
  fx_t mem [G*N*3];
  fx_t mdata;
  coord_t od;
  logic bp = 0;

  coord_loader #(.N_ORB(N), .MAX_GEOM(G)) dut (
    .clk, .rst_n, .start, .n_geom(2'd2), .busy, .mem_addr(addr), .mem_rd(rd), .mem_data(mdata),
    .out_valid(ov), .out_ready(ordy), .out_data(od));

  always_ff @(posedge clk) if (rd) mdata <= mem[addr];
  always_ff @(posedge clk) ordy <= bp ? ($urandom_range(0, 2) == 0) : 1'b1;

  function automatic fx_t val(int a);
    return fx_t'(a * 1000 + 7);
  endfunction

  int tok = 0, cyc = 0, t_first = 0, t_last = 0;
  always @(posedge clk) begin
    cyc++;
    if (rst_n && ov && ordy) begin
      checks++;
      if (od.x != val(tok*3) || od.y != val(tok*3+1) || od.z != val(tok*3+2)) begin
        failures++; $display("token %0d wrong", tok);
      end
      if (tok == 0) t_first = cyc;
      t_last = cyc;
      tok++;
    end
  end

  initial begin
    for (int a = 0; a < G*N*3; a++) mem[a] = val(a);
    repeat (3) @(posedge clk); rst_n = 1;
    @(posedge clk); start <= 1; @(posedge clk); start <= 0;
    @(posedge clk); wait (!busy); repeat (2) @(posedge clk);
    checks++; if (tok != G*N) begin failures++; $display("count %0d", tok); end
    checks++; if (t_last - t_first != 3*(G*N-1)) begin failures++; $display("span %0d", t_last-t_first); end
    tok = 0; bp = 1;
    @(posedge clk); start <= 1; @(posedge clk); start <= 0;
    @(posedge clk); wait (!busy); repeat (2) @(posedge clk);
    checks++; if (tok != G*N) begin failures++; $display("count bp %0d", tok); end
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
