// coord_loader -- "Coordinates Loading" stage of the streaming task graph.
//
// Walks the coordinate array of n_geom geometries, N_ORB orbital centres each,
// one scalar component per cycle (x, y, z in turn), and emits one coord_t token
// on the coordinate stream after every third read. This is the loop structure
// of the published load_coords kernel: a flat loop of 3*N_ORB iterations at
// initiation interval 1, so a geometry takes 3*N_ORB cycles when the consumer
// never stalls. Coordinates are per orbital (not per atom), as in that kernel.
//
// Interface: start (one-cycle pulse, with n_geom) begins a run; the loader
// reads a synchronous memory through mem_addr/mem_rd with data valid one cycle
// later on mem_data; the address of component k of orbital i of geometry g is
// (g*N_ORB + i)*3 + k. The output stream is a valid/ready handshake; while the
// consumer withholds ready no further reads are issued. busy is high from start
// until the last token has been accepted. Memory latency of one cycle and the
// flat address map are choices of this design.
module coord_loader
  import tb_fx_pkg::*;
#(
  parameter int N_ORB    = 98,
  parameter int MAX_GEOM = 10,
  localparam int AW      = $clog2(MAX_GEOM*N_ORB*3),
  localparam int GW      = $clog2(MAX_GEOM+1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [GW-1:0] n_geom,
  output logic          busy,
  output logic [AW-1:0] mem_addr,
  output logic          mem_rd,
  input  fx_t           mem_data,
  output logic          out_valid,
  input  logic          out_ready,
  output coord_t        out_data
);

  logic [AW-1:0] addr, last_addr;
  logic [1:0]    k_iss, k_ret;
  logic          issuing, ret_v, ret_last, last_issued;
  fx_t           xr, yr;

  assign issuing  = busy && !last_issued && !(out_valid && !out_ready);
  assign mem_addr = addr;
  assign mem_rd   = issuing;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy        <= 1'b0;
      addr        <= '0;
      last_addr   <= '0;
      k_iss       <= '0;
      k_ret       <= '0;
      ret_v       <= 1'b0;
      ret_last    <= 1'b0;
      last_issued <= 1'b0;
      xr          <= '0;
      yr          <= '0;
      out_valid   <= 1'b0;
      out_data    <= '0;
    end else begin
      ret_v    <= issuing;
      k_ret    <= k_iss;
      ret_last <= issuing && (addr == last_addr);
      if (start && !busy && n_geom != '0) begin
        busy        <= 1'b1;
        addr        <= '0;
        k_iss       <= '0;
        last_issued <= 1'b0;
        last_addr   <= AW'(int'(n_geom) * N_ORB * 3 - 1);
      end else if (issuing) begin
        addr  <= addr + 1'b1;
        k_iss <= (k_iss == 2'd2) ? 2'd0 : k_iss + 2'd1;
        if (addr == last_addr) last_issued <= 1'b1;
      end
      // returned data
      if (ret_v) begin
        unique case (k_ret)
          2'd0:    xr <= mem_data;
          2'd1:    yr <= mem_data;
          default: begin
            out_data  <= '{x: xr, y: yr, z: mem_data};
            out_valid <= 1'b1;
          end
        endcase
      end
      if (out_valid && out_ready && !(ret_v && k_ret == 2'd2)) out_valid <= 1'b0;
      // finished once the final token leaves
      if (busy && last_issued && !ret_v && !ret_last && (!out_valid || out_ready))
        busy <= 1'b0;
    end
  end

  // a token offered must stay put until it is taken
  assert property (@(posedge clk) disable iff (!rst_n)
                   out_valid && !out_ready |=> out_valid && $stable(out_data));

endmodule
