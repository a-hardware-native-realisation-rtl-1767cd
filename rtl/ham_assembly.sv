// ham_assembly -- "Hamiltonian Assembly" stage.
//
// Collects the stream of Hamiltonian elements (i, j, H_ij), i <= j, into a
// matrix buffer and announces a complete matrix once all
// NPAIR = N_ORB*(N_ORB+1)/2 elements of a geometry have arrived; the
// diagonaliser only starts on a fully assembled matrix, as in the published
// workflow. Elements may arrive in any order; each is written at (i, j) of the
// upper triangle, so the buffer holds the symmetric matrix.
//
// Interface: elements arrive on a valid/ready stream, one per cycle. When the
// count is complete, full rises and the input is refused until the consumer
// pulses release after copying the matrix out through the synchronous read
// port (rd_i, rd_j -> rd_data one cycle later; reads are mirrored, so (j, i)
// returns H_ij). Elements of the next geometry can then be accepted while the
// previous matrix is being diagonalised. The buffer size and the
// full/release handshake are this design's choices.
module ham_assembly
  import tb_fx_pkg::*;
#(
  parameter int N_ORB = 98
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   in_valid,
  output logic   in_ready,
  input  helem_t in_data,
  output logic   full,
  input  logic   release_mat,
  input  idx_t   rd_i,
  input  idx_t   rd_j,
  output fx_t    rd_data
);

  localparam int NPAIR = N_ORB*(N_ORB+1)/2;
  localparam int CW    = $clog2(NPAIR+1);
  localparam int MAW   = $clog2(N_ORB*N_ORB);

  fx_t mat [N_ORB*N_ORB];
  logic [CW-1:0] cnt;

  assign in_ready = !full;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt  <= '0;
      full <= 1'b0;
    end else begin
      if (in_valid && in_ready) begin
        if (cnt == CW'(NPAIR-1)) begin
          cnt  <= '0;
          full <= 1'b1;
        end else cnt <= cnt + 1'b1;
      end
      if (release_mat) full <= 1'b0;
    end
  end

  function automatic logic [MAW-1:0] maddr(idx_t a, idx_t b);
    return (a <= b) ? MAW'(int'(a) * N_ORB + int'(b)) : MAW'(int'(b) * N_ORB + int'(a));
  endfunction

  always_ff @(posedge clk) begin
    if (in_valid && in_ready) mat[maddr(in_data.i, in_data.j)] <= in_data.h;
    rd_data <= mat[maddr(rd_i, rd_j)];
  end

  assert property (@(posedge clk) disable iff (!rst_n)
                   in_valid |-> in_data.i <= in_data.j && in_data.j < idx_t'(N_ORB));

endmodule
