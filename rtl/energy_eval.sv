// energy_eval -- "Energy Evaluation": total energy from the orbital energies.
//
// The paper names this stage (orbital energies in, energy E out) but gives no
// formula; this design uses the usual closed-shell tight-binding energy
//     E = 2 * (sum of the n_occ lowest orbital energies) + E_rep,
// with E_rep the DFTB0 repulsive energy (use_rep = 1) or zero (EHT).
//
// The eigenvalues arrive unsorted on a valid/ready stream ending with last.
// Each one is inserted into a sorted register array in the cycle it arrives
// (one comparator per slot), so the stream is never stalled. After the last
// value the n_occ lowest entries are summed, one per cycle, then the matching
// E_rep is taken from a small FIFO (E_REP_DEPTH entries, filled by the
// repulsive evaluator whenever it finishes a geometry) and E leaves on the
// energy stream. Accepting eigenvalues resumes once E has been taken.
module energy_eval
  import tb_fx_pkg::*;
#(
  parameter int N_ORB       = 98,
  parameter int E_REP_DEPTH = 4
) (
  input  logic clk,
  input  logic rst_n,
  input  logic use_rep,
  input  idx_t n_occ,
  input  logic eval_valid,
  output logic eval_ready,
  input  fx_t  eval_data,
  input  logic eval_last,
  input  logic erep_valid,
  output logic erep_ready,
  input  fx_t  erep_data,
  output logic energy_valid,
  input  logic energy_ready,
  output fx_t  energy_data
);

  localparam int FW = $clog2(E_REP_DEPTH+1);

  typedef enum logic [1:0] {E_COLLECT, E_SUM, E_REP, E_OUT} state_e;
  state_e st;

  fx_t  srt [N_ORB];
  idx_t cnt, k;
  fx_t  acc;

  // E_rep FIFO
  fx_t  fifo [E_REP_DEPTH];
  logic [FW-1:0] fcnt;
  logic [$clog2(E_REP_DEPTH)-1:0] fwp, frp;
  logic fpop;

  assign erep_ready = (fcnt != FW'(E_REP_DEPTH));
  assign fpop       = (st == E_REP) && use_rep && (fcnt != '0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fcnt <= '0; fwp <= '0; frp <= '0;
    end else begin
      if (erep_valid && erep_ready) begin
        fifo[fwp] <= erep_data;
        fwp <= (int'(fwp) == E_REP_DEPTH-1) ? '0 : fwp + 1'b1;
      end
      if (fpop) frp <= (int'(frp) == E_REP_DEPTH-1) ? '0 : frp + 1'b1;
      fcnt <= fcnt + FW'(erep_valid && erep_ready) - FW'(fpop);
    end
  end

  assign eval_ready   = (st == E_COLLECT);
  assign energy_valid = (st == E_OUT);
  assign energy_data  = acc;

  // sorted insertion
  logic [N_ORB-1:0] le;
  always_comb
    for (int m = 0; m < N_ORB; m++) le[m] = (idx_t'(m) < cnt) && (srt[m] <= eval_data);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= E_COLLECT; cnt <= '0; k <= '0; acc <= '0;
      for (int m = 0; m < N_ORB; m++) srt[m] <= '0;
    end else begin
      unique case (st)
        E_COLLECT: if (eval_valid) begin
          if (!le[0]) srt[0] <= eval_data;
          for (int m = 1; m < N_ORB; m++)
            if (!le[m]) srt[m] <= le[m-1] ? eval_data : srt[m-1];
          cnt <= cnt + 1'b1;
          if (eval_last) begin st <= E_SUM; k <= '0; acc <= '0; end
        end
        E_SUM: begin
          if (k < n_occ && k < cnt) acc <= acc + (srt[k[$clog2(N_ORB)-1:0]] <<< 1);
          else st <= E_REP;
          k <= k + 1'b1;
        end
        E_REP: begin
          if (!use_rep) st <= E_OUT;
          else if (fcnt != '0) begin acc <= acc + fifo[frp]; st <= E_OUT; end
        end
        E_OUT: if (energy_ready) begin st <= E_COLLECT; cnt <= '0; end
        default: st <= E_COLLECT;
      endcase
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n)
                   energy_valid && !energy_ready |=> energy_valid && $stable(energy_data));

endmodule
