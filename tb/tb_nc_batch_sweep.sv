// tb_nc_batch_sweep -- runs the end-to-end scenarios on every batch configuration the source
// evaluates: 2, 4, 6, 8, 12 and 16 PEs per batch, each with 2, 3 and 4 protected weight bits
// (18 batches, 8 rows x 4 weight columns each to keep the run short). Every configuration must
// pass its directed scenarios (clean, single column, single PE, checksum fault, parity fault,
// MAC recomputations, forced checksum recomputation, unprotected plane, give-up) and its
// random single-fault inferences.
module tb_nc_batch_sweep;
  localparam int unsigned NP = 6, NB = 3;
  localparam int unsigned PES  [NP] = '{2, 4, 6, 8, 12, 16};
  localparam int unsigned BITS [NB] = '{2, 3, 4};

  logic fin  [NP][NB];
  int   chk  [NP][NB];
  int   fail [NP][NB];

  for (genvar i = 0; i < NP; i++) begin : g_pe
    for (genvar j = 0; j < NB; j++) begin : g_bits
      nc_batch_env #(.N_PE(PES[i]), .PROT(BITS[j]), .ROWS(8), .COLS(4), .N_RANDOM(10)) u_env (
        .finished(fin[i][j]), .checks_o(chk[i][j]), .failures_o(fail[i][j]));
    end
  end

  function automatic bit all_done();
    foreach (fin[i, j]) if (!fin[i][j]) return 1'b0;
    return 1'b1;
  endfunction

  initial begin
    int checks, failures, cycles;
    checks = 0; failures = 0; cycles = 0;
    #1;
    while (!all_done() && cycles < 200000) begin #10; cycles++; end
    foreach (fin[i, j]) begin
      checks += chk[i][j] + 1;
      failures += fail[i][j];
      if (!fin[i][j]) begin
        failures++;
        $display("configuration N_PE=%0d PROT_BITS=%0d did not finish", PES[i], BITS[j]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
