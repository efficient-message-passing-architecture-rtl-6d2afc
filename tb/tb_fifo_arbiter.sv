// tb_fifo_arbiter: exhaustive check of the arbiter's choice over all status
// combinations against the priority rule written out independently.
module tb_fifo_arbiter;
  logic in_empty, nb_empty, nb_full, agg_en, ready;
  logic pop_in, pop_nb, sel_nb, issue;
  int checks = 0, failures = 0;
  fifo_arbiter dut (.*);
  initial begin
    for (int v = 0; v < 32; v++) begin
      logic exp_nb, exp_in;
      {in_empty, nb_empty, nb_full, agg_en, ready} = 5'(v);
      if (nb_empty && nb_full) continue;
      #1;
      exp_nb = ready && !nb_empty && (agg_en || nb_full || in_empty);
      exp_in = ready && !in_empty && !exp_nb && !((!nb_empty) && (agg_en || nb_full));
      checks++;
      if (pop_nb !== exp_nb || pop_in !== exp_in || issue !== (exp_nb || exp_in) || (pop_nb && pop_in)) begin
        failures++; $display("FAIL v=%b pop_in=%b pop_nb=%b", 5'(v), pop_in, pop_nb); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #1000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
