// tb_forwarding_unit: self-checking test of hazard detection and bypass
// selection. Random register indices (from a small set, so matches are
// frequent) against the stall and bypass rules written out in the testbench.
module tb_forwarding_unit;
  logic [4:0] id_rs1, id_rs2, id_rd, ex_rd, wb_rd;
  logic id_use_rs1, id_use_rs2, id_use_rd, ex_valid, ex_reg_write, wb_valid, wb_reg_write;
  logic hazard_stall, fwd1, fwd2, fwd3;
  int checks = 0, failures = 0, nstall = 0, nfwd = 0;

  forwarding_unit dut (.*);

  initial begin
    #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int i = 0; i < 5000; i++) begin
      logic es, e1, e2, e3;
      {id_use_rs1, id_use_rs2, id_use_rd, ex_valid, ex_reg_write, wb_valid, wb_reg_write} = 7'($urandom);
      id_rs1 = 5'($urandom_range(0, 3)); id_rs2 = 5'($urandom_range(0, 3)); id_rd = 5'($urandom_range(0, 3));
      ex_rd = 5'($urandom_range(0, 3)); wb_rd = 5'($urandom_range(0, 3));
      es = 0;
      if (ex_valid && ex_reg_write && ex_rd != 0) begin
        if (id_use_rs1 && id_rs1 == ex_rd) es = 1;
        if (id_use_rs2 && id_rs2 == ex_rd) es = 1;
        if (id_use_rd  && id_rd  == ex_rd) es = 1;
      end
      e1 = wb_valid && wb_reg_write && wb_rd != 0 && id_rs1 == wb_rd;
      e2 = wb_valid && wb_reg_write && wb_rd != 0 && id_rs2 == wb_rd;
      e3 = wb_valid && wb_reg_write && wb_rd != 0 && id_rd  == wb_rd;
      #1;
      checks += 4;
      if (hazard_stall !== es) failures++;
      if (fwd1 !== e1) failures++;
      if (fwd2 !== e2) failures++;
      if (fwd3 !== e3) failures++;
      nstall += es; nfwd += e1;
    end
    checks++; if (nstall == 0 || nfwd == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
