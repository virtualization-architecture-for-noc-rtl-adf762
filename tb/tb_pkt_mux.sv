// tb_pkt_mux: random packets on both inputs; the output must follow sel.
module tb_pkt_mux;
  import vnoc_pkg::*;
  logic sel, q_av;
  logic [1:0] av;
  pkt_t d0, d1, q;
  int checks = 0, failures = 0;

  pkt_mux dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 200; i++) begin
      sel = 1'($urandom); av = 2'($urandom);
      d0 = {$urandom, $urandom, $urandom};
      d1 = {$urandom, $urandom, $urandom};
      #1;
      checks++;
      if (q != (sel ? d1 : d0) || q_av != av[sel]) begin
        failures++;
        $display("mux error sel=%b", sel);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
