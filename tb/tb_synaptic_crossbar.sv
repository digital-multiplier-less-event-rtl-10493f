// tb_synaptic_crossbar: drives random weights and random spike vectors into
// the default 6-8-2 crossbar and compares every output with the topology
// written out here: sensory (0-5) -> hidden (6-13), hidden -> motor (14-15),
// hidden <-> hidden and motor <-> motor without self-connections. Also checks
// the connection counts: 64 excitatory, 58 inhibitory.
`timescale 1ns/1ps
module tb_synaptic_crossbar;
  import snn_pkg::*;
  localparam int N = 16;
  logic [N-1:0] spikes;
  fx_t w [N][N];
  fx_t syn_in [N][N];
  int checks = 0, failures = 0;

  synaptic_crossbar dut (.spikes, .w, .syn_in);

  function automatic int lay(int i);
    return (i <= 5) ? 0 : (i <= 13) ? 1 : 2;
  endfunction

  initial begin
    int n_exc, n_inh;
    n_exc = 0; n_inh = 0;
    for (int i = 0; i < N; i++) for (int j = 0; j < N; j++) begin
      if (lay(j) == lay(i) + 1) n_exc++;
      if (i != j && lay(i) == lay(j) && lay(i) > 0) n_inh++;
    end
    checks++; if (n_exc != 64 || n_inh != 58) begin failures++; $display("FAIL: counts"); end
    for (int r = 0; r < 50; r++) begin
      spikes = N'($urandom);
      for (int i = 0; i < N; i++) for (int j = 0; j < N; j++) w[i][j] = fx_t'($urandom);
      #1;
      for (int i = 0; i < N; i++) for (int j = 0; j < N; j++) begin
        bit conn;
        fx_t e;
        conn = (lay(j) == lay(i) + 1) || (i != j && lay(i) == lay(j) && lay(i) > 0);
        e = (conn && spikes[i]) ? w[i][j] : '0;
        checks++;
        if (syn_in[j][i] != e) begin
          failures++;
          $display("FAIL: syn_in[%0d][%0d]=%h expected %h", j, i, syn_in[j][i], e);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
