// tb_synapse -- self-checking testbench for the synapse (influence and local
// energy of one p-bit). DEG = 5 neighbours, 3000 random vectors including
// saturating ones. The reference computes S = sum_k s_k J_k with s = 2m-1,
// the influence I = clip(S + h, -63, 63) and the local energy
// e = -(2m_self-1)(S + 2h). Combinational; watchdog 1 ms.
module tb_synapse;
  localparam int DEG = 5;
  localparam int WEL = pt_pkg::we_local(DEG);
  logic signed [9:0]     j_nbr [DEG];
  logic                  m_nbr [DEG];
  logic signed [9:0]     h;
  logic                  m_self;
  logic [6:0]            i_field;
  logic signed [WEL-1:0] e_loc;
  int checks = 0, failures = 0;

  synapse #(.DEG(DEG)) dut (.j_nbr(j_nbr), .m_nbr(m_nbr), .h(h), .m_self(m_self),
                            .i_field(i_field), .e_loc(e_loc));

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    #1000000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    int s, ii, ee, rng;
    for (int t = 0; t < 3000; t++) begin
      rng = (t < 1000) ? 40 : 1023;     // small values first, then full range (-511..511)
      s = 0;
      for (int k = 0; k < DEG; k++) begin
        j_nbr[k] = 10'($signed($urandom_range(rng - 1)) - (rng - 1) / 2);
        m_nbr[k] = 1'($urandom);
        s += (m_nbr[k] ? 1 : -1) * int'(j_nbr[k]);
      end
      h      = 10'($signed($urandom_range(rng - 1)) - (rng - 1) / 2);
      m_self = 1'($urandom);
      #1;
      ii = s + int'(h);
      if (ii > 63) ii = 63;
      if (ii < -63) ii = -63;
      ee = (m_self ? -1 : 1) * (s + 2 * int'(h));
      chk($signed(i_field) == 7'(ii), $sformatf("I got %0d want %0d", $signed(i_field), ii));
      chk(int'(e_loc) == ee, $sformatf("e got %0d want %0d", e_loc, ee));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
