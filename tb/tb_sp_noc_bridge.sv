// tb_sp_noc_bridge: conversion between NoC packets and SpiNNaker packets for
// a 7-wide QPE grid at offset (1,1). Checks that spike-marked NoC packets
// become router packets (control byte, key, payload), that other packets
// are consumed and discarded, ready pass-through in both directions, and
// for every PE index the destination tile coordinates, PE bit and the
// payload size from the control byte.
module tb_sp_noc_bridge;
  import spinn2_pkg::*;
  int checks = 0, failures = 0;
  task automatic chk(input bit c, input string m);
    checks++; if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask
  logic niv, nir, nov, nor_, sov, sor, siv, sir;
  noc_pkt_t nip, nop; sp_pkt_t sop, sip; logic [7:0] pe;
  sp_noc_bridge #(.NPE(168), .NQX(7), .X0(1), .Y0(1)) dut (.noc_in_valid(niv), .noc_in_ready(nir),
    .noc_in_pkt(nip), .noc_out_valid(nov), .noc_out_ready(nor_), .noc_out_pkt(nop),
    .sp_out_valid(sov), .sp_out_ready(sor), .sp_out_pkt(sop), .sp_in_valid(siv),
    .sp_in_ready(sir), .sp_in_pkt(sip), .sp_in_pe(pe));

  initial begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    bit ok;
    niv = 0; nip = '0; nor_ = 1; sor = 1; siv = 0; sip = '0; pe = 0;
    #1;
    for (int n = 0; n < 50; n++) begin
      nip = {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom};
      nip.phdr[PHDR_SPIKE] = n % 2; niv = 1; sor = n % 3 != 0; #1;
      if (n % 2) chk(sov && sop.ctrl == nip.phdr[7:0] && sop.key == nip.addr && sop.data == nip.data
                     && nir == sor, "spike packet to router");
      else chk(!sov && nir, "non-spike packet discarded");
    end
    niv = 0;
    ok = 1;
    for (int p = 0; p < 168; p++) begin
      int t;
      pe = 8'(p); siv = 1; sip = '{ctrl: 8'($urandom), key: $urandom, data: {$urandom, $urandom, $urandom, $urandom}};
      nor_ = p % 2; #1;
      t = p / 4;
      ok &= nov && sir == nor_ && nop.hdr.dx == 3'(1 + t % 7) && nop.hdr.dy == 3'(1 + t / 7)
            && nop.hdr.pe == (4'b1 << (p % 4)) && nop.phdr[PHDR_SPIKE] && nop.addr == sip.key
            && nop.hdr.size == ((sip.ctrl[1:0] == 3) ? 3'd4 : 3'(sip.ctrl[1:0]));
    end
    chk(ok, "all 168 PE indices mapped to tile and PE bit");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
