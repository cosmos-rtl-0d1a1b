// addr_gen_tb: self-checking test of the static address arithmetic.
//
// Applies random bases, strides and indices (including zero and the largest
// 32-bit index) and compares node_addr and vec_addr with the two layout
// formulas evaluated here in 64-bit arithmetic and cut to 40 bits.
module addr_gen_tb;
  import cosmos_pkg::*;

  addr_t gb, ns, eb, vs, na, va;
  node_id_t ni, vi;
  int checks = 0, failures = 0;

  addr_gen dut (.graph_base(gb), .node_stride(ns), .emb_base(eb), .vector_stride(vs),
                .node_idx(ni), .vec_idx(vi), .node_addr(na), .vec_addr(va));

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 500; t++) begin
      longint unsigned en, ev;
      gb = addr_t'({$urandom, $urandom});
      eb = addr_t'({$urandom, $urandom});
      ns = addr_t'((t % 3 == 0) ? 64 * (1 + $urandom % 8) : $urandom % 4096);
      vs = addr_t'((t % 3 == 0) ? 128 : $urandom % 4096);
      ni = (t == 1) ? '1 : (t == 2) ? '0 : $urandom;
      vi = (t == 3) ? '1 : $urandom;
      #1;
      en = (longint'(gb) + longint'(ni) * longint'(ns)) & ((64'd1 << ADDR_W) - 1);
      ev = (longint'(eb) + longint'(vi) * longint'(vs)) & ((64'd1 << ADDR_W) - 1);
      checks += 2;
      if (longint'(na) != en) begin failures++; $display("FAIL node addr %h exp %h", na, en); end
      if (longint'(va) != ev) begin failures++; $display("FAIL vec addr %h exp %h", va, ev); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
