// tb_addr_map: drives random logical addresses under several mapping
// configurations, builds the expected bank and local address bit by bit,
// and checks that the mapping is one-to-one by inverting it here.
module tb_addr_map;
  import ap_pkg::*;
  localparam int unsigned BANK_BITS = 5;
  localparam int unsigned AW = ADDR_W;

  logic [AW-1:0] laddr, paddr;
  logic [4:0] cfg_bank_pos, cfg_xor_pos;
  logic cfg_xor_en;
  logic [BANK_BITS-1:0] bank;
  logic [AW-BANK_BITS-1:0] local_addr;
  int checks = 0, failures = 0;

  addr_map #(.BANK_BITS(BANK_BITS)) dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int unsigned bp, xp;
    logic [BANK_BITS-1:0] eb;
    logic [AW-1:0] el, inv;
    int li;
    for (int t = 0; t < 4000; t++) begin
      bp = $urandom_range(AW - BANK_BITS - 1);
      // XOR field strictly above the bank field, inside the address
      xp = (bp + 2*BANK_BITS <= AW) ? $urandom_range(AW - BANK_BITS, bp + BANK_BITS) : bp + BANK_BITS;
      cfg_bank_pos = 5'(bp); cfg_xor_pos = 5'(xp);
      cfg_xor_en = (xp + BANK_BITS <= AW) ? 1'($urandom_range(1)) : 1'b0;
      laddr = AW'($urandom());
      #1;
      // reference
      for (int b = 0; b < BANK_BITS; b++) begin
        eb[b] = laddr[bp + b];
        if (cfg_xor_en) eb[b] ^= laddr[xp + b];
      end
      el = '0; li = 0;
      for (int b = 0; b < AW; b++)
        if (b < bp || b >= bp + BANK_BITS) begin el[li] = laddr[b]; li++; end
      checks++;
      if (bank != eb || local_addr != (AW-BANK_BITS)'(el) || paddr != {eb, (AW-BANK_BITS)'(el)}) begin
        failures++;
        if (failures < 10) $display("laddr %h bp %0d xp %0d x %0d: got %h/%h want %h/%h",
                                    laddr, bp, xp, cfg_xor_en, bank, local_addr, eb, el);
      end
      // inverse: rebuild the logical address from bank and local address
      inv = '0; li = 0;
      for (int b = 0; b < AW; b++)
        if (b < bp || b >= bp + BANK_BITS) begin inv[b] = local_addr[li]; li++; end
      for (int b = 0; b < BANK_BITS; b++) begin
        inv[bp + b] = bank[b];
        if (cfg_xor_en) inv[bp + b] ^= inv[xp + b];
      end
      checks++;
      if (inv != laddr) begin
        failures++;
        if (failures < 10) $display("not invertible: laddr %h -> %h", laddr, inv);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
