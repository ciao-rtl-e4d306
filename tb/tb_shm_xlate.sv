// tb_shm_xlate: checks the translation of global addresses into shared-memory
// data and tag locations against an integer-arithmetic reference, for every cache
// size the allocator can choose, and that distinct blocks of one region never
// share a data line or a tag slot while data and tag rows stay inside the region.
module tb_shm_xlate;
  import ciao_pkg::*;
  logic [31:0] addr; logic [7:0] mask, data_off, tag_off; shm_loc_t loc; logic [3:0] word_bank; logic word_half;
  shm_xlate dut (.*);
  int checks = 0, failures = 0;
  initial begin
    for (int p = 0; p <= 7; p++) begin
      int d, t, doff;
      bit used_d [256][2]; bit used_t [256][32];
      d = 1 << p; t = (p >= 5) ? (1 << (p - 5)) : 1; doff = 192 - d - t;
      mask = 8'(d - 1); data_off = 8'(doff); tag_off = 8'(doff + d);
      for (int r = 0; r < 256; r++) begin used_d[r] = '{0, 0}; for (int k = 0; k < 32; k++) used_t[r][k] = 0; end
      // one block per (row, group): all distinct cache lines
      for (int b = 0; b < 2 * d; b++) begin
        int rm, g;
        addr = 32'(b) * 128 + 32'($urandom_range(31)) * 4 + 32'h0001_0000 * $urandom_range(7);
        #1;
        rm = (int'(addr) / 256) % 256 & (d - 1); g = (int'(addr) / 128) % 2;
        checks++;
        if (loc.data_row !== 8'(rm + doff) || loc.data_grp !== 1'(g) || loc.tag_grp !== 1'(1 - g) ||
            loc.tag_row !== 8'(rm / 32 + doff + d) || loc.tag_bank !== 4'((rm % 32) / 2) || loc.tag_half !== 1'(rm % 2) ||
            word_bank !== 4'((int'(addr) / 8) % 16) || word_half !== 1'((int'(addr) / 4) % 2)) begin
          failures++; $display("FAIL D=%0d addr %h", d, addr);
        end
        checks++;
        if (int'(loc.data_row) < doff || int'(loc.data_row) >= doff + d || int'(loc.tag_row) < doff + d ||
            int'(loc.tag_row) >= doff + d + t || used_d[loc.data_row][loc.data_grp] ||
            used_t[loc.tag_row][{loc.tag_grp, loc.tag_bank}] && loc.tag_half == 0) begin
          failures++; $display("FAIL region/overlap D=%0d addr %h", d, addr);
        end
        used_d[loc.data_row][loc.data_grp] = 1;
        if (loc.tag_half == 0) used_t[loc.tag_row][{loc.tag_grp, loc.tag_bank}] = 1;
      end
    end
    for (int k = 0; k < 20000; k++) begin
      int a, rm;
      a = $urandom; addr = 32'(a); mask = 8'($urandom); data_off = 8'($urandom); tag_off = 8'($urandom);
      #1;
      rm = ((a >> 8) & 255) & int'(mask);
      checks++;
      if (loc.data_row !== 8'(rm + int'(data_off)) || loc.data_grp !== 1'((a >> 7) & 1) ||
          loc.tag_row !== 8'((rm >> 5) + int'(tag_off)) || loc.tag_bank !== 4'((rm >> 1) & 15) ||
          loc.tag_half !== 1'(rm & 1) || loc.tag_grp !== 1'(~(a >> 7) & 1)) begin
        failures++; $display("FAIL random addr %h", addr);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
