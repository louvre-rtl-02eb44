// tb_min_version_tree: checks the comparator tree against a direct search.
//
// Three instances: the store-buffer size (16 entries), the LSQ size (64) and
// an odd size (5) that needs padding. Random valid masks and versions, with
// a small version range so that ties are frequent; the expected minimum and
// index (lowest index on a tie) are found by a linear scan.
module tb_min_version_tree;
  localparam int VW = 10;
  int checks = 0, failures = 0;

  logic [15:0]          v16;  logic [15:0][VW-1:0] r16; logic a16; logic [VW-1:0] m16; logic [3:0] i16;
  logic [63:0]          v64;  logic [63:0][VW-1:0] r64; logic a64; logic [VW-1:0] m64; logic [5:0] i64;
  logic [4:0]           v5;   logic [4:0][VW-1:0]  r5;  logic a5;  logic [VW-1:0] m5;  logic [2:0] i5;

  min_version_tree #(.N(16), .VER_W(VW)) u16 (.in_valid(v16), .in_ver(r16), .any_valid(a16), .min_ver(m16), .min_idx(i16));
  min_version_tree #(.N(64), .VER_W(VW)) u64 (.in_valid(v64), .in_ver(r64), .any_valid(a64), .min_ver(m64), .min_idx(i64));
  min_version_tree #(.N(5),  .VER_W(VW)) u5  (.in_valid(v5),  .in_ver(r5),  .any_valid(a5),  .min_ver(m5),  .min_idx(i5));

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  initial begin : wd
    #1000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 3000; t++) begin
      int range, density;
      range = (t % 3 == 0) ? 4 : 1023;
      density = t % 4;   // 0: sparse ... 3: full
      for (int i = 0; i < 16; i++) begin v16[i] = ($urandom_range(3) < density) || density == 3; r16[i] = VW'($urandom_range(range)); end
      for (int i = 0; i < 64; i++) begin v64[i] = ($urandom_range(3) < density) || density == 3; r64[i] = VW'($urandom_range(range)); end
      for (int i = 0; i < 5; i++)  begin v5[i]  = ($urandom_range(3) < density) || density == 3; r5[i]  = VW'($urandom_range(range)); end
      if (t == 7) begin v16 = '0; v64 = '0; v5 = '0; end
      #1;
      begin
        int bm, bi; bit any;
        any = 0; bm = 0; bi = 0;
        for (int i = 0; i < 16; i++) if (v16[i] && (!any || r16[i] < bm)) begin any = 1; bm = r16[i]; bi = i; end
        chk(a16 == any && (!any || (m16 == VW'(bm) && i16 == 4'(bi))), $sformatf("N=16 t=%0d", t));
        any = 0; bm = 0; bi = 0;
        for (int i = 0; i < 64; i++) if (v64[i] && (!any || r64[i] < bm)) begin any = 1; bm = r64[i]; bi = i; end
        chk(a64 == any && (!any || (m64 == VW'(bm) && i64 == 6'(bi))), $sformatf("N=64 t=%0d", t));
        any = 0; bm = 0; bi = 0;
        for (int i = 0; i < 5; i++) if (v5[i] && (!any || r5[i] < bm)) begin any = 1; bm = r5[i]; bi = i; end
        chk(a5 == any && (!any || (m5 == VW'(bm) && i5 == 3'(bi))), $sformatf("N=5 t=%0d", t));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
