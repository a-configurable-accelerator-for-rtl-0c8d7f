// tb_empa_alloc: random check of the core allocator. For random pool and
// preallocation masks the expected grant is worked out with a plain loop:
// lowest set bit of the requester's idle preallocated cores if any, else the
// lowest set bit of the pool; ALU-available is the OR of the pool.
module tb_empa_alloc;
  localparam int unsigned N = 32;
  logic [N-1:0] avail, prefer, grant;
  logic         found, any;
  int checks = 0, failures = 0;

  empa_alloc #(.NCORES(N)) dut (
    .avail_i(avail), .prefer_i(prefer), .grant_o(grant), .found_o(found), .any_avail_o(any)
  );

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [N-1:0] exp_g, src;
    for (int t = 0; t < 2000; t++) begin
      avail  = (t % 7 == 0) ? '0 : $urandom() & $urandom();
      prefer = (t % 3 == 0) ? ($urandom() & $urandom() & $urandom()) : '0;
      if (t % 11 == 0) avail = N'(1) << (t % N);
      #1;
      src   = (prefer != '0) ? prefer : avail;
      exp_g = '0;
      for (int i = N - 1; i >= 0; i--) if (src[i]) exp_g = N'(1) << i;
      checks++;
      if (grant !== exp_g || found !== (src != '0) || any !== (avail != '0)) begin
        failures++;
        if (failures < 10)
          $display("mismatch avail=%h prefer=%h grant=%h exp=%h", avail, prefer, grant, exp_g);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
