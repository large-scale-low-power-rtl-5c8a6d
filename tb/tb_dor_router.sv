// tb_dor_router: self-checking test of dor_router. For random node and
// destination coordinates, lattice sizes, dimension orders and enables, the
// expected port and virtual channel are computed here by walking the
// dimension order explicitly. Also checks the paper's example order
// (Z, then Y, then X) and the virtual-channel rule (upper VC when the
// offset is positive, lower otherwise).
module tb_dor_router;
  import exanet_pkg::*;
  localparam int N_INTRA = 2, N_INTER = 3;
  int checks = 0, failures = 0;
  coord_t dest, my_coord, lattice;
  logic [5:0] dim_order;
  logic [2:0] dim_en;
  logic [2:0] out_port;
  logic out_vc, is_local;

  dor_router #(.N_INTRA(N_INTRA), .N_INTER(N_INTER)) dut (.*);

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  function automatic int coord_of(input coord_t c, input int d);
    return d == 0 ? int'(c.x) : d == 1 ? int'(c.y) : int'(c.z);
  endfunction

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int vc1_seen = 0, vc0_seen = 0, local_seen = 0;
    // paper example: Z first, then Y, then X
    my_coord = '0; lattice = '{x: 4, y: 4, z: 4, default: 0};
    dest = '{x: 1, y: 2, z: 3, port: 1, default: 0};
    dim_order = {2'd0, 2'd1, 2'd2}; dim_en = 3'b111; #1;
    check(out_port == N_INTRA + 2 && out_vc == 1 && !is_local, "Z consumed first");
    dest.z = 0; #1; check(out_port == N_INTRA + 1, "then Y");
    dest.y = 0; #1; check(out_port == N_INTRA + 0, "then X");
    dest.x = 0; #1; check(is_local && out_port == 1, "local delivery to port 1");
    // negative offset -> lower VC
    my_coord.x = 3; dest.x = 1; #1; check(out_port == N_INTRA && out_vc == 0, "negative offset uses VC0");
    // disabled dimension is skipped
    dim_en = 3'b110; #1; check(is_local, "disabled X port skipped");
    for (int t = 0; t < 5000; t++) begin
      int ord[3], exp_port, exp_vc, found;
      dest = coord_t'($urandom);
      my_coord = coord_t'($urandom);
      lattice = coord_t'($urandom);
      if ($urandom_range(0, 1)) dest.x = my_coord.x;
      if ($urandom_range(0, 1)) dest.y = my_coord.y;
      if ($urandom_range(0, 1)) dest.z = my_coord.z;
      ord[0] = $urandom_range(0, 2); ord[1] = (ord[0] + 1 + $urandom_range(0, 1)) % 3;
      ord[2] = 3 - ord[0] - ord[1];
      dim_order = {2'(ord[2]), 2'(ord[1]), 2'(ord[0])};
      dim_en = 3'($urandom);
      #1;
      found = 0; exp_port = (dest.port < N_INTRA) ? dest.port : 0; exp_vc = 0;
      for (int k = 0; k < 3; k++) begin
        int d;
        d = ord[k];
        if (!found && dim_en[d] && coord_of(lattice, d) > 1 && coord_of(my_coord, d) != coord_of(dest, d)) begin
          found = 1;
          exp_port = N_INTRA + d;
          exp_vc = coord_of(dest, d) > coord_of(my_coord, d);
        end
      end
      check(out_port == exp_port && is_local == !found, $sformatf("port %0d exp %0d", out_port, exp_port));
      if (found) begin
        check(out_vc == exp_vc, "vc");
        if (exp_vc) vc1_seen++; else vc0_seen++;
      end else local_seen++;
    end
    check(vc1_seen > 0 && vc0_seen > 0 && local_seen > 0, "all outcomes seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
