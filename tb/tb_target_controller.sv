// tb_target_controller: self-checking test of the AXI4-Lite register
// block: reset values, write/read-back of every configuration register
// through AXI4-Lite transactions (with AW and W offered in either order and
// delayed B/R ready), the configuration outputs, the self-test start
// pulse, and the status words.
module tb_target_controller;
  import exanet_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic [7:0] s_awaddr = '0, s_araddr = '0;
  logic s_awvalid = 0, s_wvalid = 0, s_bready = 0, s_arvalid = 0, s_rready = 0;
  logic [31:0] s_wdata = '0, s_rdata;
  logic s_awready, s_wready, s_bvalid, s_arready, s_rvalid;
  logic [1:0] s_bresp, s_rresp;
  coord_t my_coord, lattice;
  logic [5:0] dim_order;
  logic [2:0] dim_en;
  logic arb_fixed;
  logic [3:0] arb_prio_first;
  logic [11:0] tred;
  logic [7:0] health;
  logic [31:0] status[8];
  logic st_start, st_cons_en;
  logic [15:0] st_npkts;
  logic [13:0] st_size;
  logic [4:0] st_ptype;
  coord_t st_dest;
  int starts = 0, exp_starts = 0;
  always @(negedge clk) if (st_start) starts++;

  target_controller #(.N_STATUS(8)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; if (failures < 10) $display("FAIL: %s @%0t", what, $time); end
  endtask

  task automatic axi_write(input logic [7:0] a, input logic [31:0] d);
    @(negedge clk);
    if ($urandom_range(0, 1)) begin s_awvalid = 1; s_awaddr = a; @(negedge clk); end
    s_awvalid = 1; s_awaddr = a; s_wvalid = 1; s_wdata = d;
    #1;
    while (!(s_awready && s_wready)) @(negedge clk);
    @(negedge clk); s_awvalid = 0; s_wvalid = 0;
    repeat ($urandom_range(0, 2)) @(negedge clk);
    check(s_bvalid && s_bresp == 2'b00, "write response");
    s_bready = 1; @(negedge clk); s_bready = 0;
  endtask

  task automatic axi_read(input logic [7:0] a, output logic [31:0] d);
    @(negedge clk);
    s_arvalid = 1; s_araddr = a;
    #1;
    while (!s_arready) @(negedge clk);
    @(negedge clk); s_arvalid = 0;
    repeat ($urandom_range(0, 2)) @(negedge clk);
    check(s_rvalid && s_rresp == 2'b00, "read response");
    d = s_rdata;
    s_rready = 1; @(negedge clk); s_rready = 0;
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] d;
    logic [7:0] addr[10] = '{8'h00, 8'h04, 8'h08, 8'h0C, 8'h10, 8'h14, 8'h18, 8'h1C, 8'h20, 8'h24};
    logic [31:0] mask[10] = '{32'h3F_FFFF, 32'h3F_FFFF, 32'h3F, 32'h7, 32'hF01, 32'hFFF, 32'hFF,
                              32'hFFFF_0002, 32'h1F_3FFF, 32'h3F_FFFF};
    foreach (status[i]) status[i] = {$urandom};
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    check(lattice.x == 2 && lattice.y == 2 && lattice.z == 1, "reset lattice 2x2x1");
    check(dim_order == 6'b00_01_10 && dim_en == 3'b111 && !arb_fixed && tred == 0, "reset config");
    for (int r = 0; r < 8; r++)
      foreach (addr[i]) begin
        logic [31:0] v;
        v = (r == 0) ? 32'hFFFF_FFFF : (r == 1) ? 32'h5555_5555 : $urandom;
        axi_write(addr[i], v);
        axi_read(addr[i], d);
        check(d == (v & mask[i]), $sformatf("readback %h", addr[i]));
        case (i)
          0: check(my_coord == coord_t'(v[21:0]), "coord out");
          1: check(lattice == coord_t'(v[21:0]), "lattice out");
          2: check(dim_order == v[5:0], "order out");
          3: check(dim_en == v[2:0], "enable out");
          4: check(arb_fixed == v[0] && arb_prio_first == v[11:8], "arbiter out");
          5: check(tred == v[11:0], "tred out");
          6: check(health == v[7:0], "health out");
          7: begin
            check(st_cons_en == v[1] && st_npkts == v[31:16], "self-test control out");
            if (v[0]) exp_starts++;
            check(starts == exp_starts, "one start pulse per write of bit 0");
          end
          8: check(st_size == v[13:0] && st_ptype == v[20:16], "self-test packet out");
          9: check(st_dest == coord_t'(v[21:0]), "self-test destination out");
          default: ;
        endcase
      end
    foreach (status[i]) begin
      axi_read(8'h40 + 8'(4 * i), d);
      check(d == status[i], "status word");
    end
    axi_read(8'h80, d);
    check(d == 0, "unmapped reads zero");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
