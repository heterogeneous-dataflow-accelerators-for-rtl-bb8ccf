// tb_shi_subacc: self-checking test of the Shi-diannao-style sub-accelerator.
//
// Runs a 3x3 CONV2D with partial channel tiles and padding, a strided
// depth-wise layer, a fully connected layer, a point-wise layer and a layer
// wider than one lane burst. Inputs and weights are random bytes placed in a
// behavioural lane memory; every output byte is compared with a direct
// convolution computed in tb_hda_pkg, a guard byte after each output tensor
// must stay untouched, and the cycle count from start to done must equal the
// count implied by the lane budget (tb_hda_pkg::shi_cycles).
module tb_shi_subacc;
  import hda_pkg::*;
  import tb_hda_pkg::*;

  localparam int OYP = 28, OXP = 32, L = 12;

  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0, busy, done;
  layer_desc_t desc;
  gb_req_t       gb_req   [L];
  logic [DW-1:0] gb_rdata [L];
  int checks = 0, failures = 0, cycle = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cycle++;

  shi_subacc dut (.clk, .rst_n, .start, .desc, .busy, .done, .gb_req, .gb_rdata);
  tb_lane_mem #(.LANES(L)) u_mem (.clk, .req(gb_req), .rdata(gb_rdata));

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_layer(layer_desc_t d);
    int t0, t1, bad;
    logic [7:0] v;
    for (int i = 0; i < in_bytes(d); i++) begin
      v = 8'($urandom_range(0, 15)) - 8'd8;
      refmem[int'(d.in_base) + i] = v; u_mem.poke(int'(d.in_base) + i, v);
    end
    for (int i = 0; i < w_bytes(d); i++) begin
      v = 8'($urandom_range(0, 15)) - 8'd8;
      refmem[int'(d.w_base) + i] = v; u_mem.poke(int'(d.w_base) + i, v);
    end
    u_mem.poke(int'(d.out_base) + out_bytes(d), 8'h5a);
    @(negedge clk); desc = d; start = 1'b1;
    @(posedge clk); t0 = cycle;
    @(negedge clk); start = 1'b0;
    while (!done) @(posedge clk);
    t1 = cycle;
    bad = 0;
    for (int k = 0; k < int'(d.k); k++)
      for (int y = 0; y < int'(d.oy); y++)
        for (int x = 0; x < int'(d.ox); x++) begin
          checks++;
          if (u_mem.peek(int'(d.out_base) + (k * int'(d.oy) + y) * int'(d.ox) + x) !== ref_out(d, k, y, x)) begin
            failures++; bad++;
            if (bad < 5) $display("mismatch k=%0d y=%0d x=%0d got %0d exp %0d", k, y, x,
              $signed(u_mem.peek(int'(d.out_base) + (k * int'(d.oy) + y) * int'(d.ox) + x)),
              $signed(ref_out(d, k, y, x)));
          end
        end
    checks++;
    if (u_mem.peek(int'(d.out_base) + out_bytes(d)) !== 8'h5a) begin
      failures++; $display("guard byte overwritten");
    end
    checks++;
    if (t1 - t0 != shi_cycles(d, OYP, OXP, L)) begin
      failures++;
      $display("cycle count %0d, expected %0d", t1 - t0, shi_cycles(d, OYP, OXP, L));
    end
    $display("layer op=%0d K=%0d C=%0d %0dx%0d: %0d cycles, %0d bad", d.op, d.k, d.c,
             d.oy, d.ox, t1 - t0, bad);
  endtask

  initial begin
    desc = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    run_layer(mk_layer(OP_CONV,   20, 11,  9,  9, 3, 3, 1, 1, 3, 'h00000, 'h10000, 'h20000));
    run_layer(mk_layer(OP_DWCONV, 10, 10, 11, 11, 3, 3, 2, 1, 2, 'h00000, 'h10000, 'h20000));
    run_layer(mk_layer(OP_CONV,   18, 40,  1,  1, 1, 1, 1, 0, 4, 'h00000, 'h10000, 'h20000));
    run_layer(mk_layer(OP_CONV,   24, 16,  5,  7, 1, 1, 1, 0, 2, 'h00000, 'h10000, 'h20000));
    run_layer(mk_layer(OP_CONV,    2,  2, 30, 40, 3, 3, 1, 1, 1, 'h00000, 'h10000, 'h20000));
    run_layer(mk_layer(OP_CONV,    3,  3, 31, 35, 5, 5, 2, 2, 3, 'h00000, 'h10000, 'h20000));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
