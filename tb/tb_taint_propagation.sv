// tb_taint_propagation -- self-checking test of the blindedness of register writes.
//
// Applies the arithmetic/logic rule of the propagation table (result blinded iff a
// used source is blinded), exhaustively over the operand bits and use masks of
// every port, plus the forced blinding of loads, and checks that writes to
// register 0 are dropped. The block is combinational: each check is made in the
// same time step the inputs change, i.e. with no added cycle.
module tb_taint_propagation;
  localparam int unsigned NUM_WR = 3;
  localparam int unsigned NSRC   = 3;
  localparam int unsigned IDX_W  = 5;

  logic [NUM_WR-1:0]            wb_valid;
  logic [NUM_WR-1:0][IDX_W-1:0] wb_rd;
  logic [NUM_WR-1:0][NSRC-1:0]  wb_src_used;
  logic [NUM_WR-1:0][NSRC-1:0]  wb_src_blinded;
  logic [NUM_WR-1:0]            wb_force;
  logic [NUM_WR-1:0]            wr_en;
  logic [NUM_WR-1:0][IDX_W-1:0] wr_idx;
  logic [NUM_WR-1:0]            wr_blinded;

  int checks = 0, failures = 0;

  taint_propagation #(.NUM_WR(NUM_WR), .NSRC(NSRC), .IDX_W(IDX_W)) dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int p = 0; p < NUM_WR; p++) begin
      for (int v = 0; v < 2; v++)
      for (int used = 0; used < 8; used++)
      for (int b = 0; b < 8; b++)
      for (int f = 0; f < 2; f++)
      for (int rd = 0; rd < 32; rd += 7) begin
        logic exp_b;
        wb_valid = '0; wb_rd = '0; wb_src_used = '0; wb_src_blinded = '1; wb_force = '0;
        wb_valid[p]       = 1'(v);
        wb_rd[p]          = IDX_W'(rd);
        wb_src_used[p]    = 3'(used);
        wb_src_blinded[p] = 3'(b);
        wb_force[p]       = 1'(f);
        // reference: explicit table walk
        exp_b = (f == 1);
        for (int s = 0; s < 3; s++) if (used[s] && b[s]) exp_b = 1'b1;
        #1;
        checks++;
        if (wr_en[p] !== (v == 1 && rd != 0) || wr_idx[p] !== IDX_W'(rd) || wr_blinded[p] !== exp_b) begin
          failures++;
          $display("port %0d v=%0d used=%b b=%b f=%0d rd=%0d: en=%0b idx=%0d bl=%0b", p, v, used[2:0],
                   b[2:0], f, rd, wr_en[p], wr_idx[p], wr_blinded[p]);
        end
        // other ports are idle
        for (int q = 0; q < NUM_WR; q++) if (q != p) begin
          checks++;
          if (wr_en[q] !== 1'b0) begin failures++; $display("idle port %0d writes", q); end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
