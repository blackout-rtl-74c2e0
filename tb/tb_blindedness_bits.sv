// tb_blindedness_bits -- self-checking test of the register blindedness bits.
//
// Drives random writes on all write ports and random reads on all read ports for
// a few thousand cycles and compares every read with a reference array updated
// in port order (last port wins). Also checks that register 0 never reads as
// blinded, that a write is visible only after the clock edge, and that reset
// clears every bit.
module tb_blindedness_bits;
  localparam int unsigned NUM_REGS = 32;
  localparam int unsigned NUM_RD   = 7;
  localparam int unsigned NUM_WR   = 3;
  localparam int unsigned IDX_W    = $clog2(NUM_REGS);

  logic clk = 1'b0, rst_n = 1'b0;
  logic [NUM_RD-1:0][IDX_W-1:0] rd_idx;
  logic [NUM_RD-1:0]            rd_blinded;
  logic [NUM_WR-1:0]            wr_en;
  logic [NUM_WR-1:0][IDX_W-1:0] wr_idx;
  logic [NUM_WR-1:0]            wr_blinded;

  int checks = 0, failures = 0;
  logic ref_bits [NUM_REGS];

  blindedness_bits #(.NUM_REGS(NUM_REGS), .NUM_RD(NUM_RD), .NUM_WR(NUM_WR)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_reads();
    for (int r = 0; r < NUM_RD; r++) begin
      checks++;
      if (rd_blinded[r] !== ref_bits[rd_idx[r]]) begin
        failures++;
        $display("read mismatch port %0d reg %0d: got %0b want %0b", r, rd_idx[r],
                 rd_blinded[r], ref_bits[rd_idx[r]]);
      end
    end
  endtask

  initial begin
    wr_en = '0; wr_idx = '0; wr_blinded = '0; rd_idx = '0;
    for (int i = 0; i < NUM_REGS; i++) ref_bits[i] = 1'b0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    // after reset: every register clear
    @(negedge clk);
    for (int i = 0; i < NUM_REGS; i += NUM_RD) begin
      for (int r = 0; r < NUM_RD; r++) rd_idx[r] = IDX_W'((i + r) % NUM_REGS);
      #1 check_reads();
    end
    // write visible only after the edge
    @(negedge clk);
    wr_en = 3'b001; wr_idx[0] = 5'd7; wr_blinded[0] = 1'b1; rd_idx[0] = 5'd7;
    #1 checks++; if (rd_blinded[0] !== 1'b0) begin failures++; $display("write seen before edge"); end
    @(negedge clk);
    wr_en = '0;
    #1 checks++; if (rd_blinded[0] !== 1'b1) begin failures++; $display("write lost"); end
    ref_bits[7] = 1'b1;
    // same register from two ports: higher port wins
    @(negedge clk);
    wr_en = 3'b011; wr_idx[0] = 5'd9; wr_blinded[0] = 1'b0; wr_idx[1] = 5'd9; wr_blinded[1] = 1'b1;
    @(negedge clk);
    wr_en = '0; rd_idx[1] = 5'd9;
    #1 checks++; if (rd_blinded[1] !== 1'b1) begin failures++; $display("priority wrong"); end
    ref_bits[9] = 1'b1;
    // random traffic
    for (int cyc = 0; cyc < 4000; cyc++) begin
      @(negedge clk);
      for (int w = 0; w < NUM_WR; w++) begin
        wr_en[w]      = 1'($urandom_range(0, 1));
        wr_idx[w]     = IDX_W'($urandom_range(0, NUM_REGS - 1));
        wr_blinded[w] = 1'($urandom_range(0, 1));
      end
      for (int r = 0; r < NUM_RD; r++) rd_idx[r] = IDX_W'($urandom_range(0, NUM_REGS - 1));
      #1 check_reads();
      for (int w = 0; w < NUM_WR; w++)
        if (wr_en[w] && wr_idx[w] != 0) ref_bits[wr_idx[w]] = wr_blinded[w];
    end
    // reset clears everything
    @(negedge clk);
    wr_en = '0;
    rst_n = 1'b0;
    #1 rst_n = 1'b1;
    for (int i = 0; i < NUM_REGS; i++) ref_bits[i] = 1'b0;
    for (int i = 0; i < NUM_REGS; i += NUM_RD) begin
      for (int r = 0; r < NUM_RD; r++) rd_idx[r] = IDX_W'((i + r) % NUM_REGS);
      #1 check_reads();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
