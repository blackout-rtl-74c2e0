// tb_cap_perm_unit -- self-checking test of candperm / cgetperm with the
// non-oblivious access permission.
//
// Checks on random capabilities and masks that candperm ANDs each permission with
// its mask bit (non-oblivious bit on mask bit 12), never sets a permission,
// leaves address, bounds and object type alone and clears the tag of a sealed
// capability; that cgetperm reports the 19-bit permission vector; that a
// capability becomes blinded exactly when a valid capability loses bit 12, and
// that the permissions of a newly created capability have bit 12 set.
module tb_cap_perm_unit;
  import blackout_pkg::*;

  cap_t            cap_in, andperm_out;
  logic [XLEN-1:0] mask, getperm_out, root_perms;
  logic            is_blinded;

  int checks = 0, failures = 0;
  int n_blinded_by_candperm = 0;

  cap_perm_unit dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1;
    checks++;
    if (root_perms !== 64'h7_9FFF) begin   // user perms 18:15, NO bit 12, hw perms 11:0
      failures++; $display("root perms %h", root_perms);
    end
    for (int i = 0; i < 20000; i++) begin
      logic [15:0] p16;
      logic        no;
      logic [63:0] exp_get;
      cap_t        exp;
      cap_in = {1'($urandom), $urandom, $urandom, $urandom, $urandom};
      if ($urandom_range(0, 1)) cap_in.meta.otype = '1;              // unsealed half the time
      if ($urandom_range(0, 3) == 0) cap_in.meta.non_oblivious = 1'b1;
      mask = {$urandom, $urandom};
      if ($urandom_range(0, 1)) mask = ~(64'h1 << 12);                // drop only the new permission
      // reference, from the in-memory word: bits 127:112 perms, bit 111 non-oblivious
      p16     = cap_in[127:112];
      no      = cap_in[111];
      exp_get = {45'h0, p16[15:12], 2'b00, no, p16[11:0]};
      exp     = cap_in;
      exp[127:124] = p16[15:12] & mask[18:15];
      exp[123:112] = p16[11:0]  & mask[11:0];
      exp[111]     = no & mask[12];
      if (cap_in[108:91] != 18'h3FFFF) exp[128] = 1'b0;
      #1;
      checks++;
      if (andperm_out !== exp) begin
        failures++; $display("candperm %h mask %h -> %h want %h", cap_in, mask, andperm_out, exp);
      end
      checks++;
      if (getperm_out !== exp_get) begin
        failures++; $display("cgetperm %h want %h", getperm_out, exp_get);
      end
      checks++;
      if (is_blinded !== (cap_in[128] & ~no)) begin
        failures++; $display("is_blinded %0b", is_blinded);
      end
      if (cap_in[128] && cap_in[108:91] == 18'h3FFFF && no && !mask[12]) n_blinded_by_candperm++;
    end
    checks++;
    if (n_blinded_by_candperm == 0) begin failures++; $display("candperm never blinded a capability"); end
    $display("capabilities blinded by candperm: %0d", n_blinded_by_candperm);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
