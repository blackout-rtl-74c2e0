// tb_blinded_ls_check -- self-checking test of the blinded store and load check.
//
// Request side: random loads, stores, clc and csc with random address capability
// (valid or not, blinded or not), address register (c2 = csp often), store-data
// blindedness and store-data tag, compared with a reference of the Load/Store rows
// of the propagation table plus invariant I2 and the csp spill rule.
// Response side: random load responses, some of them tagged words carrying the
// BRR marker, compared with a reference of the restore rule.
// Round trip: a blinded value spilled with csc through csp and reloaded with clc
// comes back with the same value, untagged and blinded.
module tb_blinded_ls_check;
  import blackout_pkg::*;

  logic       req_valid;
  uop_e       req_uop;
  logic [4:0] req_addr_reg;
  cap_t       req_addr_cap;
  logic       req_data_blinded;
  cap_t       req_data;
  logic       req_fault, req_bc, req_brr;
  fault_e     req_cause;
  cap_t       req_st_out;
  logic       resp_valid, resp_is_clc, resp_bc;
  cap_t       resp_data;
  cap_t       resp_ld_out;
  logic       resp_blinded, resp_brr;

  int checks = 0, failures = 0;
  int n_brr = 0, n_i1 = 0, n_i2 = 0, n_restore = 0;

  blinded_ls_check #(.IDX_W(5)) dut (.*);

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic cap_t rand_cap();
    cap_t c;
    c = {$urandom, $urandom, $urandom, $urandom, 1'($urandom)};
    return c;
  endfunction

  // marker written out field by field, independently of the package constant
  localparam logic [63:0] MARKER = {4'h0, 12'h000, 1'b0, 2'b11, 18'h3FFF0, 27'h0};

  initial begin
    req_valid = 0; resp_valid = 0;
    req_addr_reg = '0; req_addr_cap = '0; req_data = '0; req_data_blinded = 0; req_uop = UOP_LOAD;
    resp_is_clc = 0; resp_bc = 0; resp_data = '0;
    checks++;
    if (MARKER !== 64'(BRR_MARKER)) begin failures++; $display("marker layout %h", BRR_MARKER); end

    for (int i = 0; i < 20000; i++) begin
      logic   bc, st, is_csp;
      fault_e exp_cause;
      cap_t   exp_st;
      logic   exp_brr;
      req_valid        = ($urandom_range(0, 9) != 0);
      req_uop          = uop_e'($urandom_range(4, 7));
      req_addr_reg     = ($urandom_range(0, 2) == 0) ? 5'd2 : 5'($urandom);
      req_addr_cap     = rand_cap();
      req_data         = rand_cap();
      req_data_blinded = 1'($urandom);
      bc     = req_addr_cap.tag & ~req_addr_cap.meta.non_oblivious;
      st     = (req_uop == UOP_STORE) || (req_uop == UOP_CSC);
      is_csp = (req_addr_reg == 5'd2);
      exp_cause = FLT_NONE;
      exp_brr   = 0;
      exp_st    = req_data;
      if (req_uop == UOP_STORE) begin
        exp_st.tag = 0;
        if (!bc && req_data_blinded) exp_cause = FLT_STORE_DATA;
      end else if (req_uop == UOP_CSC) begin
        if (bc) begin
          exp_st.tag = 0;
          if (req_data.tag) exp_cause = FLT_CAP_TO_BD;
        end else if (req_data_blinded && is_csp) begin
          exp_brr = 1;
          exp_st  = {1'b1, MARKER, req_data.addr};
        end else if (req_data_blinded) begin
          exp_cause = FLT_STORE_DATA;
        end
      end
      if (!req_valid) begin exp_cause = FLT_NONE; exp_brr = 0; end
      #1;
      checks++;
      if (req_cause !== exp_cause || req_fault !== (exp_cause != FLT_NONE) ||
          req_brr !== exp_brr || req_bc !== (req_valid & bc)) begin
        failures++;
        $display("req uop=%0d bc=%0b csp=%0b db=%0b dtag=%0b: cause=%0d brr=%0b bc=%0b want %0d %0b",
                 req_uop, bc, is_csp, req_data_blinded, req_data.tag, req_cause, req_brr, req_bc,
                 exp_cause, exp_brr);
      end
      if (req_valid && st && exp_cause == FLT_NONE) begin
        checks++;
        if (req_st_out !== exp_st) begin
          failures++;
          $display("store data %h want %h", req_st_out, exp_st);
        end
      end
      if (exp_brr) n_brr++;
      if (exp_cause == FLT_STORE_DATA) n_i1++;
      if (exp_cause == FLT_CAP_TO_BD) n_i2++;
    end
    req_valid = 0;

    for (int i = 0; i < 20000; i++) begin
      cap_t exp_ld;
      logic exp_b, exp_r;
      resp_valid  = ($urandom_range(0, 9) != 0);
      resp_is_clc = 1'($urandom);
      resp_bc     = ($urandom_range(0, 3) == 0);
      resp_data   = rand_cap();
      if ($urandom_range(0, 2) == 0) begin resp_data.meta = MARKER; end
      exp_ld = resp_data;
      exp_b  = 0;
      exp_r  = 0;
      if (resp_valid) begin
        if (resp_bc) begin
          exp_b = 1; exp_ld.tag = 0;
        end else if (resp_is_clc && resp_data.tag && resp_data.meta == MARKER) begin
          exp_b = 1; exp_r = 1; exp_ld = {1'b0, 64'h0, resp_data.addr};
        end else if (!resp_is_clc) begin
          exp_ld.tag = 0;
        end
      end
      #1;
      checks++;
      if (resp_blinded !== exp_b || resp_brr !== exp_r || (resp_valid && resp_ld_out !== exp_ld)) begin
        failures++;
        $display("resp clc=%0b bc=%0b tag=%0b: blinded=%0b brr=%0b out=%h want %0b %0b %h", resp_is_clc,
                 resp_bc, resp_data.tag, resp_blinded, resp_brr, resp_ld_out, exp_b, exp_r, exp_ld);
      end
      if (exp_r) n_restore++;
    end

    // round trip: spill a blinded register through csp and restore it
    for (int i = 0; i < 100; i++) begin
      logic [63:0] v;
      v = {$urandom, $urandom};
      resp_valid = 0;
      req_valid = 1; req_uop = UOP_CSC; req_addr_reg = 5'd2;
      req_addr_cap = '0; req_addr_cap.tag = 1; req_addr_cap.meta.non_oblivious = 1;
      req_data = {1'b0, 64'h0, v}; req_data_blinded = 1;
      #1;
      resp_valid = 1; resp_is_clc = 1; resp_bc = 0; resp_data = req_st_out;
      req_valid = 0;
      #1;
      checks++;
      if (!resp_blinded || resp_ld_out.tag || resp_ld_out.addr !== v) begin
        failures++;
        $display("round trip lost value or blindedness: %h %0b", resp_ld_out, resp_blinded);
      end
    end

    checks++;
    if (n_brr == 0 || n_i1 == 0 || n_i2 == 0 || n_restore == 0) begin
      failures++;
      $display("a rule was never exercised: brr=%0d i1=%0d i2=%0d restore=%0d", n_brr, n_i1, n_i2, n_restore);
    end
    $display("spills=%0d I1 faults=%0d I2 faults=%0d restores=%0d", n_brr, n_i1, n_i2, n_restore);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
