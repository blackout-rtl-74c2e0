// blinded_ls_check -- blinded store and load check of the memory execution pipeline.
//
// Request side (address stage). A memory access goes through a blinded
// capability (BC) when its address capability is valid and lacks the
// non-oblivious access permission. The check enforces:
//   I1  blinded data may be stored only through a BC. Integer stores and csc of a
//       blinded register through a non-blinded capability fault, with one
//       exception: a csc through the stack-pointer capability csp (c2) spills the
//       blinded register as a blinded register record (BRR).
//   I2  no capability may be stored into blinded memory: a csc of a valid
//       capability through a BC faults. Other csc through a BC store untagged data.
// Only the data is stored, never the blindedness bit. A BRR is written with its
// validity tag set, the 64-bit marker in the metadata half and the register's
// 64-bit value in the address half. req_bc goes to the load/store queue, which
// keeps it with the request and returns it with the response.
//
// Response side (writeback). The loaded register is blinded when the load went
// through a BC, or when a clc brings back a tagged word whose metadata equals the
// BRR marker; the BRR is then turned back into an untagged register holding the
// value. A BC never yields a valid capability: the tag of anything loaded through
// it is cleared. Otherwise the register is not blinded; a clc keeps data and tag,
// an integer load returns untagged data.
//
// Only the tag and the non-oblivious bit of the address capability are read
// here. Its bounds and address are checked by the core's CHERI data bound check,
// which is why the lint tool reports the other bits as unused.
//
// Blinded address operands (I5) are caught by side_channel_prevention, not here.
// Timing: both sides are combinational; no access takes an extra cycle.
//
// From the paper: I1, I2, the blinded result of loads through BCs, store of data
// only, BRR = 128 bits of value and 64-bit marker, tagged, identified by marker on
// restore, spills allowed through csp. This design's choices: the marker pattern
// (blackout_pkg::BRR_MARKER), recognising csp by register index c2, clearing the
// tag of loads through BCs, and restoring any tagged marker word as a BRR
// whichever capability the clc used.
module blinded_ls_check
  import blackout_pkg::*;
#(
  parameter int unsigned IDX_W = 5
) (
  // request side
  input  logic             req_valid,
  input  uop_e             req_uop,        // UOP_LOAD, UOP_STORE, UOP_CLC or UOP_CSC
  input  logic [IDX_W-1:0] req_addr_reg,   // index of the address capability register
  input  cap_t             req_addr_cap,   // the address capability itself
  input  logic             req_data_blinded,
  input  cap_t             req_data,       // store data (integer stores use .addr)
  output logic             req_fault,
  output fault_e           req_cause,
  output logic             req_bc,         // access goes through a blinded capability
  output logic             req_brr,        // store writes a blinded register record
  output cap_t             req_st_out,     // data and tag written to the data cache
  // response side
  input  logic             resp_valid,
  input  logic             resp_is_clc,
  input  logic             resp_bc,        // req_bc returned by the load/store queue
  input  cap_t             resp_data,      // data and tag read from the data cache
  output cap_t             resp_ld_out,    // value written to the destination register
  output logic             resp_blinded,   // blindedness bit of the destination register
  output logic             resp_brr        // a blinded register record was restored
);

  logic via_bc;
  logic is_store;
  assign via_bc   = req_addr_cap.tag && !req_addr_cap.meta.non_oblivious;
  assign is_store = (req_uop == UOP_STORE) || (req_uop == UOP_CSC);

  always_comb begin
    req_cause  = FLT_NONE;
    req_brr    = 1'b0;
    req_st_out = req_data;
    unique case (req_uop)
      UOP_STORE: begin
        req_st_out.tag = 1'b0;                         // plain data carries no tag
        if (!via_bc && req_data_blinded) req_cause = FLT_STORE_DATA;   // I1
      end
      UOP_CSC: begin
        if (via_bc) begin
          if (req_data.tag) req_cause = FLT_CAP_TO_BD;                  // I2
          req_st_out.tag = 1'b0;
        end else if (req_data_blinded) begin
          if (req_addr_reg == IDX_W'(CSP_IDX)) begin                   // spill via csp
            req_brr         = 1'b1;
            req_st_out.tag  = 1'b1;
            req_st_out.meta = BRR_MARKER;
            req_st_out.addr = req_data.addr;
          end else begin
            req_cause = FLT_STORE_DATA;                                 // I1
          end
        end
      end
      default: ;                                       // loads: nothing to check here
    endcase
    if (!req_valid) begin
      req_cause = FLT_NONE;
      req_brr   = 1'b0;
    end
    req_fault = (req_cause != FLT_NONE);
    req_bc    = req_valid && via_bc;
  end

  always_comb begin
    resp_ld_out  = resp_data;
    resp_blinded = 1'b0;
    resp_brr     = 1'b0;
    if (resp_valid) begin
      if (resp_bc) begin
        resp_blinded    = 1'b1;
        resp_ld_out.tag = 1'b0;
      end else if (resp_is_clc && resp_data.tag && resp_data.meta == BRR_MARKER) begin
        resp_blinded     = 1'b1;
        resp_brr         = 1'b1;
        resp_ld_out.tag  = 1'b0;
        resp_ld_out.meta = '0;
      end else if (!resp_is_clc) begin
        resp_ld_out.tag  = 1'b0;                       // integer loads never yield a capability
      end
    end
  end

  // A store and a BRR restore are never both reported for one request.
  always_comb begin
    if (req_valid) assert (!(req_brr && req_fault)) else $error("BRR spill flagged as fault");
    if (req_brr)   assert (is_store) else $error("BRR on a load");
  end

endmodule
