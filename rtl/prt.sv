// prt -- pattern reuse table of a data feeding module.
//
// A fully associative table of ENTRIES entries. Each entry holds a KEY_W-bit
// hash of an input pattern (the caller hashes the NBW-bit pattern together
// with whatever makes the stored result valid) and DATA_W bits of the result
// that pattern produced. A lookup compares the key with all valid entries in
// the same cycle (hit, hit_data combinational). An insert on a miss writes
// the entry at the round-robin pointer; an insert whose key is already
// present overwrites that entry. flush invalidates everything (used when the
// lookup table behind the results is rebuilt). flush has priority.
//
// Entry count and hash width are the paper's; the replacement policy and the
// data width are this design's choices.
module prt #(
  parameter int unsigned ENTRIES = 32,
  parameter int unsigned KEY_W   = 32,
  parameter int unsigned DATA_W  = 16
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              flush,
  input  logic [KEY_W-1:0]  key,
  output logic              hit,
  output logic [DATA_W-1:0] hit_data,
  input  logic              insert,
  input  logic [DATA_W-1:0] ins_data
);
  logic [KEY_W-1:0]  tag   [ENTRIES];
  logic [DATA_W-1:0] data  [ENTRIES];
  logic [ENTRIES-1:0] valid;
  logic [$clog2(ENTRIES)-1:0] ptr, hit_idx;

  always_comb begin
    hit = 1'b0; hit_idx = '0; hit_data = '0;
    for (int k = 0; k < ENTRIES; k++)
      if (valid[k] && tag[k] == key && !hit) begin
        hit = 1'b1; hit_idx = $clog2(ENTRIES)'(k); hit_data = data[k];
      end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid <= '0; ptr <= '0;
    end else if (flush) begin
      valid <= '0; ptr <= '0;
    end else if (insert) begin
      if (hit) begin
        data[hit_idx] <= ins_data;
      end else begin
        valid[ptr] <= 1'b1; tag[ptr] <= key; data[ptr] <= ins_data;
        ptr <= ptr + 1'b1;
      end
    end
  end
endmodule
