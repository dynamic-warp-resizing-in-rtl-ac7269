// ilt - Ignore List Table.
//
// Holds the PCs of LAT barriers (bar.synch_partner) found to be
// non-benefiting: barriers at which partner sub-warps arrived at different PCs.
// A bar.synch_partner whose PC hits here does not lock its sub-warp.
//
// Organisation follows the paper: 32 entries, 8-way set associative, the set
// picked by the PC's two low bits (4 sets), each entry a valid bit and a 30-bit
// tag (the remaining PC bits), 124 bytes in all. The paper does not give a
// replacement policy; this design fills an invalid way first and otherwise
// replaces ways of a set in round-robin order. Inserting a PC that is already
// present changes nothing. `flush` empties the table (e.g. at kernel launch,
// also this design's choice).
//
// Timing: lookup is combinational on lookup_pc; an insert is written on the
// next rising clock edge and visible to lookups from then on.
module ilt #(
  parameter int unsigned SETS = 4,
  parameter int unsigned WAYS = 8,
  parameter int unsigned PC_W = 32
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            flush,
  input  logic [PC_W-1:0] lookup_pc,
  output logic            lookup_hit,
  input  logic            ins_valid,
  input  logic [PC_W-1:0] ins_pc
);
  localparam int unsigned IDX_W = (SETS > 1) ? $clog2(SETS) : 1;
  localparam int unsigned TAG_W = (SETS > 1) ? PC_W - $clog2(SETS) : PC_W;
  localparam int unsigned WAY_W = (WAYS > 1) ? $clog2(WAYS) : 1;

  logic [TAG_W-1:0] tag_q   [SETS][WAYS];
  logic [WAYS-1:0]  valid_q [SETS];
  logic [WAY_W-1:0] rr_q    [SETS];

  function automatic logic [IDX_W-1:0] set_of(input logic [PC_W-1:0] pc);
    return (SETS > 1) ? IDX_W'(pc) : '0;
  endfunction
  function automatic logic [TAG_W-1:0] tag_of(input logic [PC_W-1:0] pc);
    return (SETS > 1) ? TAG_W'(pc >> $clog2(SETS)) : TAG_W'(pc);
  endfunction

  always_comb begin
    lookup_hit = 1'b0;
    for (int w = 0; w < WAYS; w++)
      if (valid_q[set_of(lookup_pc)][w] && tag_q[set_of(lookup_pc)][w] == tag_of(lookup_pc))
        lookup_hit = 1'b1;
  end

  // Insert-side search: already present? first invalid way?
  logic             ins_present;
  logic             ins_has_free;
  logic [WAY_W-1:0] ins_free_way;
  logic [IDX_W-1:0] ins_set;
  always_comb begin
    ins_set      = set_of(ins_pc);
    ins_present  = 1'b0;
    ins_has_free = 1'b0;
    ins_free_way = '0;
    for (int w = WAYS - 1; w >= 0; w--) begin
      if (valid_q[ins_set][w] && tag_q[ins_set][w] == tag_of(ins_pc)) ins_present = 1'b1;
      if (!valid_q[ins_set][w]) begin
        ins_has_free = 1'b1;
        ins_free_way = WAY_W'(w);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < SETS; s++) begin
        valid_q[s] <= '0;
        rr_q[s]    <= '0;
      end
    end else if (flush) begin
      for (int s = 0; s < SETS; s++) begin
        valid_q[s] <= '0;
        rr_q[s]    <= '0;
      end
    end else if (ins_valid && !ins_present) begin
      if (ins_has_free) begin
        valid_q[ins_set][ins_free_way] <= 1'b1;
        tag_q[ins_set][ins_free_way]   <= tag_of(ins_pc);
      end else begin
        tag_q[ins_set][rr_q[ins_set]]  <= tag_of(ins_pc);
        rr_q[ins_set]                  <= (WAYS > 1) ? WAY_W'((32'(rr_q[ins_set]) + 1) % WAYS) : '0;
      end
    end
  end

endmodule
