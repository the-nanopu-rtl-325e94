// msg_buffer_alloc: allocator for the fixed-size message buffers of the NIC message buffer.
//
// The message buffer memory is carved into NUM_CLASSES size classes of fixed-size buffers
// (CLASS_WORDS 64-bit words each, CLASS_COUNT buffers per class). Each class has a free list,
// kept here as a bitmap with a priority encoder, which is the simplest structure that returns
// one free buffer per cycle. An allocation request for a message of alloc_len bytes is served,
// in the same cycle, by the smallest class whose buffers hold the whole message and that has a
// free buffer; the buffer's global identifier (classes numbered one after another) and its base
// word address are returned. A packet is later placed at base + offset, which is the point of
// using fixed-size buffers. free_req returns a buffer to its class.
//
// Timing: alloc_ok/alloc_id/alloc_base are combinational from alloc_len; the allocation is
// taken on the clock edge when alloc_req is high. A buffer freed in cycle t can be allocated in
// cycle t+1. The classes follow the paper's scheme; their sizes and counts are this design's.
module msg_buffer_alloc #(
  parameter int unsigned NUM_CLASSES = 3,
  parameter int unsigned CLASS_WORDS [NUM_CLASSES] = '{8, 64, 256},
  parameter int unsigned CLASS_COUNT [NUM_CLASSES] = '{32, 16, 8},
  localparam int unsigned NBUF  = CLASS_COUNT[0] + CLASS_COUNT[1] + CLASS_COUNT[2],
  localparam int unsigned TOTAL = CLASS_WORDS[0]*CLASS_COUNT[0] + CLASS_WORDS[1]*CLASS_COUNT[1] +
                                  CLASS_WORDS[2]*CLASS_COUNT[2],
  localparam int unsigned IDW   = $clog2(NBUF),
  localparam int unsigned ADW   = $clog2(TOTAL)
) (
  input  logic            clk,
  input  logic            rst,
  input  logic            alloc_req,
  input  logic [15:0]     alloc_len,    // message length in bytes
  output logic            alloc_ok,
  output logic [IDW-1:0]  alloc_id,
  output logic [ADW-1:0]  alloc_base,
  input  logic            free_req,
  input  logic [IDW-1:0]  free_id,
  output logic [IDW:0]    free_count
);
  logic [NBUF-1:0] free_map;

  function automatic int unsigned id_base(input int unsigned c);
    int unsigned s = 0;
    for (int unsigned i = 0; i < c; i++) s += CLASS_COUNT[i];
    return s;
  endfunction
  function automatic int unsigned word_base(input int unsigned c);
    int unsigned s = 0;
    for (int unsigned i = 0; i < c; i++) s += CLASS_WORDS[i] * CLASS_COUNT[i];
    return s;
  endfunction

  // base address of any buffer id
  function automatic logic [ADW-1:0] base_of(input logic [IDW-1:0] id);
    logic [ADW-1:0] b = '0;
    for (int unsigned c = 0; c < NUM_CLASSES; c++)
      if (32'(id) >= id_base(c) && 32'(id) < id_base(c) + CLASS_COUNT[c])
        b = ADW'(word_base(c) + (32'(id) - id_base(c)) * CLASS_WORDS[c]);
    return b;
  endfunction

  always_comb begin
    logic [31:0] need;
    need = (32'(alloc_len) + 7) >> 3;
    alloc_ok = 1'b0; alloc_id = '0;
    for (int unsigned c = 0; c < NUM_CLASSES; c++) begin
      if (!alloc_ok && need <= CLASS_WORDS[c]) begin
        for (int unsigned s = 0; s < CLASS_COUNT[c]; s++) begin
          if (!alloc_ok && free_map[id_base(c) + s]) begin
            alloc_ok = 1'b1;
            alloc_id = IDW'(id_base(c) + s);
          end
        end
      end
    end
    alloc_base = base_of(alloc_id);
    free_count = '0;
    for (int i = 0; i < NBUF; i++) free_count = free_count + (IDW+1)'(free_map[i]);
  end

  always_ff @(posedge clk) begin
    if (rst) free_map <= '1;
    else begin
      if (free_req)             free_map[free_id]  <= 1'b1;
      if (alloc_req && alloc_ok) free_map[alloc_id] <= 1'b0;
    end
  end

  assert property (@(posedge clk) disable iff (rst) free_req |-> !free_map[free_id]);
endmodule
