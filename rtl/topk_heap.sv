// topk_heap: streaming TopK sorter built on a binary min-heap held in
// registers (O(1) extra space). It keeps the k largest keys seen since
// `start`, each with a payload. DSST uses one such block with key -|w| to find
// the k smallest weights of a layer and four with key |g| to find the N
// largest post-gradients of each N:M group.
//
// States follow the chip's sorter: Idle -> Proc -> Swap ... -> Idle, and Outp
// once the stream has been flushed.
//  * While fewer than k elements are held, a new element is appended. When the
//    k-th arrives the heap is built by sifting down from node k/2-1 to node 0.
//  * Once full, a new element larger than the root hp[0] replaces it and is
//    sifted down from node 0; a smaller one is dropped.
//  * Swap compares node idx with children l=2*idx+1 and r=2*idx+2, swaps with
//    the smaller child if that child is smaller, and moves down; it stops
//    when no child is smaller.
// Interface: in_valid/in_ready handshake (ready only in Idle), `flush` ends the
// stream; `done` is then high and hp_key/hp_pay/count give the result (the k
// survivors in heap order, not sorted). One element per cycle is accepted
// when no sift is needed; a sift takes at most log2(k)+1 extra cycles.
module topk_heap #(
  parameter int unsigned K_MAX = 16,
  parameter int unsigned KEY_W = 17,
  parameter int unsigned PAY_W = 16,
  localparam int unsigned CW = $clog2(K_MAX + 1)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    start,     // clear, begin a new stream
  input  logic [CW-1:0]           k,         // 1..K_MAX
  input  logic                    in_valid,
  output logic                    in_ready,
  input  logic signed [KEY_W-1:0] in_key,
  input  logic [PAY_W-1:0]        in_pay,
  input  logic                    flush,     // end of stream
  output logic                    done,
  output logic [CW-1:0]           count,
  output logic signed [KEY_W-1:0] hp_key [K_MAX],
  output logic [PAY_W-1:0]        hp_pay [K_MAX]
);
  typedef enum logic [1:0] {S_IDLE, S_PROC, S_SWAP, S_OUTP} state_t;
  state_t st;
  int signed idx, bld;   // current sift node, next node of heap build
  logic [CW-1:0] cnt;
  logic signed [KEY_W-1:0] key [K_MAX];
  logic [PAY_W-1:0]        pay [K_MAX];

  assign in_ready = (st == S_IDLE);
  assign done     = (st == S_OUTP);
  assign count    = cnt;
  assign hp_key   = key;
  assign hp_pay   = pay;

  // smallest of node idx and its children within the heap
  int signed l, r, mn;
  always_comb begin
    l  = 2 * idx + 1;
    r  = 2 * idx + 2;
    mn = idx;
    if (idx >= 0 && idx < K_MAX) begin
      if (l < int'(cnt) && l < K_MAX && key[l] < key[mn]) mn = l;
      if (r < int'(cnt) && r < K_MAX && key[r] < key[mn]) mn = r;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st  <= S_IDLE;
      cnt <= '0;
      idx <= -1;
      bld <= -1;
      for (int i = 0; i < K_MAX; i++) begin key[i] <= '0; pay[i] <= '0; end
    end else if (start) begin
      st  <= S_IDLE;
      cnt <= '0;
      idx <= -1;
      bld <= -1;
    end else begin
      unique case (st)
        S_IDLE: begin
          if (in_valid) begin
            if (cnt < k) begin
              key[cnt] <= in_key;
              pay[cnt] <= in_pay;
              cnt      <= cnt + 1'b1;
              if (cnt + 1'b1 == k) begin      // # of elements == k: build heap
                idx <= int'(k) / 2 - 1;
                bld <= int'(k) / 2 - 1;
                st  <= S_PROC;
              end
            end else if (in_key > key[0]) begin  // # of elements > k, new > hp[0]
              key[0] <= in_key;
              pay[0] <= in_pay;
              idx    <= 0;
              bld    <= 0;
              st     <= S_PROC;
            end
          end else if (flush) begin
            st <= S_OUTP;
          end
        end
        S_PROC: st <= (idx >= 0) ? S_SWAP : S_IDLE;
        S_SWAP: begin
          if (mn != idx) begin
            key[idx] <= key[mn];  pay[idx] <= pay[mn];
            key[mn]  <= key[idx]; pay[mn]  <= pay[idx];
            idx <= mn;
          end else if (bld > 0) begin         // heap build: next internal node
            idx <= bld - 1;
            bld <= bld - 1;
            st  <= S_PROC;
          end else begin
            idx <= -1;
            bld <= -1;
            st  <= S_IDLE;
          end
        end
        S_OUTP: ;
        default: st <= S_IDLE;
      endcase
    end
  end
endmodule
