// bitonic_sorter: pipelined Batcher merging network (Fig. 10 of the paper).
//
// Sorts N (key, payload) pairs into descending key order. The network is
// built recursively as the paper draws it: merger-2, then merger-4, ...,
// merger-N. Merger-n begins with the symmetric comparing network (element i
// of each n-block against element n-1-i) and continues with two bitonic
// sorters of n/2, each a half cleaner (i against i + size/2) followed by
// smaller bitonic sorters, down to size 2. Every comparator puts the larger
// key on the lower index, so no comparator of the network is reversed.
// There is one pipeline register after each column of comparators:
// log2(N)(log2(N)+1)/2 columns (10 for N = 16), which is the latency the
// paper's table gives for the sorting module. A new set may enter on every
// cycle. The payload (user number and rotation code) travels with the key.
module bitonic_sorter #(
  parameter int unsigned N  = 16,  // number of elements, a power of two >= 2
  parameter int unsigned KW = 7,   // key width
  parameter int unsigned PW = 8    // payload width
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [KW-1:0] key_in  [N],
  input  logic [PW-1:0] pay_in  [N],
  input  logic          in_valid,
  output logic [KW-1:0] key_out [N],
  output logic [PW-1:0] pay_out [N],
  output logic          out_valid
);
  localparam int unsigned LG = $clog2(N);
  localparam int unsigned NST = LG * (LG + 1) / 2;

  logic [KW-1:0] k [NST+1][N];
  logic [PW-1:0] p [NST+1][N];
  logic          v [NST+1];

  assign k[0] = key_in;
  assign p[0] = pay_in;
  assign v[0] = in_valid;

  for (genvar lg = 1; lg <= LG; lg++) begin : g_merge
    for (genvar sub = 0; sub < lg; sub++) begin : g_col
      localparam int unsigned ST = (lg - 1) * lg / 2 + sub;  // column number
      localparam int unsigned SZ = 1 << (lg - sub);          // block size
      logic [KW-1:0] kn [N];
      logic [PW-1:0] pn [N];
      always_comb begin
        kn = k[ST];
        pn = p[ST];
        for (int i = 0; i < N; i++) begin
          int unsigned base, off, j;
          base = (i / SZ) * SZ;
          off  = i - base;
          if (off < SZ / 2) begin
            // sub 0: symmetric comparing network; sub > 0: half cleaner
            j = (sub == 0) ? base + SZ - 1 - off : i + SZ / 2;
            if (k[ST][j] > k[ST][i]) begin
              kn[i] = k[ST][j];  pn[i] = p[ST][j];
              kn[j] = k[ST][i];  pn[j] = p[ST][i];
            end
          end
        end
      end
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) begin
          v[ST+1] <= 1'b0;
          for (int i = 0; i < N; i++) begin
            k[ST+1][i] <= '0;
            p[ST+1][i] <= '0;
          end
        end else begin
          v[ST+1] <= v[ST];
          k[ST+1] <= kn;
          p[ST+1] <= pn;
        end
      end
    end
  end

  assign key_out   = k[NST];
  assign pay_out   = p[NST];
  assign out_valid = v[NST];
endmodule
