// Expected result for tb_cn_miner_top_full: one 76-byte blob and its
// CryptoNight-Haven hash at full size (4 MiB scratchpad, 262144 Shuffle
// iterations), from an independent reference model.
  localparam logic [1079:0] BLOB = 1080'(608'h86694c2f12f5d8bb9e8164472a0df0d3b6997c5f422508ebceb194775a3d2003e60000000055381bfee1c4a78a6d503316f9dcbfa285684b2e11f4d7ba9d806346290cefd2b5987b5e412407);
  localparam logic [255:0] EXPH = 256'hd95e44fcc8fbfb8390fc975439edbb27e07a9ee98ca9ad668be8155989be3797;
  localparam logic [1:0] EXPA = 2'd1;
