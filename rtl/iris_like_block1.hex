2ff3f
00071
000f0
00031
000f0
00070
2f777
2777f
11331
13313
13301
000f3
000f1
13731
000f0
00030
000f0
2f777
27ff1
2f737
000f0
27f1f
27f31
27f17
13331
13301
000f1
13303
00031
00070
