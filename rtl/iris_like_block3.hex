00070
13777
13117
13303
17303
2ff13
00070
27f3f
000f0
000f0
13311
2ff33
13317
27f7f
00030
00071
13333
27f3f
13313
000f0
13103
00011
00070
000f0
00070
11333
27f3f
2f707
2f737
13771
