1234
b06b
4ea2
ecd9
8b10
2947
c77e
65b5
03ec
a223
405a
de91
7cc8
1aff
b936
576d
f5a4
93db
3212
d049
6e80
0cb7
aaee
4925
e75c
8593
23ca
c201
6038
fe6f
9ca6
3add
d914
774b
1582
b3b9
51f0
f027
8e5e
2c95
cacc
6903
073a
a571
43a8
e1df
8016
1e4d
bc84
5abb
f8f2
9729
3560
d397
71ce
1005
ae3c
4c73
eaaa
88e1
2718
c54f
6386
01bd
9ff4
3e2b
dc62
7a99
18d0
b707
553e
f375
91ac
2fe3
ce1a
6c51
0a88
a8bf
46f6
e52d
8364
219b
bfd2
5e09
fc40
9a77
38ae
d6e5
751c
1353
b18a
4fc1
edf8
8c2f
2a66
c89d
66d4
050b
a342
4179
dfb0
7de7
1c1e
ba55
588c
f6c3
94fa
3331
d168
6f9f
0dd6
ac0d
4a44
e87b
86b2
24e9
c320
6157
ff8e
9dc5
3bfc
da33
786a
16a1
b4d8
530f
f146
8f7d
2db4
cbeb
6a22
0859
a690
44c7
e2fe
8135
1f6c
bda3
5bda
fa11
9848
367f
d4b6
72ed
1124
af5b
4d92
ebc9
8a00
2837
c66e
64a5
02dc
a113
3f4a
dd81
7bb8
19ef
b826
565d
f494
92cb
3102
cf39
6d70
0ba7
a9de
4815
e64c
8483
22ba
c0f1
5f28
fd5f
9b96
39cd
d804
763b
1472
b2a9
50e0
ef17
8d4e
2b85
c9bc
67f3
062a
a461
4298
e0cf
7f06
1d3d
bb74
59ab
f7e2
9619
3450
d287
70be
0ef5
ad2c
4b63
e99a
87d1
2608
c43f
6276
00ad
9ee4
3d1b
db52
7989
17c0
b5f7
542e
f265
909c
2ed3
cd0a
6b41
0978
a7af
45e6
e41d
8254
208b
bec2
5cf9
fb30
9967
379e
d5d5
740c
1243
b07a
4eb1
ece8
8b1f
2956
c78d
65c4
03fb
a232
4069
dea0
7cd7
1b0e
b945
577c
f5b3
93ea
3221
d058
6e8f
0cc6
aafd
4934
e76b
85a2
23d9
c210
6047
fe7e
9cb5
3aec
d923
775a
1591
b3c8
51ff
f036
8e6d
2ca4
cadb
6912
0749
a580
43b7
e1ee
8025
1e5c
bc93
5aca
f901
9738
356f
d3a6
71dd
1014
ae4b
4c82
eab9
88f0
2727
c55e
6395
01cc
a003
3e3a
dc71
7aa8
18df
b716
554d
f384
91bb
2ff2
ce29
6c60
0a97
a8ce
4705
e53c
8373
21aa
bfe1
5e18
fc4f
9a86
38bd
d6f4
752b
1362
b199
4fd0
ee07
8c3e
2a75
c8ac
66e3
051a
a351
4188
dfbf
7df6
1c2d
ba64
589b
f6d2
9509
3340
d177
6fae
0de5
ac1c
4a53
e88a
86c1
24f8
c32f
6166
ff9d
9dd4
3c0b
da42
7879
16b0
b4e7
531e
f155
8f8c
2dc3
cbfa
6a31
0868
a69f
44d6
e30d
8144
1f7b
bdb2
5be9
fa20
9857
368e
d4c5
72fc
1133
af6a
4da1
ebd8
8a0f
2846
c67d
64b4
02eb
a122
3f59
dd90
7bc7
19fe
b835
566c
f4a3
92da
3111
cf48
6d7f
0bb6
a9ed
4824
e65b
8492
22c9
c100
5f37
fd6e
9ba5
39dc
d813
764a
1481
b2b8
50ef
ef26
8d5d
2b94
c9cb
6802
0639
a470
42a7
e0de
7f15
1d4c
bb83
59ba
f7f1
9628
345f
d296
70cd
0f04
ad3b
4b72
e9a9
87e0
2617
c44e
6285
00bc
9ef3
3d2a
db61
7998
17cf
b606
543d
f274
90ab
2ee2
cd19
6b50
0987
a7be
45f5
e42c
8263
209a
bed1
5d08
fb3f
9976
37ad
d5e4
741b
1252
b089
4ec0
ecf7
8b2e
2965
c79c
65d3
040a
a241
4078
deaf
7ce6
1b1d
b954
578b
f5c2
93f9
3230
d067
6e9e
0cd5
ab0c
4943
e77a
85b1
23e8
c21f
6056
fe8d
9cc4
3afb
d932
7769
15a0
b3d7
520e
f045
8e7c
2cb3
caea
6921
0758
a58f
43c6
e1fd
