0000
0002
0008
0012
0020
0033
0049
0063
0081
00a3
00ca
00f4
0122
0154
018b
01c5
0203
0245
028b
02d4
0322
0373
03c9
0422
047f
04df
0544
05ac
0617
0687
06fa
0770
07eb
0868
08ea
096e
09f7
0a82
0b11
0ba3
0c39
0cd2
0d6e
0e0d
0eb0
0f56
0ffe
10aa
1159
120a
12bf
1376
1430
14ed
15ad
166f
1734
17fc
18c6
1993
1a62
1b33
1c07
1cdd
1db5
1e8f
1f6c
204a
212b
220d
22f2
23d8
24c0
25aa
2695
2782
2871
2961
2a52
2b45
2c39
2d2e
2e25
2f1d
3015
310f
320a
3306
3402
34ff
35fd
36fb
37fb
38fa
39fa
3afb
3bfb
3cfc
3dfd
3eff
4000
4101
4203
4304
4405
4505
4606
4706
4805
4905
4a03
4b01
4bfe
4cfa
4df6
4ef1
4feb
50e3
51db
52d2
53c7
54bb
55ae
569f
578f
587e
596b
5a56
5b40
5c28
5d0e
5df3
5ed5
5fb6
6094
6171
624b
6323
63f9
64cd
659e
666d
673a
6804
68cc
6991
6a53
6b13
6bd0
6c8a
6d41
6df6
6ea7
6f56
7002
70aa
7150
71f3
7292
732e
73c7
745d
74ef
757e
7609
7692
7716
7798
7815
7890
7906
7979
79e9
7a54
7abc
7b21
7b81
7bde
7c37
7c8d
7cde
7d2c
7d75
7dbb
7dfd
7e3b
7e75
7eac
7ede
7f0c
7f36
7f5d
7f7f
7f9d
7fb7
7fcd
7fe0
7fee
7ff8
7ffe
7fff
7ffe
7ff8
7fee
7fe0
7fcd
7fb7
7f9d
7f7f
7f5d
7f36
7f0c
7ede
7eac
7e75
7e3b
7dfd
7dbb
7d75
7d2c
7cde
7c8d
7c37
7bde
7b81
7b21
7abc
7a54
79e9
7979
7906
7890
7815
7798
7716
7692
7609
757e
74ef
745d
73c7
732e
7292
71f3
7150
70aa
7002
6f56
6ea7
6df6
6d41
6c8a
6bd0
6b13
6a53
6991
68cc
6804
673a
666d
659e
64cd
63f9
6323
624b
6171
6094
5fb6
5ed5
5df3
5d0e
5c28
5b40
5a56
596b
587e
578f
569f
55ae
54bb
53c7
52d2
51db
50e3
4feb
4ef1
4df6
4cfa
4bfe
4b01
4a03
4905
4805
4706
4606
4505
4405
4304
4203
4101
4000
3eff
3dfd
3cfc
3bfb
3afb
39fa
38fa
37fb
36fb
35fd
34ff
3402
3306
320a
310f
3015
2f1d
2e25
2d2e
2c39
2b45
2a52
2961
2871
2782
2695
25aa
24c0
23d8
22f2
220d
212b
204a
1f6c
1e8f
1db5
1cdd
1c07
1b33
1a62
1993
18c6
17fc
1734
166f
15ad
14ed
1430
1376
12bf
120a
1159
10aa
0ffe
0f56
0eb0
0e0d
0d6e
0cd2
0c39
0ba3
0b11
0a82
09f7
096e
08ea
0868
07eb
0770
06fa
0687
0617
05ac
0544
04df
047f
0422
03c9
0373
0322
02d4
028b
0245
0203
01c5
018b
0154
0122
00f4
00ca
00a3
0081
0063
0049
0033
0020
0012
0008
0002
